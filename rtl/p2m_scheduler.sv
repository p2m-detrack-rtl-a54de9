// p2m_scheduler -- order of the kernel-parallel conversion cycles of a frame.
//
// The array converts one output channel at a time (channels share the
// pixels, paper Sec. III-A "Discussion").  Inside a channel the output map
// is cut into bands of BAND = P*K output rows, P = ceil(K/S).  For each band
// the scheduler issues P*P conversion cycles, one for every vertical
// residue q and horizontal phase p (p innermost).  In cycle (q,p) every
// strip of P*S columns converts K stacked kernels: output rows
// band*BAND + q + P*m (m = 0..K-1) of output column strip*P + p.  Kernels
// of the same cycle are P*S >= K pixels apart and never overlap, which is
// the parallelism of the paper's Fig. 2.  A channel then takes
// ceil(H_OUT/BAND)*P*P cycles, equal to the paper's Eq. (2),
// ceil(H/K)*ceil(K/S), when H_OUT is a multiple of BAND (e.g. 52 for the
// 720-row, K=7, S=4 case).  Otherwise Eq. (2) is a lower bound: rows of
// different residues can never share a cycle, and ceil(H_OUT/BAND)*P*P is
// the fewest cycles that groups of at most K same-residue rows allow
// (e.g. 32 instead of 20 for H_OUT = 32, K = 7, S = 2).
//
// The results of one band go to one of two banks of the register bank.
// When a band is complete its bank is marked full and handed to the pooling
// streamer with its channel and band number; the next band uses the other
// bank.  If that bank is still full (the back-end has not drained it), the
// scheduler stalls before the first conversion of the band (`stall` high).
//
// Handshakes: conv_start is a one-clock pulse to the ADC sequencer, which
// answers with a one-clock conv_done; wr_en = conv_done with wr_bank and
// wr_slot = q*P+p tells the register bank where to store.  bank_release[i]
// (one clock) empties bank i.  frame_start is taken only when idle.
// The band/bank organisation and the stall are this design's choices; the
// paper gives the kernel grouping and cycle count.
module p2m_scheduler
  import p2m_pkg::*;
#(
  parameter int H_OUT = 180,
  parameter int K     = 7,
  parameter int S     = 4,
  parameter int CO    = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        frame_start,
  output logic        running,
  output logic        frame_conv_done,   // one clock after the last conversion
  // ADC sequencer
  output logic        conv_start,
  input  logic        conv_done,
  // kernel activation of the current cycle
  output logic [7:0]  ch,
  output logic [15:0] band,
  output logic [7:0]  q,
  output logic [7:0]  p,
  // register bank write
  output logic        wr_en,
  output logic        wr_bank,
  output logic [7:0]  wr_slot,
  // bank ownership
  output logic [1:0]  bank_full,
  output logic [7:0]  bank_ch   [2],
  output logic [15:0] bank_band [2],
  input  logic [1:0]  bank_release,
  output logic        stall,
  output logic [31:0] conv_count
);
  localparam int P      = phases(K, S);
  localparam int BAND   = P * K;
  localparam int NBANDS = cdiv(H_OUT, BAND);

  typedef enum logic [1:0] {T_IDLE, T_WAITB, T_CONV, T_WAITC} st_t;
  st_t  st;
  logic wb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st              <= T_IDLE;
      wb              <= 1'b0;
      ch              <= '0;
      band            <= '0;
      q               <= '0;
      p               <= '0;
      bank_full       <= '0;
      bank_ch         <= '{default: '0};
      bank_band       <= '{default: '0};
      conv_count      <= '0;
      frame_conv_done <= 1'b0;
    end else begin
      frame_conv_done <= 1'b0;
      for (int i = 0; i < 2; i++)
        if (bank_release[i]) bank_full[i] <= 1'b0;
      unique case (st)
        T_IDLE: if (frame_start) begin
          ch <= '0; band <= '0; q <= '0; p <= '0; conv_count <= '0;
          st <= T_WAITB;
        end
        T_WAITB: if (!bank_full[wb]) st <= T_CONV;
        T_CONV:  st <= T_WAITC;
        T_WAITC: if (conv_done) begin
          conv_count <= conv_count + 1;
          if (int'(p) != P - 1) begin
            p  <= p + 1'b1;
            st <= T_CONV;
          end else if (int'(q) != P - 1) begin
            p  <= '0;
            q  <= q + 1'b1;
            st <= T_CONV;
          end else begin
            // band complete: hand the bank over
            bank_full[wb] <= 1'b1;
            bank_ch[wb]   <= ch;
            bank_band[wb] <= band;
            wb <= ~wb;
            p  <= '0;
            q  <= '0;
            if (int'(band) != NBANDS - 1) begin
              band <= band + 1'b1;
              st   <= T_WAITB;
            end else if (int'(ch) != CO - 1) begin
              band <= '0;
              ch   <= ch + 1'b1;
              st   <= T_WAITB;
            end else begin
              st              <= T_IDLE;
              frame_conv_done <= 1'b1;
            end
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  always_comb begin
    running    = (st != T_IDLE);
    conv_start = (st == T_CONV);
    stall      = (st == T_WAITB) && bank_full[wb];
    wr_en      = (st == T_WAITC) && conv_done;
    wr_bank    = wb;
    wr_slot    = 8'(slot_of(int'(q), int'(p), P));
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !bank_full[wr_bank])
    else $error("scheduler: write into a bank that is still full");

endmodule
