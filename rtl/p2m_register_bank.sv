// p2m_register_bank -- the ReLU registers between the column ADCs and the
// pooling logic (paper, Fig. 1, "Register ReLU1 ... ReLUN"; Sec. III-A:
// "we buffer the outputs of the counter").
//
// Organisation.  Every ADC column owns SLOTS = P*P registers per bank, one
// for each conversion cycle of a band, so a bank holds a full band of
// P*K output rows.  There are two banks: the ADCs fill one while the
// pooling logic reads the other.  A write stores all W_IN column results of
// one conversion at once (same bank and slot for all columns).  NRD
// independent combinational read ports each select (bank, slot, column).
//
// Timing: a write takes effect at the clock edge; reads are combinational.
// The double banking and the slot numbering are this design's choices; the
// paper names the registers and their role but not their number.
module p2m_register_bank #(
  parameter int W_IN  = 1280,
  parameter int SLOTS = 4,
  parameter int NB    = 8,
  parameter int NRD   = 4
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [7:0]    wr_slot,
  input  logic [NB-1:0] wr_data [W_IN],
  input  logic          rd_bank [NRD],
  input  logic [7:0]    rd_slot [NRD],
  input  logic [15:0]   rd_col  [NRD],
  output logic [NB-1:0] rd_data [NRD]
);
  localparam int SB = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int CB = $clog2(W_IN);

  logic [NB-1:0] regs [2][SLOTS][W_IN];

  always_ff @(posedge clk) begin
    if (wr_en && int'(wr_slot) < SLOTS)
      for (int j = 0; j < W_IN; j++)
        regs[wr_bank][wr_slot[SB-1:0]][j] <= wr_data[j];
  end

  always_comb begin
    for (int i = 0; i < NRD; i++)
      rd_data[i] = (int'(rd_slot[i]) < SLOTS && int'(rd_col[i]) < W_IN)
                   ? regs[rd_bank[i]][rd_slot[i][SB-1:0]][rd_col[i][CB-1:0]] : '0;
  end

endmodule
