// p2m_pool_streamer -- pooling logic and output port of the sensor.
//
// When the scheduler marks a register bank full, the streamer takes it
// (banks are used alternately, starting with bank 0), walks the pooling
// windows of that band in raster order, reads the POOL_S x POOL_S values of
// each window through the register bank's read ports, pools them with
// p2m_pooling_unit and sends one activation per window to the back-end.
// In POOL_NONE mode it sends every convolution output of the band instead.
// After the last window it releases the bank (one-clock bank_release).
//
// Addressing.  An output position (row yb inside the band, column x) was
// converted by ADC column (x/P)*P*S + yb/P in the cycle of vertical
// residue yb%P and phase x%P, i.e. slot (yb%P)*P + x%P (see p2m_pkg).
// Rows of a band are BAND = P*K; the last band may be shorter.  A pooled
// output row that would need a row beyond the map is dropped (floor, no
// pooling padding), as is an odd last column.
//
// Output stream: out_valid/out_ready handshake; out_data with its channel,
// row and column in the (pooled) output map.  out_* are registered and
// hold while out_valid && !out_ready.  The pooling mode is sampled when a
// bank is taken.  The paper states that pooling is digital logic after
// the ADC registers (Fig. 1, Sec. III-A); the streaming order, the
// handshake and the tags are this design's choices.
module p2m_pool_streamer
  import p2m_pkg::*;
#(
  parameter int H_OUT  = 180,
  parameter int W_OUT  = 320,
  parameter int K      = 7,
  parameter int S      = 4,
  parameter int NB     = 8,
  parameter int POOL_S = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  pool_mode_t    mode,
  // bank ownership
  input  logic [1:0]    bank_full,
  input  logic [7:0]    bank_ch   [2],
  input  logic [15:0]   bank_band [2],
  output logic [1:0]    bank_release,
  // register bank read ports
  output logic          rd_bank [POOL_S*POOL_S],
  output logic [7:0]    rd_slot [POOL_S*POOL_S],
  output logic [15:0]   rd_col  [POOL_S*POOL_S],
  input  logic [NB-1:0] rd_data [POOL_S*POOL_S],
  // output stream to the back-end
  output logic          out_valid,
  input  logic          out_ready,
  output logic [NB-1:0] out_data,
  output logic [7:0]    out_ch,
  output logic [15:0]   out_row,
  output logic [15:0]   out_col,
  output logic          busy
);
  localparam int P    = phases(K, S);
  localparam int BAND = P * K;
  localparam int NV   = POOL_S * POOL_S;

  if (BAND % POOL_S != 0) begin : g_band_check
    $error("p2m_pool_streamer: band height P*K must be a multiple of POOL_S");
  end

  logic        active, rb;
  pool_mode_t  mode_q;
  logic [7:0]  cur_ch;
  logic [15:0] cur_band;
  logic [15:0] r, c;            // window (or position) coordinates in the band
  logic [15:0] n_rows, n_cols;  // windows per band row / column
  logic [NB-1:0] pooled;
  logic        last_pos, take;

  // rows of the current band and the number of windows they give
  function automatic int band_rows(input int b);
    int rows;
    rows = H_OUT - b * BAND;
    return (rows > BAND) ? BAND : rows;
  endfunction

  always_comb begin
    for (int i = 0; i < NV; i++) begin
      int yb, x;
      if (mode_q == POOL_NONE) begin
        yb = int'(r);
        x  = int'(c);
      end else begin
        yb = int'(r) * POOL_S + i / POOL_S;
        x  = int'(c) * POOL_S + i % POOL_S;
      end
      rd_bank[i] = rb;
      rd_slot[i] = 8'(slot_of(yb % P, x % P, P));
      rd_col[i]  = 16'(adc_col(x, yb / P, P, S));
    end
  end

  p2m_pooling_unit #(.NB(NB), .POOL_S(POOL_S)) u_pool (
    .mode (mode_q),
    .v    (rd_data),
    .y    (pooled)
  );

  assign last_pos = (r == n_rows - 1) && (c == n_cols - 1);
  assign take     = active && (!out_valid || out_ready);
  assign busy     = active || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      rb           <= 1'b0;
      mode_q       <= POOL_AVG;
      cur_ch       <= '0;
      cur_band     <= '0;
      r            <= '0;
      c            <= '0;
      n_rows       <= '0;
      n_cols       <= '0;
      bank_release <= '0;
      out_valid    <= 1'b0;
      out_data     <= '0;
      out_ch       <= '0;
      out_row      <= '0;
      out_col      <= '0;
    end else begin
      bank_release <= '0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!active) begin
        if (bank_full[rb]) begin
          active   <= 1'b1;
          mode_q   <= mode;
          cur_ch   <= bank_ch[rb];
          cur_band <= bank_band[rb];
          r        <= '0;
          c        <= '0;
          if (mode == POOL_NONE) begin
            n_rows <= 16'(band_rows(int'(bank_band[rb])));
            n_cols <= 16'(W_OUT);
          end else begin
            n_rows <= 16'(band_rows(int'(bank_band[rb])) / POOL_S);
            n_cols <= 16'(W_OUT / POOL_S);
          end
        end
      end else if (n_rows == 0 || n_cols == 0) begin
        active          <= 1'b0;
        bank_release[rb] <= 1'b1;
        rb              <= ~rb;
      end else if (take) begin
        out_valid <= 1'b1;
        out_data  <= pooled;
        out_ch    <= cur_ch;
        out_row   <= (mode_q == POOL_NONE)
                     ? 16'(int'(cur_band) * BAND + int'(r))
                     : 16'(int'(cur_band) * (BAND / POOL_S) + int'(r));
        out_col   <= c;
        if (last_pos) begin
          active           <= 1'b0;
          bank_release[rb] <= 1'b1;
          rb               <= ~rb;
        end else if (c == n_cols - 1) begin
          c <= '0;
          r <= r + 1'b1;
        end else begin
          c <= c + 1'b1;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_row) && $stable(out_col))
    else $error("pool_streamer: output changed while stalled");

endmodule
