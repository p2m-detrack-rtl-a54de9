// tb_p2m_pixel_array -- loads a random scene and random signed weights into
// the pixel-array model, activates every (channel, q, p) conversion cycle
// of a small array and compares each column line, in both phases, with the
// positive and negative partial sums of the kernel that column must read
// (strip b = j/8, stack position k = j%8; output row q + 2k, output
// column 2b + p; padding 3; K = 7, S = 4).
module tb_p2m_pixel_array;
  import p2m_pkg::*;
  localparam int H_IN = 16, W_IN = 32, K = 7, S = 4, D = 3, CO = 2, PB = 12, WB = 4;
  localparam int H_OUT = 4, W_OUT = 8;
  logic clk = 0, pix_we = 0, w_we = 0, sample = 0;
  logic [15:0] pix_row, pix_col, band = '0;
  logic [PB-1:0] pix_val;
  logic [7:0] w_ch, w_r, w_c, ch, q, p;
  logic signed [WB-1:0] w_val;
  adc_phase_t phase = PH_NEG;
  logic [31:0] col_out [W_IN];
  int img [H_IN][W_IN];
  int wt [CO][K][K];
  int checks = 0, failures = 0;

  p2m_pixel_array #(.H_IN(H_IN), .W_IN(W_IN), .K(K), .S(S), .D(D), .CO(CO),
                    .PIX_BITS(PB), .W_BITS(WB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < H_IN; r++)
      for (int c = 0; c < W_IN; c++) begin
        img[r][c] = int'($urandom_range(0, 4095));
        @(negedge clk); pix_we = 1; pix_row = 16'(r); pix_col = 16'(c); pix_val = PB'(img[r][c]);
      end
    @(negedge clk); pix_we = 0;
    for (int o = 0; o < CO; o++)
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          wt[o][r][c] = int'($urandom_range(0, 15)) - 8;
          @(negedge clk); w_we = 1; w_ch = 8'(o); w_r = 8'(r); w_c = 8'(c); w_val = WB'(wt[o][r][c]);
        end
    @(negedge clk); w_we = 0;
    for (int o = 0; o < CO; o++)
      for (int qq = 0; qq < 2; qq++)
        for (int pp = 0; pp < 2; pp++) begin
          ch = 8'(o); q = 8'(qq); p = 8'(pp);
          sample = 1;
          @(negedge clk); sample = 0;
          for (int j = 0; j < W_IN; j++) begin
            int b, k, y, x, sp, sn;
            b = j / 8; k = j % 8; y = qq + 2 * k; x = 2 * b + pp;
            sp = 0; sn = 0;
            if (k < K && y < H_OUT && x < W_OUT)
              for (int r = 0; r < K; r++)
                for (int c = 0; c < K; c++) begin
                  int rr, cc;
                  rr = y * S - D + r; cc = x * S - D + c;
                  if (rr >= 0 && rr < H_IN && cc >= 0 && cc < W_IN) begin
                    if (wt[o][r][c] > 0) sp += img[rr][cc] * wt[o][r][c];
                    else sn -= img[rr][cc] * wt[o][r][c];
                  end
                end
            phase = PH_POS; #1;
            checks++;
            if (int'(col_out[j]) != sp) begin failures++; $display("FAIL pos o%0d q%0d p%0d j%0d got %0d exp %0d", o, qq, pp, j, col_out[j], sp); end
            phase = PH_NEG; #1;
            checks++;
            if (int'(col_out[j]) != sn) begin failures++; $display("FAIL neg o%0d q%0d p%0d j%0d got %0d exp %0d", o, qq, pp, j, col_out[j], sn); end
          end
          @(negedge clk);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
