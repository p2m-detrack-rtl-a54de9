// tb_p2m_pool_streamer -- checks the pooling walk over a band held in a
// register-bank model: every window's address, the average / max / raw
// value, the output tags (channel, row, column), the output order, the
// hold of the output under back-pressure, the short last band and the bank
// release.  Output position (yb, x) of a band is stored in the model at
// column (x/2)*8 + yb/2 and slot (yb%2)*2 + x%2 (K = 7, S = 4, P = 2).
module tb_p2m_pool_streamer;
  import p2m_pkg::*;
  localparam int H_OUT = 16, W_OUT = 8, K = 7, S = 4, NB = 8, PS = 2;
  localparam int BAND = 14, W_IN = 32;
  logic clk = 0, rst_n = 0;
  pool_mode_t mode = POOL_AVG;
  logic [1:0] bank_full = '0, bank_release;
  logic [7:0] bank_ch [2];
  logic [15:0] bank_band [2];
  logic rd_bank [4];
  logic [7:0] rd_slot [4];
  logic [15:0] rd_col [4];
  logic [NB-1:0] rd_data [4];
  logic out_valid, out_ready = 0, busy;
  logic [NB-1:0] out_data;
  logic [7:0] out_ch;
  logic [15:0] out_row, out_col;
  logic [NB-1:0] bankm [2][4][W_IN];
  int checks = 0, failures = 0;
  int releases = 0, nbands = 0;
  always @(posedge clk) if (bank_release != 2'b00) releases++;

  p2m_pool_streamer #(.H_OUT(H_OUT), .W_OUT(W_OUT), .K(K), .S(S), .NB(NB), .POOL_S(PS)) dut (.*);
  always #5 clk = ~clk;

  always_comb for (int i = 0; i < 4; i++) rd_data[i] = bankm[rd_bank[i]][rd_slot[i] % 4][rd_col[i] % W_IN];

  function automatic int val(int c, int b, int yb, int x);
    return (c * 37 + b * 101 + yb * 13 + x * 29 + (yb * x) % 7) % 256;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // back-end model: random ready
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  initial begin
    int bank;
    bank = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      for (int c = 0; c < 2; c++) begin
        for (int b = 0; b < 2; b++) begin
          int rows, nr, nc, cnt;
          rows = (H_OUT - b * BAND > BAND) ? BAND : H_OUT - b * BAND;
          for (int yb = 0; yb < BAND; yb++)
            for (int x = 0; x < W_OUT; x++)
              bankm[bank][(yb % 2) * 2 + x % 2][(x / 2) * 8 + yb / 2] = NB'(val(c, b, yb, x));
          mode = pool_mode_t'(m);
          bank_ch[bank] = 8'(c);
          bank_band[bank] = 16'(b);
          @(negedge clk);
          bank_full[bank] = 1;
          nr = (mode == POOL_NONE) ? rows : rows / 2;
          nc = (mode == POOL_NONE) ? W_OUT : W_OUT / 2;
          cnt = 0;
          for (int r = 0; r < nr; r++)
            for (int cc = 0; cc < nc; cc++) begin
              int e, v0, v1, v2, v3, stalled;
              stalled = 0;
              do begin
                @(posedge clk);
                if (out_valid && !out_ready) stalled = 1;
              end while (!(out_valid && out_ready));
              if (mode == POOL_NONE) e = val(c, b, r, cc);
              else begin
                v0 = val(c, b, 2 * r, 2 * cc);     v1 = val(c, b, 2 * r, 2 * cc + 1);
                v2 = val(c, b, 2 * r + 1, 2 * cc); v3 = val(c, b, 2 * r + 1, 2 * cc + 1);
                if (mode == POOL_AVG) e = (v0 + v1 + v2 + v3) / 4;
                else begin
                  e = v0;
                  if (v1 > e) e = v1;
                  if (v2 > e) e = v2;
                  if (v3 > e) e = v3;
                end
              end
              chk(int'(out_data) == e && int'(out_ch) == c && int'(out_col) == cc &&
                  int'(out_row) == ((mode == POOL_NONE) ? b * BAND + r : b * (BAND / 2) + r),
                  $sformatf("m%0d c%0d b%0d r%0d c%0d: got %0d (ch%0d r%0d c%0d) exp %0d", m, c, b, r, cc,
                            out_data, out_ch, out_row, out_col, e));
              cnt++;
            end
          repeat (2) @(posedge clk);
          nbands++;
          chk(releases == nbands, $sformatf("bank releases %0d after %0d bands", releases, nbands));
          @(negedge clk);
          bank_full[bank] = 0;
          bank = 1 - bank;
          repeat (3) @(posedge clk);
        end
      end
    end
    repeat (5) @(negedge clk);
    chk(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
