// tb_p2m_frontend -- end-to-end test of the sensor front-end on a small
// array (64x32 pixels, 2 channels, K = 7, S = 4), in all three pooling modes.
//
// The testbench loads a random scene (12-bit pixels) and random signed
// 4-bit weights, sets per-channel batch-norm constants, runs frames and
// compares every activation leaving the sensor with a reference computed
// here from the scene: the positive and negative weighted sums of each
// kernel, ceil(sum/step) ramp steps (at most 2^NB) for each, preset + pos
// - neg clipped to [0, 2^NB-1], then 2x2 average (truncating) or max, or no
// pooling.  It checks the output order and tags, the number of outputs,
// the number of conversions (CO * ceil(H_OUT/(P*K)) * P*P), the frame
// length in clocks against 2^(NB+1)+4 clocks per conversion, and
// that each mechanism happened: average pooling, max pooling, no
// pooling (mode switch between frames), a scheduler stall under a slow
// back-end, output back-pressure, ReLU clipping to 0 and ADC saturation.
module tb_p2m_frontend;
  import p2m_pkg::*;
  localparam int H_IN = 64, W_IN = 32, K = 7, S = 4, D = 3, CO = 2, NB = 8;
  localparam int P      = (K + S - 1) / S;
  localparam int H_OUT  = (H_IN + 2 * D - K) / S + 1;
  localparam int W_OUT  = (W_IN + 2 * D - K) / S + 1;
  localparam int BAND   = P * K;
  localparam int NBANDS = (H_OUT + BAND - 1) / BAND;
  localparam int FS     = 1 << NB;

  logic clk = 0, rst_n = 0;
  logic pix_we = 0, w_we = 0;
  logic [15:0] pix_row = '0, pix_col = '0;
  logic [11:0] pix_val = '0;
  logic [7:0] w_ch = '0, w_r = '0, w_c = '0;
  logic signed [3:0] w_val = '0;
  logic [15:0] bn_step [CO];
  logic signed [NB:0] bn_shift [CO];
  pool_mode_t pool_mode = POOL_AVG;
  logic frame_start = 0, frame_busy, frame_done, stall;
  logic [31:0] conv_count;
  logic out_valid, out_ready = 1;
  logic [NB-1:0] out_data;
  logic [7:0] out_ch;
  logic [15:0] out_row, out_col;

  int img [H_IN][W_IN];
  int wt [CO][K][K];
  int act [CO][H_OUT][W_OUT];
  int checks = 0, failures = 0;
  int n_stall = 0, n_relu_zero = 0, n_sat = 0, n_avg = 0, n_max = 0, n_none = 0, n_backpressure = 0;
  int ready_mode = 0;

  p2m_frontend #(.H_IN(H_IN), .W_IN(W_IN), .K(K), .S(S), .D(D), .CO(CO), .NB(NB)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(64'd20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // back-end model
  always @(negedge clk) begin
    case (ready_mode)
      0: out_ready <= 1'b1;
      1: out_ready <= ($urandom_range(0, 199) == 0); // slow back-end: forces stalls
      default: out_ready <= ($urandom_range(0, 1) == 0);
    endcase
  end
  always @(posedge clk) begin
    if (stall) n_stall++;
    if (out_valid && !out_ready) n_backpressure++;
  end

  function automatic int steps(int v, int st);
    int n;
    n = (v + st - 1) / st;
    return (n > FS) ? FS : n;
  endfunction

  task automatic reference();
    for (int o = 0; o < CO; o++)
      for (int y = 0; y < H_OUT; y++)
        for (int x = 0; x < W_OUT; x++) begin
          int sp, sn, v;
          sp = 0; sn = 0;
          for (int r = 0; r < K; r++)
            for (int c = 0; c < K; c++) begin
              int rr, cc;
              rr = y * S - D + r; cc = x * S - D + c;
              if (rr >= 0 && rr < H_IN && cc >= 0 && cc < W_IN) begin
                if (wt[o][r][c] > 0) sp += img[rr][cc] * wt[o][r][c];
                else sn -= img[rr][cc] * wt[o][r][c];
              end
            end
          v = int'(bn_shift[o]) + steps(sp, int'(bn_step[o])) - steps(sn, int'(bn_step[o]));
          if (v < 0) begin v = 0; n_relu_zero++; end
          if (v > FS - 1) begin v = FS - 1; n_sat++; end
          act[o][y][x] = v;
        end
  endtask

  task automatic run_frame(input pool_mode_t m, input int rm);
    int cnt, t0, t1, exp_conv, exp_cnt, stall0;
    bit got_done;
    pool_mode = m;
    ready_mode = rm;
    stall0 = n_stall;
    @(negedge clk);
    frame_start = 1;
    t0 = $time / 10;
    @(negedge clk);
    frame_start = 0;
    cnt = 0;
    got_done = 0;
    for (int o = 0; o < CO; o++)
      for (int b = 0; b < NBANDS; b++) begin
        int rows, nr, nc;
        rows = (H_OUT - b * BAND > BAND) ? BAND : H_OUT - b * BAND;
        nr = (m == POOL_NONE) ? rows : rows / 2;
        nc = (m == POOL_NONE) ? W_OUT : W_OUT / 2;
        for (int r = 0; r < nr; r++)
          for (int c = 0; c < nc; c++) begin
            int e, y, x;
            do @(posedge clk); while (!(out_valid && out_ready));
            if (m == POOL_NONE) begin
              y = b * BAND + r; x = c;
              e = act[o][y][x];
            end else begin
              y = b * (BAND / 2) + r; x = c;
              if (m == POOL_AVG)
                e = (act[o][2*y][2*x] + act[o][2*y][2*x+1] + act[o][2*y+1][2*x] + act[o][2*y+1][2*x+1]) / 4;
              else begin
                e = act[o][2*y][2*x];
                if (act[o][2*y][2*x+1] > e) e = act[o][2*y][2*x+1];
                if (act[o][2*y+1][2*x] > e) e = act[o][2*y+1][2*x];
                if (act[o][2*y+1][2*x+1] > e) e = act[o][2*y+1][2*x+1];
              end
            end
            chk(int'(out_data) == e && int'(out_ch) == o && int'(out_row) == y && int'(out_col) == x,
                $sformatf("mode %0d out %0d: got %0d (ch%0d r%0d c%0d) exp %0d (ch%0d r%0d c%0d)",
                          m, cnt, out_data, out_ch, out_row, out_col, e, o, y, x));
            cnt++;
          end
      end
    // frame_done follows the last accepted output
    for (int i = 0; i < 20 && !got_done; i++) begin
      @(posedge clk);
      if (frame_done) got_done = 1;
    end
    t1 = $time / 10;
    chk(got_done, "frame_done");
    exp_conv = CO * NBANDS * P * P;
    chk(int'(conv_count) == exp_conv, $sformatf("conversions %0d exp %0d", conv_count, exp_conv));
    exp_cnt = (m == POOL_NONE) ? CO * H_OUT * W_OUT : CO * (((H_OUT / BAND) * (BAND / 2)) + ((H_OUT % BAND) / 2)) * (W_OUT / 2);
    chk(cnt == exp_cnt, $sformatf("outputs %0d exp %0d", cnt, exp_cnt));
    // frame length: each conversion 2^(NB+1)+3 ADC clocks + 1 scheduling clock
    chk(t1 - t0 >= exp_conv * (2 * FS + 4), $sformatf("frame too short: %0d clocks", t1 - t0));
    if (n_stall == stall0)
      chk(t1 - t0 <= exp_conv * (2 * FS + 4) + CO * NBANDS * 2 + (BAND * W_OUT) * 3 + 40,
          $sformatf("frame too long: %0d clocks", t1 - t0));
    $display("frame mode %0d: %0d outputs, %0d conversions, %0d clocks, %0d stall clocks",
             m, cnt, conv_count, t1 - t0, n_stall - stall0);
    if (m == POOL_AVG) n_avg++;
    else if (m == POOL_MAX) n_max++;
    else n_none++;
  endtask

  initial begin
    for (int r = 0; r < H_IN; r++)
      for (int c = 0; c < W_IN; c++)
        img[r][c] = int'($urandom_range(0, 4095));
    for (int o = 0; o < CO; o++) begin
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          // channel 1 has only non-negative weights, so its results can saturate
          wt[o][r][c] = (o == 1) ? int'($urandom_range(0, 7)) : int'($urandom_range(0, 15)) - 8;
      // channel 0 has a coarse ramp, the others a fine ramp that saturates
      bn_step[o]  = (o == 0) ? 16'(1200) : 16'(300 + 50 * o);
      bn_shift[o] = (NB+1)'(int'($urandom_range(0, 80)) - 40);
    end
    reference();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < H_IN; r++)
      for (int c = 0; c < W_IN; c++) begin
        @(negedge clk);
        pix_we = 1; pix_row = 16'(r); pix_col = 16'(c); pix_val = 12'(img[r][c]);
      end
    for (int o = 0; o < CO; o++)
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          @(negedge clk);
          pix_we = 0;
          w_we = 1; w_ch = 8'(o); w_r = 8'(r); w_c = 8'(c); w_val = 4'(wt[o][r][c]);
        end
    @(negedge clk);
    w_we = 0;
    run_frame(POOL_AVG, 0);
    run_frame(POOL_MAX, 1);
    run_frame(POOL_NONE, 2);
    run_frame(POOL_AVG, 1);
    $display("mechanisms: avg=%0d max=%0d none=%0d stall_clocks=%0d backpressure=%0d relu_zero=%0d saturate=%0d",
             n_avg, n_max, n_none, n_stall, n_backpressure, n_relu_zero, n_sat);
    chk(n_avg > 0 && n_max > 0 && n_none > 0, "a pooling mode never ran");
    chk(n_stall > 0, "no stall happened");
    chk(n_backpressure > 0, "no back-pressure happened");
    chk(n_relu_zero > 0, "ReLU never clipped");
    chk(n_sat > 0, "ADC never saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
