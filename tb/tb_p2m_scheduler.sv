// tb_p2m_scheduler -- checks the conversion order (channel, band, vertical
// residue q, horizontal phase p), the register-bank slot and bank of each
// write, the hand-over of full banks, the stall when both banks are full,
// and the number of conversions per frame: CO * ceil(H_OUT/(P*K)) * P*P,
// which for H_OUT = 28 (a multiple of P*K) equals the paper's Eq. (2),
// ceil(H_OUT/K)*ceil(K/S) per channel.  The ADC sequencer and the pooling
// side are modelled by the testbench.
module tb_p2m_scheduler;
  import p2m_pkg::*;
  localparam int H_OUT = 28, K = 7, S = 4, CO = 3;
  localparam int P = 2, BAND = 14, NBANDS = 2;
  logic clk = 0, rst_n = 0, frame_start = 0;
  logic running, frame_conv_done, conv_start, conv_done = 0;
  logic [7:0] ch, q, p, wr_slot;
  logic [15:0] band;
  logic wr_en, wr_bank, stall;
  logic [1:0] bank_full, bank_release = '0;
  logic [7:0] bank_ch [2];
  logic [15:0] bank_band [2];
  logic [31:0] conv_count;
  int checks = 0, failures = 0;
  int exp_c = 0, exp_b = 0, exp_q = 0, exp_p = 0, nconv = 0, stall_cycles = 0, handoffs = 0;
  bit exp_bank = 0;

  p2m_scheduler #(.H_OUT(H_OUT), .K(K), .S(S), .CO(CO)) dut (.*);
  always #5 clk = ~clk;

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

  // ADC sequencer model: done 6 clocks after start
  always @(posedge clk) begin
    if (conv_start) begin
      chk(int'(ch) == exp_c && int'(band) == exp_b && int'(q) == exp_q && int'(p) == exp_p,
          $sformatf("order: got c%0d b%0d q%0d p%0d exp c%0d b%0d q%0d p%0d", ch, band, q, p, exp_c, exp_b, exp_q, exp_p));
      fork begin
        repeat (6) @(posedge clk);
        conv_done <= 1;
        @(posedge clk);
        conv_done <= 0;
      end join_none
    end
    if (wr_en) begin
      chk(int'(wr_slot) == exp_q * P + exp_p && wr_bank == exp_bank, "write slot/bank");
      nconv++;
      exp_p++;
      if (exp_p == P) begin exp_p = 0; exp_q++; end
      if (exp_q == P) begin
        exp_q = 0; exp_b++; exp_bank = ~exp_bank;
        if (exp_b == NBANDS) begin exp_b = 0; exp_c++; end
      end
    end
    if (stall) stall_cycles++;
  end

  // pooling-side model: takes banks in turn, holds each for a while
  initial begin
    bit rb;
    int want_c, want_b;
    rb = 0; want_c = 0; want_b = 0;
    forever begin
      @(posedge clk);
      if (rst_n && bank_full[rb]) begin
        chk(int'(bank_ch[rb]) == want_c && int'(bank_band[rb]) == want_b, "bank descriptor");
        handoffs++;
        want_b++;
        if (want_b == NBANDS) begin want_b = 0; want_c++; end
        repeat ((handoffs % 3 == 0) ? 150 : 5) @(posedge clk);
        bank_release[rb] <= 1;
        @(posedge clk);
        bank_release[rb] <= 0;
        @(posedge clk);
        rb = ~rb;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); frame_start = 1;
    @(negedge clk); frame_start = 0;
    wait (frame_conv_done);
    @(negedge clk);
    chk(nconv == CO * NBANDS * P * P, $sformatf("conversions %0d", nconv));
    chk(int'(conv_count) == CO * ((H_OUT + K - 1) / K) * ((K + S - 1) / S), $sformatf("Eq.2 count %0d", conv_count));
    chk(stall_cycles > 0, "stall never happened");
    chk(!running, "still running");
    repeat (400) @(negedge clk);
    chk(handoffs == CO * NBANDS, $sformatf("handoffs %0d", handoffs));
    $display("stall cycles %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
