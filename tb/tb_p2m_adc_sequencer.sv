// tb_p2m_adc_sequencer -- checks the timing of one conversion: 1 sample
// clock, 2^NB negative-phase steps, 1 ramp-restart clock, 2^NB
// positive-phase steps, 1 latch clock with done; total 2^(NB+1)+3 clocks;
// busy over the whole conversion.
module tb_p2m_adc_sequencer;
  import p2m_pkg::*;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, sample, cnt_rst, ramp_rst, ramp_en, cnt_en, done;
  adc_phase_t phase;
  int checks = 0, failures = 0;

  p2m_adc_sequencer #(.NB(NB)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      int cyc, nneg, npos, nsample, nramprst, ndone, first_neg, first_pos;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0; nneg = 0; npos = 0; nsample = 0; nramprst = 0; ndone = 0;
      first_neg = -1; first_pos = -1;
      while (busy) begin
        if (sample) nsample++;
        if (ramp_rst) nramprst++;
        if (ramp_en && cnt_en && phase == PH_NEG) begin nneg++; if (first_neg < 0) first_neg = cyc; end
        if (ramp_en && cnt_en && phase == PH_POS) begin npos++; if (first_pos < 0) first_pos = cyc; end
        if (done) begin
          ndone++;
          chk(cyc == 2 * (1 << NB) + 2, $sformatf("done at clock %0d", cyc));
        end
        cyc++;
        @(negedge clk);
      end
      chk(cyc == 2 * (1 << NB) + 3, $sformatf("conversion length %0d", cyc));
      chk(nneg == (1 << NB), $sformatf("neg steps %0d", nneg));
      chk(npos == (1 << NB), $sformatf("pos steps %0d", npos));
      chk(nsample == 1 && nramprst == 2 && ndone == 1, "pulse counts");
      chk(first_neg == 1 && first_pos == (1 << NB) + 2, $sformatf("phase starts %0d %0d", first_neg, first_pos));
      chk(!done && !sample, "idle outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
