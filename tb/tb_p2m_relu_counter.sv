// tb_p2m_relu_counter -- checks the column counter: preset (BN shift),
// count down in the negative phase, count up in the positive phase, and
// the ReLU / full-scale clipping of the result.  Random comparator
// patterns are applied and the expected count is kept by the testbench.
module tb_p2m_relu_counter;
  import p2m_pkg::*;
  localparam int NB = 8;
  logic clk = 0, cnt_rst = 0, cnt_en = 0, cmp = 0;
  logic signed [NB:0] preset = '0;
  adc_phase_t up_dn = PH_NEG;
  logic [NB-1:0] relu;
  int checks = 0, failures = 0;

  p2m_relu_counter #(.NB(NB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int exp, nn, np, pr, mode;
      mode = t % 4;
      pr = int'($urandom_range(0, 511)) - 256;
      if (mode == 0) pr = 0;
      nn = 0; np = 0;
      @(negedge clk); preset = (NB+1)'(pr); cnt_rst = 1;
      @(negedge clk); cnt_rst = 0;
      up_dn = PH_NEG;
      for (int i = 0; i < (1 << NB); i++) begin
        cnt_en = 1; cmp = ($urandom_range(0, 3) == 0) || (mode == 2 && i < 200);
        if (cmp) nn++;
        @(negedge clk);
      end
      up_dn = PH_POS;
      for (int i = 0; i < (1 << NB); i++) begin
        cnt_en = ($urandom_range(0, 7) != 0); cmp = ($urandom_range(0, 1) == 0) || (mode == 3);
        if (cnt_en && cmp) np++;
        @(negedge clk);
      end
      cnt_en = 0;
      exp = pr + np - nn;
      if (exp < 0) exp = 0;
      if (exp > (1 << NB) - 1) exp = (1 << NB) - 1;
      checks++;
      if (int'(relu) != exp) begin
        failures++;
        $display("FAIL t=%0d preset=%0d np=%0d nn=%0d got %0d exp %0d", t, pr, np, nn, relu, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
