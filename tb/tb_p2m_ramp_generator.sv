// tb_p2m_ramp_generator -- checks that the ramp restarts at 0 and rises by
// `step` on every enabled clock, and holds when not enabled.
module tb_p2m_ramp_generator;
  localparam int NB = 8;
  logic clk = 0, ramp_rst = 0, ramp_en = 0;
  logic [15:0] step;
  logic [31:0] ramp;
  int checks = 0, failures = 0;

  p2m_ramp_generator #(.NB(NB), .STEP_BITS(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5; n++) begin
      int t;
      step = 16'($urandom_range(1, 5000));
      @(negedge clk); ramp_rst = 1;
      @(negedge clk); ramp_rst = 0;
      t = 0;
      for (int i = 0; i < (1 << NB); i++) begin
        checks++;
        if (ramp != 32'(t) * 32'(step)) begin
          failures++;
          $display("FAIL step=%0d t=%0d ramp=%0d", step, t, ramp);
        end
        ramp_en = ($urandom_range(0, 3) != 0);
        if (ramp_en) t++;
        @(negedge clk);
        ramp_en = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
