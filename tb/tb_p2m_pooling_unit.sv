// tb_p2m_pooling_unit -- checks 2x2 average (truncating), max and bypass on
// random windows.
module tb_p2m_pooling_unit;
  import p2m_pkg::*;
  localparam int NB = 8;
  pool_mode_t mode;
  logic [NB-1:0] v [4];
  logic [NB-1:0] y;
  int checks = 0, failures = 0;

  p2m_pooling_unit #(.NB(NB), .POOL_S(2)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int s, m, e;
      s = 0; m = 0;
      for (int k = 0; k < 4; k++) begin
        v[k] = NB'($urandom_range(0, 255));
        if (i % 10 == 0) v[k] = 8'hff;
        s += int'(v[k]);
        if (int'(v[k]) > m) m = int'(v[k]);
      end
      mode = pool_mode_t'(i % 3);
      #1;
      e = (mode == POOL_AVG) ? s / 4 : (mode == POOL_MAX) ? m : int'(v[0]);
      checks++;
      if (int'(y) != e) begin
        failures++;
        $display("FAIL mode=%0d got %0d exp %0d", mode, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
