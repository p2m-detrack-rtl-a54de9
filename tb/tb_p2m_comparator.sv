// tb_p2m_comparator -- checks the column comparator decision (signal above
// ramp) on random and boundary values.
module tb_p2m_comparator;
  logic [31:0] vin, ramp;
  logic above;
  int checks = 0, failures = 0;

  p2m_comparator dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1000; i++) begin
      longint a, b;
      a = longint'($urandom_range(0, 100000));
      b = (i % 3 == 0) ? a : longint'($urandom_range(0, 100000));
      if (i % 7 == 0) b = a - 1;
      if (b < 0) b = 0;
      vin = 32'(a); ramp = 32'(b);
      #1;
      checks++;
      if (above != (a > b)) begin
        failures++;
        $display("FAIL vin=%0d ramp=%0d above=%0d", a, b, above);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
