// tb_p2m_register_bank -- fills both banks slot by slot with random data
// (all columns in one write), then reads every register back through all
// read ports and compares with a copy kept by the testbench.
module tb_p2m_register_bank;
  localparam int W = 40, SL = 4, NB = 8, NRD = 4;
  logic clk = 0, wr_en = 0, wr_bank = 0;
  logic [7:0] wr_slot = '0;
  logic [NB-1:0] wr_data [W];
  logic rd_bank [NRD];
  logic [7:0] rd_slot [NRD];
  logic [15:0] rd_col [NRD];
  logic [NB-1:0] rd_data [NRD];
  logic [NB-1:0] ref_m [2][SL][W];
  int checks = 0, failures = 0;

  p2m_register_bank #(.W_IN(W), .SLOTS(SL), .NB(NB), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int b = 0; b < 2; b++)
        for (int s = 0; s < SL; s++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = b[0]; wr_slot = 8'(s);
          for (int j = 0; j < W; j++) begin
            wr_data[j] = NB'($urandom);
            ref_m[b][s][j] = wr_data[j];
          end
        end
      @(negedge clk); wr_en = 0;
      for (int b = 0; b < 2; b++)
        for (int s = 0; s < SL; s++)
          for (int j = 0; j < W; j++) begin
            for (int i = 0; i < NRD; i++) begin
              int jj;
              jj = (j + i * 7) % W;
              rd_bank[i] = b[0]; rd_slot[i] = 8'(s); rd_col[i] = 16'(jj);
            end
            #1;
            for (int i = 0; i < NRD; i++) begin
              checks++;
              if (rd_data[i] != ref_m[b][s][(j + i * 7) % W]) begin
                failures++;
                $display("FAIL b=%0d s=%0d j=%0d port %0d", b, s, j, i);
              end
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
