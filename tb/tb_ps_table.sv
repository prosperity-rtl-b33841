// tb_ps_table -- fills both banks of the product sparsity table with random
// entries and reads them back, checking that the banks are independent.
module tb_ps_table;
  localparam int M = 256, K = 16;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic         wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [7:0]   wr_idx = '0, wr_prefix = '0, rd_idx = '0, rd_prefix;
  logic [K-1:0] wr_pattern = '0, rd_pattern;
  logic [7:0]   rp [2][M];
  logic [K-1:0] rt [2][M];

  ps_table #(.M(M), .K(K)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < M; i++) begin
        rp[b][i] = 8'($urandom); rt[b][i] = 16'($urandom);
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_idx = 8'(i); wr_prefix = rp[b][i]; wr_pattern = rt[b][i];
      end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 2 * M; i++) begin
      rd_bank = i[0]; rd_idx = 8'(i / 2);
      #1;
      checks++;
      if (rd_prefix != rp[i%2][i/2] || rd_pattern != rt[i%2][i/2]) begin
        failures++; $display("FAIL bank %0d idx %0d", i % 2, i / 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
