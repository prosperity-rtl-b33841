// tb_weight_buffer -- writes different random int8 weight rows to every address
// of both banks and reads them back in a scrambled order, including reads of
// bank 0 while bank 1 is being written (double buffering).
module tb_weight_buffer;
  localparam int KBUF = 128, N = 128, WW = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                 wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [6:0]           wr_addr = '0, rd_addr = '0;
  logic [N-1:0][WW-1:0] wr_data = '0, rd_data;
  logic [N-1:0][WW-1:0] ref_mem [2][KBUF];

  weight_buffer #(.KBUF(KBUF), .N(N), .WW(WW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(int b, int a);
    rd_bank = 1'(b); rd_addr = 7'(a);
    #1;
    checks++;
    if (rd_data != ref_mem[b][a]) begin
      failures++; if (failures < 10) $display("FAIL bank %0d addr %0d", b, a);
    end
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < KBUF; a++) begin
        for (int i = 0; i < N; i++) ref_mem[b][a][i] = 8'($urandom);
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_addr = 7'(a); wr_data = ref_mem[b][a];
        if (b == 1) check_row(0, (a * 53 + 5) % KBUF);
      end
    @(negedge clk) wr_en = 0;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < KBUF; a++) check_row(b, (a * 37 + 11) % KBUF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
