// tb_spike_buffer -- fills both banks of the spike buffer with different random
// rows, then reads back every (bank, row group, k-tile) slice and compares it
// with the column slice of the row written to that bank. A read of one bank
// during writes to the other is checked as well (double buffering).
module tb_spike_buffer;
  localparam int M = 256, KBUF = 128, K = 16, P = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic            wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [7:0]      wr_row = '0;
  logic [KBUF-1:0] wr_data = '0;
  logic [4:0]      rd_grp = '0;
  logic [2:0]      rd_kt = '0;
  logic [P-1:0][K-1:0] rd_rows;
  logic [KBUF-1:0] ref_mem [2][M];

  spike_buffer #(.M(M), .KBUF(KBUF), .K(K), .P(P)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_slice(int b, int g, int kt);
    rd_bank = 1'(b); rd_grp = 5'(g); rd_kt = 3'(kt);
    #1;
    for (int p = 0; p < P; p++) begin
      checks++;
      if (rd_rows[p] != ref_mem[b][g * P + p][kt * K +: K]) begin
        failures++;
        if (failures < 10) $display("FAIL b=%0d g=%0d kt=%0d p=%0d", b, g, kt, p);
      end
    end
  endtask

  initial begin
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < M; r++) begin
        for (int w = 0; w < KBUF / 32; w++) ref_mem[b][r][w*32 +: 32] = $urandom;
        @(negedge clk);
        wr_en = 1; wr_bank = 1'(b); wr_row = 8'(r); wr_data = ref_mem[b][r];
        // bank 0 stays readable while bank 1 is written
        if (b == 1) check_slice(0, (r * 7) % (M / P), r % (KBUF / K));
      end
    @(negedge clk) wr_en = 0;
    for (int b = 0; b < 2; b++)
      for (int g = 0; g < M / P; g++)
        for (int kt = 0; kt < KBUF / K; kt++) check_slice(b, g, kt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
