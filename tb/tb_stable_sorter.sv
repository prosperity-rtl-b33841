// tb_stable_sorter -- checks the bitonic stable sorter.
// Instance A (M = 8) sorts the paper's example counts 2,2,3,1,3,3 (plus two
// rows of 4) and must give the printed order 3,0,1,2,4,5 (then 6,7).
// Instance B (M = 256, the full tile) sorts random counts and is compared
// with a stable counting sort; its busy time must be log2(256)*9/2 = 36 cycles.
module tb_stable_sorter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       a_start = 0, a_busy, a_done;
  logic [4:0] a_no [8];
  logic [2:0] a_idx [8];
  stable_sorter #(.M(8), .K(16)) dut_a (.clk, .rst_n, .start(a_start), .no_in(a_no),
                                        .busy(a_busy), .done(a_done), .sorted_idx(a_idx));

  localparam int M = 256;
  logic       b_start = 0, b_busy, b_done;
  logic [4:0] b_no [M];
  logic [7:0] b_idx [M];
  stable_sorter #(.M(M), .K(16)) dut_b (.clk, .rst_n, .start(b_start), .no_in(b_no),
                                        .busy(b_busy), .done(b_done), .sorted_idx(b_idx));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int busy_cycles;
  always @(posedge clk) if (b_busy) busy_cycles++;

  initial begin
    automatic int exp_a [8] = '{3, 0, 1, 2, 4, 5, 6, 7};
    automatic int cnt_a [8] = '{2, 2, 3, 1, 3, 3, 4, 4};
    for (int i = 0; i < 8; i++) a_no[i] = 5'(cnt_a[i]);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) a_start = 1;
    @(negedge clk) a_start = 0;
    wait (a_done);
    @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (int'(a_idx[i]) != exp_a[i]) begin failures++; $display("FAIL A pos %0d = %0d", i, a_idx[i]); end
    end
    for (int rep = 0; rep < 4; rep++) begin
      automatic int pos = 0;
      for (int i = 0; i < M; i++) b_no[i] = 5'((rep == 3) ? 5 : $urandom_range(16));
      busy_cycles = 0;
      @(negedge clk) b_start = 1;
      @(negedge clk) b_start = 0;
      wait (b_done);
      @(negedge clk);
      checks++;
      if (busy_cycles != 36) begin failures++; $display("FAIL busy %0d cycles", busy_cycles); end
      for (int v = 0; v <= 16; v++)
        for (int i = 0; i < M; i++)
          if (int'(b_no[i]) == v) begin
            checks++;
            if (int'(b_idx[pos]) != i) begin
              failures++;
              if (failures < 10) $display("FAIL B pos %0d = %0d exp %0d", pos, b_idx[pos], i);
            end
            pos++;
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
