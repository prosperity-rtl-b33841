// tb_dispatcher -- writes a tile's spatial information into one table bank and
// sorts its NO counts, then issues it while the other bank is being written.
// Checks the issue order (stable by NO), the looked-up Prefix/pattern of each
// task, has_prefix, back-pressure through task_ready and the done pulses.
module tb_dispatcher;
  localparam int M = 32, K = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         tw_en = 0, tw_bank = 0, sort_start = 0, sort_bank = 0, sort_done;
  logic [4:0]   tw_idx = '0, tw_prefix = '0;
  logic [K-1:0] tw_pattern = '0;
  logic [3:0]   no_in [M];
  logic         iss_start = 0, iss_bank = 0, task_valid, task_ready = 0, task_has_prefix, iss_done;
  logic [4:0]   task_row, task_prefix;
  logic [K-1:0] task_pattern;

  dispatcher #(.M(M), .K(K)) dut (.*);

  logic [4:0]   pf [2][M];
  logic [K-1:0] pt [2][M];
  int           nos [2][M];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int b);
    for (int i = 0; i < M; i++) begin
      nos[b][i] = $urandom_range(K);
      pf[b][i]  = ($urandom_range(2) == 0) ? 5'(i) : 5'($urandom);
      pt[b][i]  = 8'($urandom);
      no_in[i]  = 4'(nos[b][i]);
    end
    @(negedge clk) begin sort_start = 1; sort_bank = b[0]; end
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      sort_start = 0;
      tw_en = 1; tw_bank = b[0]; tw_idx = 5'(i); tw_prefix = pf[b][i]; tw_pattern = pt[b][i];
    end
    @(negedge clk) tw_en = 0;
  endtask

  task automatic drain(int b);
    int order [$];
    automatic int n = 0, dones = 0;
    for (int v = 0; v <= K; v++) for (int i = 0; i < M; i++) if (nos[b][i] == v) order.push_back(i);
    @(negedge clk) begin iss_start = 1; iss_bank = b[0]; end
    @(negedge clk) iss_start = 0;
    while (n < M) begin
      task_ready = ($urandom_range(3) != 0);
      #1;
      if (task_valid && task_ready) begin
        automatic int r = order[n];
        checks++;
        if (int'(task_row) != r || task_prefix != pf[b][r] || task_pattern != pt[b][r] ||
            task_has_prefix != (int'(pf[b][r]) != r)) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d n %0d row %0d exp %0d", b, n, task_row, r);
        end
        if (iss_done) dones++;
        n++;
      end
      @(negedge clk);
    end
    task_ready = 0;
    checks++;
    if (dones != 1 || task_valid) begin failures++; $display("FAIL iss_done count %0d", dones); end
  endtask

  int sort_dones = 0;
  always @(posedge clk) if (rst_n && sort_done) sort_dones++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    fill(0);
    repeat (40) @(negedge clk);
    fork
      drain(0);
      fill(1);
    join
    repeat (40) @(negedge clk);
    drain(1);
    checks++;
    if (sort_dones != 2) begin failures++; $display("FAIL sort_done count %0d", sort_dones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
