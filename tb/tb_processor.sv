// tb_processor -- Processor alone (M=16, K=8, N=8, two k-tiles) with buffer
// models. For each tile the testbench builds Prefix/pattern tasks with the
// reference model and offers them in the stable-sorted order. Checks every
// output row against the plain product S x W accumulated over both k-tiles,
// the cycle count (one row per max(1, pattern ones) cycles plus one cycle of
// issue), the tile_done pulse, and that the Prefix bypass and issue stalls
// both occur.
module tb_processor;
  import prosparsity_ref_pkg::*;
  localparam int M = 16, K = 8, N = 8, KBUF = 16, WW = 8, LW = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 tile_start = 0, first_kt = 0, tile_done;
  logic [0:0]           kt = '0;
  logic                 task_valid = 0, task_ready, task_has_prefix = 0;
  logic [3:0]           task_row = '0, task_prefix = '0, pf_addr, ob_row;
  logic [K-1:0]         task_pattern = '0;
  logic [3:0]           wb_addr;
  logic [N-1:0][WW-1:0] w_row;
  logic [N-1:0][LW-1:0] pf_data, ob_data;
  logic                 ob_en, ob_first, ev_bypass, ev_stall, ev_add;

  processor #(.M(M), .K(K), .N(N), .KBUF(KBUF), .WW(WW), .LW(LW)) dut (.*);

  // buffer models
  logic [N-1:0][WW-1:0] wmem [KBUF];
  logic [N-1:0][LW-1:0] lmem [M];
  int                   omem [M][N];
  assign w_row   = wmem[wb_addr];
  assign pf_data = lmem[pf_addr];
  always @(posedge clk) if (ob_en) begin
    lmem[ob_row] <= ob_data;
    for (int i = 0; i < N; i++)
      omem[ob_row][i] <= (ob_first ? 0 : omem[ob_row][i]) + int'(signed'(ob_data[i]));
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, n_bypass = 0, n_stall = 0, n_done = 0;
  always @(posedge clk) begin
    cyc++;
    n_bypass += int'(ev_bypass);
    n_stall  += int'(ev_stall);
    n_done   += int'(tile_done);
  end

  row_t spk [2][];
  int   exp_out [M][N];

  initial begin
    for (int a = 0; a < KBUF; a++) for (int i = 0; i < N; i++) wmem[a][i] = 8'($urandom);
    for (int t = 0; t < 2; t++) begin
      spk[t] = new[M];
      for (int r = 0; r < M; r++) spk[t][r] = rand_row(K, 0);
      spk[t][5] = spk[t][2];   // guarantee an Exact Match
    end
    for (int r = 0; r < M; r++) for (int i = 0; i < N; i++) begin
      exp_out[r][i] = 0;
      for (int t = 0; t < 2; t++) for (int c = 0; c < K; c++)
        if (spk[t][r][c]) exp_out[r][i] += int'(signed'(wmem[t * K + c][i]));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      int order [$];
      automatic int sum = 0, first_cyc, done_cyc = -1;
      ref_order(spk[t], K, order);
      @(negedge clk) begin tile_start = 1; kt = t[0]; first_kt = (t == 0); end
      @(negedge clk) tile_start = 0;
      first_cyc = cyc;
      for (int n = 0; n < M; n++) begin
        automatic int r = order[n];
        automatic int p = ref_prefix(spk[t], r);
        automatic logic [K-1:0] pat = (p < 0) ? K'(spk[t][r]) : K'(spk[t][r] & ~spk[t][p]);
        sum += ($countones(pat) > 0) ? $countones(pat) : 1;
        task_valid = 1; task_row = 4'(r);
        task_prefix = (p < 0) ? 4'(r) : 4'(p); task_has_prefix = (p >= 0); task_pattern = pat;
        #1;
        while (!task_ready) begin
          @(negedge clk);
          if (tile_done) done_cyc = cyc;
          #1;
        end
        @(negedge clk);
        if (tile_done) done_cyc = cyc;
      end
      task_valid = 0;
      while (done_cyc < 0) begin @(negedge clk); if (tile_done) done_cyc = cyc; end
      checks++;
      if (done_cyc - first_cyc != sum + 1) begin
        failures++; $display("FAIL tile %0d took %0d cycles, expected %0d", t, done_cyc - first_cyc, sum + 1);
      end
      @(negedge clk);
    end
    for (int r = 0; r < M; r++) for (int i = 0; i < N; i++) begin
      checks++;
      if (omem[r][i] != exp_out[r][i]) begin
        failures++;
        if (failures < 10) $display("FAIL out[%0d][%0d]=%0d exp %0d", r, i, omem[r][i], exp_out[r][i]);
      end
    end
    checks += 3;
    if (n_done != 2) begin failures++; $display("FAIL tile_done count %0d", n_done); end
    if (n_bypass == 0) begin failures++; $display("FAIL no bypass happened"); end
    if (n_stall == 0) begin failures++; $display("FAIL no stall happened"); end
    $display("bypasses=%0d stalls=%0d", n_bypass, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
