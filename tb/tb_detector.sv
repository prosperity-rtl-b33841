// tb_detector -- full-size Detector (M=256, K=16, P=8) fed from a spike-buffer
// model. Pre-loads tile 3 into bank 0, then searches bank 0 while tile 5 is
// pre-loaded into bank 1 (double buffering). Checks the NO counts of both
// banks, the pre-load time (M/P cycles), every Subset Index vector against a
// direct subset test, one row per cycle with three cycles from start to the
// first SI, and the Prefix-row read port.
module tb_detector;
  localparam int M = 256, K = 16, P = 8, KBUF = 256;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                pl_start = 0, pl_bank = 0, pl_done, det_start = 0, det_bank = 0;
  logic [3:0]          pl_kt = '0, sb_kt;
  logic [4:0]          sb_grp;
  logic [P-1:0][K-1:0] sb_rows;
  logic                s4_valid;
  logic [7:0]          s4_idx, pf_addr = '0;
  logic [K-1:0]        s4_row, pf_row;
  logic [M-1:0]        s4_si;
  logic [4:0]          no_vec [2][M];
  logic [KBUF-1:0]     smem [M];

  detector #(.M(M), .K(K), .P(P), .KBUF(KBUF)) dut (.*);

  always_comb for (int p = 0; p < P; p++) sb_rows[p] = smem[int'(sb_grp) * P + p][int'(sb_kt) * K +: K];

  function automatic logic [K-1:0] tile_row(int r, int kt);
    return smem[r][kt * K +: K];
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, start_cyc, pl_cycles, n_rows = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (s4_valid) begin
    automatic logic [K-1:0] q = tile_row(n_rows, 3);
    checks++;
    if (int'(s4_idx) != n_rows || s4_row != q) begin failures++; $display("FAIL row order %0d", s4_idx); end
    if (n_rows == 0) begin
      checks++;
      if (cyc - start_cyc != 3) begin failures++; $display("FAIL first SI after %0d", cyc - start_cyc); end
    end
    for (int j = 0; j < M; j++) begin
      checks++;
      if (s4_si[j] != ((tile_row(j, 3) & ~q) == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL SI row %0d entry %0d", n_rows, j);
      end
    end
    n_rows++;
  end

  initial begin
    for (int r = 0; r < M; r++)
      for (int w = 0; w < KBUF / 32; w++) smem[r][w*32 +: 32] = $urandom & $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) begin pl_start = 1; pl_bank = 0; pl_kt = 4'd3; end
    @(negedge clk) pl_start = 0;
    pl_cycles = 0;
    while (!pl_done) begin @(negedge clk); pl_cycles++; end
    checks++;
    if (pl_cycles != M / P - 1) begin failures++; $display("FAIL pre-load %0d cycles", pl_cycles + 1); end
    @(negedge clk) begin
      det_start = 1; det_bank = 0; pl_start = 1; pl_bank = 1; pl_kt = 4'd5;
      start_cyc = cyc + 1;
    end
    @(negedge clk) begin det_start = 0; pl_start = 0; end
    repeat (M + 10) @(negedge clk);
    checks++;
    if (n_rows != M) begin failures++; $display("FAIL rows seen %0d", n_rows); end
    for (int r = 0; r < M; r++) begin
      checks += 2;
      if (int'(no_vec[0][r]) != $countones(tile_row(r, 3))) failures++;
      if (int'(no_vec[1][r]) != $countones(tile_row(r, 5))) failures++;
    end
    // Prefix-row read port serves the searched bank (bank 0)
    for (int r = 0; r < M; r += 17) begin
      pf_addr = 8'(r);
      #1;
      checks++;
      if (pf_row != tile_row(r, 3)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
