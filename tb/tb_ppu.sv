// tb_ppu -- the PPU at reduced size (M=64, K=16, N=16, four k-tiles) from
// buffer load to result, loading and computing from buffer bank 1. Checks every output against S x W, the ProSparsity
// phase length (M + 4 cycles from launch to the last table write, as the
// paper states), each tile's computation length against the reference
// patterns (max(1, ones) cycles per row plus two), that every tile's
// ProSparsity phase overlaps the previous tile's computation, and counts the
// mechanisms: Exact Match, Partial Match, no Prefix, Prefix bypass, stall.
module tb_ppu;
  import prosparsity_ref_pkg::*;
  localparam int M = 64, K = 16, N = 16, KBUF = 64, WW = 8, OW = 24, LW = 12, P = 8, NKT = KBUF / K;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start = 0, busy, done;
  logic [2:0]           num_kt = '0;
  logic                 accumulate = 0, buf_bank = 1;
  logic                 sb_wr_en = 0, wt_wr_en = 0, sb_wr_bank = 1, wt_wr_bank = 1;
  logic [5:0]           sb_wr_row = '0, ext_addr = '0;
  logic [KBUF-1:0]      sb_wr_data = '0;
  logic [5:0]           wt_wr_addr = '0;
  logic [N-1:0][WW-1:0] wt_wr_data = '0;
  logic [N-1:0][OW-1:0] ext_row;
  logic                 ev_em, ev_pm, ev_noprefix, ev_bypass, ev_stall, ev_add;

  ppu #(.M(M), .K(K), .N(N), .KBUF(KBUF), .WW(WW), .OW(OW), .LW(LW), .P(P)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  row_t spk [NKT][];
  int   wts [KBUF][N];
  int   exp_cmp [NKT];
  int   cyc = 0, n_em = 0, n_pm = 0, n_np = 0, n_bp = 0, n_st = 0, n_add = 0;
  int   det_t0, cmp_t0, tile_c = 0, tile_d = 0, overlap = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_em += int'(ev_em); n_pm += int'(ev_pm); n_np += int'(ev_noprefix);
    n_bp += int'(ev_bypass); n_st += int'(ev_stall); n_add += int'(ev_add);
    if (dut.det_start) det_t0 = cyc;
    if (dut.det_done) begin
      checks++;
      if (cyc - det_t0 != M + 4) begin failures++; $display("FAIL ProSparsity phase %0d cycles", cyc - det_t0); end
      if (dut.u_proc.e_v) overlap++;
      tile_d++;
    end
    if (dut.cmp_start) cmp_t0 = cyc;
    if (dut.cmp_done) begin
      checks++;
      if (cyc - cmp_t0 != exp_cmp[tile_c]) begin
        failures++; $display("FAIL tile %0d computation %0d cycles, expected %0d", tile_c, cyc - cmp_t0, exp_cmp[tile_c]);
      end
      tile_c++;
    end
  end

  initial begin
    for (int t = 0; t < NKT; t++) begin
      spk[t] = new[M];
      for (int r = 0; r < M; r++) spk[t][r] = rand_row(K, t % 2);
      spk[t][7] = spk[t][40];
      exp_cmp[t] = 2;
      for (int r = 0; r < M; r++) begin
        automatic int p = ref_prefix(spk[t], r);
        automatic int c = ones((p < 0) ? spk[t][r] : (spk[t][r] & ~spk[t][p]));
        exp_cmp[t] += (c > 0) ? c : 1;
      end
    end
    for (int a = 0; a < KBUF; a++) for (int i = 0; i < N; i++) wts[a][i] = $urandom_range(255) - 128;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      sb_wr_en = 1; sb_wr_row = 6'(r);
      for (int t = 0; t < NKT; t++) sb_wr_data[t * K +: K] = K'(spk[t][r]);
    end
    for (int a = 0; a < KBUF; a++) begin
      @(negedge clk);
      sb_wr_en = 0; wt_wr_en = 1; wt_wr_addr = 6'(a);
      for (int i = 0; i < N; i++) wt_wr_data[i] = 8'(wts[a][i]);
    end
    @(negedge clk) begin wt_wr_en = 0; start = 1; num_kt = 3'(NKT); end
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
    for (int r = 0; r < M; r++) begin
      ext_addr = 6'(r);
      #1;
      for (int i = 0; i < N; i++) begin
        automatic int e = 0;
        for (int t = 0; t < NKT; t++) for (int c = 0; c < K; c++)
          if (spk[t][r][c]) e += wts[t * K + c][i];
        checks++;
        if (int'(signed'(ext_row[i])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d][%0d]=%0d exp %0d", r, i, signed'(ext_row[i]), e);
        end
      end
    end
    $display("events em=%0d pm=%0d noprefix=%0d bypass=%0d stall=%0d adds=%0d overlap=%0d cycles=%0d",
             n_em, n_pm, n_np, n_bp, n_st, n_add, overlap, cyc);
    checks += 8;
    if (tile_c != NKT || tile_d != NKT) begin failures++; $display("FAIL tiles %0d/%0d", tile_c, tile_d); end
    if (n_em == 0) begin failures++; $display("FAIL no Exact Match"); end
    if (n_pm == 0) begin failures++; $display("FAIL no Partial Match"); end
    if (n_np == 0) begin failures++; $display("FAIL no row without Prefix"); end
    if (n_bp == 0) begin failures++; $display("FAIL no bypass"); end
    if (n_st == 0) begin failures++; $display("FAIL no stall"); end
    if (overlap < NKT - 1) begin failures++; $display("FAIL phases did not overlap (%0d)", overlap); end
    if (n_em + n_pm + n_np != NKT * M) begin failures++; $display("FAIL row count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
