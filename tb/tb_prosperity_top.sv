// tb_prosperity_top -- end-to-end run of the whole accelerator at its default
// size (m=256, n=128, k=16, two buffer banks of 128 spike columns, 32 LIF
// cells).
// 1. Computes S x W for a 256 x 256 spike matrix (16 k-tiles, clustered random
//    rows with planted repeats) and 256 x 128 int8 weights, which takes two
//    buffer blocks: block A (columns 0-127) is loaded into bank 0 and run;
//    while it runs, block B (columns 128-255) is loaded into bank 1 (double
//    buffering: every write of B must land while the PPU is busy); B is then
//    run with accumulate set. All 256 x 128 outputs are compared with S x W.
// 2. Checks the cycle budget: every ProSparsity phase takes m + 4 cycles and
//    every computation phase max(1, ones) cycles per row plus two, using the
//    reference Prefix patterns; each ProSparsity phase after the first runs
//    while the previous tile computes.
// 3. Runs the spiking neuron array on the result (T = 4 time steps of L = 64
//    positions) and compares every spike with a LIF model.
// 4. Issues one SFU request of each kind.
// 5. Runs the first two k-tiles of bank 0 again with accumulate set and checks that the
//    outputs now hold S x W plus those two tiles' products.
// Counts, and requires at least one of each: Exact-Match rows, Partial-Match
// rows, rows without Prefix, Prefix bypasses, Processor stalls, overlapped
// phases, spikes, each SFU operation, and block-B writes hidden under a run.
module tb_prosperity_top;
  import prosperity_pkg::*;
  import prosparsity_ref_pkg::*;
  localparam int M = 256, K = 16, N = 128, KBUF = 128, NKT = 16, NKB = 8, OW = 24;
  localparam int T = 4, L = 64, TH = 300;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start = 0, busy, done;
  logic [3:0]           num_kt = '0;
  logic                 accumulate = 0, buf_bank = 0;
  logic                 sb_wr_en = 0, wt_wr_en = 0, sb_wr_bank = 0, wt_wr_bank = 0;
  logic [7:0]           sb_wr_row = '0, ext_addr = '0;
  logic [6:0]           wt_wr_addr = '0;
  logic [KBUF-1:0]      sb_wr_data = '0;
  logic [N-1:0][7:0]    wt_wr_data = '0;
  logic [N-1:0][OW-1:0] ext_row;
  logic                 nrn_start = 0, nrn_busy, nrn_done, nrn_valid;
  logic [8:0]           nrn_t_steps = '0, nrn_l_len = '0;
  logic signed [OW-1:0] nrn_threshold = '0;
  logic [4:0]           nrn_leak_shift = '0;
  logic [7:0]           nrn_row;
  logic [1:0]           nrn_grp;
  logic [31:0]          nrn_spikes;
  logic                 sfu_valid = 0, sfu_out_valid;
  sfu_op_e              sfu_op = SFU_AND;
  logic [127:0]         sfu_a_bits = '0, sfu_b_bits = '0, sfu_out_bits;
  logic [31:0][15:0]    sfu_a = '0, sfu_b = '0;
  logic [31:0][31:0]    sfu_y;
  logic                 ev_em, ev_pm, ev_noprefix, ev_bypass, ev_stall, ev_add;

  prosperity_top dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  row_t spk [NKT][];
  int   wts [2 * KBUF][N];
  int   ref_out [M][N];
  int   exp_cmp [NKT];
  int   cyc = 0, n_em = 0, n_pm = 0, n_np = 0, n_bp = 0, n_st = 0, n_add = 0;
  int   det_t0, cmp_t0, tile_c = 0, tile_d = 0, overlap = 0, n_sfu_ops = 0, n_spk = 0, n_bg_wr = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    n_em += int'(ev_em); n_pm += int'(ev_pm); n_np += int'(ev_noprefix);
    n_bp += int'(ev_bypass); n_st += int'(ev_stall); n_add += int'(ev_add);
    if (dut.u_ppu.det_start) det_t0 = cyc;
    if (dut.u_ppu.det_done) begin
      checks++;
      if (cyc - det_t0 != M + 4) begin failures++; $display("FAIL ProSparsity phase %0d cycles", cyc - det_t0); end
      if (dut.u_ppu.u_proc.e_v) overlap++;
      tile_d++;
    end
    if (dut.u_ppu.cmp_start) cmp_t0 = cyc;
    if (dut.u_ppu.cmp_done) begin
      checks++;
      if (cyc - cmp_t0 != exp_cmp[tile_c % NKT]) begin
        failures++; $display("FAIL tile %0d computation %0d cycles, expected %0d", tile_c, cyc - cmp_t0, exp_cmp[tile_c]);
      end
      tile_c++;
    end
  end

  // writes spike columns b*128.. and weight rows b*128.. into buffer bank b
  task automatic load_block(int b);
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      sb_wr_en = 1; sb_wr_bank = 1'(b); sb_wr_row = 8'(r);
      for (int t = 0; t < NKB; t++) sb_wr_data[t * K +: K] = K'(spk[b * NKB + t][r]);
      if (busy) n_bg_wr++;
    end
    for (int a = 0; a < KBUF; a++) begin
      @(negedge clk);
      sb_wr_en = 0; wt_wr_en = 1; wt_wr_bank = 1'(b); wt_wr_addr = 7'(a);
      for (int i = 0; i < N; i++) wt_wr_data[i] = 8'(wts[b * KBUF + a][i]);
      if (busy) n_bg_wr++;
    end
    @(negedge clk) wt_wr_en = 0;
  endtask

  initial begin
    int dense_ops = 0, bit_ops = 0;
    for (int t = 0; t < NKT; t++) begin
      spk[t] = new[M];
      for (int r = 0; r < M; r++) spk[t][r] = rand_row(K, t % 2);
      for (int r = 0; r < 16; r++) spk[t][200 + r] = spk[t][r * 3];   // repeated rows
      exp_cmp[t] = 2;
      for (int r = 0; r < M; r++) begin
        automatic int p = ref_prefix(spk[t], r);
        automatic int c = ones((p < 0) ? spk[t][r] : (spk[t][r] & ~spk[t][p]));
        exp_cmp[t] += (c > 0) ? c : 1;
        bit_ops += ones(spk[t][r]);
      end
    end
    for (int a = 0; a < 2 * KBUF; a++) for (int i = 0; i < N; i++) wts[a][i] = $urandom_range(255) - 128;
    for (int r = 0; r < M; r++) for (int i = 0; i < N; i++) begin
      ref_out[r][i] = 0;
      for (int t = 0; t < NKT; t++) for (int c = 0; c < K; c++)
        if (spk[t][r][c]) ref_out[r][i] += wts[t * K + c][i];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. block A into bank 0, run it while block B goes into bank 1, run B
    load_block(0);
    @(negedge clk) begin start = 1; num_kt = 4'(NKB); buf_bank = 0; accumulate = 0; end
    @(negedge clk) start = 0;
    load_block(1);
    wait (done);
    @(negedge clk) begin start = 1; num_kt = 4'(NKB); buf_bank = 1; accumulate = 1; end
    @(negedge clk) begin start = 0; accumulate = 0; end
    wait (done);
    @(negedge clk);
    for (int r = 0; r < M; r++) begin
      ext_addr = 8'(r);
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(signed'(ext_row[i])) != ref_out[r][i]) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d][%0d]=%0d exp %0d", r, i, signed'(ext_row[i]), ref_out[r][i]);
        end
      end
    end
    $display("block B rows written while the PPU ran: %0d of %0d", n_bg_wr, M + KBUF);
    $display("events em=%0d pm=%0d noprefix=%0d bypass=%0d stall=%0d overlap=%0d", n_em, n_pm, n_np, n_bp, n_st, overlap);
    $display("accumulations: bit-sparse %0d, product-sparse %0d; GeMM cycles %0d", bit_ops, n_add, cyc);
    // 3. spiking neuron array
    @(negedge clk) begin
      nrn_start = 1; nrn_t_steps = 9'(T); nrn_l_len = 9'(L); nrn_threshold = 24'(TH); nrn_leak_shift = 5'd1;
    end
    @(negedge clk) nrn_start = 0;
    for (int l = 0; l < L; l++) for (int g = 0; g < N / 32; g++) begin
      int v [32];
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        checks++;
        if (!nrn_valid || int'(nrn_row) != t * L + l || int'(nrn_grp) != g) begin
          failures++; if (failures < 10) $display("FAIL neuron order");
        end
        for (int c = 0; c < 32; c++) begin
          automatic int x = ref_out[t * L + l][g * 32 + c];
          automatic bit s;
          v[c] = (t == 0) ? x : v[c] - (v[c] >>> 1) + x;
          s = v[c] >= TH;
          if (s) v[c] = 0;
          checks++;
          n_spk += int'(s);
          if (nrn_spikes[c] != s) begin failures++; if (failures < 10) $display("FAIL spike"); end
        end
      end
    end
    // 4. SFU
    for (int o = 0; o < 5; o++) begin
      @(negedge clk);
      sfu_valid = 1; sfu_op = sfu_op_e'(o);
      sfu_a_bits = {4{$urandom}}; sfu_b_bits = {4{$urandom}};
      for (int i = 0; i < 32; i++) begin sfu_a[i] = 16'($urandom_range(600)); sfu_b[i] = 16'($urandom_range(200) + 1); end
      @(negedge clk);
      sfu_valid = 0;
      checks++;
      case (sfu_op)
        SFU_AND: if (sfu_out_bits == (sfu_a_bits & sfu_b_bits)) n_sfu_ops++; else failures++;
        SFU_OR:  if (sfu_out_bits == (sfu_a_bits | sfu_b_bits)) n_sfu_ops++; else failures++;
        SFU_MUL: if (int'(sfu_y[7]) == int'(sfu_a[7]) * int'(sfu_b[7])) n_sfu_ops++; else failures++;
        SFU_EXP: if (sfu_y[0] == 32'((32'(256 + int'(sfu_a[0][7:0])) << 8) << sfu_a[0][15:8])) n_sfu_ops++; else failures++;
        SFU_DIV: if (int'(sfu_y[0]) == int'(sfu_a[0]) / int'(sfu_b[0])) n_sfu_ops++; else failures++;
        default: failures++;
      endcase
    end
    $display("spikes=%0d sfu_ops=%0d", n_spk, n_sfu_ops);
    // 5. a second run with accumulate set adds the first two k-tiles again
    @(negedge clk) begin start = 1; num_kt = 4'd2; buf_bank = 0; accumulate = 1; end
    @(negedge clk) begin start = 0; accumulate = 0; end
    wait (done);
    @(negedge clk);
    for (int r = 0; r < M; r++) begin
      ext_addr = 8'(r);
      #1;
      for (int i = 0; i < N; i++) begin
        automatic int e = ref_out[r][i];
        for (int t = 0; t < 2; t++) for (int c = 0; c < K; c++) if (spk[t][r][c]) e += wts[t * K + c][i];
        checks++;
        if (int'(signed'(ext_row[i])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL accumulated out[%0d][%0d]=%0d exp %0d", r, i, signed'(ext_row[i]), e);
        end
      end
    end
    checks += 10;
    if (n_bg_wr != M + KBUF) begin failures++; $display("FAIL block B load not hidden (%0d)", n_bg_wr); end
    if (tile_c != NKT + 2 || tile_d != NKT + 2) begin failures++; $display("FAIL tiles %0d/%0d", tile_c, tile_d); end
    if (n_em == 0) begin failures++; $display("FAIL no Exact Match"); end
    if (n_pm == 0) begin failures++; $display("FAIL no Partial Match"); end
    if (n_np == 0) begin failures++; $display("FAIL no row without Prefix"); end
    if (n_bp == 0) begin failures++; $display("FAIL no bypass"); end
    if (n_st == 0) begin failures++; $display("FAIL no stall"); end
    if (overlap < NKT - 2) begin failures++; $display("FAIL phases did not overlap (%0d)", overlap); end
    if (n_spk == 0) begin failures++; $display("FAIL no spikes"); end
    if (n_sfu_ops != 5) begin failures++; $display("FAIL SFU ops %0d", n_sfu_ops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
