// tb_pruner -- checks Prefix choice and ProSparsity pattern.
// Instance A replays the paper's six-row example (1010, 1001, 1011, 0010, 1011,
// 1101) and expects the Prefix table printed there: row 0 <- row 3, row 2 <-
// row 1, row 4 <- row 2 (Exact Match, pattern 0000), row 5 <- row 1, rows 1
// and 3 without Prefix. Instance B uses random clustered rows and compares with
// a reference that applies the pruning rules directly on the row sets: among
// rows that are proper subsets, or equal rows with a smaller index, take the
// one with most ones, ties to the larger index. Also checks the two-cycle
// latency (the table write is presented one clock edge after the row enters, and
// taken at the next edge) and one-row-per-cycle throughput.
module tb_pruner;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---- instance A: paper example, M = 8, K = 4
  localparam int MA = 8, KA = 4;
  logic          a_v = 0;
  logic [2:0]    a_idx = '0, a_pf_addr, a_tw_idx, a_tw_prefix;
  logic [3:0]    a_row = '0, a_pf_row, a_tw_pattern;
  logic [7:0]    a_si = '0;
  logic [2:0]    a_no [MA];
  logic          a_tw_en;
  logic [3:0]    arows [MA] = '{4'b1010, 4'b1001, 4'b1011, 4'b0010, 4'b1011, 4'b1101, 4'b0000, 4'b1111};

  pruner #(.M(MA), .K(KA)) dut_a (
    .clk, .rst_n, .in_valid(a_v), .in_idx(a_idx), .in_row(a_row), .in_si(a_si), .no_vec(a_no),
    .pf_addr(a_pf_addr), .pf_row(a_pf_row), .tw_en(a_tw_en), .tw_idx(a_tw_idx),
    .tw_prefix(a_tw_prefix), .tw_pattern(a_tw_pattern)
  );
  assign a_pf_row = arows[a_pf_addr];

  // ---- instance B: random, M = 64, K = 16
  localparam int MB = 64, KB = 16;
  logic          b_v = 0;
  logic [5:0]    b_idx = '0, b_pf_addr, b_tw_idx, b_tw_prefix;
  logic [15:0]   b_row = '0, b_pf_row, b_tw_pattern;
  logic [63:0]   b_si = '0;
  logic [4:0]    b_no [MB];
  logic          b_tw_en;
  logic [15:0]   brows [MB];

  pruner #(.M(MB), .K(KB)) dut_b (
    .clk, .rst_n, .in_valid(b_v), .in_idx(b_idx), .in_row(b_row), .in_si(b_si), .no_vec(b_no),
    .pf_addr(b_pf_addr), .pf_row(b_pf_row), .tw_en(b_tw_en), .tw_idx(b_tw_idx),
    .tw_prefix(b_tw_prefix), .tw_pattern(b_tw_pattern)
  );
  assign b_pf_row = brows[b_pf_addr];

  function automatic int ones(logic [15:0] v);
    automatic int c = 0;
    for (int i = 0; i < 16; i++) c += int'(v[i]);
    return c;
  endfunction

  // reference: returns prefix (or -1)
  function automatic int ref_prefix(logic [15:0] r [], int q);
    automatic int best = -1, bn = 0;
    for (int j = 0; j < r.size(); j++) begin
      automatic bit subset = (r[j] & ~r[q]) == 0;
      automatic bit proper = subset && r[j] != r[q];
      automatic bit em_before = (r[j] == r[q]) && j < q;
      if ((proper || em_before) && r[j] != 0 && ones(r[j]) >= bn) begin
        best = j; bn = ones(r[j]);
      end
    end
    return best;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int a_exp_pf [MA] = '{3, 1, 1, 3, 2, 1, 6, 5};
  logic [3:0] a_exp_pat [MA] = '{4'b1000, 4'b1001, 4'b0010, 4'b0010, 4'b0000, 4'b0100, 4'b0000, 4'b0010};
  int a_seen = 0, b_seen = 0;
  logic [15:0] bq [];
  int b_first_cycle, cyc = 0;
  always @(posedge clk) cyc++;

  // checkers
  always @(negedge clk) begin
    if (a_tw_en) begin
      checks++;
      if (int'(a_tw_idx) != a_seen || int'(a_tw_prefix) != a_exp_pf[a_seen] || a_tw_pattern != a_exp_pat[a_seen]) begin
        failures++;
        $display("FAIL A row %0d prefix %0d pattern %b", a_tw_idx, a_tw_prefix, a_tw_pattern);
      end
      a_seen++;
    end
    if (b_tw_en) begin
      automatic int q = b_seen;
      automatic int rp = ref_prefix(bq, q);
      checks++;
      if (int'(b_tw_idx) != q ||
          (rp < 0 && (int'(b_tw_prefix) != q || b_tw_pattern != brows[q])) ||
          (rp >= 0 && (int'(b_tw_prefix) != rp || b_tw_pattern != (brows[q] & ~brows[rp])))) begin
        failures++;
        if (failures < 10) $display("FAIL B row %0d got %0d/%h ref %0d", q, b_tw_prefix, b_tw_pattern, rp);
      end
      if (q == 0) begin
        checks++;
        if (cyc - b_first_cycle != 1) begin failures++; $display("FAIL latency %0d", cyc - b_first_cycle); end
      end
      b_seen++;
    end
  end

  initial begin
    // A: NO and SI from the example rows
    for (int j = 0; j < MA; j++) a_no[j] = 3'(ones({12'h0, arows[j]}));
    bq = new[MB];
    for (int j = 0; j < MB; j++) begin
      automatic logic [15:0] base [6] = '{16'h0013, 16'h0300, 16'h4410, 16'h0033, 16'h8001, 16'h1111};
      brows[j] = base[$urandom_range(5)];
      if ($urandom_range(2) != 0) brows[j] |= 16'($urandom) & 16'($urandom) & 16'($urandom);
      if ($urandom_range(5) == 0) brows[j] &= 16'($urandom);
      bq[j] = brows[j];
      b_no[j] = 5'(ones(brows[j]));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < MB; q++) begin
      @(negedge clk);
      if (q == 0) b_first_cycle = cyc;
      if (q < MA) begin
        a_v = 1; a_idx = 3'(q); a_row = arows[q];
        for (int j = 0; j < MA; j++) a_si[j] = (arows[j] & ~arows[q]) == 0;
      end else a_v = 0;
      b_v = 1; b_idx = 6'(q); b_row = brows[q];
      for (int j = 0; j < MB; j++) b_si[j] = (brows[j] & ~brows[q]) == 0;
    end
    @(negedge clk) begin a_v = 0; b_v = 0; end
    repeat (4) @(negedge clk);
    checks += 2;
    if (a_seen != MA) failures++;
    if (b_seen != MB) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
