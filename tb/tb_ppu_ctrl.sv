// tb_ppu_ctrl -- the tile sequencer against phase models that answer each
// launch after a random delay. For num_kt = 5 it checks that slot s launches
// the pre-load of tile s (bank s%2), the ProSparsity phase of tile s-1 (bank
// (s-1)%2) and the computation of tile s-2 (bank s%2, first flag on tile 0),
// that no slot starts before every phase of the previous one is done, the
// number of launches of each phase and the single done pulse. A second run of
// 3 k-tiles sets accumulate, after which no computation phase may carry the
// first (overwriting) flag.
module tb_ppu_ctrl;
  localparam int NKT = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start = 0, busy, done;
  logic [4:0] num_kt = '0;
  logic       accumulate = 0;
  logic       pl_start, pl_bank, pl_done = 0, det_start, det_bank, det_done = 0, sort_done = 0;
  logic       cmp_start, cmp_bank, cmp_first, cmp_done = 0;
  logic [3:0] pl_kt, cmp_kt;

  ppu_ctrl #(.NKT(NKT)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pl_t [$], det_t [$], srt_t [$], cmp_t [$];   // pending done times
  bit acc_run = 0;
  int cyc = 0, n_pl = 0, n_det = 0, n_cmp = 0, n_done = 0, next_pl = 0, next_det = 0, next_cmp = 0;

  always @(negedge clk) begin
    cyc++;
    pl_done = 0; det_done = 0; sort_done = 0; cmp_done = 0;
    if (pl_t.size()  > 0 && pl_t[0]  == cyc) begin pl_done = 1;   void'(pl_t.pop_front());  end
    if (det_t.size() > 0 && det_t[0] == cyc) begin det_done = 1;  void'(det_t.pop_front()); end
    if (srt_t.size() > 0 && srt_t[0] == cyc) begin sort_done = 1; void'(srt_t.pop_front()); end
    if (cmp_t.size() > 0 && cmp_t[0] == cyc) begin cmp_done = 1;  void'(cmp_t.pop_front()); end
  end

  always @(posedge clk) if (rst_n) begin
    if (pl_start || det_start || cmp_start) begin
      checks++;
      if (pl_t.size() + det_t.size() + srt_t.size() + cmp_t.size() != 0) begin
        failures++; $display("FAIL launch with a phase still running");
      end
    end
    if (pl_start) begin
      checks++;
      if (int'(pl_kt) != next_pl || pl_bank != next_pl[0]) begin failures++; $display("FAIL pl kt %0d", pl_kt); end
      next_pl++; n_pl++;
      pl_t.push_back(cyc + 1 + $urandom_range(20));
    end
    if (det_start) begin
      checks++;
      if (det_bank != next_det[0] || next_det >= next_pl) begin failures++; $display("FAIL det bank"); end
      next_det++; n_det++;
      det_t.push_back(cyc + 1 + $urandom_range(30));
      srt_t.push_back(cyc + 1 + $urandom_range(10));
    end
    if (cmp_start) begin
      checks++;
      if (int'(cmp_kt) != next_cmp || cmp_bank != next_cmp[0] || cmp_first != (next_cmp == 0 && !acc_run) ||
          next_cmp >= next_det) begin
        failures++; $display("FAIL cmp kt %0d", cmp_kt);
      end
      next_cmp++; n_cmp++;
      cmp_t.push_back(cyc + 1 + $urandom_range(40));
    end
    if (done) n_done++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) begin start = 1; num_kt = 5'd5; end
    @(negedge clk) start = 0;
    wait (done);
    repeat (3) @(negedge clk);
    checks += 5;
    if (n_pl != 5) failures++;
    if (n_det != 5) failures++;
    if (n_cmp != 5) failures++;
    if (n_done != 1) failures++;
    if (busy) failures++;
    $display("launches pl=%0d det=%0d cmp=%0d", n_pl, n_det, n_cmp);
    // a second run of 3 k-tiles with accumulate set: no tile overwrites
    next_pl = 0; next_det = 0; next_cmp = 0; acc_run = 1;
    @(negedge clk) begin start = 1; num_kt = 5'd3; accumulate = 1; end
    @(negedge clk) begin start = 0; accumulate = 0; end
    wait (done);
    repeat (3) @(negedge clk);
    checks += 2;
    if (n_cmp != 8) failures++;
    if (n_done != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
