// stable_sorter -- parallel bitonic sorter producing the temporal information.
// On start it loads the key {NO[i], i} of every row i (number of ones, then row
// index) and runs the bitonic network one stage per cycle: log2(M)*(log2(M)+1)/2
// stages (36 for M = 256), each with M/2 compare-exchange units working in
// parallel. Because the row index is the low part of the key, all keys differ
// and the result is the stable order by NO: rows with fewer ones first, rows
// with equal NO in index order. That order puts every Prefix before its Suffix
// (a Partial-Match Prefix has fewer ones, an Exact-Match Prefix a smaller
// index). done pulses in the cycle after the last stage; sorted_idx then holds
// the execution order. Stage partners differ in one index bit b, so each
// element picks its partner through an 8-way (log2 M) multiplexer.
// M must be a power of two. Sorting by a bitonic network follows the paper;
// the one-stage-per-cycle schedule is this design's choice.
module stable_sorter #(
  parameter int unsigned M = 256,
  parameter int unsigned K = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(K+1)-1:0]   no_in [M],
  output logic                     busy,
  output logic                     done,
  output logic [$clog2(M)-1:0]     sorted_idx [M]
);
  localparam int unsigned AW = $clog2(M);
  localparam int unsigned CW = $clog2(K+1);
  localparam int unsigned LW = (AW < 2) ? 1 : $clog2(AW + 1);

  typedef struct packed {
    logic [CW-1:0] no;
    logic [AW-1:0] idx;
  } key_t;

  key_t          key [M];
  key_t          nxt [M];
  logic [LW-1:0] blk;  // block size = 2^blk, 1..AW
  logic [LW-1:0] dst;  // partner distance = 2^dst, blk-1 downto 0

  always_comb begin
    for (int i = 0; i < M; i++) begin
      automatic int   pi  = (i ^ (1 << dst)) % M;
      automatic logic asc = (blk == LW'(AW)) ? 1'b1 : (((i >> blk) & 1) == 0);
      automatic logic lo  = ((i >> dst) & 1) == 0;  // i is the lower element of its pair
      automatic key_t a   = key[i];
      automatic key_t b   = key[pi];
      // lower element keeps the min when ascending, the max when descending
      if (lo == asc) nxt[i] = (a < b) ? a : b;
      else           nxt[i] = (a < b) ? b : a;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; blk <= LW'(1); dst <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; blk <= LW'(1); dst <= '0;
      end else if (busy) begin
        if (dst == '0) begin
          if (blk == LW'(AW)) begin
            busy <= 1'b0; done <= 1'b1;
          end else begin
            blk <= blk + 1'b1;
            dst <= blk;
          end
        end else begin
          dst <= dst - 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start)
      for (int i = 0; i < M; i++) key[i] <= '{no: no_in[i], idx: AW'(i)};
    else if (busy)
      key <= nxt;
  end

  always_comb for (int i = 0; i < M; i++) sorted_idx[i] = key[i].idx;
endmodule
