// pruner -- ProSparsity Pruner (steps 5 and 6).
// Step 5 (prune): from the Subset Index vector of a query row q, a proper-subset
// filter drops every candidate j with the same number of ones as q and j >= q
// (an Exact Match with a larger index, and q itself). An ArgMax unit then picks,
// among the remaining candidates, the one with the most ones; ties go to the
// larger index. This follows the paper's pruning rules: keep the Prefix with
// the largest common sub-combination, and of several such, the largest index.
// A winner with zero ones (an empty row) is no Prefix.
// Step 6 (sparsify): the ProSparsity pattern is q XOR prefix-row, i.e. the
// spikes of q not covered by the Prefix. Without a Prefix the pattern is q.
// One row enters per cycle; its table write (tw_*) comes two cycles later.
// A row without Prefix is written with prefix = its own index: this encoding,
// which keeps a table entry at exactly 8 + 16 bits, is this design's choice.
module pruner #(
  parameter int unsigned M = 256,
  parameter int unsigned K = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [$clog2(M)-1:0]     in_idx,
  input  logic [K-1:0]             in_row,
  input  logic [M-1:0]             in_si,
  input  logic [$clog2(K+1)-1:0]   no_vec [M],
  // Prefix row fetch
  output logic [$clog2(M)-1:0]     pf_addr,
  input  logic [K-1:0]             pf_row,
  // product sparsity table write
  output logic                     tw_en,
  output logic [$clog2(M)-1:0]     tw_idx,
  output logic [$clog2(M)-1:0]     tw_prefix,
  output logic [K-1:0]             tw_pattern
);
  localparam int unsigned AW = $clog2(M);
  localparam int unsigned CW = $clog2(K+1);

  // step 5: proper-subset filter + ArgMax over {NO, index}
  logic [M-1:0]  cand;
  logic [CW-1:0] best_no;
  logic [AW-1:0] best_idx;

  always_comb begin
    for (int j = 0; j < M; j++)
      cand[j] = in_si[j] && !((no_vec[j] == no_vec[in_idx]) && (AW'(j) >= in_idx));
    best_no  = '0;
    best_idx = '0;
    for (int j = 0; j < M; j++)
      if (cand[j] && (no_vec[j] >= best_no) && (no_vec[j] != '0)) begin
        best_no  = no_vec[j];
        best_idx = AW'(j);
      end
  end

  logic          s5_v, s5_has;
  logic [AW-1:0] s5_idx, s5_pf;
  logic [K-1:0]  s5_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s5_v <= 1'b0; s5_has <= 1'b0; s5_idx <= '0; s5_pf <= '0; s5_row <= '0;
    end else begin
      s5_v   <= in_valid;
      s5_has <= best_no != '0;
      s5_idx <= in_idx;
      s5_pf  <= best_idx;
      s5_row <= in_row;
    end
  end

  // step 6: XOR with the Prefix row
  assign pf_addr    = s5_pf;
  assign tw_en      = s5_v;
  assign tw_idx     = s5_idx;
  assign tw_prefix  = s5_has ? s5_pf : s5_idx;
  assign tw_pattern = s5_has ? (s5_row ^ pf_row) : s5_row;
endmodule
