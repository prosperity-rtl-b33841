// ps_table -- double-buffered product sparsity table (spatial information).
// Two banks of M entries; entry r holds the Prefix index of row r and its
// ProSparsity pattern (8 + 16 bits by default, so 2 x 256 x 24 bits = 1.5KB,
// the published size). The Pruner fills one bank while the Processor reads the
// other (inter-phase pipeline). Write is synchronous, read combinational.
// An entry whose Prefix equals its own index has no Prefix.
module ps_table #(
  parameter int unsigned M = 256,
  parameter int unsigned K = 16
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_bank,
  input  logic [$clog2(M)-1:0]    wr_idx,
  input  logic [$clog2(M)-1:0]    wr_prefix,
  input  logic [K-1:0]            wr_pattern,
  input  logic                    rd_bank,
  input  logic [$clog2(M)-1:0]    rd_idx,
  output logic [$clog2(M)-1:0]    rd_prefix,
  output logic [K-1:0]            rd_pattern
);
  typedef struct packed {
    logic [$clog2(M)-1:0] prefix;
    logic [K-1:0]         pattern;
  } entry_t;

  entry_t mem [2][M];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_bank][wr_idx] <= '{prefix: wr_prefix, pattern: wr_pattern};

  assign rd_prefix  = mem[rd_bank][rd_idx].prefix;
  assign rd_pattern = mem[rd_bank][rd_idx].pattern;
endmodule
