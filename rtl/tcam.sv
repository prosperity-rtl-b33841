// tcam -- double-buffered ternary CAM of the Detector.
// Two banks of M entries x K bits. While one bank is searched, the other is
// pre-loaded with the next spike tile, P rows per cycle (write port). A search
// presents a query value and a care mask; entry e matches when it equals the
// value in every cared-for bit, so a bit with care=0 is "don't care" (X). All
// M entries are compared in the same cycle and the match vector is returned
// combinationally. Two combinational read ports return stored rows: one feeds
// the Detector's row read (step 2), the other the Pruner's Prefix-row read for
// the XOR (step 6). The double-banked organisation follows the paper; the
// P-rows-per-cycle write and the two read ports are this design's choice.
module tcam #(
  parameter int unsigned M = 256,
  parameter int unsigned K = 16,
  parameter int unsigned P = 8
) (
  input  logic                       clk,
  // pre-load (write) port
  input  logic                       wr_en,
  input  logic                       wr_bank,
  input  logic [$clog2(M/P)-1:0]     wr_grp,
  input  logic [P-1:0][K-1:0]        wr_rows,
  // search port
  input  logic                       srch_bank,
  input  logic [K-1:0]               q_val,
  input  logic [K-1:0]               q_care,
  output logic [M-1:0]               match,
  // read ports
  input  logic                       rda_bank,
  input  logic [$clog2(M)-1:0]       rda_addr,
  output logic [K-1:0]               rda_row,
  input  logic                       rdb_bank,
  input  logic [$clog2(M)-1:0]       rdb_addr,
  output logic [K-1:0]               rdb_row
);
  logic [K-1:0] mem [2][M];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int p = 0; p < P; p++) mem[wr_bank][int'(wr_grp) * P + p] <= wr_rows[p];
  end

  always_comb begin
    for (int e = 0; e < M; e++)
      match[e] = ((mem[srch_bank][e] ^ q_val) & q_care) == '0;
  end

  assign rda_row = mem[rda_bank][rda_addr];
  assign rdb_row = mem[rdb_bank][rdb_addr];
endmodule
