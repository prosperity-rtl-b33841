// addr_decoder -- bit-scan-forward address decoder of the Processor.
// Given the remaining ProSparsity pattern of a row it returns the index of its
// first 1 (lowest column index, which is the weight-row offset inside the tile)
// and the pattern with that bit flipped to 0, so that one weight row is
// consumed per cycle. Combinational; `found` is low for an all-zero pattern.
// The scan direction (lowest index first) is this design's choice; the sum
// does not depend on it.
module addr_decoder #(
  parameter int unsigned K = 16
) (
  input  logic [K-1:0]         pattern,
  output logic                 found,
  output logic [$clog2(K)-1:0] index,
  output logic [K-1:0]         rest
);
  always_comb begin
    found = 1'b0;
    index = '0;
    for (int i = K - 1; i >= 0; i--) begin
      if (pattern[i]) begin
        found = 1'b1;
        index = $clog2(K)'(i);
      end
    end
    rest = pattern;
    if (found) rest[index] = 1'b0;
  end
endmodule
