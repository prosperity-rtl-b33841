// popcount -- number of ones (NO) in one k-bit spike row.
// Purely combinational. The Detector holds P of these (8 in the published
// configuration) to produce the preliminary temporal information: a row's NO is
// the sort key that orders Prefix rows before their Suffix rows.
module popcount #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0]         bits,
  output logic [$clog2(W+1)-1:0] count
);
  always_comb begin
    count = '0;
    for (int i = 0; i < W; i++) count += {{($clog2(W+1)-1){1'b0}}, bits[i]};
  end
endmodule
