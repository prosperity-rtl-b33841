// pe_array -- the Processor's array of N adder PEs.
// Each PE holds a partial-sum register. In one cycle a PE can load a starting
// value (the Prefix row result, step 9, or zero) and add a weight (step 11);
// on later cycles it adds one weight to its own partial sum. Weights are WW-bit
// signed and the partial sum is LW-bit signed, wide enough for K weights.
//   load=1: psum <= base + (add ? w : 0)
//   load=0: psum <= psum + (add ? w : 0)
// One weight row (N weights) is consumed per cycle.
module pe_array #(
  parameter int unsigned N  = 128,
  parameter int unsigned WW = 8,
  parameter int unsigned LW = 12
) (
  input  logic                  clk,
  input  logic                  load,
  input  logic                  add,
  input  logic [N-1:0][LW-1:0]  base,
  input  logic [N-1:0][WW-1:0]  w,
  output logic [N-1:0][LW-1:0]  psum
);
  for (genvar i = 0; i < N; i++) begin : g_pe
    logic [LW-1:0] start, addend;
    assign start  = load ? base[i] : psum[i];
    assign addend = add ? LW'(signed'(w[i])) : '0;
    always_ff @(posedge clk) psum[i] <= start + addend;
  end
endmodule
