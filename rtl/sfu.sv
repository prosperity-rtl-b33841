// sfu -- special function unit for the non-GeMM parts of spiking transformers.
// Lane counts follow the published configuration: 128 AND/OR lanes, 32
// multipliers, 8 exponent units and 1 divider. One operation per request,
// result registered one cycle later (out_valid):
//   SFU_AND / SFU_OR : out_bits = a_bits & / | b_bits        (128 spike lanes)
//   SFU_MUL          : y[i] = a[i] * b[i], signed             (32 lanes)
//   SFU_EXP          : y[i] ~= 2^(a[i]) for Q8.8 a[i], Q16.16 result (8 lanes)
//   SFU_DIV          : y[0] = a[0] / b[0], signed; all ones when b[0] == 0
// The paper names these units without giving their arithmetic; the operand
// formats, the base-2 exponent with a linear fraction (2^f ~ 1 + f) and the
// single-cycle divider are this design's choice. Softmax and layer-norm
// sequencing is left to the control outside this unit.
module sfu #(
  parameter int unsigned NBIT = 128,
  parameter int unsigned NMUL = 32,
  parameter int unsigned NEXP = 8,
  parameter int unsigned DW   = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  prosperity_pkg::sfu_op_e        op,
  input  logic [NBIT-1:0]                a_bits,
  input  logic [NBIT-1:0]                b_bits,
  input  logic [NMUL-1:0][DW-1:0]        a,
  input  logic [NMUL-1:0][DW-1:0]        b,
  output logic                           out_valid,
  output logic [NBIT-1:0]                out_bits,
  output logic [NMUL-1:0][2*DW-1:0]      y
);
  import prosperity_pkg::*;

  logic [NMUL-1:0][2*DW-1:0] y_n;
  logic [NBIT-1:0]           bits_n;

  // 2^x, x in Q8.8 signed, result Q16.16 saturated
  function automatic logic [2*DW-1:0] exp2_q(input logic [DW-1:0] x);
    logic signed [DW-1:0] xs;
    logic signed [DW-9:0] ip;
    logic [7:0]           fr;
    logic [2*DW+15:0]     m;
    xs = signed'(x);
    ip = xs[DW-1:8];
    fr = xs[7:0];
    m  = (2*DW+16)'({1'b1, fr}) << 8;        // (1 + f) in Q.16
    if (ip >= 15) return '1;
    if (ip < -24) return '0;
    if (ip >= 0) return (2*DW)'(m << ip);
    else         return (2*DW)'(m >> (-ip));
  endfunction

  always_comb begin
    bits_n = '0;
    y_n    = '0;
    case (op)
      SFU_AND: bits_n = a_bits & b_bits;
      SFU_OR:  bits_n = a_bits | b_bits;
      SFU_MUL: for (int i = 0; i < NMUL; i++)
                 y_n[i] = (2*DW)'(signed'(a[i]) * signed'(b[i]));
      SFU_EXP: for (int i = 0; i < NEXP; i++) y_n[i] = exp2_q(a[i]);
      SFU_DIV: y_n[0] = (b[0] == '0) ? '1 : (2*DW)'(signed'(a[0]) / signed'(b[0]));
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_bits <= '0; y <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_bits <= bits_n;
        y        <= y_n;
      end
    end
  end
endmodule
