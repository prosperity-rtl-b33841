// tb_sfu -- every SFU operation on random operands: 128-lane AND and OR, 32
// signed products, the 8-lane base-2 exponent (checked against the stated
// 2^int * (1 + frac) form) and the divider, including division by zero.
// Results must appear one cycle after the request.
module tb_sfu;
  import prosperity_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  in_valid = 0, out_valid;
  sfu_op_e               op = SFU_AND;
  logic [127:0]          a_bits = '0, b_bits = '0, out_bits;
  logic [31:0][15:0]     a = '0, b = '0;
  logic [31:0][31:0]     y;

  sfu dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint exp_ref(int x);   // x is Q8.8; result Q16.16
    int ip = x >>> 8;
    int fr = x & 255;
    longint m = longint'(256 + fr) << 8;
    if (ip >= 15) return 64'hFFFF_FFFF;
    if (ip < -24) return 0;
    return (ip >= 0) ? ((m << ip) & 64'hFFFF_FFFF) : (m >> (-ip));
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      op = sfu_op_e'(n % 5);
      for (int w = 0; w < 4; w++) begin a_bits[w*32 +: 32] = $urandom; b_bits[w*32 +: 32] = $urandom; end
      for (int i = 0; i < 32; i++) begin
        a[i] = 16'($urandom);
        b[i] = (n % 10 == 9) ? 16'h0 : 16'($urandom);
        if (op == SFU_EXP) a[i] = 16'($urandom_range(4000) - 2000);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      case (op)
        SFU_AND: begin checks++; if (out_bits != (a_bits & b_bits)) failures++; end
        SFU_OR:  begin checks++; if (out_bits != (a_bits | b_bits)) failures++; end
        SFU_MUL: for (int i = 0; i < 32; i++) begin
          checks++;
          if (int'(y[i]) != int'(signed'(a[i])) * int'(signed'(b[i]))) failures++;
        end
        SFU_EXP: for (int i = 0; i < 8; i++) begin
          checks++;
          if (longint'(y[i]) != exp_ref(int'(signed'(a[i])))) begin
            failures++; $display("FAIL exp a=%0d y=%h exp %h", signed'(a[i]), y[i], exp_ref(int'(signed'(a[i]))));
          end
        end
        SFU_DIV: begin
          checks++;
          if (b[0] == 0) begin if (y[0] != '1) failures++; end
          else if (int'(y[0]) != int'(signed'(a[0])) / int'(signed'(b[0]))) failures++;
        end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
