// tb_pe_array -- drives load / accumulate sequences with random int8 weights and
// checks every PE's partial sum against a running model.
module tb_pe_array;
  localparam int N = 128, WW = 8, LW = 12;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                 load = 0, add = 0;
  logic [N-1:0][LW-1:0] base = '0, psum;
  logic [N-1:0][WW-1:0] w = '0;
  int                   model [N];

  pe_array #(.N(N), .WW(WW), .LW(LW)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 300; c++) begin
      @(negedge clk);
      load = (c % 7 == 0);
      add  = (c % 5 != 3);
      for (int i = 0; i < N; i++) begin
        automatic int b = $urandom_range(200) - 100;
        automatic int x = $urandom_range(255) - 128;
        base[i] = 12'(b);
        w[i]    = 8'(x);
        if (load) model[i] = b; 
        if (add) model[i] += x;
      end
      @(posedge clk) #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(signed'(psum[i])) != ((model[i] + 2048) % 4096 + 4096) % 4096 - 2048) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d i=%0d psum=%0d model=%0d", c, i, signed'(psum[i]), model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
