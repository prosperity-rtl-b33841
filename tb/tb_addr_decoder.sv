// tb_addr_decoder -- consumes random ProSparsity patterns bit by bit through the
// bit-scan-forward decoder and checks that the indices come out lowest first,
// each exactly once, and that the pattern empties.
module tb_addr_decoder;
  int checks = 0, failures = 0;
  logic [15:0] pattern, rest;
  logic        found;
  logic [3:0]  index;
  addr_decoder #(.K(16)) dut (.pattern, .found, .index, .rest);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      automatic logic [15:0] p = (n == 0) ? 16'h0 : (n == 1) ? 16'h0004 : 16'($urandom) & 16'($urandom);
      automatic int expect_i = 0;
      pattern = p;
      for (int step = 0; step < 17; step++) begin
        #1;
        while (expect_i < 16 && !p[expect_i]) expect_i++;
        checks++;
        if (expect_i == 16) begin
          if (found) begin failures++; $display("FAIL found on empty"); end
          break;
        end
        if (!found || int'(index) != expect_i || rest != (pattern & ~(16'd1 << expect_i))) begin
          failures++;
          $display("FAIL p=%h idx=%0d exp=%0d rest=%h", pattern, index, expect_i, rest);
        end
        pattern = rest;
        expect_i++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
