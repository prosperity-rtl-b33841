// tb_popcount -- checks the popcount against a bit-by-bit count of random and
// corner-case 16-bit rows.
module tb_popcount;
  int checks = 0, failures = 0;
  logic [15:0] bits;
  logic [4:0]  count;
  popcount #(.W(16)) dut (.bits, .count);

  function automatic int ref_count(logic [15:0] v);
    automatic int c = 0;
    for (int i = 0; i < 16; i++) if (v[i]) c++;
    return c;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic logic [15:0] vec [4] = '{16'h0000, 16'hFFFF, 16'h8001, 16'h0B00};
    for (int i = 0; i < 304; i++) begin
      bits = (i < 4) ? vec[i] : 16'($urandom);
      #1;
      checks++;
      if (int'(count) != ref_count(bits)) begin
        failures++;
        $display("FAIL bits=%h count=%0d", bits, count);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
