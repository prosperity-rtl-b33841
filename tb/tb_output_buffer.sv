// tb_output_buffer -- writes back random signed row results over several
// k-tiles (the first one overwrites, later ones accumulate) and checks both the
// tile-local copy (Prefix read) and the accumulated output against a model.
module tb_output_buffer;
  localparam int M = 256, N = 128, OW = 24, LW = 12;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                 wb_en = 0, wb_first = 0;
  logic [7:0]           wb_row = '0, pf_addr = '0, ext_addr = '0;
  logic [N-1:0][LW-1:0] wb_data = '0, pf_data;
  logic [N-1:0][OW-1:0] ext_row;
  int                   acc [M][N];
  int                   loc [M][N];

  output_buffer #(.M(M), .N(N), .OW(OW), .LW(LW)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3; t++) begin
      for (int r = 0; r < M; r++) begin
        @(negedge clk);
        wb_en = 1; wb_first = (t == 0); wb_row = 8'(r);
        for (int i = 0; i < N; i++) begin
          automatic int v = $urandom_range(4095) - 2048;
          wb_data[i] = 12'(v);
          loc[r][i] = v;
          acc[r][i] = (t == 0) ? v : acc[r][i] + v;
        end
      end
      @(negedge clk) wb_en = 0;
      for (int r = 0; r < M; r += 3) begin
        pf_addr = 8'(r); ext_addr = 8'(M - 1 - r);
        #1;
        for (int i = 0; i < N; i++) begin
          checks += 2;
          if (int'(signed'(pf_data[i])) != loc[r][i]) failures++;
          if (int'(signed'(ext_row[i])) != acc[M-1-r][i]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
