// tb_tcam -- fills both TCAM banks P rows per cycle, then checks searches with
// the ones of a query row masked as don't-care (every match must be a subset
// of the query), searches with arbitrary care masks, bank separation and both
// read ports. Includes the six-row example of the paper's Detector figure.
module tb_tcam;
  localparam int M = 256, K = 16, P = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                   wr_en = 0, wr_bank = 0;
  logic [$clog2(M/P)-1:0] wr_grp = '0;
  logic [P-1:0][K-1:0]    wr_rows = '0;
  logic                   srch_bank = 0, rda_bank = 0, rdb_bank = 0;
  logic [K-1:0]           q_val = '0, q_care = '0, rda_row, rdb_row;
  logic [M-1:0]           match;
  logic [7:0]             rda_addr = '0, rdb_addr = '0;
  logic [K-1:0]           rows [2][M];

  tcam #(.M(M), .K(K), .P(P)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic logic [3:0] fig [6] = '{4'b1010, 4'b1001, 4'b1011, 4'b0010, 4'b1011, 4'b1101};
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < M; r++) begin
        rows[b][r] = 16'($urandom) & 16'($urandom) & 16'($urandom);
        if (b == 0 && r < 6) rows[b][r] = {12'h0, fig[r]};
      end
    for (int b = 0; b < 2; b++)
      for (int g = 0; g < M / P; g++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_grp = 5'(g);
        for (int p = 0; p < P; p++) wr_rows[p] = rows[b][g * P + p];
      end
    @(negedge clk) wr_en = 0;
    // paper example: query Row 2 (1011) -> X0XX matches rows 0..4, not 5
    srch_bank = 0; q_val = '0; q_care = ~{12'h0, 4'b1011};
    #1;
    checks++;
    if (match[5:0] != 6'b011111) begin
      failures++; $display("FAIL figure example match=%b", match[5:0]);
    end
    for (int n = 0; n < 300; n++) begin
      automatic int b = n % 2;
      automatic logic [K-1:0] q = rows[b][$urandom_range(M-1)] | ((n % 3 == 0) ? 16'($urandom) : '0);
      srch_bank = b[0];
      if (n % 5 == 4) begin q_val = 16'($urandom); q_care = 16'($urandom); end
      else begin q_val = '0; q_care = ~q; end
      rda_bank = b[0]; rda_addr = 8'($urandom); rdb_bank = !b[0]; rdb_addr = 8'($urandom);
      #1;
      for (int e = 0; e < M; e++) begin
        automatic logic exp_m = ((rows[b][e] ^ q_val) & q_care) == '0;
        checks++;
        if (match[e] != exp_m) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d e=%0d", n, e);
        end
      end
      checks += 2;
      if (rda_row != rows[b][rda_addr]) failures++;
      if (rdb_row != rows[1-b][rdb_addr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
