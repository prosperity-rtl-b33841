// tb_spiking_neuron_array -- 32 LIF cells over N=64 output columns (two column
// groups), T=4 time steps and L=3 positions, reading an output-buffer model.
// Each emitted spike vector is compared with a LIF model run directly on the
// currents: v = (t == 0 ? 0 : v - (v >>> leak)) + I, spike when v >= threshold,
// reset to 0 after a spike. Also checks the sweep order, one vector per cycle
// and the done pulse.
module tb_spiking_neuron_array;
  localparam int NCELL = 32, N = 64, M = 16, OW = 24;
  localparam int T = 4, L = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start = 0, busy, done, out_valid;
  logic [4:0]           t_steps = '0, l_len = '0;
  logic signed [OW-1:0] threshold = '0;
  logic [4:0]           leak_shift = '0;
  logic [3:0]           rd_addr, out_row;
  logic [N-1:0][OW-1:0] rd_row;
  logic [0:0]           out_grp;
  logic [NCELL-1:0]     out_spikes;
  int                   cur [M][N];

  spiking_neuron_array #(.NCELL(NCELL), .N(N), .M(M), .OW(OW)) dut (.*);

  always_comb for (int i = 0; i < N; i++) rd_row[i] = OW'(cur[rd_addr][i]);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_sp [M][N];
  int n_vec = 0, n_spikes = 0, n_done = 0;

  always @(posedge clk) if (rst_n) n_done += int'(done);

  initial begin
    for (int r = 0; r < M; r++) for (int i = 0; i < N; i++) cur[r][i] = $urandom_range(120) - 40;
    for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) begin
      automatic int v = 0;
      for (int t = 0; t < T; t++) begin
        v = (t == 0) ? 0 : v - (v >>> 2);
        v += cur[t * L + l][i];
        exp_sp[t * L + l][i] = (v >= 100);
        if (v >= 100) v = 0;
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) begin start = 1; t_steps = 5'(T); l_len = 5'(L); threshold = 24'(100); leak_shift = 5'd2; end
    @(negedge clk) start = 0;
    @(negedge clk);
    for (int l = 0; l < L; l++) for (int g = 0; g < N / NCELL; g++) for (int t = 0; t < T; t++) begin
      #1;
      checks++;
      if (!out_valid || int'(out_row) != t * L + l || int'(out_grp) != g) begin
        failures++; $display("FAIL order l=%0d g=%0d t=%0d got row %0d grp %0d v %0d", l, g, t, out_row, out_grp, out_valid);
      end
      for (int c = 0; c < NCELL; c++) begin
        checks++;
        n_spikes += int'(out_spikes[c]);
        if (int'(out_spikes[c]) != exp_sp[t * L + l][g * NCELL + c]) begin
          failures++;
          if (failures < 10) $display("FAIL spike row %0d col %0d", t * L + l, g * NCELL + c);
        end
      end
      n_vec++;
      @(negedge clk);
    end
    checks += 3;
    if (out_valid) failures++;
    if (n_done != 1) begin failures++; $display("FAIL done count %0d", n_done); end
    if (n_spikes == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
