// spiking_neuron_array -- array of NCELL leaky integrate-and-fire (LIF) cells.
// After the PPU has finished a GeMM block, the output rows hold the input
// currents of the layer's neurons. Rows are ordered time step major: row
// t*L + l is position l at time step t (T*L <= M). After start, the array
// sweeps the output buffer position by position and, within a position, NCELL
// output columns at a time, stepping through the T time steps. Each cell:
//   v_pre = (t == 0) ? 0 : v - (v >>> leak_shift)   (MUX with 0, then leak)
//   v_sum = v_pre + I[t]                              (adder)
//   spike = v_sum >= threshold                        (comparator)
//   v     = spike ? 0 : v_sum                         (reset to zero)
// One output-buffer row slice is consumed per cycle; the next cycle presents
// out_valid with the NCELL spikes, their row and their column group. done
// pulses with the last spike vector. The cell structure (MUX with 0, adder,
// compare, leak) and the 32 cells follow the paper; the leak as an arithmetic
// shift, reset to zero and the sweep order are this design's choice.
module spiking_neuron_array #(
  parameter int unsigned NCELL = prosperity_pkg::NCELL_DEF,
  parameter int unsigned N     = prosperity_pkg::N_DEF,
  parameter int unsigned M     = prosperity_pkg::M_DEF,
  parameter int unsigned OW    = prosperity_pkg::OW_DEF
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [$clog2(M+1)-1:0]         t_steps,
  input  logic [$clog2(M+1)-1:0]         l_len,
  input  logic signed [OW-1:0]           threshold,
  input  logic [4:0]                     leak_shift,
  output logic                           busy,
  output logic                           done,
  // output-buffer read
  output logic [$clog2(M)-1:0]           rd_addr,
  input  logic [N-1:0][OW-1:0]           rd_row,
  // spikes out
  output logic                           out_valid,
  output logic [$clog2(M)-1:0]           out_row,
  output logic [$clog2(N/NCELL)-1:0]     out_grp,
  output logic [NCELL-1:0]               out_spikes
);
  localparam int unsigned AW = $clog2(M);
  localparam int unsigned GN = N / NCELL;
  localparam int unsigned GW = (GN > 1) ? $clog2(GN) : 1;
  localparam int unsigned TW = $clog2(M+1);
  localparam int unsigned VW = OW + 2;

  logic [TW-1:0] t, l, tn, ln;
  logic [GW-1:0] g;
  logic signed [VW-1:0] v [NCELL];
  logic signed [VW-1:0] v_sum [NCELL];
  logic [NCELL-1:0]     spk;
  logic last;

  assign rd_addr = AW'(int'(t) * int'(ln) + int'(l));
  assign last    = (t == tn - 1'b1) && (int'(g) == GN - 1) && (l == ln - 1'b1);

  always_comb begin
    for (int c = 0; c < NCELL; c++) begin
      automatic logic signed [VW-1:0] v_leak = v[c] >>> leak_shift;
      automatic logic signed [VW-1:0] v_pre  = v[c] - v_leak;
      if (t == '0) v_pre = '0;
      v_sum[c] = v_pre + VW'(signed'(rd_row[int'(g) * NCELL + c]));
      spk[c]   = v_sum[c] >= VW'(threshold);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; t <= '0; l <= '0; g <= '0; tn <= '0; ln <= '0;
      out_valid <= 1'b0; out_row <= '0; out_grp <= '0; out_spikes <= '0;
      for (int c = 0; c < NCELL; c++) v[c] <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      if (start && t_steps != '0 && l_len != '0) begin
        busy <= 1'b1; t <= '0; l <= '0; g <= '0; tn <= t_steps; ln <= l_len;
      end else if (busy) begin
        for (int c = 0; c < NCELL; c++) v[c] <= spk[c] ? '0 : v_sum[c];
        out_valid  <= 1'b1;
        out_row    <= rd_addr;
        out_grp    <= $bits(out_grp)'(g);
        out_spikes <= spk;
        if (t != tn - 1'b1) t <= t + 1'b1;
        else begin
          t <= '0;
          if (int'(g) != GN - 1) g <= g + 1'b1;
          else begin
            g <= '0;
            l <= l + 1'b1;
          end
        end
        if (last) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
