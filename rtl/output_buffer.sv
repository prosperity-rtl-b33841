// output_buffer -- on-chip output buffer.
// Two arrays of M rows x N values:
//   * local: the tile-local result of each row (LW bits signed), written when
//     the Processor finishes a row and read back as the Prefix starting value
//     of later Suffix rows of the same tile;
//   * out: the output tile (OW bits signed), accumulated over the k-tiles of a
//     spiking GeMM: the first k-tile writes the row result, later ones add it.
// The write-back port (wb_*) does both in one cycle. Reads are combinational.
// ext_addr/ext_row read the accumulated output for the neuron array, the SFU
// and the DRAM side. Keeping the tile-local values apart from the accumulated
// output is this design's choice: a Prefix must supply only its inner product
// over the current k columns, not the running sum over earlier k-tiles. The
// paper gives the buffer's role and a 96KB capacity, which matches
// M x N x 24 bits for the accumulated output.
module output_buffer #(
  parameter int unsigned M  = 256,
  parameter int unsigned N  = 128,
  parameter int unsigned OW = 24,
  parameter int unsigned LW = 12
) (
  input  logic                         clk,
  // write-back from the Processor
  input  logic                         wb_en,
  input  logic                         wb_first,
  input  logic [$clog2(M)-1:0]         wb_row,
  input  logic [N-1:0][LW-1:0]         wb_data,
  // Prefix read
  input  logic [$clog2(M)-1:0]         pf_addr,
  output logic [N-1:0][LW-1:0]         pf_data,
  // accumulated output read
  input  logic [$clog2(M)-1:0]         ext_addr,
  output logic [N-1:0][OW-1:0]         ext_row
);
  logic [N-1:0][LW-1:0] local_mem [M];
  logic [N-1:0][OW-1:0] out_mem   [M];
  logic [N-1:0][OW-1:0] acc_row;

  always_comb begin
    for (int i = 0; i < N; i++)
      acc_row[i] = (wb_first ? '0 : out_mem[wb_row][i]) + OW'(signed'(wb_data[i]));
  end

  always_ff @(posedge clk) begin
    if (wb_en) begin
      local_mem[wb_row] <= wb_data;
      out_mem[wb_row]   <= acc_row;
    end
  end

  assign pf_data = local_mem[pf_addr];
  assign ext_row = out_mem[ext_addr];
endmodule
