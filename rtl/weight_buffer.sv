// weight_buffer -- double-buffered on-chip weight buffer.
// Two banks of KBUF rows x N int8 weights (128 x 128 bytes = 16KB per bank,
// 32KB in all by default, the published capacity). Row r of a bank is the
// weight row selected by spike column r of the spike block in the same bank of
// the spike buffer. The DRAM side writes one row per cycle into bank wr_bank;
// the Processor reads, combinationally, the row of bank rd_bank given by the
// address decoder (address = k-tile * K + bit index). The double buffer follows
// the paper's plan to overlap DRAM access with computation; counting the
// published 32KB as both banks together, the row organisation and the port
// widths are this design's choice.
module weight_buffer #(
  parameter int unsigned KBUF = 128,
  parameter int unsigned N    = 128,
  parameter int unsigned WW   = 8
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic                          wr_bank,
  input  logic [$clog2(KBUF)-1:0]       wr_addr,
  input  logic [N-1:0][WW-1:0]          wr_data,
  input  logic                          rd_bank,
  input  logic [$clog2(KBUF)-1:0]       rd_addr,
  output logic [N-1:0][WW-1:0]          rd_data
);
  logic [N-1:0][WW-1:0] mem [2][KBUF];

  always_ff @(posedge clk) if (wr_en) mem[wr_bank][wr_addr] <= wr_data;

  assign rd_data = mem[rd_bank][rd_addr];
endmodule
