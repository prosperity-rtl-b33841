// spike_buffer -- double-buffered on-chip spike buffer.
// Two banks, each holding one block of the binary spike matrix: M rows x KBUF
// columns (256 x 128 bits = 4KB per bank, 8KB in all by default, the published
// capacity). The DRAM side writes one full row per cycle into the bank given by
// wr_bank while the Detector's pre-load reads the other: P consecutive rows of
// one k-column slice per cycle, rows grp*P .. grp*P+P-1, columns
// kt*K .. kt*K+K-1 of bank rd_bank. Reads are combinational, writes take effect
// at the clock edge. The double buffer follows the paper's plan to overlap DRAM
// access with computation; counting the published 8KB as both banks together,
// the row geometry and the port widths are this design's choice.
module spike_buffer #(
  parameter int unsigned M    = 256,
  parameter int unsigned KBUF = 128,
  parameter int unsigned K    = 16,
  parameter int unsigned P    = 8
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic                         wr_bank,
  input  logic [$clog2(M)-1:0]         wr_row,
  input  logic [KBUF-1:0]              wr_data,
  input  logic                         rd_bank,
  input  logic [$clog2(M/P)-1:0]       rd_grp,
  input  logic [$clog2(KBUF/K)-1:0]    rd_kt,
  output logic [P-1:0][K-1:0]          rd_rows
);
  logic [KBUF-1:0] mem [2][M];

  always_ff @(posedge clk) if (wr_en) mem[wr_bank][wr_row] <= wr_data;

  always_comb
    for (int p = 0; p < P; p++)
      rd_rows[p] = mem[rd_bank][int'(rd_grp) * P + p][int'(rd_kt) * K +: K];
endmodule
