// prosperity_top -- the Prosperity accelerator.
// A ProSparsity Processing Unit (PPU) computes each spiking GeMM block with
// product sparsity; a spiking neuron array turns its output currents into the
// next layer's spikes; a special function unit (SFU) serves the non-GeMM
// operations of spiking transformers. Off-chip DRAM is not part of the RTL:
// its traffic appears as the buffer-load ports (sb_*, wt_*), the output read
// port (ext_*) and the spike output stream (nrn_*). The output buffer's read
// port belongs to the neuron array while it runs (nrn_busy), to ext_addr
// otherwise. The SFU is driven directly from the top-level ports.
// Typical use: load spikes (one 128-bit row per cycle) and weights (one
// 128-byte row per cycle) into a buffer bank, pulse start with num_kt,
// accumulate and buf_bank, load the next block into the other bank while the
// run goes on, and wait for done. Then either read outputs (combinational:
// ext_row follows ext_addr in the same cycle) or pulse nrn_start to generate
// spikes (one vector of 32 spikes per cycle on nrn_valid). A full 8-k-tile
// block takes about 8 x (256 + pattern ones + 3) cycles plus one ProSparsity
// phase (260) and one pre-load (32) that are not hidden. The SFU answers one
// cycle after sfu_valid. The block set and their connections follow the
// paper's architecture overview; the port-level interface, the accumulate
// input and the shared read port are this design's choice.
module prosperity_top #(
  parameter int unsigned M     = prosperity_pkg::M_DEF,
  parameter int unsigned K     = prosperity_pkg::K_DEF,
  parameter int unsigned N     = prosperity_pkg::N_DEF,
  parameter int unsigned KBUF  = prosperity_pkg::KBUF_DEF,
  parameter int unsigned WW    = prosperity_pkg::WW_DEF,
  parameter int unsigned OW    = prosperity_pkg::OW_DEF,
  parameter int unsigned LW    = prosperity_pkg::LW_DEF,
  parameter int unsigned P     = prosperity_pkg::P_DEF,
  parameter int unsigned NCELL = prosperity_pkg::NCELL_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // PPU control
  input  logic                          start,
  input  logic [$clog2(KBUF/K+1)-1:0]   num_kt,
  input  logic                          accumulate,
  input  logic                          buf_bank,
  output logic                          busy,
  output logic                          done,
  // DRAM side: buffer loads and output read
  input  logic                          sb_wr_en,
  input  logic                          sb_wr_bank,
  input  logic [$clog2(M)-1:0]          sb_wr_row,
  input  logic [KBUF-1:0]               sb_wr_data,
  input  logic                          wt_wr_en,
  input  logic                          wt_wr_bank,
  input  logic [$clog2(KBUF)-1:0]       wt_wr_addr,
  input  logic [N-1:0][WW-1:0]          wt_wr_data,
  input  logic [$clog2(M)-1:0]          ext_addr,
  output logic [N-1:0][OW-1:0]          ext_row,
  // spiking neuron array
  input  logic                          nrn_start,
  input  logic [$clog2(M+1)-1:0]        nrn_t_steps,
  input  logic [$clog2(M+1)-1:0]        nrn_l_len,
  input  logic signed [OW-1:0]          nrn_threshold,
  input  logic [4:0]                    nrn_leak_shift,
  output logic                          nrn_busy,
  output logic                          nrn_done,
  output logic                          nrn_valid,
  output logic [$clog2(M)-1:0]          nrn_row,
  output logic [$clog2(N/NCELL)-1:0]    nrn_grp,
  output logic [NCELL-1:0]              nrn_spikes,
  // SFU
  input  logic                          sfu_valid,
  input  prosperity_pkg::sfu_op_e       sfu_op,
  input  logic [127:0]                  sfu_a_bits,
  input  logic [127:0]                  sfu_b_bits,
  input  logic [31:0][15:0]             sfu_a,
  input  logic [31:0][15:0]             sfu_b,
  output logic                          sfu_out_valid,
  output logic [127:0]                  sfu_out_bits,
  output logic [31:0][31:0]             sfu_y,
  // events
  output logic                          ev_em,
  output logic                          ev_pm,
  output logic                          ev_noprefix,
  output logic                          ev_bypass,
  output logic                          ev_stall,
  output logic                          ev_add
);
  logic [$clog2(M)-1:0]  obuf_addr, nrn_addr;
  logic [N-1:0][OW-1:0]  obuf_row;

  ppu #(.M(M), .K(K), .N(N), .KBUF(KBUF), .WW(WW), .OW(OW), .LW(LW), .P(P)) u_ppu (
    .clk, .rst_n, .start, .num_kt, .accumulate, .buf_bank, .busy, .done,
    .sb_wr_en, .sb_wr_bank, .sb_wr_row, .sb_wr_data,
    .wt_wr_en, .wt_wr_bank, .wt_wr_addr, .wt_wr_data,
    .ext_addr(obuf_addr), .ext_row(obuf_row),
    .ev_em, .ev_pm, .ev_noprefix, .ev_bypass, .ev_stall, .ev_add
  );

  assign obuf_addr = nrn_busy ? nrn_addr : ext_addr;
  assign ext_row   = obuf_row;

  spiking_neuron_array #(.NCELL(NCELL), .N(N), .M(M), .OW(OW)) u_nrn (
    .clk, .rst_n, .start(nrn_start), .t_steps(nrn_t_steps), .l_len(nrn_l_len),
    .threshold(nrn_threshold), .leak_shift(nrn_leak_shift), .busy(nrn_busy), .done(nrn_done),
    .rd_addr(nrn_addr), .rd_row(obuf_row),
    .out_valid(nrn_valid), .out_row(nrn_row), .out_grp(nrn_grp), .out_spikes(nrn_spikes)
  );

  sfu #(.NBIT(128), .NMUL(32), .NEXP(8), .DW(16)) u_sfu (
    .clk, .rst_n, .in_valid(sfu_valid), .op(sfu_op), .a_bits(sfu_a_bits), .b_bits(sfu_b_bits),
    .a(sfu_a), .b(sfu_b), .out_valid(sfu_out_valid), .out_bits(sfu_out_bits), .y(sfu_y)
  );
endmodule
