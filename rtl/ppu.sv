// ppu -- ProSparsity Processing Unit.
// Computes one block of a spiking GeMM, out[M x N] = S[M x (num_kt*K)] x
// W[(num_kt*K) x N], from the spike and weight buffers into the output buffer,
// skipping redundant work with product sparsity. Each k-tile goes through
//   Detector (TCAM subset search + popcounts) -> Pruner (one Prefix per row,
//   XOR pattern) -> Dispatcher (product sparsity table + stably sorted order)
//   -> Processor (Prefix load + one weight row per remaining spike),
// with the three phases of consecutive tiles overlapped by ppu_ctrl.
// Interface: load the buffers through the sb_*/wt_* ports, pulse start with
// num_kt (1..KBUF/K), accumulate (0: overwrite the output, 1: add to it) and
// buf_bank (the spike/weight buffer bank to compute from; the other bank may be
// written through sb_*/wt_* while the run goes on), wait for done, read the result through ext_addr/ext_row.
// Event strobes (ev_*) mark, per cycle: an Exact-Match row, a Partial-Match
// row, a row without Prefix (all at table write), a Prefix bypass and a
// Processor stall.
module ppu #(
  parameter int unsigned M    = prosperity_pkg::M_DEF,
  parameter int unsigned K    = prosperity_pkg::K_DEF,
  parameter int unsigned N    = prosperity_pkg::N_DEF,
  parameter int unsigned KBUF = prosperity_pkg::KBUF_DEF,
  parameter int unsigned WW   = prosperity_pkg::WW_DEF,
  parameter int unsigned OW   = prosperity_pkg::OW_DEF,
  parameter int unsigned LW   = prosperity_pkg::LW_DEF,
  parameter int unsigned P    = prosperity_pkg::P_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(KBUF/K+1)-1:0]   num_kt,
  input  logic                          accumulate,
  input  logic                          buf_bank,
  output logic                          busy,
  output logic                          done,
  // spike buffer load
  input  logic                          sb_wr_en,
  input  logic                          sb_wr_bank,
  input  logic [$clog2(M)-1:0]          sb_wr_row,
  input  logic [KBUF-1:0]               sb_wr_data,
  // weight buffer load
  input  logic                          wt_wr_en,
  input  logic                          wt_wr_bank,
  input  logic [$clog2(KBUF)-1:0]       wt_wr_addr,
  input  logic [N-1:0][WW-1:0]          wt_wr_data,
  // output read
  input  logic [$clog2(M)-1:0]          ext_addr,
  output logic [N-1:0][OW-1:0]          ext_row,
  // events
  output logic                          ev_em,
  output logic                          ev_pm,
  output logic                          ev_noprefix,
  output logic                          ev_bypass,
  output logic                          ev_stall,
  output logic                          ev_add
);
  localparam int unsigned NKT = KBUF / K;

  // buffer bank the run reads; the other bank can be loaded meanwhile
  logic run_bank;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                run_bank <= 1'b0;
    else if (start && !busy)   run_bank <= buf_bank;
  localparam int unsigned AW  = $clog2(M);
  localparam int unsigned CW  = $clog2(K+1);

  // controller
  logic pl_start, pl_bank, pl_done, det_start, det_bank, det_done, sort_done;
  logic cmp_start, cmp_bank, cmp_first, cmp_done;
  logic [$clog2(NKT)-1:0] pl_kt, cmp_kt;

  ppu_ctrl #(.NKT(NKT)) u_ctrl (
    .clk, .rst_n, .start, .num_kt, .accumulate, .busy, .done,
    .pl_start, .pl_bank, .pl_kt, .pl_done,
    .det_start, .det_bank, .det_done, .sort_done,
    .cmp_start, .cmp_bank, .cmp_kt, .cmp_first, .cmp_done
  );

  // spike buffer + Detector
  logic [$clog2(M/P)-1:0] sb_grp;
  logic [$clog2(NKT)-1:0] sb_kt;
  logic [P-1:0][K-1:0]    sb_rows;

  spike_buffer #(.M(M), .KBUF(KBUF), .K(K), .P(P)) u_sbuf (
    .clk, .wr_en(sb_wr_en), .wr_bank(sb_wr_bank), .wr_row(sb_wr_row), .wr_data(sb_wr_data),
    .rd_bank(run_bank), .rd_grp(sb_grp), .rd_kt(sb_kt), .rd_rows(sb_rows)
  );

  logic          s4_valid;
  logic [AW-1:0] s4_idx, pf_addr;
  logic [K-1:0]  s4_row, pf_row;
  logic [M-1:0]  s4_si;
  logic [CW-1:0] no_vec [2][M];
  logic          det_bank_q;

  detector #(.M(M), .K(K), .P(P), .KBUF(KBUF)) u_det (
    .clk, .rst_n, .pl_start, .pl_bank, .pl_kt, .pl_done,
    .sb_grp, .sb_kt, .sb_rows,
    .det_start, .det_bank, .s4_valid, .s4_idx, .s4_row, .s4_si, .no_vec,
    .pf_addr, .pf_row
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) det_bank_q <= 1'b0;
    else if (det_start) det_bank_q <= det_bank;

  // Pruner
  logic          tw_en;
  logic [AW-1:0] tw_idx, tw_prefix;
  logic [K-1:0]  tw_pattern;

  pruner #(.M(M), .K(K)) u_prn (
    .clk, .rst_n, .in_valid(s4_valid), .in_idx(s4_idx), .in_row(s4_row), .in_si(s4_si),
    .no_vec(no_vec[det_bank_q]), .pf_addr, .pf_row,
    .tw_en, .tw_idx, .tw_prefix, .tw_pattern
  );
  assign det_done = tw_en && (tw_idx == AW'(M - 1));

  // Dispatcher
  logic          task_valid, task_ready, task_has_prefix, iss_done;
  logic [AW-1:0] task_row, task_prefix;
  logic [K-1:0]  task_pattern;

  dispatcher #(.M(M), .K(K)) u_dsp (
    .clk, .rst_n, .tw_en, .tw_bank(det_bank_q), .tw_idx, .tw_prefix, .tw_pattern,
    .sort_start(det_start), .sort_bank(det_bank), .no_in(no_vec[det_bank]), .sort_done,
    .iss_start(cmp_start), .iss_bank(cmp_bank),
    .task_valid, .task_ready, .task_row, .task_prefix, .task_has_prefix, .task_pattern,
    .iss_done
  );

  // Processor + weight and output buffers
  logic [$clog2(KBUF)-1:0] w_addr;
  logic [N-1:0][WW-1:0]    w_row;
  logic [AW-1:0]           p_pf_addr, ob_row;
  logic [N-1:0][LW-1:0]    p_pf_data, ob_data;
  logic                    ob_en, ob_first;

  weight_buffer #(.KBUF(KBUF), .N(N), .WW(WW)) u_wbuf (
    .clk, .wr_en(wt_wr_en), .wr_bank(wt_wr_bank), .wr_addr(wt_wr_addr), .wr_data(wt_wr_data),
    .rd_bank(run_bank),
    .rd_addr(w_addr), .rd_data(w_row)
  );

  processor #(.M(M), .K(K), .N(N), .KBUF(KBUF), .WW(WW), .LW(LW)) u_proc (
    .clk, .rst_n, .tile_start(cmp_start), .kt(cmp_kt), .first_kt(cmp_first), .tile_done(cmp_done),
    .task_valid, .task_ready, .task_row, .task_prefix, .task_has_prefix, .task_pattern,
    .wb_addr(w_addr), .w_row, .pf_addr(p_pf_addr), .pf_data(p_pf_data),
    .ob_en, .ob_first, .ob_row, .ob_data, .ev_bypass, .ev_stall, .ev_add
  );

  output_buffer #(.M(M), .N(N), .OW(OW), .LW(LW)) u_obuf (
    .clk, .wb_en(ob_en), .wb_first(ob_first), .wb_row(ob_row), .wb_data(ob_data),
    .pf_addr(p_pf_addr), .pf_data(p_pf_data), .ext_addr, .ext_row
  );

  assign ev_em       = tw_en && (tw_prefix != tw_idx) && (tw_pattern == '0);
  assign ev_pm       = tw_en && (tw_prefix != tw_idx) && (tw_pattern != '0);
  assign ev_noprefix = tw_en && (tw_prefix == tw_idx);
endmodule
