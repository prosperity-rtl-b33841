// processor -- Product Sparsity Processor (row-wise dataflow, steps 8-12).
// Tasks arrive from the Dispatcher in the tile's execution order. Each task
// passes two stages:
//   issue (step 8): the task is latched in the issue register;
//   execute: in the row's first cycle the PE array loads the Prefix row's
//     tile-local result (step 9; zero without Prefix) and, through the
//     bit-scan-forward address decoder (step 10), adds the weight row of the
//     pattern's first 1 (step 11). Each further cycle adds the weight row of
//     the next 1. When no 1 is left the row is written back (step 12): its
//     tile-local result is stored for later Suffix rows and added into the
//     output tile (written, on the first k-tile).
// A row therefore occupies the PEs max(1, ones in its pattern) cycles, and the
// next row starts in the write-back cycle of the previous one. If that next row
// uses the row being written back as its Prefix, the value is taken straight
// from the PE registers (bypass), since the buffer is written at the cycle's
// end. tile_done pulses with the M-th write-back after tile_start.
// The stage split and the bypass are this design's choice; the steps follow
// the paper.
module processor #(
  parameter int unsigned M    = 256,
  parameter int unsigned K    = 16,
  parameter int unsigned N    = 128,
  parameter int unsigned KBUF = 128,
  parameter int unsigned WW   = 8,
  parameter int unsigned LW   = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        tile_start,
  input  logic [$clog2(KBUF/K)-1:0]   kt,
  input  logic                        first_kt,
  output logic                        tile_done,
  // tasks from the Dispatcher
  input  logic                        task_valid,
  output logic                        task_ready,
  input  logic [$clog2(M)-1:0]        task_row,
  input  logic [$clog2(M)-1:0]        task_prefix,
  input  logic                        task_has_prefix,
  input  logic [K-1:0]                task_pattern,
  // weight buffer
  output logic [$clog2(KBUF)-1:0]     wb_addr,
  input  logic [N-1:0][WW-1:0]        w_row,
  // output buffer
  output logic [$clog2(M)-1:0]        pf_addr,
  input  logic [N-1:0][LW-1:0]        pf_data,
  output logic                        ob_en,
  output logic                        ob_first,
  output logic [$clog2(M)-1:0]        ob_row,
  output logic [N-1:0][LW-1:0]        ob_data,
  // event strobes
  output logic                        ev_bypass,
  output logic                        ev_stall,
  output logic                        ev_add
);
  localparam int unsigned AW = $clog2(M);
  localparam int unsigned IW = $clog2(K);

  // issue register (step 8)
  logic          i_v, i_has;
  logic [AW-1:0] i_row, i_pf;
  logic [K-1:0]  i_pat;
  // execute stage
  logic          e_v;
  logic [AW-1:0] e_row;
  logic [K-1:0]  e_rem;
  logic          first_q;
  logic [$clog2(KBUF/K)-1:0] kt_q;
  logic [AW:0]   wb_cnt;

  logic e_fin, start_row;
  assign e_fin     = e_v && (e_rem == '0);
  assign start_row = i_v && (!e_v || e_fin);
  assign task_ready = !i_v || start_row;

  // address decoder (step 10)
  logic          dec_found;
  logic [IW-1:0] dec_idx;
  logic [K-1:0]  dec_rest;
  addr_decoder #(.K(K)) u_dec (
    .pattern(start_row ? i_pat : e_rem), .found(dec_found), .index(dec_idx), .rest(dec_rest)
  );
  assign wb_addr = $clog2(KBUF)'(int'(kt_q) * K + int'(dec_idx));

  // Prefix load (step 9) with bypass from the row in write-back
  logic [N-1:0][LW-1:0] psum, base;
  logic bypass;
  assign pf_addr = i_pf;
  assign bypass  = start_row && i_has && e_fin && (i_pf == e_row);
  always_comb begin
    if (!i_has)      base = '0;
    else if (bypass) base = psum;
    else             base = pf_data;
  end

  // PE array (step 11)
  logic pe_add;
  assign pe_add = dec_found && (start_row || (e_v && !e_fin));
  pe_array #(.N(N), .WW(WW), .LW(LW)) u_pe (
    .clk, .load(start_row), .add(pe_add), .base, .w(w_row), .psum
  );

  // write back (step 12)
  assign ob_en     = e_fin;
  assign ob_first  = first_q;
  assign ob_row    = e_row;
  assign ob_data   = psum;
  assign tile_done = e_fin && (wb_cnt == (AW+1)'(M - 1));

  assign ev_bypass = bypass;
  assign ev_stall  = i_v && !start_row;
  assign ev_add    = pe_add;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_v <= 1'b0; i_has <= 1'b0; i_row <= '0; i_pf <= '0; i_pat <= '0;
      e_v <= 1'b0; e_row <= '0; e_rem <= '0;
      first_q <= 1'b0; kt_q <= '0; wb_cnt <= '0;
    end else begin
      if (tile_start) begin
        first_q <= first_kt; kt_q <= kt; wb_cnt <= '0;
      end else if (e_fin) begin
        wb_cnt <= wb_cnt + 1'b1;
      end
      if (task_ready) begin
        i_v <= task_valid;
        if (task_valid) begin
          i_row <= task_row; i_pf <= task_prefix; i_has <= task_has_prefix; i_pat <= task_pattern;
        end
      end
      if (start_row) begin
        e_v <= 1'b1; e_row <= i_row; e_rem <= dec_rest;
      end else if (e_fin) begin
        e_v <= 1'b0;
      end else if (e_v) begin
        e_rem <= dec_rest;
      end
    end
  end

  // the Prefix must already be written back: it never equals the issuing row
  assert property (@(posedge clk) disable iff (!rst_n) start_row && i_has |-> i_pf != i_row);
endmodule
