// ppu_ctrl -- tile sequencer of the PPU (inter-phase pipeline).
// A spiking GeMM block is cut into num_kt k-tiles. The controller runs
// num_kt + 2 slots; in slot s it launches, in parallel,
//   * the pre-load of tile s into TCAM bank s%2           (s < num_kt),
//   * the ProSparsity phase (detect, prune, sort) of tile s-1 on bank (s-1)%2
//                                                          (1 <= s <= num_kt),
//   * the computation of tile s-2 from table bank (s-2)%2  (s >= 2),
// so the ProSparsity processing of one tile hides under the computation of the
// previous one, as in the paper's pipeline schedule. A slot ends when every
// phase launched in it has reported done; each slot costs one launch cycle in
// addition. done pulses after the last slot. With accumulate set at start,
// the first k-tile adds onto the output already held instead of overwriting
// it, so a reduction longer than the buffers hold can span several runs.
// Slot-level lock-step and the accumulate input are this design's choice; the
// paper gives the overlap of the phases, not the control.
module ppu_ctrl #(
  parameter int unsigned NKT = 8   // k-tiles the buffers hold (KBUF / K)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(NKT+1)-1:0]  num_kt,
  input  logic                      accumulate,
  output logic                      busy,
  output logic                      done,
  // pre-load
  output logic                      pl_start,
  output logic                      pl_bank,
  output logic [$clog2(NKT)-1:0]    pl_kt,
  input  logic                      pl_done,
  // ProSparsity phase
  output logic                      det_start,
  output logic                      det_bank,
  input  logic                      det_done,
  input  logic                      sort_done,
  // computation phase
  output logic                      cmp_start,
  output logic                      cmp_bank,
  output logic [$clog2(NKT)-1:0]    cmp_kt,
  output logic                      cmp_first,
  input  logic                      cmp_done
);
  localparam int unsigned SW = $clog2(NKT + 3);

  typedef enum logic [1:0] {S_IDLE, S_LAUNCH, S_WAIT} state_e;
  state_e        state;
  logic [SW-1:0] slot, nkt;
  logic          acc_q;
  logic          need_pl, need_det, need_cmp;
  logic          got_pl, got_det, got_srt, got_cmp;
  logic          pl_act, det_act, cmp_act;

  assign pl_act  = slot < nkt;
  assign det_act = (slot >= SW'(1)) && (slot <= nkt);
  assign cmp_act = slot >= SW'(2);

  assign pl_start  = (state == S_LAUNCH) && pl_act;
  assign det_start = (state == S_LAUNCH) && det_act;
  assign cmp_start = (state == S_LAUNCH) && cmp_act;
  assign pl_kt     = $clog2(NKT)'(slot);
  assign pl_bank   = slot[0];
  assign det_bank  = !slot[0];          // tile s-1
  assign cmp_bank  = slot[0];           // tile s-2
  assign cmp_kt    = $clog2(NKT)'(slot - SW'(2));
  assign cmp_first = (slot == SW'(2)) && !acc_q;
  assign busy      = state != S_IDLE;

  logic all_done;
  assign all_done = (!need_pl  || got_pl  || pl_done) &&
                    (!need_det || ((got_det || det_done) && (got_srt || sort_done))) &&
                    (!need_cmp || got_cmp || cmp_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; slot <= '0; nkt <= '0; done <= 1'b0; acc_q <= 1'b0;
      need_pl <= 1'b0; need_det <= 1'b0; need_cmp <= 1'b0;
      got_pl <= 1'b0; got_det <= 1'b0; got_srt <= 1'b0; got_cmp <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start && num_kt != '0) begin
          state <= S_LAUNCH; slot <= '0; nkt <= SW'(num_kt); acc_q <= accumulate;
        end
        S_LAUNCH: begin
          need_pl <= pl_act; need_det <= det_act; need_cmp <= cmp_act;
          got_pl <= 1'b0; got_det <= 1'b0; got_srt <= 1'b0; got_cmp <= 1'b0;
          state <= S_WAIT;
        end
        S_WAIT: begin
          got_pl  <= got_pl  || pl_done;
          got_det <= got_det || det_done;
          got_srt <= got_srt || sort_done;
          got_cmp <= got_cmp || cmp_done;
          if (all_done) begin
            if (slot == nkt + SW'(1)) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              slot <= slot + 1'b1; state <= S_LAUNCH;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
