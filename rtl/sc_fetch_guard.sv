// sc_fetch_guard -- front-end restriction logic of the fetch unit.
//
// A conditional branch or indirect jump marked Res_FE (a confidential,
// e.g. secret-dependent, branch) must leave no trace in the predictor and
// must not steer fetch speculatively.  This block therefore
//   * masks the predictor lookup for such a branch (bpu_lookup_en = 0 for
//     its lane in the cycle it is fetched),
//   * cuts the fetch group right after it (fetch_keep = 0 for all younger
//     lanes of the same group) and blocks fetch from the next cycle on
//     (fetch_stall = 1) until that branch resolves; fetch then resumes on
//     the resolved, correct path,
//   * masks the predictor update when that branch resolves
//     (bpu_update_en = 0 for a resolving Res_FE branch).
// A pipeline flush (misprediction of an older instruction, or any other
// squash) also releases the block, because the guarded branch is then
// squashed itself: fetch stops right after it, so it is always the
// youngest instruction in flight.
//
// Interface: fetch_* describes the group fetched this cycle, WIDTH lanes,
// lane 0 oldest, valid lanes contiguous from lane 0; fetch_keep tells which
// lanes go on to decode.  resolve_* is a control instruction resolving in
// the back end, resolve_is_fe tells whether it was marked Res_FE.  Timing:
// stall rises one cycle after the guarded fetch and falls one cycle after
// its resolution.  WIDTH = 8 follows the evaluated 8-wide fetch; cutting
// the group behind the guarded branch is this design's choice.  Only
// control-flow instructions are guarded; a Res_FE marking on any other
// instruction has no front-end effect here (the original describes the
// front-end restriction for branches only).  Reset is synchronous.
module sc_fetch_guard
  import sc_pkg::*;
#(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] fetch_valid,
  input  ctl_e [WIDTH-1:0] fetch_ctl,
  input  res_e [WIDTH-1:0] fetch_res,
  input  logic             resolve_valid,
  input  logic             resolve_is_fe,
  input  logic             flush,
  output logic             fetch_stall,
  output logic [WIDTH-1:0] fetch_keep,
  output logic [WIDTH-1:0] bpu_lookup_en,
  output logic             bpu_update_en
);

  typedef enum logic {FG_RUN, FG_BLOCKED} fg_state_e;
  fg_state_e state_q, state_d;

  logic [WIDTH-1:0] fe_lane;
  logic             fe_branch_fetched;

  always_comb begin
    logic cut;
    cut = 1'b0;
    for (int l = 0; l < WIDTH; l++) begin
      fe_lane[l]       = fetch_valid[l] && (fetch_ctl[l] != CTL_NONE) &&
                         (fetch_res[l] == RES_FE);
      fetch_keep[l]    = fetch_valid[l] && !cut;
      bpu_lookup_en[l] = fetch_keep[l] && !fe_lane[l];
      cut              = cut || fe_lane[l];
    end
    fe_branch_fetched = cut;
  end

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      FG_RUN:     if (fe_branch_fetched && !flush) state_d = FG_BLOCKED;
      FG_BLOCKED: if (flush || (resolve_valid && resolve_is_fe)) state_d = FG_RUN;
      default:    state_d = FG_RUN;
    endcase
  end

  always_ff @(posedge clk)
    if (!rst_n) state_q <= FG_RUN;
    else        state_q <= state_d;

  assign fetch_stall   = (state_q == FG_BLOCKED);
  assign bpu_update_en = resolve_valid && !resolve_is_fe;

  // The core must honour the stall: nothing is fetched while blocked.
  a_no_fetch_when_blocked: assert property (@(posedge clk) disable iff (!rst_n)
    fetch_stall |-> fetch_valid == '0);

endmodule
