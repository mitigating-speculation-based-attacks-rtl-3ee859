// sc_rob_restrict -- reorder buffer extended with the speculation-control
// restriction state; decides which in-flight instructions may execute.
//
// Each entry keeps, beside its sequence number and control-flow kind:
//   be_restricted  "Backend Restricted" bit,
//   dep_id/dep_seq "Dependent Branch" <BranchID, SeqNum>,
//   restricted     "Restricted" bit (held back by its dependent branch).
// An instruction may execute only when both bits are 0 (can_exec).
//
// Events handled (numbering of the original event/action table):
//   (2) an instruction marked Res_BE enters: be_restricted = 1;
//   (3) it is released once it is safe, which here means no older
//       unresolved branch or indirect jump is left in the buffer, so it can
//       no longer be squashed by a misprediction;
//   (4) a BR_valid branch enters: its slot in the UBT is written with its
//       sequence number; when that slot is taken, insertion stalls;
//   (5) an instruction enters: if BD_valid and its Dependent BranchID hits
//       in the UBT, restricted = 1 and <id, seq> of that branch instance is
//       recorded.  If an unresolved barrier (BR_invalid branch, or indirect
//       jump not marked BR_no) is older, be_restricted = 1;
//   (6) a BR_valid branch resolves: every entry whose Dependent Branch
//       equals <its id, its seq> gets restricted = 0, and it leaves the UBT;
//   (7) be_restricted set by a barrier is cleared once no older barrier is
//       unresolved.  The original sweeps the entries after the resolving
//       barrier up to the next barrier; this level-based form gives the
//       same result when barriers resolve in order and stays safe when a
//       younger barrier resolves first.
// An instruction without any prefix (BD_invalid) is treated like a Res_BE
// one: restricted until no older branch of any kind is unresolved.  This
// is this implementation's reading of "dependent on the most recent branch".
//
// Interface: up to WIDTH instructions enter per cycle, lane 0 oldest, valid
// lanes contiguous (ins_valid/ins_ready per lane; the accepted lanes are a
// prefix of the valid ones, and each gets its entry index and sequence
// number in the same cycle).  Lanes of one group see each other: a BR_valid
// branch in an older lane is forwarded as a UBT hit to younger lanes, two
// branches with the same UBT slot cannot enter together, and an unresolved
// barrier or branch in an older lane back-end restricts younger lanes.  One
// control instruction resolves per cycle (resolve_*; on a misprediction all
// younger entries are squashed in the same cycle), any number of entries
// may report completion (done_vec), and up to COMMIT_W completed entries
// retire per cycle from the head (commit_*).  The core must execute an
// entry only while its can_exec bit is set (asserted).  Reads happen on the
// pre-edge state; a resolution at edge t lifts Restricted at t and Backend
// Restricted at t+1.  ROB size 512 and the 8-wide dispatch and commit
// follow the evaluated configuration; the single resolve port is this
// implementation's simplification.  Reset is synchronous, active low.
module sc_rob_restrict
  import sc_pkg::*;
#(
  parameter int unsigned DEPTH       = 512,
  parameter int unsigned WIDTH       = 8,
  parameter int unsigned COMMIT_W    = 8,
  parameter int unsigned UBT_ENTRIES = 16,
  localparam int unsigned IDX_W = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // insertion from decode/rename
  input  logic       [WIDTH-1:0]            ins_valid,
  input  sc_mark_t   [WIDTH-1:0]            ins_mark,
  output logic       [WIDTH-1:0]            ins_ready,
  output logic       [WIDTH-1:0][IDX_W-1:0] ins_idx,
  output seq_t       [WIDTH-1:0]            ins_seq,
  // UBT connection
  output branch_id_t [WIDTH-1:0] ubt_lookup_id,
  input  logic       [WIDTH-1:0] ubt_lookup_hit,
  input  seq_t       [WIDTH-1:0] ubt_lookup_seq,
  output branch_id_t [WIDTH-1:0] ubt_ins_id,
  input  logic       [WIDTH-1:0] ubt_ins_busy,
  output logic       [WIDTH-1:0] ubt_ins_we,
  output seq_t       [WIDTH-1:0] ubt_ins_seq,
  output logic             ubt_rm_we,
  output branch_id_t       ubt_rm_id,
  output seq_t             ubt_rm_seq,
  output logic             ubt_flush_we,
  output seq_t             ubt_flush_seq,
  // branch resolution
  input  logic             resolve_valid,
  input  logic [IDX_W-1:0] resolve_idx,
  input  logic             resolve_mispredict,
  output logic             resolve_is_fe,
  // execution
  input  logic [DEPTH-1:0] done_vec,
  output logic [DEPTH-1:0] can_exec,
  output logic [DEPTH-1:0] entry_valid,
  // commit, lane 0 oldest
  output logic [COMMIT_W-1:0]            commit_valid,
  output logic [COMMIT_W-1:0][IDX_W-1:0] commit_idx,
  output seq_t [COMMIT_W-1:0]            commit_seq,
  // event indications (for statistics)
  output logic             stall_ubt,
  output logic             dep_released,
  output logic             be_released
);

  typedef struct packed {
    seq_t       seq;
    ctl_e       ctl;
    dep_e       br;
    branch_id_t bid;
    logic       res_fe;
    logic       barrier;
    logic       wait_all;
    branch_id_t dep_id;
    seq_t       dep_seq;
  } ent_t;

  initial begin
    if (DEPTH < 2 || (DEPTH & (DEPTH - 1)) != 0)
      $error("sc_rob_restrict: DEPTH must be a power of two");
    if (WIDTH < 1 || WIDTH > DEPTH || COMMIT_W < 1 || COMMIT_W > DEPTH)
      $error("sc_rob_restrict: WIDTH and COMMIT_W must be between 1 and DEPTH");
    if (UBT_ENTRIES < 2 || UBT_ENTRIES > (1 << ID_W) || (UBT_ENTRIES & (UBT_ENTRIES - 1)) != 0)
      $error("sc_rob_restrict: UBT_ENTRIES must be a power of two between 2 and 2**ID_W");
  end

  ent_t             ent_q   [DEPTH];
  logic [DEPTH-1:0] valid_q, resolved_q, done_q, restr_q, be_restr_q;
  logic [IDX_W-1:0] head_q, tail_q;
  logic [IDX_W:0]   count_q;
  seq_t             seq_ctr_q;

  // ---------------------------------------------------------------- age scans
  logic [DEPTH-1:0] ctl_unres, bar_unres, older_ctl, older_bar;
  logic             any_ctl_unres, any_bar_unres;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      ctl_unres[i] = valid_q[i] && (ent_q[i].ctl != CTL_NONE) && !resolved_q[i];
      bar_unres[i] = ctl_unres[i] && ent_q[i].barrier;
    end
    any_ctl_unres = |ctl_unres;
    any_bar_unres = |bar_unres;
  end

  // older_x[i]: some entry strictly older than i (in the circular order that
  // starts at head) has x set.  Two linear prefix-ORs avoid a rotation.
  function automatic logic [DEPTH-1:0] older_scan(logic [DEPTH-1:0] b,
                                                  logic [IDX_W-1:0] head);
    logic [DEPTH-1:0] res;
    logic             pre_all, pre_hi, tot_hi;
    tot_hi = 1'b0;
    for (int j = 0; j < DEPTH; j++)
      if (j >= int'(head)) tot_hi |= b[j];
    pre_all = 1'b0;
    pre_hi  = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      res[i] = (i >= int'(head)) ? pre_hi : (tot_hi | pre_all);
      pre_all |= b[i];
      if (i >= int'(head)) pre_hi |= b[i];
    end
    return res;
  endfunction

  assign older_ctl = older_scan(ctl_unres, head_q);
  assign older_bar = older_scan(bar_unres, head_q);

  // ---------------------------------------------------------------- resolve
  // fields of the resolving entry that the release logic needs
  seq_t       r_seq;
  ctl_e       r_ctl;
  dep_e       r_br;
  branch_id_t r_bid;
  logic       r_fe;
  logic squash;
  logic rel_dep;      // step 6 applies this cycle
  assign r_seq         = ent_q[resolve_idx].seq;
  assign r_ctl         = ent_q[resolve_idx].ctl;
  assign r_br          = ent_q[resolve_idx].br;
  assign r_bid         = ent_q[resolve_idx].bid;
  assign r_fe          = ent_q[resolve_idx].res_fe;
  assign squash        = resolve_valid && resolve_mispredict;
  assign rel_dep       = resolve_valid && (r_ctl != CTL_NONE) && (r_br == DEP_VALID);
  assign resolve_is_fe = resolve_valid && (r_ctl != CTL_NONE) && r_fe;

  assign ubt_rm_we     = rel_dep;
  assign ubt_rm_id     = r_bid;
  assign ubt_rm_seq    = r_seq;
  assign ubt_flush_we  = squash;
  assign ubt_flush_seq = r_seq;

  logic [IDX_W-1:0] rpos;
  assign rpos = resolve_idx - head_q;

  // ---------------------------------------------------------------- insert
  // Lanes are taken in order; the first lane that cannot enter (buffer
  // full, UBT slot busy, squash in progress) stops the group there.
  localparam int unsigned SLOT_W = (UBT_ENTRIES > 1) ? $clog2(UBT_ENTRIES) : 1;

  logic [WIDTH-1:0]   is_ubt_br, lane_restr, lane_be_restr, lane_wait_all;
  seq_t [WIDTH-1:0]   lane_dep_seq;
  logic [IDX_W:0]     room, n_fire;

  assign room = DEPTH[IDX_W:0] - count_q;

  always_comb begin
    logic go, busy, hit, grp_ctl, grp_bar;
    seq_t dseq;
    go        = !squash;
    grp_ctl   = any_ctl_unres;
    grp_bar   = any_bar_unres;
    stall_ubt = 1'b0;
    n_fire    = '0;
    for (int l = 0; l < WIDTH; l++) begin
      is_ubt_br[l]     = (ins_mark[l].ctl != CTL_NONE) && (ins_mark[l].br == DEP_VALID);
      ubt_lookup_id[l] = ins_mark[l].dep_branch_id;
      ubt_ins_id[l]    = ins_mark[l].branch_id;
      ubt_ins_seq[l]   = seq_ctr_q + seq_t'(l);
      ins_idx[l]       = tail_q + IDX_W'(l);
      ins_seq[l]       = seq_ctr_q + seq_t'(l);

      // step 4: the UBT slot must be free, also of older lanes' branches
      busy = ubt_ins_busy[l];
      for (int k = 0; k < l; k++)
        if (is_ubt_br[k] && ins_mark[k].branch_id[SLOT_W-1:0] == ins_mark[l].branch_id[SLOT_W-1:0])
          busy = 1'b1;
      if (go && ins_valid[l] && l < int'(room) && is_ubt_br[l] && busy) stall_ubt = 1'b1;
      go           = go && ins_valid[l] && (l < int'(room)) && !(is_ubt_br[l] && busy);
      ins_ready[l] = go;
      ubt_ins_we[l] = go && is_ubt_br[l];
      if (go) n_fire = n_fire + 1'b1;

      // step 5: dependency; a hit on the branch resolving in this very
      // cycle is already stale, an older lane's branch is the newest one
      hit  = ubt_lookup_hit[l] &&
             !(rel_dep && r_bid == ins_mark[l].dep_branch_id && r_seq == ubt_lookup_seq[l]);
      dseq = ubt_lookup_seq[l];
      for (int k = 0; k < l; k++)
        if (is_ubt_br[k] && ins_mark[k].branch_id == ins_mark[l].dep_branch_id) begin
          hit  = 1'b1;
          dseq = seq_ctr_q + seq_t'(k);
        end
      lane_restr[l]    = (ins_mark[l].bd == DEP_VALID) && hit;
      lane_dep_seq[l]  = dseq;
      lane_wait_all[l] = (ins_mark[l].res == RES_BE) || (ins_mark[l].bd == DEP_INVALID);
      lane_be_restr[l] = (ins_mark[l].res == RES_BE) ||
                         ((ins_mark[l].bd == DEP_INVALID) ? grp_ctl : grp_bar);
      if (ins_mark[l].ctl != CTL_NONE) grp_ctl = 1'b1;
      if (ins_mark[l].barrier)         grp_bar = 1'b1;
    end
  end

  // ---------------------------------------------------------------- commit
  logic [IDX_W:0] n_commit;
  always_comb begin
    logic go;
    logic [IDX_W-1:0] h;
    go       = 1'b1;
    n_commit = '0;
    for (int c = 0; c < COMMIT_W; c++) begin
      h  = head_q + IDX_W'(c);
      go = go && valid_q[h] && done_q[h] && ((ent_q[h].ctl == CTL_NONE) || resolved_q[h]);
      commit_valid[c] = go;
      commit_idx[c]   = h;
      commit_seq[c]   = ent_q[h].seq;
      if (go) n_commit = n_commit + 1'b1;
    end
  end

  // ---------------------------------------------------------------- outputs
  assign can_exec    = valid_q & ~restr_q & ~be_restr_q;
  assign entry_valid = valid_q;

  logic [DEPTH-1:0] dep_match, be_clear;
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      dep_match[i] = rel_dep && valid_q[i] && restr_q[i] &&
                     ent_q[i].dep_id == r_bid && ent_q[i].dep_seq == r_seq;
      be_clear[i]  = valid_q[i] && be_restr_q[i] &&
                     (ent_q[i].wait_all ? !older_ctl[i] : !older_bar[i]);
    end
  end
  assign dep_released = |dep_match;
  assign be_released  = |be_clear;

  // ---------------------------------------------------------------- state
  logic [IDX_W:0] count_base;
  assign count_base = squash ? ({1'b0, rpos} + 1'b1) : count_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q   <= '0;
      head_q    <= '0;
      tail_q    <= '0;
      count_q   <= '0;
      seq_ctr_q <= '0;
    end else begin
      // release of restrictions (steps 3, 6, 7)
      restr_q    <= restr_q & ~dep_match;
      be_restr_q <= be_restr_q & ~be_clear;
      done_q     <= done_q | (done_vec & valid_q);

      if (resolve_valid) resolved_q[resolve_idx] <= 1'b1;

      // squash younger than the mispredicted branch
      if (squash) begin
        for (int i = 0; i < DEPTH; i++) begin
          logic [IDX_W-1:0] p;
          p = IDX_W'(i) - head_q;
          if (p > rpos) valid_q[i] <= 1'b0;
        end
        tail_q <= resolve_idx + 1'b1;
      end

      // insertion (steps 2, 4, 5); never in a squash cycle
      for (int l = 0; l < WIDTH; l++) begin
        if (ins_ready[l]) begin
          ent_q[ins_idx[l]].seq      <= ins_seq[l];
          ent_q[ins_idx[l]].ctl      <= ins_mark[l].ctl;
          ent_q[ins_idx[l]].br       <= ins_mark[l].br;
          ent_q[ins_idx[l]].bid      <= ins_mark[l].branch_id;
          ent_q[ins_idx[l]].res_fe   <= (ins_mark[l].res == RES_FE);
          ent_q[ins_idx[l]].barrier  <= ins_mark[l].barrier;
          ent_q[ins_idx[l]].wait_all <= lane_wait_all[l];
          ent_q[ins_idx[l]].dep_id   <= ins_mark[l].dep_branch_id;
          ent_q[ins_idx[l]].dep_seq  <= lane_dep_seq[l];
          valid_q[ins_idx[l]]        <= 1'b1;
          resolved_q[ins_idx[l]]     <= 1'b0;
          done_q[ins_idx[l]]         <= 1'b0;
          restr_q[ins_idx[l]]        <= lane_restr[l];
          be_restr_q[ins_idx[l]]     <= lane_be_restr[l];
        end
      end
      if (!squash) tail_q <= tail_q + n_fire[IDX_W-1:0];
      seq_ctr_q <= seq_ctr_q + seq_t'(n_fire);

      // retirement
      for (int c = 0; c < COMMIT_W; c++)
        if (commit_valid[c]) valid_q[commit_idx[c]] <= 1'b0;
      head_q <= head_q + n_commit[IDX_W-1:0];

      count_q <= count_base + n_fire - n_commit;
    end
  end

  // ---------------------------------------------------------------- rules
  a_exec_permitted: assert property (@(posedge clk) disable iff (!rst_n)
    (done_vec & valid_q & ~done_q & ~can_exec) == '0);
  a_resolve_ctl: assert property (@(posedge clk) disable iff (!rst_n)
    resolve_valid |-> valid_q[resolve_idx] && ent_q[resolve_idx].ctl != CTL_NONE &&
                      !resolved_q[resolve_idx]);
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count_q <= DEPTH[IDX_W:0]);
  // valid lanes must be contiguous from lane 0
  a_lanes_contiguous: assert property (@(posedge clk) disable iff (!rst_n)
    ((ins_valid + 1'b1) & ins_valid) == '0);

endmodule
