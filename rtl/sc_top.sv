// sc_top -- speculation-control hardware of an out-of-order core.
//
// Puts together the pieces that restrict speculation only where software
// asks for it:
//   * fetch side: the prefix field of each fetched instruction is decoded
//     and the fetch guard stops fetch behind a confidential (Res_FE)
//     branch and keeps it away from the branch predictor;
//   * rename/dispatch side: the prefix field is decoded again as the
//     instruction enters the reorder buffer, where the Unresolved Branches
//     Table and the restriction bits of each entry decide when it may
//     execute (can_exec).
// The baseline core (predictor, caches, rename, issue queues, execution
// units, load/store queue storage) is outside: its signals are this
// module's ports.
//
// Interface and timing (all groups: lane 0 oldest, valid lanes contiguous):
//   fetch_*    up to FETCH_W fetched instructions per cycle; fetch_keep
//              says which lanes go on to decode (the group is cut behind a
//              Res_FE branch); fetch_stall (registered) must be obeyed;
//              bpu_lookup_en masks the predictor lookup per lane.
//   disp_*     up to DISP_W instructions per cycle into the reorder buffer
//              with a valid/ready handshake per lane; buffer index and
//              sequence number of each are returned in the same cycle.
//   resolve_*  one control instruction per cycle resolves; a misprediction
//              squashes all younger entries and releases the fetch guard.
//              bpu_update_en masks the predictor update of Res_FE branches.
//   done_vec   completion of executed entries; commit_* retires up to
//              COMMIT_W entries per cycle in order.
//   sq_*, ld_* the core's store queue and a searching load; the search
//              (sc_stl_guard) forwards from the youngest older matching
//              store and still sends every load to memory (ld_mem_req),
//              combinationally.
// Defaults: 512-entry reorder buffer, 16-entry UBT, 8-wide fetch,
// dispatch and commit and a 114-entry store queue, as in the evaluated
// configuration.
module sc_top
  import sc_pkg::*;
#(
  parameter int unsigned ROB_DEPTH   = 512,
  parameter int unsigned UBT_ENTRIES = 16,
  parameter int unsigned FETCH_W     = 8,
  parameter int unsigned DISP_W      = 8,
  parameter int unsigned COMMIT_W    = 8,
  parameter int unsigned SQ_ENTRIES  = 114,
  parameter int unsigned ADDR_W      = 48,
  localparam int unsigned IDX_W = $clog2(ROB_DEPTH),
  localparam int unsigned SQ_W  = $clog2(SQ_ENTRIES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // fetch
  input  logic       [FETCH_W-1:0] fetch_valid,
  input  logic       [FETCH_W-1:0] fetch_prefix_present,
  input  sc_prefix_t [FETCH_W-1:0] fetch_prefix,
  input  ctl_e       [FETCH_W-1:0] fetch_ctl,
  output logic                     fetch_stall,
  output logic       [FETCH_W-1:0] fetch_keep,
  output logic       [FETCH_W-1:0] bpu_lookup_en,
  // dispatch into the reorder buffer
  input  logic       [DISP_W-1:0]            disp_valid,
  input  logic       [DISP_W-1:0]            disp_prefix_present,
  input  sc_prefix_t [DISP_W-1:0]            disp_prefix,
  input  ctl_e       [DISP_W-1:0]            disp_ctl,
  output logic       [DISP_W-1:0]            disp_ready,
  output logic       [DISP_W-1:0][IDX_W-1:0] disp_idx,
  output seq_t       [DISP_W-1:0]            disp_seq,
  // branch resolution
  input  logic                 resolve_valid,
  input  logic [IDX_W-1:0]     resolve_idx,
  input  logic                 resolve_mispredict,
  input  logic                 ext_flush,
  output logic                 bpu_update_en,
  // execution and commit
  input  logic [ROB_DEPTH-1:0] done_vec,
  output logic [ROB_DEPTH-1:0] can_exec,
  output logic [ROB_DEPTH-1:0] entry_valid,
  output logic [COMMIT_W-1:0]            commit_valid,
  output logic [COMMIT_W-1:0][IDX_W-1:0] commit_idx,
  output seq_t [COMMIT_W-1:0]            commit_seq,
  // event indications
  output logic                 stall_ubt,
  output logic                 dep_released,
  output logic                 be_released,
  output logic                 ubt_full,
  output logic [$clog2(UBT_ENTRIES+1)-1:0] ubt_occupancy,
  // store-to-load search
  input  logic [SQ_ENTRIES-1:0]             sq_valid,
  input  logic [SQ_ENTRIES-1:0]             sq_addr_known,
  input  logic [SQ_ENTRIES-1:0][ADDR_W-1:0] sq_addr,
  input  logic [SQ_W-1:0]                   sq_head,
  input  logic                              ld_valid,
  input  logic [ADDR_W-1:0]                 ld_addr,
  input  logic [SQ_W-1:0]                   ld_sq_tail,
  output logic                              fwd_valid,
  output logic [SQ_W-1:0]                   fwd_idx,
  output logic                              older_unknown,
  output logic                              ld_mem_req
);

  sc_mark_t [FETCH_W-1:0] fetch_mark;
  sc_mark_t [DISP_W-1:0]  disp_mark;
  ctl_e     [FETCH_W-1:0] fetch_mark_ctl;
  res_e     [FETCH_W-1:0] fetch_mark_res;

  for (genvar l = 0; l < FETCH_W; l++) begin : g_dec_fetch
    sc_marking_decode u_dec (
      .prefix_present (fetch_prefix_present[l]),
      .prefix         (fetch_prefix[l]),
      .ctl            (fetch_ctl[l]),
      .mark           (fetch_mark[l])
    );
    assign fetch_mark_ctl[l] = fetch_mark[l].ctl;
    assign fetch_mark_res[l] = fetch_mark[l].res;
  end

  for (genvar l = 0; l < DISP_W; l++) begin : g_dec_disp
    sc_marking_decode u_dec (
      .prefix_present (disp_prefix_present[l]),
      .prefix         (disp_prefix[l]),
      .ctl            (disp_ctl[l]),
      .mark           (disp_mark[l])
    );
  end

  logic resolve_is_fe;

  sc_fetch_guard #(.WIDTH(FETCH_W)) u_fetch_guard (
    .clk           (clk),
    .rst_n         (rst_n),
    .fetch_valid   (fetch_valid),
    .fetch_ctl     (fetch_mark_ctl),
    .fetch_res     (fetch_mark_res),
    .resolve_valid (resolve_valid),
    .resolve_is_fe (resolve_is_fe),
    .flush         (ext_flush || (resolve_valid && resolve_mispredict)),
    .fetch_stall   (fetch_stall),
    .fetch_keep    (fetch_keep),
    .bpu_lookup_en (bpu_lookup_en),
    .bpu_update_en (bpu_update_en)
  );

  branch_id_t [DISP_W-1:0] ubt_lookup_id, ubt_ins_id;
  logic       [DISP_W-1:0] ubt_lookup_hit, ubt_ins_busy, ubt_ins_we;
  seq_t       [DISP_W-1:0] ubt_lookup_seq, ubt_ins_seq;
  branch_id_t              ubt_rm_id;
  logic                    ubt_rm_we, ubt_flush_we;
  seq_t                    ubt_rm_seq, ubt_flush_seq;

  sc_ubt #(.ENTRIES(UBT_ENTRIES), .PORTS(DISP_W)) u_ubt (
    .clk        (clk),
    .rst_n      (rst_n),
    .lookup_id  (ubt_lookup_id),
    .lookup_hit (ubt_lookup_hit),
    .lookup_seq (ubt_lookup_seq),
    .ins_id     (ubt_ins_id),
    .ins_busy   (ubt_ins_busy),
    .ins_we     (ubt_ins_we),
    .ins_seq    (ubt_ins_seq),
    .rm_we      (ubt_rm_we),
    .rm_id      (ubt_rm_id),
    .rm_seq     (ubt_rm_seq),
    .flush_we   (ubt_flush_we),
    .flush_seq  (ubt_flush_seq),
    .occupancy  (ubt_occupancy),
    .full       (ubt_full)
  );

  sc_rob_restrict #(
    .DEPTH       (ROB_DEPTH),
    .WIDTH       (DISP_W),
    .COMMIT_W    (COMMIT_W),
    .UBT_ENTRIES (UBT_ENTRIES)
  ) u_rob (
    .clk                (clk),
    .rst_n              (rst_n),
    .ins_valid          (disp_valid),
    .ins_mark           (disp_mark),
    .ins_ready          (disp_ready),
    .ins_idx            (disp_idx),
    .ins_seq            (disp_seq),
    .ubt_lookup_id      (ubt_lookup_id),
    .ubt_lookup_hit     (ubt_lookup_hit),
    .ubt_lookup_seq     (ubt_lookup_seq),
    .ubt_ins_id         (ubt_ins_id),
    .ubt_ins_busy       (ubt_ins_busy),
    .ubt_ins_we         (ubt_ins_we),
    .ubt_ins_seq        (ubt_ins_seq),
    .ubt_rm_we          (ubt_rm_we),
    .ubt_rm_id          (ubt_rm_id),
    .ubt_rm_seq         (ubt_rm_seq),
    .ubt_flush_we       (ubt_flush_we),
    .ubt_flush_seq      (ubt_flush_seq),
    .resolve_valid      (resolve_valid),
    .resolve_idx        (resolve_idx),
    .resolve_mispredict (resolve_mispredict),
    .resolve_is_fe      (resolve_is_fe),
    .done_vec           (done_vec),
    .can_exec           (can_exec),
    .entry_valid        (entry_valid),
    .commit_valid       (commit_valid),
    .commit_idx         (commit_idx),
    .commit_seq         (commit_seq),
    .stall_ubt          (stall_ubt),
    .dep_released       (dep_released),
    .be_released        (be_released)
  );

  sc_stl_guard #(.SQ_ENTRIES(SQ_ENTRIES), .ADDR_W(ADDR_W)) u_stl_guard (
    .sq_valid      (sq_valid),
    .sq_addr_known (sq_addr_known),
    .sq_addr       (sq_addr),
    .sq_head       (sq_head),
    .ld_valid      (ld_valid),
    .ld_addr       (ld_addr),
    .ld_sq_tail    (ld_sq_tail),
    .fwd_valid     (fwd_valid),
    .fwd_idx       (fwd_idx),
    .older_unknown (older_unknown),
    .ld_mem_req    (ld_mem_req)
  );

endmodule
