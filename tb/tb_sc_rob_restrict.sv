// tb_sc_rob_restrict -- directed test of the restriction state kept per
// reorder-buffer entry, with an 8-entry buffer and a 16-entry UBT.
//
// Walks through the event/action table of the design:
//   * three BR_valid branches with BranchIDs 1001, 1011, 1100 (binary, as in
//     the usual illustration) enter; instructions depending on 1001 and 1011
//     are Restricted, one depending on 1101 (not in the UBT) is not;
//   * a fourth branch reusing ID 1001 stalls insertion until the first
//     resolves; resolving 1001 frees exactly its dependents one edge later;
//   * an indirect jump (a barrier) back-end restricts the next instruction,
//     which is freed within two edges of the jump's resolution; a Res_BE
//     instruction waits for every older branch;
//   * a legacy branch without prefix restricts everything after it;
//   * a misprediction squashes younger entries and rewinds the tail;
//   * the buffer fills (ready drops) and commit retires in order.
// Expected values are written out by hand from the table's rules.  The
// buffer is instantiated one lane wide so that each step is one
// instruction; a last section uses a 4-lane buffer for one dispatch group
// whose lanes depend on each other, and a 4-wide commit.
module tb_sc_rob_restrict;
  import sc_pkg::*;

  localparam int unsigned D = 8;
  localparam int unsigned IW = $clog2(D);

  logic clk = 0, rst_n = 0;
  logic [0:0] ins_valid, ins_ready, commit_valid, ubt_lookup_hit, ubt_ins_busy, ubt_ins_we;
  logic resolve_valid, resolve_mispredict, resolve_is_fe;
  sc_mark_t [0:0] ins_mark;
  logic [0:0][IW-1:0] ins_idx, commit_idx;
  logic [IW-1:0] resolve_idx;
  seq_t [0:0] ins_seq, commit_seq, ubt_lookup_seq, ubt_ins_seq;
  branch_id_t [0:0] ubt_lookup_id, ubt_ins_id;
  branch_id_t ubt_rm_id;
  logic ubt_rm_we, ubt_flush_we, ubt_full;
  seq_t ubt_rm_seq, ubt_flush_seq;
  logic [D-1:0] done_vec, can_exec, entry_valid;
  logic stall_ubt, dep_released, be_released;
  logic [4:0] ubt_occ;
  int checks = 0, failures = 0;

  sc_rob_restrict #(.DEPTH(D), .WIDTH(1), .COMMIT_W(1)) dut (.*);

  sc_ubt #(.ENTRIES(16), .PORTS(1)) ubt (
    .clk, .rst_n,
    .lookup_id(ubt_lookup_id), .lookup_hit(ubt_lookup_hit), .lookup_seq(ubt_lookup_seq),
    .ins_id(ubt_ins_id), .ins_busy(ubt_ins_busy), .ins_we(ubt_ins_we), .ins_seq(ubt_ins_seq),
    .rm_we(ubt_rm_we), .rm_id(ubt_rm_id), .rm_seq(ubt_rm_seq),
    .flush_we(ubt_flush_we), .flush_seq(ubt_flush_seq), .occupancy(ubt_occ), .full(ubt_full)
  );

  // ---- 4-lane instance for the group section
  localparam int unsigned G = 4;
  logic [G-1:0] g_valid, g_ready, g_commit_valid, g_lk_hit, g_in_busy, g_in_we;
  sc_mark_t [G-1:0] g_mark;
  logic [G-1:0][IW-1:0] g_idx, g_commit_idx;
  seq_t [G-1:0] g_seq, g_commit_seq, g_lk_seq, g_in_seq;
  branch_id_t [G-1:0] g_lk_id, g_in_id;
  branch_id_t g_rm_id;
  logic g_rm_we, g_flush_we, g_res_valid, g_res_mis, g_stall_ubt;
  logic [IW-1:0] g_res_idx;
  seq_t g_rm_seq, g_flush_seq;
  logic [D-1:0] g_done, g_can_exec, g_entry_valid;
  logic g_is_fe, g_dep_rel, g_be_rel, g_full;
  logic [4:0] g_occ;

  sc_rob_restrict #(.DEPTH(D), .WIDTH(G), .COMMIT_W(G)) dut4 (
    .clk, .rst_n,
    .ins_valid(g_valid), .ins_mark(g_mark), .ins_ready(g_ready), .ins_idx(g_idx), .ins_seq(g_seq),
    .ubt_lookup_id(g_lk_id), .ubt_lookup_hit(g_lk_hit), .ubt_lookup_seq(g_lk_seq),
    .ubt_ins_id(g_in_id), .ubt_ins_busy(g_in_busy), .ubt_ins_we(g_in_we), .ubt_ins_seq(g_in_seq),
    .ubt_rm_we(g_rm_we), .ubt_rm_id(g_rm_id), .ubt_rm_seq(g_rm_seq),
    .ubt_flush_we(g_flush_we), .ubt_flush_seq(g_flush_seq),
    .resolve_valid(g_res_valid), .resolve_idx(g_res_idx), .resolve_mispredict(g_res_mis),
    .resolve_is_fe(g_is_fe),
    .done_vec(g_done), .can_exec(g_can_exec), .entry_valid(g_entry_valid),
    .commit_valid(g_commit_valid), .commit_idx(g_commit_idx), .commit_seq(g_commit_seq),
    .stall_ubt(g_stall_ubt), .dep_released(g_dep_rel), .be_released(g_be_rel)
  );

  sc_ubt #(.ENTRIES(16), .PORTS(G)) ubt4 (
    .clk, .rst_n,
    .lookup_id(g_lk_id), .lookup_hit(g_lk_hit), .lookup_seq(g_lk_seq),
    .ins_id(g_in_id), .ins_busy(g_in_busy), .ins_we(g_in_we), .ins_seq(g_in_seq),
    .rm_we(g_rm_we), .rm_id(g_rm_id), .rm_seq(g_rm_seq),
    .flush_we(g_flush_we), .flush_seq(g_flush_seq), .occupancy(g_occ), .full(g_full)
  );

  task automatic g_resolve(int idx);
    @(negedge clk);
    g_res_valid = 1; g_res_idx = IW'(idx);
    @(posedge clk);
    #1 g_res_valid = 0;
  endtask

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("%0t FAIL %s", $time, what); end
  endtask

  function automatic sc_mark_t mk(ctl_e ctl, res_e res, dep_e bd, branch_id_t id, branch_id_t dep);
    sc_mark_t m;
    m = '0;
    m.ctl = ctl; m.res = res; m.bd = bd; m.br = (ctl == CTL_NONE) ? DEP_NO : bd;
    m.branch_id = id; m.dep_branch_id = dep;
    m.barrier = (ctl != CTL_NONE) && (m.br == DEP_INVALID || (ctl == CTL_INDIRECT && m.br != DEP_NO));
    return m;
  endfunction

  // insert one instruction; returns its index; waits while not ready
  task automatic ins(sc_mark_t m, output int idx);
    @(negedge clk);
    ins_valid = 1; ins_mark = m;
    #1;
    while (!ins_ready) begin @(negedge clk); #1; end
    idx = int'(ins_idx);
    @(posedge clk);
    #1 ins_valid = 0;
  endtask

  task automatic resolve(int idx, logic mis);
    @(negedge clk);
    resolve_valid = 1; resolve_idx = IW'(idx); resolve_mispredict = mis;
    @(posedge clk);
    #1 resolve_valid = 0; resolve_mispredict = 0;
  endtask

  task automatic idle(int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  int bA, bB, bC, bD, iN, iN1, iN2, jE, iF, iG, bL, iM, iP, bH, iX, iY;
  localparam branch_id_t ID_1001 = 4'b1001, ID_1011 = 4'b1011, ID_1100 = 4'b1100, ID_1101 = 4'b1101;

  initial begin
    ins_valid = 0; ins_mark = '0; resolve_valid = 0; resolve_idx = '0; resolve_mispredict = 0;
    done_vec = '0;
    g_valid = '0; g_mark = '0; g_res_valid = 0; g_res_idx = '0; g_res_mis = 0; g_done = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- steps 4 and 5: UBT entries and Restricted bits
    ins(mk(CTL_COND, RES_NO, DEP_VALID, ID_1001, 4'd0), bA);
    ins(mk(CTL_COND, RES_NO, DEP_VALID, ID_1011, 4'd0), bB);
    ins(mk(CTL_COND, RES_NO, DEP_VALID, ID_1100, 4'd0), bC);
    ins(mk(CTL_NONE, RES_NO, DEP_VALID, 4'd0, ID_1001), iN);
    ins(mk(CTL_NONE, RES_NO, DEP_VALID, 4'd0, ID_1011), iN1);
    ins(mk(CTL_NONE, RES_NO, DEP_VALID, 4'd0, ID_1101), iN2);
    check("index order", bA == 0 && bB == 1 && iN2 == 5);
    check("UBT holds three branches", ubt_occ == 3);
    check("Inst N restricted", !can_exec[iN]);
    check("Inst N+1 restricted", !can_exec[iN1]);
    check("Inst N+2 free (1101 not live)", can_exec[iN2]);
    check("branches themselves free", can_exec[bA] && can_exec[bB] && can_exec[bC]);

    // ---- step 4 stall: second instance of 1001 must wait for the first
    @(negedge clk);
    ins_valid = 1; ins_mark = mk(CTL_COND, RES_NO, DEP_VALID, ID_1001, 4'd0);
    #1;
    check("insert stalls on busy UBT slot", !ins_ready && stall_ubt);
    resolve_valid = 1; resolve_idx = IW'(bA);
    #1;
    check("still stalled in the resolving cycle", !ins_ready);
    @(posedge clk);
    #1 resolve_valid = 0;
    // step 6: dependents of <1001, seq of A> released at this edge
    check("Inst N released by its branch", can_exec[iN]);
    check("Inst N+1 still restricted", !can_exec[iN1]);
    check("slot free again", ins_ready);
    bD = int'(ins_idx);
    @(posedge clk);
    #1 ins_valid = 0;
    check("new 1001 entered", bD == 6 && ubt_occ == 3);

    // retire what is done so far to make room: A, B, C, N, N+1, N+2 done
    @(negedge clk);
    done_vec = '0;
    done_vec[bA] = 1; done_vec[bB] = 1; done_vec[bC] = 1; done_vec[iN] = 1; done_vec[iN2] = 1;
    @(posedge clk);
    #1 done_vec = '0;
    check("head commits resolved, done branch A", commit_valid && commit_idx == IW'(bA) && commit_seq == 0);
    idle(1);
    check("B not resolved: no commit", !commit_valid);
    resolve(bB, 0);
    check("Inst N+1 released by 1011", can_exec[iN1]);
    @(negedge clk); done_vec[iN1] = 1; @(posedge clk); #1 done_vec = '0;
    resolve(bC, 0);
    idle(4);
    check("retired up to branch D", commit_valid == 0 && entry_valid == (D'(1) << bD));

    // ---- steps 5 and 7: barrier (indirect jump) and Res_BE
    ins(mk(CTL_INDIRECT, RES_NO, DEP_VALID, 4'd3, 4'd0), jE);
    ins(mk(CTL_NONE, RES_NO, DEP_NO, 4'd0, 4'd0), iF);
    ins(mk(CTL_NONE, RES_BE, DEP_NO, 4'd0, 4'd0), iG);
    check("after indirect jump: back-end restricted", !can_exec[iF]);
    check("Res_BE restricted", !can_exec[iG]);
    check("indirect jump itself free", can_exec[jE]);
    resolve(jE, 0);
    idle(1);
    check("released after the jump resolves", can_exec[iF]);
    check("Res_BE waits for older branch D", !can_exec[iG]);
    resolve(bD, 0);
    idle(1);
    check("Res_BE released once nothing older is unresolved", can_exec[iG]);

    // ---- legacy branch without prefix (BR_invalid) and legacy instruction
    ins(mk(CTL_COND, RES_NO, DEP_INVALID, 4'd0, 4'd0), bL);
    ins(mk(CTL_NONE, RES_NO, DEP_NO, 4'd0, 4'd0), iM);
    check("after BR_invalid branch: restricted", !can_exec[iM]);
    resolve(bL, 0);
    idle(1);
    check("released after BR_invalid branch resolves", can_exec[iM]);

    // drain: everything done
    @(negedge clk);
    done_vec = '1;
    idle(10);
    done_vec = '0;
    check("drained", entry_valid == '0);

    // ---- misprediction squash
    ins(mk(CTL_COND, RES_NO, DEP_VALID, 4'd5, 4'd0), bH);
    ins(mk(CTL_NONE, RES_NO, DEP_VALID, 4'd0, 4'd5), iX);
    ins(mk(CTL_COND, RES_NO, DEP_VALID, 4'd6, 4'd0), iY);
    check("UBT has 5 and 6", ubt_occ == 2);
    check("X depends on H", !can_exec[iX]);
    resolve(bH, 1);
    check("younger squashed", !entry_valid[iX] && !entry_valid[iY] && entry_valid[bH]);
    check("UBT cleaned by squash", ubt_occ == 0);
    @(negedge clk); ins_valid = 1; ins_mark = mk(CTL_NONE, RES_NO, DEP_NO, 4'd0, 4'd0); #1;
    check("tail rewound after squash", int'(ins_idx) == (bH + 1) % D);
    @(posedge clk); #1 ins_valid = 0;

    // ---- fill the buffer
    begin
      int n;
      n = 0;
      @(negedge clk);
      ins_valid = 1; ins_mark = mk(CTL_NONE, RES_NO, DEP_NO, 4'd0, 4'd0);
      #1;
      while (ins_ready && n < 20) begin @(posedge clk); #1 n++; end
      check("ROB full after 6 more entries", n == 6 && !ins_ready && entry_valid == '1);
      ins_valid = 0;
    end
    @(negedge clk); done_vec = '1; idle(12); done_vec = '0;
    check("all retired", entry_valid == '0);

    // ---- one dispatch group of 4 lanes (second instance)
    @(negedge clk);
    g_valid   = 4'b1111;
    g_mark[0] = mk(CTL_COND, RES_NO, DEP_VALID, ID_1001, 4'd0);
    g_mark[1] = mk(CTL_NONE, RES_NO, DEP_VALID, 4'd0, ID_1001);
    g_mark[2] = mk(CTL_COND, RES_NO, DEP_VALID, ID_1001, 4'd0);
    g_mark[3] = mk(CTL_NONE, RES_NO, DEP_NO, 4'd0, 4'd0);
    #1;
    check("group: second 1001 in the group stops it", g_ready == 4'b0011 && g_stall_ubt);
    @(posedge clk);
    #1;
    check("group: lane 1 restricted by lane 0's branch", g_can_exec[1:0] == 2'b01);
    @(negedge clk);
    g_valid   = 4'b1111;
    g_mark[0] = mk(CTL_INDIRECT, RES_NO, DEP_VALID, 4'd3, 4'd0);
    g_mark[1] = mk(CTL_NONE, RES_NO, DEP_NO, 4'd0, 4'd0);
    g_mark[2] = mk(CTL_NONE, RES_BE, DEP_NO, 4'd0, 4'd0);
    g_mark[3] = mk(CTL_NONE, RES_NO, DEP_VALID, 4'd0, ID_1001);
    #1;
    check("group: all four enter", g_ready == 4'b1111 && g_idx[0] == 2 && g_idx[3] == 5 &&
                                   g_seq[3] == 5);
    @(posedge clk);
    #1 g_valid = '0;
    check("group: jump free, followers held", g_can_exec[5:2] == 4'b0001);
    g_resolve(0);
    check("group: 1001 frees lane 1 of the first group", g_can_exec[1]);
    idle(1);
    check("group: entry 5 still held by the jump", !g_can_exec[5] && !g_can_exec[3]);
    g_resolve(2);
    idle(1);
    check("group: all free after the jump", g_can_exec[5:0] == 6'b111111);
    @(negedge clk);
    g_done = '1;
    @(posedge clk);
    #1;
    check("group: four commit in one cycle", g_commit_valid == 4'b1111 && g_commit_seq[3] == 3);
    @(posedge clk);
    #1;
    check("group: last two commit", g_commit_valid == 4'b0011 && g_commit_idx[1] == 5);
    idle(1);
    check("group: drained", g_entry_valid == '0);
    g_done = '0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
