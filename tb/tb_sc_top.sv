// tb_sc_top -- end-to-end random test of the speculation-control hardware at
// its default size (512-entry reorder buffer, 16-entry UBT).
//
// The testbench plays the baseline core: it fetches random groups of up to
// 8 instructions (random prefix markings, conditional branches and indirect
// jumps), keeps the kept lanes in a 16-deep decode queue, dispatches groups
// of up to 8 into the reorder buffer, executes entries the hardware allows,
// resolves branches in random order (some mispredicted, which squashes
// younger entries and the decode queue) and watches in-order commit of up
// to 8 entries per cycle.
//
// A reference model, written independently of the RTL, keeps the buffer
// contents and computes from scratch each cycle whether an entry may
// execute:
//   * BD_valid: the branch instance found in the UBT at insertion must have
//     resolved;
//   * Res_BE or no prefix: no older unresolved branch/indirect jump at all;
//   * otherwise: no older unresolved barrier (BR_invalid branch, or indirect
//     jump not marked BR_no).
// Checks: the hardware never lets an entry execute that the model forbids
// (security), every entry the model allows is allowed within 3 cycles
// (liveness), dispatch readiness per lane (ROB full, UBT slot busy, also
// for two branches of one group), returned indices and sequence numbers,
// commit order, fetch stall, group cut and predictor masks.
// Each mechanism (front-end block, UBT stall, ROB full, dependency release,
// barrier release, Res_BE restriction, squash, predictor masks) is counted
// and must occur at least once.  Phases without execution fill the buffer.
// Beside all this, the store-to-load search of the top sees its own random
// store queue and loads (see the block after the check task).
module tb_sc_top;
  import sc_pkg::*;

  localparam int unsigned D = 512;
  localparam int unsigned IW = $clog2(D);
  localparam int unsigned W = 8;    // fetch, dispatch and commit width
  localparam int unsigned U = 16;   // UBT entries
  localparam int CYCLES = 20000;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] fetch_valid, fetch_prefix_present, disp_valid, disp_prefix_present;
  sc_prefix_t [W-1:0] fetch_prefix, disp_prefix;
  ctl_e [W-1:0] fetch_ctl, disp_ctl;
  logic [W-1:0] fetch_keep, bpu_lookup_en, disp_ready, commit_valid;
  logic fetch_stall, resolve_valid, resolve_mispredict, ext_flush;
  logic bpu_update_en, stall_ubt, dep_released, be_released, ubt_full;
  logic [W-1:0][IW-1:0] disp_idx, commit_idx;
  logic [IW-1:0] resolve_idx;
  seq_t [W-1:0] disp_seq, commit_seq;
  logic [D-1:0] done_vec, can_exec, entry_valid;
  logic [$clog2(U+1)-1:0] ubt_occupancy;

  // store-to-load search: its own random store queue, see the block below
  logic [113:0]       sq_valid, sq_addr_known;
  logic [113:0][47:0] sq_addr;
  logic [6:0]         sq_head, ld_sq_tail, fwd_idx;
  logic               ld_valid, fwd_valid, older_unknown, ld_mem_req;
  logic [47:0]        ld_addr;
  sc_top dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ reference
  typedef struct {
    logic       present;
    sc_prefix_t prefix;
    ctl_e       ctl;
  } inst_t;

  inst_t fifo[$];
  int    order[$];                 // ROB indices, oldest first
  inst_t m_inst   [D];
  seq_t  m_seq    [D];
  logic  m_res    [D];             // resolved
  logic  m_done   [D];
  logic  m_hasdep [D];
  int    m_depidx [D];
  seq_t  m_depseq [D];
  int    m_wait   [D];             // cycles allowed by model but not by RTL
  logic  u_v [U];                  // UBT model, indexed by slot
  int    u_idx [U];                // ROB index of the branch in the slot
  seq_t  exp_seq;
  int    exp_tail;
  logic  ref_fe_blocked;

  int checks = 0, failures = 0;
  int n_fe_block = 0, n_ubt_stall = 0, n_rob_full = 0, n_dep_rel = 0, n_be_rel = 0;
  int n_resbe = 0, n_squash = 0, n_commit = 0, n_lookup_mask = 0, n_update_mask = 0;
  int n_barrier_restr = 0, n_dep_restr = 0, n_cut = 0, n_wide_disp = 0, n_wide_commit = 0;
  int n_group_fwd = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t: %s", $time, what);
    end
  endtask

  // The store-to-load search runs beside the rest: a new random 114-entry
  // store queue every 16 cycles and a random load every cycle, with
  // addresses from a pool of eight.  Every load must go to memory, and a
  // forwarding store must be valid, older than the load and match.
  initial begin
    sq_valid = '0; sq_addr_known = '0; sq_addr = '0;
    sq_head = '0; ld_sq_tail = '0; ld_valid = 1'b0; ld_addr = '0;
  end
  always @(negedge clk) begin
    if ($urandom_range(15) == 0)
      for (int i = 0; i < 114; i++) begin
        sq_valid[i]      = ($urandom_range(1) != 0);
        sq_addr_known[i] = ($urandom_range(7) != 0);
        sq_addr[i]       = 48'($urandom_range(7));
      end
    sq_head    = 7'($urandom_range(113));
    ld_sq_tail = 7'($urandom_range(113));
    ld_valid   = ($urandom_range(3) != 0);
    ld_addr    = 48'($urandom_range(7));
  end
  always @(posedge clk) if (rst_n) begin
    check("every load goes to memory", ld_mem_req == ld_valid);
    check("search idle without a load", ld_valid || (!fwd_valid && !older_unknown));
    check("forwarding store is valid, older and matching",
          !fwd_valid || (sq_valid[fwd_idx] && sq_addr_known[fwd_idx] && sq_addr[fwd_idx] == ld_addr &&
                         (int'(fwd_idx) - int'(sq_head) + 114) % 114 < (int'(ld_sq_tail) - int'(sq_head) + 114) % 114));
  end


  function automatic int slot(branch_id_t id); return int'(id) % U; endfunction
  function automatic logic is_ctl(inst_t x);  return x.ctl != CTL_NONE; endfunction
  function automatic logic is_fe(inst_t x);
    return x.present && x.prefix.fe_restricted && x.ctl != CTL_NONE;
  endfunction
  function automatic logic is_brvalid(inst_t x);
    return x.present && x.prefix.bd_informed && x.ctl != CTL_NONE;
  endfunction
  function automatic logic is_barrier(inst_t x);
    if (x.ctl == CTL_NONE) return 1'b0;
    if (!x.present) return 1'b1;
    return (x.ctl == CTL_INDIRECT) && x.prefix.bd_informed;
  endfunction
  function automatic logic waits_all(inst_t x);
    return !x.present || (x.prefix.be_restricted && !x.prefix.fe_restricted);
  endfunction

  function automatic inst_t gen();
    inst_t x;
    int r = $urandom_range(0, 99);
    x.ctl     = (r < 70) ? CTL_NONE : (r < 92) ? CTL_COND : CTL_INDIRECT;
    x.present = ($urandom_range(0, 99) < 92);
    x.prefix  = '0;
    x.prefix.fe_restricted = (x.ctl != CTL_NONE) && ($urandom_range(0, 99) < 4);
    x.prefix.be_restricted = ($urandom_range(0, 99) < 8);
    x.prefix.bd_informed   = ($urandom_range(0, 99) < 85);
    x.prefix.branch_id     = branch_id_t'($urandom_range(0, 15));
    x.prefix.dep_branch_id = branch_id_t'($urandom_range(0, 15));
    return x;
  endfunction

  // may entry at position k of `order` execute, according to the model?
  logic ref_allow [D];
  task automatic compute_ref();
    logic any_ctl = 0, any_bar = 0;
    foreach (order[k]) begin
      automatic int i = order[k];
      logic ok = 1;
      if (m_hasdep[i] && m_inst[m_depidx[i]].ctl != CTL_NONE && m_seq[m_depidx[i]] == m_depseq[i] &&
          !m_res[m_depidx[i]] && in_rob(m_depidx[i])) ok = 0;
      if (waits_all(m_inst[i]) ? any_ctl : any_bar) ok = 0;
      ref_allow[i] = ok;
      if (is_ctl(m_inst[i]) && !m_res[i]) begin
        any_ctl = 1;
        if (is_barrier(m_inst[i])) any_bar = 1;
      end
    end
  endtask

  logic in_rob_v [D];
  function automatic logic in_rob(int i); return in_rob_v[i]; endfunction

  initial begin
    repeat (CYCLES * 3) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fetch_valid = '0; fetch_prefix_present = '0; fetch_prefix = '0; fetch_ctl = {W{CTL_NONE}};
    disp_valid = '0; disp_prefix_present = '0; disp_prefix = '0; disp_ctl = {W{CTL_NONE}};
    resolve_valid = 0; resolve_idx = '0; resolve_mispredict = 0; ext_flush = 0; done_vec = '0;
    for (int i = 0; i < D; i++) begin in_rob_v[i] = 0; m_wait[i] = 0; ref_allow[i] = 0; end
    for (int i = 0; i < U; i++) u_v[i] = 0;
    exp_seq = '0; exp_tail = 0; ref_fe_blocked = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      logic no_exec, squash, cut;
      logic exp_ready [W];
      logic kept [W];
      logic claimed [U];
      int ridx, nf, nd, n_did_commit, room;
      inst_t f [W];
      inst_t h [W];
      @(negedge clk);
      no_exec = ((cyc % 3000) >= 1800) && ((cyc % 3000) < 2700);

      // ---- drive fetch: a group of 0..W instructions
      nf = (fetch_stall || fifo.size() > 16 - W) ? 0 :
           ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, W);
      for (int l = 0; l < W; l++) begin
        f[l] = gen();
        fetch_valid[l] = (l < nf);
        fetch_prefix_present[l] = f[l].present; fetch_prefix[l] = f[l].prefix; fetch_ctl[l] = f[l].ctl;
      end

      // ---- drive dispatch: the oldest queued instructions
      nd = (fifo.size() < W) ? fifo.size() : W;
      for (int l = 0; l < W; l++) begin
        disp_valid[l] = (l < nd);
        h[l] = (l < nd) ? fifo[l] : gen();
        disp_prefix_present[l] = h[l].present; disp_prefix[l] = h[l].prefix; disp_ctl[l] = h[l].ctl;
      end

      // ---- drive resolve: a random unresolved branch
      resolve_valid = 0; resolve_mispredict = 0; ridx = -1;
      if ($urandom_range(0, 99) < (no_exec ? 40 : 45)) begin
        automatic int cand[$];
        foreach (order[k]) if (is_ctl(m_inst[order[k]]) && !m_res[order[k]]) cand.push_back(order[k]);
        if (cand.size() > 0) begin
          ridx = cand[$urandom_range(0, cand.size() - 1)];
          resolve_valid = 1; resolve_idx = IW'(ridx);
          resolve_mispredict = !no_exec && ($urandom_range(0, 99) < 10);
        end
      end
      squash = resolve_valid && resolve_mispredict;

      // ---- drive execution of allowed entries
      done_vec = '0;
      if (!no_exec)
        foreach (order[k])
          if (can_exec[order[k]] && !m_done[order[k]] && $urandom_range(0, 1) == 1)
            done_vec[order[k]] = 1'b1;
      #1;

      // ---- combinational checks: fetch group
      check("fetch stall", fetch_stall == ref_fe_blocked);
      cut = 0;
      for (int l = 0; l < W; l++) begin
        kept[l] = (l < nf) && !cut;
        check("fetch keep", fetch_keep[l] == kept[l]);
        check("bpu lookup mask", bpu_lookup_en[l] == (kept[l] && !is_fe(f[l])));
        if (kept[l] && is_fe(f[l])) n_lookup_mask++;
        if ((l < nf) && cut) n_cut++;
        if (kept[l] && is_fe(f[l])) cut = 1;
      end
      if (resolve_valid) begin
        check("bpu update mask", bpu_update_en == !is_fe(m_inst[ridx]));
        if (is_fe(m_inst[ridx])) n_update_mask++;
      end

      // ---- dispatch group: lanes enter in order until one cannot
      room = D - order.size();
      for (int i = 0; i < U; i++) claimed[i] = u_v[i];
      begin
        logic go, exp_stall;
        go = !squash; exp_stall = 0;
        for (int l = 0; l < W; l++) begin
          if (go && l < nd && l < room && is_brvalid(h[l]) && claimed[slot(h[l].prefix.branch_id)]) exp_stall = 1;
          go = go && (l < nd) && (l < room) && !(is_brvalid(h[l]) && claimed[slot(h[l].prefix.branch_id)]);
          exp_ready[l] = go;
          if (go && is_brvalid(h[l])) claimed[slot(h[l].prefix.branch_id)] = 1;
          check("dispatch ready", disp_ready[l] == exp_ready[l]);
          if (exp_ready[l]) begin
            check("dispatch index", int'(disp_idx[l]) == (exp_tail + l) % D);
            check("dispatch seq", disp_seq[l] == exp_seq + seq_t'(l));
          end
        end
        check("stall_ubt flag", stall_ubt == exp_stall);
        if (exp_stall) n_ubt_stall++;
        if (nd > 0 && order.size() == D) n_rob_full++;
        if (exp_ready[1]) n_wide_disp++;
      end

      // ---- commit expectation: consecutive completed entries from the head
      begin
        logic go;
        go = 1;
        n_did_commit = 0;
        for (int c = 0; c < W; c++) begin
          logic exp_c;
          exp_c = 0;
          if (go && c < order.size()) begin
            automatic int hh = order[c];
            exp_c = m_done[hh] && (!is_ctl(m_inst[hh]) || m_res[hh]);
          end
          go = go && exp_c;
          check("commit valid", commit_valid[c] == go);
          if (go) begin
            check("commit seq", commit_seq[c] == m_seq[order[c]]);
            check("commit index", int'(commit_idx[c]) == order[c]);
            n_did_commit++;
          end
        end
        if (n_did_commit > 1) n_wide_commit++;
      end
      if (dep_released) n_dep_rel++;
      if (be_released) n_be_rel++;

      @(posedge clk);
      #1;
      // ---- model update (same order of effects as the hardware's edge)
      repeat (n_did_commit) begin
        in_rob_v[order[0]] = 0;
        void'(order.pop_front());
        n_commit++;
      end
      foreach (done_vec[i]) if (done_vec[i]) m_done[i] = 1;
      if (resolve_valid) begin
        m_res[ridx] = 1;
        if (is_fe(m_inst[ridx])) ref_fe_blocked = 0;
        if (is_brvalid(m_inst[ridx]) && u_v[slot(m_inst[ridx].prefix.branch_id)] &&
            u_idx[slot(m_inst[ridx].prefix.branch_id)] == ridx)
          u_v[slot(m_inst[ridx].prefix.branch_id)] = 0;
      end
      if (squash) begin
        n_squash++;
        while (order[$] != ridx) begin
          automatic int y = order.pop_back();
          in_rob_v[y] = 0;
          if (is_brvalid(m_inst[y]) && u_v[slot(m_inst[y].prefix.branch_id)] &&
              u_idx[slot(m_inst[y].prefix.branch_id)] == y)
            u_v[slot(m_inst[y].prefix.branch_id)] = 0;
        end
        exp_tail = (ridx + 1) % D;
        fifo.delete();
        ref_fe_blocked = 0;
      end
      for (int l = 0; l < W; l++) begin
        if (exp_ready[l]) begin
          automatic int t = exp_tail;
          m_inst[t] = h[l]; m_seq[t] = exp_seq; m_res[t] = 0; m_done[t] = 0; m_wait[t] = 0;
          m_hasdep[t] = h[l].present && h[l].prefix.bd_informed && u_v[slot(h[l].prefix.dep_branch_id)] &&
                        m_inst[u_idx[slot(h[l].prefix.dep_branch_id)]].prefix.branch_id == h[l].prefix.dep_branch_id;
          if (m_hasdep[t]) begin
            m_depidx[t] = u_idx[slot(h[l].prefix.dep_branch_id)];
            m_depseq[t] = m_seq[m_depidx[t]];
            n_dep_restr++;
            if (m_depseq[t] - m_seq[order[0]] >= seq_t'(order.size() - l)) n_group_fwd++;
          end
          if (h[l].present && h[l].prefix.be_restricted && !h[l].prefix.fe_restricted) n_resbe++;
          if (is_brvalid(h[l])) begin u_v[slot(h[l].prefix.branch_id)] = 1; u_idx[slot(h[l].prefix.branch_id)] = t; end
          order.push_back(t);
          in_rob_v[t] = 1;
          exp_tail = (exp_tail + 1) % D;
          exp_seq  = exp_seq + 1;
          void'(fifo.pop_front());
        end
      end
      if (!squash)
        for (int l = 0; l < W; l++)
          if (kept[l]) begin
            fifo.push_back(f[l]);
            if (is_fe(f[l])) begin ref_fe_blocked = 1; n_fe_block++; end
          end

      // ---- per-entry permission check against the model
      compute_ref();
      foreach (order[k]) begin
        automatic int i = order[k];
        check("valid bit", entry_valid[i] == 1'b1);
        if (can_exec[i] && !ref_allow[i]) begin
          checks++; failures++;
          if (failures < 20) $display("%0t: entry %0d seq %0d may execute but must not", $time, i, m_seq[i]);
        end
        if (!can_exec[i] && !ref_allow[i] && k > 0) n_barrier_restr++;
        if (ref_allow[i] && !can_exec[i]) begin
          m_wait[i]++;
          if (m_wait[i] == 4) begin
            checks++; failures++;
            if (failures < 20) $display("%0t: entry %0d seq %0d held back too long", $time, i, m_seq[i]);
          end
        end else m_wait[i] = 0;
      end
      checks++;
      if ($countones(entry_valid) != order.size()) begin
        failures++; $display("%0t: occupancy %0d vs %0d", $time, $countones(entry_valid), order.size());
      end
    end

    $display("front-end blocks=%0d lookup masks=%0d update masks=%0d", n_fe_block, n_lookup_mask, n_update_mask);
    $display("UBT stall cycles=%0d ROB full cycles=%0d squashes=%0d commits=%0d", n_ubt_stall, n_rob_full, n_squash, n_commit);
    $display("cut fetch lanes=%0d multi-lane dispatch cycles=%0d multi-entry commit cycles=%0d in-group dependencies=%0d",
             n_cut, n_wide_disp, n_wide_commit, n_group_fwd);
    $display("dependency restrictions=%0d releases=%0d; Res_BE entries=%0d; backend releases=%0d",
             n_dep_restr, n_dep_rel, n_resbe, n_be_rel);
    check("front-end block happened", n_fe_block > 0);
    check("predictor lookup masked", n_lookup_mask > 0);
    check("predictor update masked", n_update_mask > 0);
    check("UBT stall happened", n_ubt_stall > 0);
    check("ROB full happened", n_rob_full > 0);
    check("squash happened", n_squash > 0);
    check("dependency restriction released", n_dep_rel > 0 && n_dep_restr > 0);
    check("back-end restriction released", n_be_rel > 0 && n_resbe > 0);
    check("commits happened", n_commit > 1000);
    check("wide groups happened", n_cut > 0 && n_wide_disp > 0 && n_wide_commit > 0 && n_group_fwd > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
