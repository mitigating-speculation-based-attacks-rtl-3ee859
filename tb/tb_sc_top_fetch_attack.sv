// tb_sc_top_fetch_attack -- speculative-fetch penetration test on the full
// design at its default size.
//
// A victim loop runs through sc_top with a small behavioural core around it:
//   * pc 0..2  three independent instructions,
//   * pc 3     a conditional branch whose direction is a secret bit,
//   * pc 4     an instruction that depends on that branch,
//   * pc 5     the loop branch (taken every iteration).
// The testbench keeps a behavioural branch predictor: a 2-bit counter per
// branch pc, trained on every update the design lets through
// (bpu_update_en), and a global history register shifted on every lookup it
// lets through (bpu_lookup_en).  This is the state a speculative-fetch
// attacker probes afterwards.
//
// The loop is run four times, for both secret values, with the secret
// branch marked front-end restricted (Res_FE) and with it unmarked.
// Expected:
//   * marked: predictor counters and history are identical for both secret
//     values, the secret branch was never looked up or trained, fetch was
//     stalled behind it, and the dependent instruction never executed
//     before the branch resolved;
//   * unmarked: the counter of the secret branch differs between the two
//     secret values (the leak the marking removes), which also shows that
//     the probe can see a difference.
// A second phase runs the synthetic mixes S25/C75, S50/C50, S75/C25 and
// S90/C10 (S = share of sensitive, Res_FE branches): a loop of 20
// instructions and 20 branches (BR_no), of which 5, 10, 15 or 18 are
// marked Res_FE.  Each mix must retire, keep every sensitive branch out of
// the predictor, look up every other branch, and stall fetch longer the
// more branches are sensitive.
// A third phase stands in for the cryptographic workloads, which are
// characterised by their numbers of sensitive and total static branches
// (0/0 up to 4/46).  For each distinct pair a loop is built with, per
// branch, one independent instruction, the branch (BR_valid, BranchIDs
// reused modulo 16, the first ones marked Res_FE) and one instruction that
// depends on it.  Each must retire, keep its sensitive branches out of the
// predictor, let the others use it, and never run a dependent instruction
// before its branch has resolved.
// Every run must retire the whole program.  Branches resolve in order
// and are predicted correctly (the core here fetches the true path), so no
// squash occurs; squashes are covered by tb_sc_top.  The store-to-load
// search of the top runs the same random checks as in tb_sc_top.
module tb_sc_top_fetch_attack;
  import sc_pkg::*;

  localparam int unsigned D = 512;
  localparam int unsigned IW = $clog2(D);
  localparam int unsigned W = 8;
  localparam int ITER = 40;
  localparam int BODY = 6;
  localparam int PROG = ITER * BODY;
  localparam int SECRET_PC = 3;
  localparam int SYN_BODY = 40;    // synthetic loop: 20 instructions, 20 branches
  localparam int SYN_ITER = 10;
  localparam int MODE_VICTIM = -1;
  localparam int MODE_CRYPTO = -2;
  localparam int MAXPC = 3 * 46;
  int cr_sens, cr_total, cr_iter;  // crypto-like loop: sensitive/total branches

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
  logic [$clog2(16+1)-1:0] ubt_occupancy;

  // store-to-load search: its own random store queue, see the block below
  logic [113:0]       sq_valid, sq_addr_known;
  logic [113:0][47:0] sq_addr;
  logic [6:0]         sq_head, ld_sq_tail, fwd_idx;
  logic               ld_valid, fwd_valid, older_unknown, ld_mem_req;
  logic [47:0]        ld_addr;
  sc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("%0t FAIL %s", $time, what);
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


  initial begin
    repeat (40 * PROG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    int         pc;
    ctl_e       ctl;
    sc_prefix_t prefix;
  } inst_t;

  // victim program instruction k
  function automatic inst_t prog(int k, logic marked);
    inst_t x;
    x.pc = k % BODY;
    x.ctl = CTL_NONE;
    x.prefix = '0;
    x.prefix.bd_informed = 1'b1;
    case (x.pc)
      SECRET_PC: begin
        x.ctl = CTL_COND;
        x.prefix.branch_id = 4'd2;
        x.prefix.fe_restricted = marked;
      end
      4: x.prefix.dep_branch_id = 4'd2;
      5: begin x.ctl = CTL_COND; x.prefix.branch_id = 4'd1; end
      default: x.prefix.bd_informed = 1'b0;   // BD_no: independent
    endcase
    return x;
  endfunction

  // synthetic program instruction k; n_sens of its 20 branches are Res_FE
  function automatic inst_t prog_syn(int k, int n_sens);
    inst_t x;
    x.pc = k % SYN_BODY;
    x.ctl = (x.pc % 2 == 1) ? CTL_COND : CTL_NONE;
    x.prefix = '0;
    x.prefix.fe_restricted = (x.ctl != CTL_NONE) && (x.pc / 2 < n_sens);
    return x;
  endfunction

  // crypto-like program instruction k
  function automatic int cr_body();
    return (cr_total == 0) ? 3 : 3 * cr_total;
  endfunction
  function automatic inst_t prog_cr(int k);
    inst_t x;
    int b;
    x.pc = k % cr_body();
    b = x.pc / 3;
    x.ctl = CTL_NONE;
    x.prefix = '0;
    if (cr_total > 0 && x.pc % 3 == 1) begin
      x.ctl = CTL_COND;
      x.prefix.bd_informed = 1'b1;
      x.prefix.branch_id = branch_id_t'(b % 16);
      x.prefix.fe_restricted = (b < cr_sens);
    end else if (cr_total > 0 && x.pc % 3 == 2) begin
      x.prefix.bd_informed = 1'b1;
      x.prefix.dep_branch_id = branch_id_t'(b % 16);
    end
    return x;
  endfunction

  function automatic inst_t inst_at(int k, logic marked, int syn);
    if (syn == MODE_CRYPTO) return prog_cr(k);
    return (syn < 0) ? prog(k, marked) : prog_syn(k, syn);
  endfunction

  // behavioural predictor state, per run
  logic [1:0]  pht [MAXPC];
  logic [31:0] ghr;
  int          n_lookup [MAXPC];
  int          n_update [MAXPC];
  int          run_cycles, run_stall, run_commit, run_len, run_early;

  // results of the four runs: [marked][secret]
  logic [1:0]  r_pht [2][2][BODY];
  logic [31:0] r_ghr [2][2];
  int          r_lookup_secret [2][2], r_update_secret [2][2];
  int          r_cycles [2][2], r_stall [2][2], r_commit [2][2], r_early [2][2];

  task automatic run(logic marked, logic secret, int syn);
    inst_t fifo[$];
    int    br_q[$];              // in-flight branches, oldest first
    int    rob_pc [D];
    logic  rob_exec [D];
    int    rob_dep_br [D];       // ROB index of the secret branch it depends on, or -1
    logic  rob_res [D];
    int    fetch_ptr, committed, cycles, stall_cycles, early, last_secret_br;

    run_len = (syn == MODE_CRYPTO) ? cr_iter * cr_body() : (syn < 0) ? PROG : SYN_ITER * SYN_BODY;
    fetch_ptr = 0; committed = 0; cycles = 0; stall_cycles = 0; early = 0; last_secret_br = -1;
    ghr = '0;
    for (int i = 0; i < MAXPC; i++) begin pht[i] = 2'd1; n_lookup[i] = 0; n_update[i] = 0; end
    for (int i = 0; i < D; i++) begin rob_exec[i] = 0; rob_dep_br[i] = -1; rob_res[i] = 0; end

    @(negedge clk);
    rst_n = 0;
    fetch_valid = '0; disp_valid = '0; resolve_valid = 0; done_vec = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    while (committed < run_len && cycles < 30 * run_len) begin
      int nf, nd, rb, ncommit;
      logic acc [W];
      logic keep [W];
      int   acc_idx [W];
      inst_t f [W];
      inst_t h [W];
      @(negedge clk);
      cycles++;
      if (fetch_stall) stall_cycles++;

      // fetch the next instructions of the program
      nf = 0;
      if (!fetch_stall && fifo.size() <= 16 - W)
        nf = (run_len - fetch_ptr < W) ? run_len - fetch_ptr : W;
      for (int l = 0; l < W; l++) begin
        f[l] = inst_at(fetch_ptr + l, marked, syn);
        fetch_valid[l] = (l < nf);
        fetch_prefix_present[l] = 1'b1; fetch_prefix[l] = f[l].prefix; fetch_ctl[l] = f[l].ctl;
      end

      // dispatch from the decode queue
      nd = (fifo.size() < W) ? fifo.size() : W;
      for (int l = 0; l < W; l++) begin
        h[l] = (l < nd) ? fifo[l] : inst_at(0, marked, syn);
        disp_valid[l] = (l < nd);
        disp_prefix_present[l] = 1'b1; disp_prefix[l] = h[l].prefix; disp_ctl[l] = h[l].ctl;
      end

      // resolve the oldest branch once it has executed
      resolve_valid = 0; resolve_mispredict = 0; rb = -1;
      if (br_q.size() > 0 && rob_exec[br_q[0]]) begin
        rb = br_q[0];
        resolve_valid = 1; resolve_idx = IW'(rb);
      end

      // execute everything the design allows
      done_vec = '0;
      for (int i = 0; i < D; i++)
        if (entry_valid[i] && can_exec[i] && !rob_exec[i]) begin
          done_vec[i] = 1'b1;
          if (rob_dep_br[i] >= 0 && !rob_res[rob_dep_br[i]]) early++;
        end
      #1;

      // what the predictor sees this cycle
      for (int l = 0; l < W; l++)
        if (bpu_lookup_en[l] && f[l].ctl != CTL_NONE) begin
          n_lookup[f[l].pc]++;
          ghr = {ghr[30:0], pht[f[l].pc][1]};
        end
      if (resolve_valid && bpu_update_en) begin
        automatic int pc = rob_pc[rb];
        automatic logic taken = (syn == MODE_VICTIM && pc == SECRET_PC) ? secret : 1'b1;
        n_update[pc]++;
        if (taken && pht[pc] != 2'd3) pht[pc] = pht[pc] + 2'd1;
        if (!taken && pht[pc] != 2'd0) pht[pc] = pht[pc] - 2'd1;
      end

      ncommit = 0;
      for (int l = 0; l < W; l++) begin
        acc[l] = disp_valid[l] && disp_ready[l];
        acc_idx[l] = int'(disp_idx[l]);
        keep[l] = fetch_keep[l];
        if (commit_valid[l]) ncommit++;
      end

      @(posedge clk);
      #1;
      committed += ncommit;
      for (int i = 0; i < D; i++) if (done_vec[i]) rob_exec[i] = 1;
      if (rb >= 0) begin
        rob_res[rb] = 1;
        void'(br_q.pop_front());
      end
      for (int l = 0; l < W; l++)
        if (acc[l]) begin
          automatic int t = acc_idx[l];
          rob_pc[t] = h[l].pc; rob_exec[t] = 0; rob_res[t] = 0;
          rob_dep_br[t] = (syn == MODE_VICTIM && h[l].pc == 4) ? last_secret_br :
                          (syn == MODE_CRYPTO && cr_total > 0 && h[l].pc % 3 == 2) ? last_secret_br : -1;
          if (h[l].ctl != CTL_NONE) br_q.push_back(t);
          if (syn == MODE_VICTIM && h[l].pc == SECRET_PC) last_secret_br = t;
          if (syn == MODE_CRYPTO && h[l].ctl != CTL_NONE) last_secret_br = t;
          void'(fifo.pop_front());
        end
      for (int l = 0; l < W; l++)
        if (keep[l]) begin
          fifo.push_back(f[l]);
          fetch_ptr++;
        end
    end

    run_cycles = cycles; run_stall = stall_cycles; run_commit = committed; run_early = early;
    if (syn != MODE_VICTIM) return;
    for (int i = 0; i < BODY; i++) r_pht[marked][secret][i] = pht[i];
    r_ghr[marked][secret]           = ghr;
    r_lookup_secret[marked][secret] = n_lookup[SECRET_PC];
    r_update_secret[marked][secret] = n_update[SECRET_PC];
    r_cycles[marked][secret]        = cycles;
    r_stall[marked][secret]         = stall_cycles;
    r_commit[marked][secret]        = committed;
    r_early[marked][secret]         = early;
    $display("marked=%0b secret=%0b: %0d cycles, %0d stalled, secret-branch counter %0d, lookups %0d, updates %0d",
             marked, secret, cycles, stall_cycles, pht[SECRET_PC], n_lookup[SECRET_PC], n_update[SECRET_PC]);
  endtask

  initial begin
    fetch_valid = '0; fetch_prefix_present = '0; fetch_prefix = '0; fetch_ctl = {W{CTL_NONE}};
    disp_valid = '0; disp_prefix_present = '0; disp_prefix = '0; disp_ctl = {W{CTL_NONE}};
    resolve_valid = 0; resolve_idx = '0; resolve_mispredict = 0; ext_flush = 0; done_vec = '0;
    repeat (3) @(posedge clk);

    for (int m = 0; m < 2; m++)
      for (int s = 0; s < 2; s++)
        run(m[0], s[0], MODE_VICTIM);

    for (int m = 0; m < 2; m++)
      for (int s = 0; s < 2; s++) begin
        check("whole program retired", r_commit[m][s] == PROG);
        check("dependent instruction waited for its branch", r_early[m][s] == 0);
      end

    // marked: nothing of the secret reaches the predictor
    for (int i = 0; i < BODY; i++)
      check("marked: counters equal for both secrets", r_pht[1][0][i] == r_pht[1][1][i]);
    check("marked: history equal for both secrets", r_ghr[1][0] == r_ghr[1][1]);
    check("marked: secret branch never looked up",
          r_lookup_secret[1][0] == 0 && r_lookup_secret[1][1] == 0);
    check("marked: secret branch never trained",
          r_update_secret[1][0] == 0 && r_update_secret[1][1] == 0);
    check("marked: fetch stalled behind the secret branch", r_stall[1][0] >= ITER && r_stall[1][1] >= ITER);

    // unmarked: the probe sees the secret
    check("unmarked: secret branch counter differs", r_pht[0][0][SECRET_PC] != r_pht[0][1][SECRET_PC]);
    check("unmarked: secret branch looked up and trained",
          r_lookup_secret[0][0] == ITER && r_update_secret[0][0] == ITER);
    check("unmarked: no fetch stall", r_stall[0][0] == 0 && r_stall[0][1] == 0);

    $display("cost of the marking: %0d cycles against %0d", r_cycles[1][0], r_cycles[0][0]);

    // synthetic mixes
    begin
      automatic int mix_pct [4] = '{25, 50, 75, 90};
      int prev_stall;
      prev_stall = -1;
      for (int j = 0; j < 4; j++) begin
        automatic int n_sens = (20 * mix_pct[j]) / 100;
        automatic int lk_s = 0, up_s = 0, lk_c = 0;
        run(1'b1, 1'b0, n_sens);
        for (int pc = 1; pc < SYN_BODY; pc += 2)
          if (pc / 2 < n_sens) begin lk_s += n_lookup[pc]; up_s += n_update[pc]; end
          else lk_c += n_lookup[pc];
        $display("S%0d/C%0d: %0d cycles, %0d stalled, %0d instructions", mix_pct[j], 100 - mix_pct[j],
                 run_cycles, run_stall, run_commit);
        check("synthetic mix retired", run_commit == SYN_ITER * SYN_BODY);
        check("sensitive branches kept out of the predictor", lk_s == 0 && up_s == 0);
        check("other branches use the predictor", lk_c == (20 - n_sens) * SYN_ITER);
        check("more sensitive branches, longer fetch stalls", run_stall > prev_stall);
        prev_stall = run_stall;
      end
    end

    // crypto-like loops, sensitive/total static branches
    begin
      automatic int pairs [16][2] = '{'{0, 0}, '{0, 1}, '{0, 2}, '{0, 3}, '{0, 4}, '{0, 5}, '{0, 6}, '{0, 7},
                            '{0, 9}, '{0, 11}, '{1, 3}, '{1, 7}, '{1, 8}, '{2, 11}, '{3, 11}, '{4, 46}};
      for (int j = 0; j < 16; j++) begin
        automatic int lk_s = 0, up_s = 0, lk_c = 0;
        cr_sens  = pairs[j][0];
        cr_total = pairs[j][1];
        cr_iter  = (cr_total == 0) ? 100 : (100 / cr_total < 3) ? 3 : 100 / cr_total;
        run(1'b1, 1'b0, MODE_CRYPTO);
        for (int pc = 1; pc < 3 * cr_total; pc += 3)
          if (pc / 3 < cr_sens) begin lk_s += n_lookup[pc]; up_s += n_update[pc]; end
          else lk_c += n_lookup[pc];
        $display("%0d/%0d branches: %0d instructions in %0d cycles, %0d stalled",
                 cr_sens, cr_total, run_commit, run_cycles, run_stall);
        check("crypto loop retired", run_commit == cr_iter * cr_body());
        check("crypto: sensitive branches kept out of the predictor", lk_s == 0 && up_s == 0);
        check("crypto: other branches use the predictor", lk_c == (cr_total - cr_sens) * cr_iter);
        check("crypto: dependent instructions waited for their branch", run_early == 0);
        check("crypto: fetch stalls exactly when a branch is sensitive", (run_stall > 0) == (cr_sens > 0));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
