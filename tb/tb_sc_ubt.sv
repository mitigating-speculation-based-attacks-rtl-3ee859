// tb_sc_ubt -- random operations on the Unresolved Branches Table (default
// 16 entries, 8 lookup/insert lanes) against a reference model kept as
// plain arrays indexed by BranchID (full table, one slot per ID).  Checks
// lookup hit/sequence and slot-busy on every lane, occupancy and full every
// cycle; counts inserts refused for a busy slot, multi-lane inserts,
// removals, stale removals (sequence mismatch) and squash flushes.
module tb_sc_ubt;
  import sc_pkg::*;

  localparam int unsigned N = 16;
  localparam int unsigned P = 8;
  logic       clk = 0, rst_n = 0;
  branch_id_t [P-1:0] lookup_id, ins_id;
  logic       [P-1:0] lookup_hit, ins_busy, ins_we;
  seq_t       [P-1:0] lookup_seq, ins_seq;
  branch_id_t rm_id;
  logic       rm_we, flush_we, full;
  seq_t       rm_seq, flush_seq;
  logic [$clog2(N+1)-1:0] occupancy;

  logic m_v [N];
  seq_t m_s [N];
  seq_t next_seq;
  int checks = 0, failures = 0, n_busy = 0, n_rm = 0, n_stale = 0, n_flush = 0, n_full = 0, n_multi = 0;

  sc_ubt dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t %s", $time, what);
    end
  endtask

  initial begin
    ins_we = '0; rm_we = 0; flush_we = 0; lookup_id = '0; ins_id = '0; rm_id = 0;
    ins_seq = '0; rm_seq = 0; flush_seq = 0;
    for (int i = 0; i < N; i++) m_v[i] = 0;
    next_seq = 32'd2500000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int occ, nw;
      logic claimed [N];
      @(negedge clk);
      for (int p = 0; p < P; p++) begin
        lookup_id[p] = branch_id_t'($urandom_range(0, N - 1));
        ins_id[p]    = branch_id_t'($urandom_range(0, N - 1));
      end
      rm_id     = branch_id_t'($urandom_range(0, N - 1));
      rm_we     = ($urandom_range(0, 2) == 0);
      rm_seq    = ($urandom_range(0, 3) == 0) ? m_s[rm_id] + 1 : m_s[rm_id];
      flush_we  = ($urandom_range(0, 150) == 0);
      flush_seq = next_seq - seq_t'($urandom_range(0, 40));
      #1;
      // combinational reads against the model
      for (int p = 0; p < P; p++) begin
        check("lookup hit", lookup_hit[p] == m_v[lookup_id[p]]);
        if (m_v[lookup_id[p]]) check("lookup seq", lookup_seq[p] == m_s[lookup_id[p]]);
        check("ins busy", ins_busy[p] == m_v[ins_id[p]]);
      end
      occ = 0;
      for (int i = 0; i < N; i++) occ += int'(m_v[i]);
      check("occupancy", int'(occupancy) == occ);
      check("full", full == (occ == N));
      if (full) n_full++;
      // each lane may insert into a free slot not claimed by an older lane
      for (int i = 0; i < N; i++) claimed[i] = 0;
      nw = 0;
      for (int p = 0; p < P; p++) begin
        ins_we[p]  = !ins_busy[p] && !claimed[ins_id[p]] && ($urandom_range(0, 5) == 0);
        if (ins_busy[p]) n_busy++;
        if (ins_we[p]) begin claimed[ins_id[p]] = 1; nw++; end
        ins_seq[p] = next_seq + seq_t'(p);
      end
      if (nw > 1) n_multi++;
      @(posedge clk);
      // model update: flush, remove, insert
      if (flush_we) begin
        n_flush++;
        for (int i = 0; i < N; i++)
          if (m_v[i] && seq_younger(m_s[i], flush_seq)) m_v[i] = 0;
      end
      if (rm_we && m_v[rm_id]) begin
        if (m_s[rm_id] == rm_seq) begin m_v[rm_id] = 0; n_rm++; end
        else n_stale++;
      end
      for (int p = 0; p < P; p++)
        if (ins_we[p]) begin m_v[ins_id[p]] = 1; m_s[ins_id[p]] = ins_seq[p]; end
      next_seq = next_seq + seq_t'(P) + seq_t'($urandom_range(0, 9));
      #1 ins_we = '0;
    end
    check("mechanisms exercised", n_busy > 0 && n_rm > 0 && n_stale > 0 && n_flush > 0 && n_full > 0 && n_multi > 0);
    $display("busy=%0d removed=%0d stale=%0d flushes=%0d full-cycles=%0d multi-inserts=%0d",
             n_busy, n_rm, n_stale, n_flush, n_full, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
