// tb_sc_fetch_guard -- random stimulus for the front-end restriction with
// the default 8-lane fetch group.
// A reference state (blocked / running) is kept in the testbench: a fetched
// Res_FE branch cuts the group behind it and blocks fetch from the next
// cycle until a Res_FE resolution or a flush.  Stall, kept lanes,
// predictor-lookup masks and predictor-update mask are compared every
// cycle.  The stimulus never fetches while stalled, as a core would.
// Counts how often a block started and ended and how often a group was cut.
module tb_sc_fetch_guard;
  import sc_pkg::*;

  localparam int unsigned W = 8;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] fetch_valid, fetch_keep, bpu_lookup_en;
  logic resolve_valid, resolve_is_fe, flush;
  ctl_e [W-1:0] fetch_ctl;
  res_e [W-1:0] fetch_res;
  logic fetch_stall, bpu_update_en;
  int checks = 0, failures = 0, blocks = 0, unblocks = 0, flushes = 0, cuts = 0;
  logic ref_blocked;

  sc_fetch_guard dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fetch_valid = '0; resolve_valid = 0; resolve_is_fe = 0; flush = 0;
    fetch_ctl = {W{CTL_NONE}}; fetch_res = {W{RES_NO}};
    ref_blocked = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      int n;
      logic cut, fe, any_fe;
      @(negedge clk);
      // drive: 0..W contiguous lanes
      n = fetch_stall ? 0 : $urandom_range(0, W);
      for (int l = 0; l < W; l++) begin
        fetch_valid[l] = (l < n);
        fetch_ctl[l]   = ($urandom_range(0, 2) == 0) ? ctl_e'($urandom_range(1, 2)) : CTL_NONE;
        fetch_res[l]   = ($urandom_range(0, 5) == 0) ? RES_FE : res_e'($urandom_range(0, 2));
      end
      resolve_valid = ($urandom_range(0, 3) == 0);
      resolve_is_fe = resolve_valid && (ref_blocked ? ($urandom_range(0, 2) == 0) : 1'b0);
      flush         = ($urandom_range(0, 40) == 0);
      #1;
      // combinational outputs
      checks++;
      if (fetch_stall !== ref_blocked) begin
        failures++; $display("cyc %0d stall %0b expected %0b", cyc, fetch_stall, ref_blocked);
      end
      cut = 0; any_fe = 0;
      for (int l = 0; l < W; l++) begin
        fe = fetch_valid[l] && fetch_ctl[l] != CTL_NONE && fetch_res[l] == RES_FE;
        checks++;
        if (fetch_keep[l] !== (fetch_valid[l] && !cut)) begin
          failures++; $display("cyc %0d lane %0d keep wrong", cyc, l);
        end
        if (fetch_valid[l] && cut) cuts++;
        checks++;
        if (bpu_lookup_en[l] !== (fetch_valid[l] && !cut && !fe)) begin
          failures++; $display("cyc %0d lane %0d lookup mask wrong", cyc, l);
        end
        if (fe) cut = 1;
      end
      any_fe = cut;
      checks++;
      if (bpu_update_en !== (resolve_valid && !resolve_is_fe)) begin
        failures++; $display("cyc %0d update mask wrong", cyc);
      end
      // reference next state
      if (ref_blocked) begin
        if (flush || (resolve_valid && resolve_is_fe)) begin
          ref_blocked = 0; unblocks++;
          if (flush) flushes++;
        end
      end else if (any_fe && !flush) begin
        ref_blocked = 1; blocks++;
      end
    end
    checks++;
    if (blocks == 0 || unblocks == 0 || flushes == 0 || cuts == 0) begin
      failures++; $display("mechanism not exercised");
    end
    $display("blocks=%0d unblocks=%0d flush-unblocks=%0d cut lanes=%0d", blocks, unblocks, flushes, cuts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
