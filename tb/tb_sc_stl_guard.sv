// tb_sc_stl_guard -- random test of the store-to-load search.
//
// Two instances at the default 114-entry store queue, one protected and one
// not, see the same random queue contents: a random head, random valid and
// address-known bits, and addresses from a pool of eight so that matches are
// frequent.  A reference model walks the stores older than the load from the
// youngest down and must agree on fwd_valid, fwd_idx and older_unknown.  The
// protected instance must request memory for every load; the unprotected one
// only for loads that are not forwarded.
module tb_sc_stl_guard;

  localparam int N  = 114;
  localparam int AW = 48;
  localparam int SW = $clog2(N);

  logic [N-1:0]         sq_valid, sq_addr_known;
  logic [N-1:0][AW-1:0] sq_addr;
  logic [SW-1:0]        sq_head, ld_sq_tail;
  logic                 ld_valid;
  logic [AW-1:0]        ld_addr;
  logic                 fwd_valid, older_unknown, ld_mem_req;
  logic [SW-1:0]        fwd_idx;
  logic                 u_fwd_valid, u_older_unknown, u_ld_mem_req;
  logic [SW-1:0]        u_fwd_idx;

  sc_stl_guard dut (.*);

  sc_stl_guard #(.PROTECT(1'b0)) dut_u (
    .sq_valid, .sq_addr_known, .sq_addr, .sq_head, .ld_valid, .ld_addr, .ld_sq_tail,
    .fwd_valid (u_fwd_valid), .fwd_idx (u_fwd_idx),
    .older_unknown (u_older_unknown), .ld_mem_req (u_ld_mem_req)
  );

  int checks = 0, failures = 0, n_fwd = 0, n_unknown = 0;

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #10ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      automatic logic  e_fwd = 1'b0, e_unk = 1'b0;
      automatic int    e_idx = 0, n_older;
      sq_head    = SW'($urandom_range(N - 1));
      ld_sq_tail = SW'($urandom_range(N - 1));
      ld_valid   = ($urandom_range(9) != 0);
      ld_addr    = AW'($urandom_range(7));
      for (int i = 0; i < N; i++) begin
        sq_valid[i]      = ($urandom_range(3) != 0);
        sq_addr_known[i] = ($urandom_range(7) != 0);
        sq_addr[i]       = AW'($urandom_range(7));
      end
      #1;
      n_older = (int'(ld_sq_tail) - int'(sq_head) + N) % N;
      // youngest older store first
      for (int k = n_older - 1; k >= 0 && ld_valid; k--) begin
        automatic int i = (int'(sq_head) + k) % N;
        if (sq_valid[i] && !sq_addr_known[i]) e_unk = 1'b1;
        if (sq_valid[i] && sq_addr_known[i] && sq_addr[i] == ld_addr && !e_fwd) begin
          e_fwd = 1'b1;
          e_idx = i;
        end
      end
      n_fwd     += int'(e_fwd);
      n_unknown += int'(e_unk);
      check("forward found", fwd_valid == e_fwd);
      check("forward index", !e_fwd || int'(fwd_idx) == e_idx);
      check("older unknown address", older_unknown == e_unk);
      check("protected load always goes to memory", ld_mem_req == ld_valid);
      check("unprotected instance agrees", u_fwd_valid == e_fwd && u_older_unknown == e_unk && (!e_fwd || int'(u_fwd_idx) == e_idx));
      check("unprotected load skips memory when forwarded", u_ld_mem_req == (ld_valid && !e_fwd));
    end
    $display("%0d forwarded loads, %0d with an older unknown address", n_fwd, n_unknown);
    check("forwarding happened", n_fwd > 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
