// sc_stl_guard -- store-to-load search of the store queue, with the
// speculative-store-bypass protection.
//
// A load looks through the store queue for the youngest store that is older
// than itself and writes the same address.  If it finds one, the store's data
// is forwarded (fwd_valid, fwd_idx).  A conventional queue then skips the
// memory access, so whether a load hits in the cache tells an observer
// whether it matched an older, still speculative store.  With PROTECT set,
// the load's request goes to memory in every case (ld_mem_req = ld_valid)
// and the forwarded data is still used, so the match leaves no trace in the
// memory system.  This is the load/store queue change that goes with
// SpecControl; PROTECT = 0 gives the unprotected behaviour for comparison.
//
// Interface and timing: purely combinational.  The store queue is circular,
// sq_head is its oldest entry and ld_sq_tail is the queue tail the load saw
// when it was dispatched, so the stores older than the load are those from
// sq_head up to, but not including, ld_sq_tail (none if they are equal).
// Addresses are compared whole: the caller gives both sides at the same
// granularity (e.g. aligned 8-byte words).  older_unknown reports an older
// store whose address is not known yet.
// Defaults: 114 store-queue entries as in the evaluated core.  The address
// width, the whole-address compare and the circular-queue interface are
// this design's choices.
module sc_stl_guard #(
  parameter int unsigned SQ_ENTRIES = 114,
  parameter int unsigned ADDR_W     = 48,
  parameter bit          PROTECT    = 1'b1,
  localparam int unsigned SQ_W = $clog2(SQ_ENTRIES)
) (
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

  initial begin
    if (SQ_ENTRIES < 2)
      $error("sc_stl_guard: SQ_ENTRIES must be at least 2");
  end

  // distance of entry i from the head, in queue order
  function automatic int unsigned q_dist(int unsigned i, int unsigned head);
    return (i >= head) ? i - head : i + SQ_ENTRIES - head;
  endfunction

  always_comb begin
    int unsigned n_older, best;
    n_older       = q_dist(int'(ld_sq_tail), int'(sq_head));
    fwd_valid     = 1'b0;
    fwd_idx       = '0;
    older_unknown = 1'b0;
    best          = 0;
    for (int i = 0; i < int'(SQ_ENTRIES); i++) begin
      if (ld_valid && sq_valid[i] && q_dist(i, int'(sq_head)) < n_older) begin
        if (!sq_addr_known[i])
          older_unknown = 1'b1;
        else if (sq_addr[i] == ld_addr && (!fwd_valid || q_dist(i, int'(sq_head)) > best)) begin
          fwd_valid = 1'b1;
          fwd_idx   = SQ_W'(i);
          best      = q_dist(i, int'(sq_head));
        end
      end
    end
  end

  assign ld_mem_req = PROTECT ? ld_valid : (ld_valid && !fwd_valid);

endmodule
