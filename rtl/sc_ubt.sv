// sc_ubt -- Unresolved Branches Table.
//
// Holds, for every live unresolved branch marked BR_valid, the mapping from
// its compiler-assigned BranchID to its dynamic sequence number.  It is a
// direct-mapped memory of ENTRIES slots indexed by the low bits of the
// BranchID; each slot keeps a valid bit, the full BranchID (tag) and the
// sequence number.
//
// Ports (all single-cycle; lookup and insert have PORTS lanes, one per
// instruction of a dispatch group):
//   lookup  -- combinational: does a live branch with lookup_id exist, and
//              what is its sequence number (used when an instruction enters
//              the reorder buffer, to record the instance it depends on);
//   ins     -- ins_busy says the slot of ins_id is taken; the reorder
//              buffer must then stall insertion (the table is "full" for
//              that branch).  ins_we writes {id, seq} into the slot; two
//              lanes must not write the same slot in one cycle (asserted);
//   rm      -- a branch resolved: its slot is freed if it still holds
//              that branch's sequence number;
//   flush   -- misprediction: slots holding branches younger than
//              flush_seq are freed (they were squashed).
// Reads see the state before this cycle's writes, so a lane never sees a
// branch inserted by an older lane of the same group; the reorder buffer
// forwards those itself.  Occupancy and a full flag are provided for
// statistics.  Reset is synchronous and active low.  Default size 16
// entries and 4-bit IDs follow the original design; PORTS = 8 matches the
// 8-wide dispatch of the evaluated core.  Tag, squash handling and the
// slot-conflict meaning of "full" are this implementation's choices.
module sc_ubt
  import sc_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned PORTS   = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  branch_id_t [PORTS-1:0] lookup_id,
  output logic       [PORTS-1:0] lookup_hit,
  output seq_t       [PORTS-1:0] lookup_seq,
  input  branch_id_t [PORTS-1:0] ins_id,
  output logic       [PORTS-1:0] ins_busy,
  input  logic       [PORTS-1:0] ins_we,
  input  seq_t       [PORTS-1:0] ins_seq,
  input  logic                   rm_we,
  input  branch_id_t             rm_id,
  input  seq_t                   rm_seq,
  input  logic                   flush_we,
  input  seq_t                   flush_seq,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy,
  output logic                   full
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  initial begin
    if (ENTRIES < 2 || ENTRIES > (1 << ID_W) || (ENTRIES & (ENTRIES - 1)) != 0)
      $error("sc_ubt: ENTRIES must be a power of two between 2 and 2**ID_W");
    if (PORTS < 1)
      $error("sc_ubt: PORTS must be at least 1");
  end

  logic       valid_q [ENTRIES];
  branch_id_t tag_q   [ENTRIES];
  seq_t       seq_q   [ENTRIES];

  function automatic logic [IDX_W-1:0] slot(branch_id_t id);
    return id[IDX_W-1:0];
  endfunction

  logic [IDX_W-1:0] rm_slot;
  assign rm_slot = slot(rm_id);

  always_comb begin
    for (int p = 0; p < PORTS; p++) begin
      lookup_hit[p] = valid_q[slot(lookup_id[p])] && (tag_q[slot(lookup_id[p])] == lookup_id[p]);
      lookup_seq[p] = seq_q[slot(lookup_id[p])];
      ins_busy[p]   = valid_q[slot(ins_id[p])];
    end
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++)
      occupancy += {{($bits(occupancy)-1){1'b0}}, valid_q[i]};
    full = (occupancy == ENTRIES[$bits(occupancy)-1:0]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) valid_q[i] <= 1'b0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (flush_we && valid_q[i] && seq_younger(seq_q[i], flush_seq))
          valid_q[i] <= 1'b0;
      end
      if (rm_we && valid_q[rm_slot] && tag_q[rm_slot] == rm_id && seq_q[rm_slot] == rm_seq)
        valid_q[rm_slot] <= 1'b0;
      for (int p = 0; p < PORTS; p++)
        if (ins_we[p]) valid_q[slot(ins_id[p])] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < PORTS; p++)
      if (ins_we[p]) begin
        tag_q[slot(ins_id[p])] <= ins_id[p];
        seq_q[slot(ins_id[p])] <= ins_seq[p];
      end
  end

  // two lanes writing one slot in the same cycle
  logic ins_conflict;
  always_comb begin
    ins_conflict = 1'b0;
    for (int p = 0; p < PORTS; p++)
      for (int q = 0; q < p; q++)
        if (ins_we[p] && ins_we[q] && slot(ins_id[p]) == slot(ins_id[q])) ins_conflict = 1'b1;
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (ins_we & ins_busy) == '0 && !ins_conflict);

endmodule
