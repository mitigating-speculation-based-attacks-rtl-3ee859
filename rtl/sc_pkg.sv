// sc_pkg -- types and constants shared by the speculation-control blocks.
//
// Every instruction carries an 11-bit speculation-control field in its
// prefix bytes: two restriction bits (front-end, back-end) and nine
// branch-dependency bits (BD-informed, a 4-bit BranchID that names the
// instruction itself when it is a branch, and a 4-bit Dependent BranchID that
// names the most recent branch it truly depends on).  The field widths are
// the ones of the original design; the order of the fields inside the
// 11-bit word (front-end restriction in the MSB, Dependent BranchID in the
// LSBs, i.e. left-to-right as the fields are usually drawn) is a choice of
// this implementation.
//
// A binary that carries no such prefix (a legacy binary) is described by
// prefix_present = 0: both IDs then count as INVALID, which is the
// conservative "restrict everything after an unresolved branch" case.
package sc_pkg;

  localparam int unsigned ID_W  = 4;   // BranchID / Dependent BranchID width
  localparam int unsigned SEQ_W = 32;  // dynamic sequence-number width

  typedef logic [ID_W-1:0]  branch_id_t;
  typedef logic [SEQ_W-1:0] seq_t;

  // Raw 11-bit field as carried by the prefix bytes.
  typedef struct packed {
    logic       fe_restricted;   // Speculation Restrictions: front-end
    logic       be_restricted;   // Speculation Restrictions: back-end
    logic       bd_informed;     // compiler supplied dependency information
    branch_id_t branch_id;       // static ID of this branch
    branch_id_t dep_branch_id;   // ID of the most recent branch it depends on
  } sc_prefix_t;

  // Kind of control-flow instruction, known after pre-decode.
  typedef enum logic [1:0] {
    CTL_NONE     = 2'd0,   // not a speculation source
    CTL_COND     = 2'd1,   // conditional direct branch
    CTL_INDIRECT = 2'd2    // indirect jump / call / return
  } ctl_e;

  // Speculation-restriction marking (Res_no / Res_FE / Res_BE).
  typedef enum logic [1:0] {
    RES_NO = 2'd0,
    RES_FE = 2'd1,
    RES_BE = 2'd2
  } res_e;

  // Branch-dependency marking of any instruction (BD_*) and of a branch (BR_*).
  typedef enum logic [1:0] {
    DEP_INVALID = 2'd0,
    DEP_NO      = 2'd1,
    DEP_VALID   = 2'd2
  } dep_e;

  // Decoded marking of one instruction.
  typedef struct packed {
    ctl_e       ctl;
    res_e       res;
    dep_e       bd;             // BD_invalid / BD_no / BD_valid
    dep_e       br;             // BR_invalid / BR_no / BR_valid (branches only)
    branch_id_t branch_id;
    branch_id_t dep_branch_id;
    logic       barrier;        // restricts every younger instruction until it resolves
  } sc_mark_t;

  // Wrap-safe "a is younger than b" for sequence numbers.
  function automatic logic seq_younger(seq_t a, seq_t b);
    seq_t d;
    d = a - b;
    return (d != '0) && !d[SEQ_W-1];
  endfunction

endpackage
