// sc_marking_decode -- turns the speculation-control prefix field of one
// instruction into its restriction markings.
//
// Purely combinational.  Inputs: prefix_present (the instruction carries the
// 11-bit field at all), the raw field and the control-flow kind found by
// pre-decode.  Output: the decoded marking (sc_pkg::sc_mark_t).
//
// Mapping (follows the option table of the original design):
//   * restriction: front-end bit -> Res_FE (front-end wins when both bits are
//     set, since a front-end restricted branch leaves nothing speculative
//     behind it), else back-end bit -> Res_BE, else Res_no;
//   * dependency of the instruction: BD_valid when BD-informed is 1, BD_no
//     when it is 0, BD_invalid when no prefix is present;
//   * a branch uses the same BD-informed bit for its own marking
//     (BR_valid / BR_no / BR_invalid).
//   * barrier: a speculation source that restricts every younger
//     instruction until it resolves -- a BR_invalid branch, or an indirect
//     jump not marked BR_no.
// Encoding INVALID as "no prefix" is this implementation's choice: the
// original names the INVALID case but not its bit encoding.
module sc_marking_decode
  import sc_pkg::*;
(
  input  logic       prefix_present,
  input  sc_prefix_t prefix,
  input  ctl_e       ctl,
  output sc_mark_t   mark
);

  always_comb begin
    mark               = '0;
    mark.ctl           = ctl;
    mark.branch_id     = prefix.branch_id;
    mark.dep_branch_id = prefix.dep_branch_id;

    if (!prefix_present)          mark.res = RES_NO;
    else if (prefix.fe_restricted) mark.res = RES_FE;
    else if (prefix.be_restricted) mark.res = RES_BE;
    else                           mark.res = RES_NO;

    if (!prefix_present)         mark.bd = DEP_INVALID;
    else if (prefix.bd_informed) mark.bd = DEP_VALID;
    else                         mark.bd = DEP_NO;

    mark.br      = (ctl == CTL_NONE) ? DEP_NO : mark.bd;
    mark.barrier = (ctl != CTL_NONE) &&
                   ((mark.br == DEP_INVALID) ||
                    ((ctl == CTL_INDIRECT) && (mark.br != DEP_NO)));
  end

endmodule
