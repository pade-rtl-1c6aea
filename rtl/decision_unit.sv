// decision_unit: pruning decision of one PE lane.
//
// A key j stays alive after bit plane r if its upper bound can still beat the
// row threshold: keep = (S + I_max[r] > T), where S is the partial score with
// all unknown key bits taken as 0, I_max[r] the BUI upper interval of the
// query and T the threshold broadcast by the row's BUI-GF module. When keep
// is low the key is pruned and its remaining bit planes are never fetched.
// The comparison follows the published decision unit (an adder and a
// strict greater-than).
//
// Interface and timing: purely combinational.
module decision_unit
  import pade_pkg::*;
(
  input  score_t score,
  input  score_t imax,
  input  score_t thr,
  output score_t ub,
  output logic   keep
);

  assign ub   = score + imax;
  assign keep = (ub > thr);

endmodule
