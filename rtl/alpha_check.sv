// alpha_check: release test of the head processing element.
//
// The job at the head of a virtual schedule accumulates virtual work, one
// unit per scheduling iteration, counted in n. It leaves the schedule for
// the machine's work queue once n has reached its release point
// alpha_J x EPT_i, which was computed when the job was inserted and is kept
// in the PE memory. This module is that comparison: pop = valid && n >=
// alpha_pt. It is purely combinational; the SMMU acts on pop in the update
// phase of the same iteration. Only the head PE instantiates it.
//
// The test n >= alpha_J x EPT_i is the algorithm's own rule. Storing the
// product instead of alpha_J, and never popping an empty head, are choices
// of this implementation.
module alpha_check
  import sosa_pkg::*;
(
  input  logic  valid,     // head PE holds a job
  input  attr_t n,         // virtual work done by the head job
  input  attr_t alpha_pt,  // release point alpha_J x EPT_i
  output logic  pop        // release the head job this iteration
);

  always_comb pop = valid && (n >= alpha_pt);

endmodule
