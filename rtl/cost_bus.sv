// cost_bus: the cost bus of one SMMU.
//
// In a properly ordered virtual schedule at most one PE sits on the high side
// of the comparison threshold and at most one on the low side. Those two PEs
// volunteer their memoized sums, so the sums over whole sets that the cost
// formula needs arrive in a single lookup rather than by adding across the
// array. The bus is an AND-OR collector: each PE's value is masked by its
// volunteer flag and the masked values are ORed together. It also reports
// whether anyone volunteered each sum and whether the low-side value came
// from the head PE (the cost calculator needs that to account for the head's
// virtual work in the same iteration).
//
// Combinational. The SMMU asserts that no two PEs volunteer the same sum,
// which would mean the schedule had lost its ordering. The bus itself is
// named by the paper; the AND-OR form is this implementation's.
module cost_bus
  import sosa_pkg::*;
#(
  parameter int unsigned DEPTH = 20
) (
  input  logic      [DEPTH-1:0] hi_vol,    // per-PE sum^HI volunteer flags
  input  logic      [DEPTH-1:0] lo_vol,    // per-PE sum^LO volunteer flags
  input  pe_state_t             pe_state [DEPTH],
  output shi_t                  sum_hi,    // sum^HI of the high-side PE
  output logic                  hi_any,    // the high set is not empty
  output slo_t                  sum_lo,    // sum^LO of the low-side PE
  output logic                  lo_any,    // some PE volunteered sum^LO
  output logic                  lo_head    // the sum^LO volunteer is the head
);

  always_comb begin
    sum_hi = '0;
    sum_lo = '0;
    for (int i = 0; i < DEPTH; i++) begin
      sum_hi |= pe_state[i].shi & {SHI_W{hi_vol[i]}};
      sum_lo |= pe_state[i].slo & {SLO_W{lo_vol[i]}};
    end
    hi_any  = |hi_vol;
    lo_any  = |lo_vol;
    lo_head = lo_vol[0];
  end

endmodule
