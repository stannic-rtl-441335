// pe_local_alu: Local ALU of one processing element of the systolic
// virtual schedule.
//
// Each PE keeps two memoized sums for the job K it tracks:
//   sum^HI_K = sum over the jobs from the head down to K of (EPT - n),
//              the delay K and everything ahead of it still represent;
//   sum^LO_K = sum over the jobs from K down to the tail of (W - n T),
//              the weighted work K and everything behind it represent.
// Every iteration the ALU produces the updated state of its job. That
// result is written back by this PE or, when the schedule shifts, by a
// neighbour, so the ALU does not need to know where its output goes.
//
// One formula covers all four iteration types (standard, pop, insert,
// pop + insert), with C the PE's comparison against the new job
// (0: K is in the high-priority set, 1: in the low-priority set):
//   sum^HI' = sum^HI - vw - (pop ? Delta alpha : 0) + (ins && C ? J.EPT : 0)
//   sum^LO' = sum^LO - (head && vw ? T^K : 0)       + (ins && !C ? J.W : 0)
//   n'      = n + (head && vw)
// vw is set when the head job does virtual work this iteration; every job
// behind the head counts the head's remaining EPT in its sum^HI, so each
// decrements by one. Delta alpha is the departing head's sum^HI. J.W is
// added in Q.3 scaling (shifted left by WSPT_FRAC).
//
// The per-set updates are those of the paper's iteration tables. Doing no
// virtual work in an iteration in which the head pops, and zeroing the
// output of an empty slot (so that shifting it in makes an empty slot), are
// choices of this implementation. Combinational.
module pe_local_alu
  import sosa_pkg::*;
#(
  parameter bit IS_HEAD = 1'b0
) (
  input  pe_state_t cur,   // stored state of this PE
  input  logic      c,     // comparison value C of this PE
  input  bcast_t    bus,   // broadcast bus
  output pe_state_t nxt    // updated state
);

  shi_t dec_hi, add_hi, sub_pop;
  slo_t dec_lo, add_lo;

  always_comb begin
    dec_hi  = shi_t'(bus.vw);
    sub_pop = bus.pop ? bus.dalpha : '0;
    add_hi  = (bus.ins && c) ? shi_t'(bus.jept) : '0;
    dec_lo  = (IS_HEAD && bus.vw) ? slo_t'(cur.wspt) : '0;
    add_lo  = (bus.ins && !c) ? slo_t'(bus.jw) << WSPT_FRAC : '0;

    nxt = '0;
    if (cur.valid) begin
      nxt          = cur;
      nxt.shi      = cur.shi - dec_hi - sub_pop + add_hi;
      nxt.slo      = cur.slo - dec_lo + add_lo;
      nxt.n        = cur.n + attr_t'(IS_HEAD && bus.vw);
    end
  end

endmodule
