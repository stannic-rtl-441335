// smmu: Systolic Memory Management Unit, one per machine M_i.
//
// Holds the machine's virtual schedule V_i -- the jobs assigned to M_i but not
// yet released to its work queue -- in a one-dimensional systolic array of
// DEPTH processing elements, PE_0 (head) to PE_{DEPTH-1} (tail), in falling
// WSPT order with no gaps. Beside the array sit the broadcast bus, which
// carries the new job and the global pop/insert flags to every PE, the cost
// bus, which collects the two memoized sums volunteered at the comparison
// threshold, and the cost calculator.
//
// Operation. While `job_valid` is high the new job's W, EPT_i and alpha_J are
// on the inputs; every PE compares its job's WSPT with the new job's, the
// threshold PEs volunteer their sums and `cost` / `eligible` settle
// combinationally (eligible = a job is offered and the tail slot is empty).
// On a clock edge with `step` high the array performs one iteration: the head
// job does one unit of virtual work, or, if it reached its release point,
// it is popped (`rel_valid`/`rel_id` for that cycle) and the array shifts
// left; if `ins` is high the new job is inserted at its WSPT position, the
// jobs behind it shift right, and all memoized sums are updated in place.
// Pop and insert may happen in the same step. Between steps the state does
// not change, so cost and eligibility are stable for as long as the caller
// needs them.
//
// The array, buses and update rules follow the paper. One step per
// scheduling iteration as the unit of virtual time, the synchronous reset and
// the occupancy output are this design's.
module smmu
  import sosa_pkg::*;
#(
  parameter int unsigned DEPTH = 20
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      step,        // perform one iteration at this clock edge
  input  logic      job_valid,   // a new job is offered
  input  id_t       jid,
  input  attr_t     jw,
  input  attr_t     jept,        // J.EPT on this machine
  input  attr_t     jalpha,      // alpha_J code
  input  logic      ins,         // insert the new job at this step
  output cost_t     cost,        // cost of the new job on this machine
  output logic      eligible,    // the new job can be inserted
  output logic      rel_valid,   // head job released at this step
  output id_t       rel_id,
  output logic [$clog2(DEPTH+1)-1:0] occupancy,
  output pe_state_t schedule [DEPTH]  // PE memories, head first
);

  pe_state_t        alu   [DEPTH];
  pe_state_t        st    [DEPTH];
  logic [DEPTH-1:0] c, hi_vol, lo_vol, pe_pop;
  bcast_t           bus;
  pe_state_t        jnew;
  attr_t            jt;
  shi_t             sum_hi;
  slo_t             sum_lo;
  logic             hi_any, lo_head;
  logic             pop;

  // Broadcast bus
  assign pop = pe_pop[0];
  always_comb begin
    bus        = '0;
    bus.pop    = pop;
    bus.ins    = ins;
    bus.vw     = st[0].valid && !pop;
    bus.dalpha = st[0].shi;
    bus.jt     = jt;
    bus.jw     = jw;
    bus.jept   = jept;
  end

  // Systolic array
  for (genvar i = 0; i < DEPTH; i++) begin : g_pe
    logic      c_l, c_r;
    pe_state_t alu_l, alu_r;
    if (i == 0) begin : g_l0
      assign c_l   = 1'b0;
      assign alu_l = '0;
    end else begin : g_l
      assign c_l   = c[i-1];
      assign alu_l = alu[i-1];
    end
    if (i == DEPTH - 1) begin : g_rt
      assign c_r   = 1'b1;   // beyond the tail: an empty slot
      assign alu_r = '0;
    end else begin : g_r
      assign c_r   = c[i+1];
      assign alu_r = alu[i+1];
    end
    stannic_pe #(.IS_HEAD(i == 0)) u_pe (
      .clk   (clk),
      .rst_n (rst_n),
      .step  (step),
      .bus   (bus),
      .jnew  (jnew),
      .c_l   (c_l),
      .c_r   (c_r),
      .alu_l (alu_l),
      .alu_r (alu_r),
      .c     (c[i]),
      .alu   (alu[i]),
      .state (st[i]),
      .hi_vol(hi_vol[i]),
      .lo_vol(lo_vol[i]),
      .pop   (pe_pop[i])
    );
  end

  // Cost bus and cost calculator
  cost_bus #(.DEPTH(DEPTH)) u_cbus (
    .hi_vol  (hi_vol),
    .lo_vol  (lo_vol),
    .pe_state(st),
    .sum_hi  (sum_hi),
    .hi_any  (hi_any),
    .sum_lo  (sum_lo),
    .lo_any  (),
    .lo_head (lo_head)
  );

  smmu_cost_calc u_cc (
    .jw     (jw),
    .jept   (jept),
    .jalpha (jalpha),
    .jid    (jid),
    .sum_hi (sum_hi),
    .hi_any (hi_any),
    .sum_lo (sum_lo),
    .lo_head(lo_head),
    .pop    (pop),
    .dalpha (st[0].shi),
    .vw     (st[0].valid && !pop),
    .head_t (st[0].wspt),
    .jt     (jt),
    .cost   (cost),
    .jnew   (jnew)
  );

  assign eligible  = job_valid && !st[DEPTH-1].valid;
  assign rel_valid = step && pop;
  assign rel_id    = st[0].id;
  assign schedule  = st;

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < DEPTH; i++) occupancy += ($clog2(DEPTH+1))'(st[i].valid);
  end

  // Rules of the array: insert only with room, one volunteer per sum, and a
  // properly ordered schedule (no gaps, WSPT never rising toward the tail).
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (step && ins) assert (eligible) else $error("smmu: insert into a full schedule");
      assert ($countones(hi_vol) <= 1) else $error("smmu: several sum^HI volunteers");
      assert ($countones(lo_vol) <= 1) else $error("smmu: several sum^LO volunteers");
      for (int i = 0; i + 1 < DEPTH; i++) begin
        if (st[i+1].valid)
          assert (st[i].valid && st[i].wspt >= st[i+1].wspt)
            else $error("smmu: schedule out of order at PE %0d", i);
      end
    end
  end

endmodule
