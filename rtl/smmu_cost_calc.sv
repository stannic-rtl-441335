// smmu_cost_calc: Cost Calculator of one SMMU.
//
// For a new job J offered to machine M_i it computes
//   T^J_i     = W / EPT_i in Q5.3, saturated to 8 bits (EPT_i = 0 gives 255);
//   alpha pt  = floor((alpha code + 1) * EPT_i / 256), the stored release point;
//   cost      = J.W * (J.EPT_i + sum^HI) + J.EPT_i * floor(sum^LO / 8),
//               saturated to COST_W bits,
// where sum^HI and sum^LO are the two memoized values delivered by the cost
// bus: the delay of the jobs ahead of J and the weight of the jobs J would
// delay. In an iteration where the head job pops, Delta alpha (the head's
// sum^HI) is taken off sum^HI, so the cost sees the schedule without the
// departing job.
//
// It also builds the PE memory contents of J for the insertion write-back,
// with the initial memoized sums
//   sum^HI_J = sum^HI - Delta alpha (pop) - 1 (head does virtual work and the
//              high set is not empty) + J.EPT_i
//   sum^LO_J = sum^LO - T^head (the low-side volunteer is the head doing
//              virtual work) + J.W (Q.3),
// i.e. the values J would have had if it had been in the schedule all along,
// after this iteration's own updates.
//
// Purely combinational. The cost formula is the discretized SOS cost of the
// paper and the sum^HI_J/sum^LO_J initialisations are its; fixed-point scaling,
// saturation and the alpha_J code are this implementation's.
module smmu_cost_calc
  import sosa_pkg::*;
(
  input  attr_t     jw,       // J.W
  input  attr_t     jept,     // J.EPT_i
  input  attr_t     jalpha,   // alpha_J code: alpha_J = (code + 1) / 256
  input  id_t       jid,      // J.ID
  input  shi_t      sum_hi,   // from the cost bus
  input  logic      hi_any,   // the high set is not empty
  input  slo_t      sum_lo,   // from the cost bus
  input  logic      lo_head,  // sum^LO came from the head PE
  input  logic      pop,      // head pops this iteration
  input  shi_t      dalpha,   // head's sum^HI
  input  logic      vw,       // head does virtual work this iteration
  input  attr_t     head_t,   // T of the head job
  output attr_t     jt,       // T^J_i
  output cost_t     cost,     // saturated cost
  output pe_state_t jnew      // PE memory contents for J
);

  localparam int unsigned PROD_W = 2 * ATTR_W + SHI_W + 2;

  logic [ATTR_W+WSPT_FRAC-1:0] wq;
  logic [ATTR_W+WSPT_FRAC-1:0] quot;
  logic [2*ATTR_W:0]           apt_full;
  shi_t                        hi_eff;
  logic [PROD_W-1:0]           cost_h, cost_l, cost_full;

  always_comb begin
    // WSPT ratio of the new job
    wq   = {jw, {WSPT_FRAC{1'b0}}};
    quot = (jept == '0) ? '1 : wq / {{WSPT_FRAC{1'b0}}, jept};
    jt   = (quot > (ATTR_W+WSPT_FRAC)'(2**ATTR_W - 1)) ? '1 : quot[ATTR_W-1:0];

    // release point alpha_J x EPT_i
    apt_full = ((2*ATTR_W+1)'(jalpha) + 1) * (2*ATTR_W+1)'(jept);

    // cost
    hi_eff    = hi_any ? (sum_hi - (pop ? dalpha : '0)) : '0;
    cost_h    = PROD_W'(jw) * (PROD_W'(jept) + PROD_W'(hi_eff));
    cost_l    = PROD_W'(jept) * PROD_W'(sum_lo >> WSPT_FRAC);
    cost_full = cost_h + cost_l;
    cost      = (cost_full > PROD_W'(2**COST_W - 1)) ? '1 : cost_full[COST_W-1:0];

    // memory contents of J
    jnew          = '0;
    jnew.valid    = 1'b1;
    jnew.id       = jid;
    jnew.wspt     = jt;
    jnew.alpha_pt = apt_full[2*ATTR_W-1:ATTR_W];
    jnew.n        = '0;
    jnew.shi      = hi_eff - shi_t'(vw && hi_any) + shi_t'(jept);
    jnew.slo      = sum_lo - ((lo_head && vw) ? slo_t'(head_t) : '0)
                  + (slo_t'(jw) << WSPT_FRAC);
  end

endmodule
