// stannic_pe: processing element of the systolic virtual schedule.
//
// One PE is one index of a machine's virtual schedule V_i and tracks the job
// K held there. It contains
//   MEM          the job state (pe_state_t): valid, K.ID, T^K_i, the alpha_J
//                release point, n_K, and the memoized sums sum^HI_K, sum^LO_K;
//   comparison   C = 0 when K is valid and T^K_i >= T^J_i of the new job on
//                the broadcast bus, else 1 (an empty slot gives 1);
//   Local ALU    pe_local_alu, the updated state of K for this iteration;
//   CU           pe_control_unit, which picks the write-back source;
//   alpha check  head PE only (IS_HEAD = 1): pops the job at its release
//                point, and then forces C = 0 so that the new job of a
//                pop + insert iteration is placed correctly.
// The PE also self-identifies at the threshold between the high and low sets
// and volunteers one memoized sum to the cost bus: sum^HI_K when C = 0 and
// C_R = 1 (last job of the high set), sum^LO_K when C = 1 and C_L = 0 (first
// slot of the low set; the head has no left neighbour and counts as C_L = 0).
//
// Timing: everything but MEM is combinational. MEM is written on the clock
// edge where `step` is high (the update phase of an iteration) and is cleared
// by a synchronous active-low reset. Between steps the state is frozen, so
// comparisons made during cost evaluation still hold at write-back.
//
// Structure and rules follow the paper; the reset, the step strobe and the
// forced C = 0 applying also to the cost evaluation are this design's.
module stannic_pe
  import sosa_pkg::*;
#(
  parameter bit IS_HEAD = 1'b0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      step,      // write-back strobe
  input  bcast_t    bus,       // broadcast bus
  input  pe_state_t jnew,      // MEM contents of the new job
  input  logic      c_l,       // left neighbour's C (unused by the head)
  input  logic      c_r,       // right neighbour's C (1 beyond the tail)
  input  pe_state_t alu_l,     // left neighbour's ALU output
  input  pe_state_t alu_r,     // right neighbour's ALU output (0 beyond the tail)
  output logic      c,         // own comparison value
  output pe_state_t alu,       // own ALU output
  output pe_state_t state,     // MEM contents
  output logic      hi_vol,    // volunteers state.shi on the cost bus
  output logic      lo_vol,    // volunteers state.slo on the cost bus
  output logic      pop        // head only: release the job this iteration
);

  pe_state_t mem_q;
  wb_src_e   sel;
  logic      c_raw;

  assign state = mem_q;

  if (IS_HEAD) begin : g_head
    alpha_check u_alpha (
      .valid   (mem_q.valid),
      .n       (mem_q.n),
      .alpha_pt(mem_q.alpha_pt),
      .pop     (pop)
    );
  end else begin : g_body
    assign pop = 1'b0;
  end

  always_comb begin
    c_raw  = !(mem_q.valid && (mem_q.wspt >= bus.jt));
    c      = (IS_HEAD && pop) ? 1'b0 : c_raw;
    hi_vol = !c && c_r;
    lo_vol = c && (IS_HEAD || !c_l);
  end

  pe_local_alu #(.IS_HEAD(IS_HEAD)) u_alu (
    .cur(mem_q),
    .c  (c),
    .bus(bus),
    .nxt(alu)
  );

  pe_control_unit #(.IS_HEAD(IS_HEAD)) u_cu (
    .pop(bus.pop),
    .ins(bus.ins),
    .c  (c),
    .c_l(c_l),
    .c_r(c_r),
    .sel(sel)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_q <= '0;
    end else if (step) begin
      unique case (sel)
        WB_SELF:  mem_q <= alu;
        WB_LEFT:  mem_q <= alu_l;
        WB_RIGHT: mem_q <= alu_r;
        WB_NEW:   mem_q <= jnew;
        default:  mem_q <= alu;
      endcase
    end
  end

endmodule
