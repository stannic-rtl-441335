// sosa_pkg: types and constants shared by the systolic stochastic online
// scheduler.
//
// Number formats. Job attributes use 8-bit unsigned integers, matching the
// INT8 precision the design is built around (weight, alpha_J, EPT and WSPT
// 8 bits each, cost 16 bits). The WSPT ratio T = W / EPT is kept in
// unsigned Q5.3 (3 fraction bits): with W <= 255 and EPT >= 10 the ratio
// never exceeds 25.5, so 5 integer bits are enough; larger ratios saturate
// at 255. The memoized low-priority sum sum^LO, which is a sum of weights
// minus multiples of T, uses the same 3 fraction bits.
//
// The memoized sums sum^HI_K and sum^LO_K are prefix sums over up to a whole
// virtual schedule, so they are wider than a single attribute: 16 bits for
// sum^HI (holds 256 x 255) and 19 bits for sum^LO (holds 256 x 255 x 8).
// That covers virtual schedules of up to 256 jobs.
//
// The 8-bit alpha_J code a stands for alpha_J = (a + 1) / 256, which covers
// the range (0, 1] the algorithm asks for. The release point stored with a
// job is floor((a + 1) * EPT / 256), never more than the job's EPT.
//
// Job IDs are ID_W bits: ceil(log2(machines x depth)) for the default
// 10 x 20 configuration. Raise ID_W when more jobs can be in flight.
package sosa_pkg;

  localparam int unsigned ATTR_W    = 8;   // weight, EPT, alpha_J, WSPT
  localparam int unsigned WSPT_FRAC = 3;   // fraction bits of T and sum^LO
  localparam int unsigned COST_W    = 16;  // cost reported to the comparator
  localparam int unsigned SHI_W     = 16;  // memoized sum^HI
  localparam int unsigned SLO_W     = 19;  // memoized sum^LO (Q.3)
  localparam int unsigned ID_W      = 8;   // job identifier

  typedef logic [ATTR_W-1:0] attr_t;
  typedef logic [SHI_W-1:0]  shi_t;
  typedef logic [SLO_W-1:0]  slo_t;
  typedef logic [ID_W-1:0]   id_t;
  typedef logic [COST_W-1:0] cost_t;

  // Contents of one PE memory (MEM): the job tracked at one index of a
  // virtual schedule. An all-zero value is an empty (invalid) slot.
  typedef struct packed {
    logic  valid;     // slot holds a job
    id_t   id;        // K.ID
    attr_t wspt;      // T^K_i, Q5.3
    attr_t alpha_pt;  // alpha_J x K.EPT_i, release point
    attr_t n;         // n_K: iterations of virtual work done at the head
    shi_t  shi;       // sum^HI_K: sum of (EPT - n) from the head to K
    slo_t  slo;       // sum^LO_K: sum of (W - n T) from K to the tail, Q.3
  } pe_state_t;

  // Broadcast bus of one SMMU: what every PE of the array sees. The MEM
  // contents of the new job travel beside it (see smmu), because they are
  // computed from the PEs' own comparisons.
  typedef struct packed {
    logic  pop;       // head job reaches its release point this iteration
    logic  ins;       // the new job is inserted into this schedule
    logic  vw;        // head job does virtual work this iteration
    shi_t  dalpha;    // Delta alpha = sum^HI of the head (valid with pop)
    attr_t jt;        // T^J_i of the new job, Q5.3
    attr_t jw;        // J.W
    attr_t jept;      // J.EPT_i
  } bcast_t;

  // Write-back source chosen by a PE control unit.
  typedef enum logic [1:0] {
    WB_SELF  = 2'd0,  // own Local ALU
    WB_LEFT  = 2'd1,  // left neighbour's ALU (right shift of the schedule)
    WB_RIGHT = 2'd2,  // right neighbour's ALU (left shift of the schedule)
    WB_NEW   = 2'd3   // the new job from the broadcast bus
  } wb_src_e;

endpackage
