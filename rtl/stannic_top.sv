// stannic_top: systolic stochastic online scheduling accelerator.
//
// Assigns a stream of jobs to NUM_MACHINES heterogeneous machines with the
// greedy stochastic online scheduling rule: each job goes, irrevocably, to
// the machine where it adds the least expected weighted delay, and waits in
// that machine's virtual schedule, ordered by WSPT (weight / expected
// processing time), until it has spent alpha_J of its expected processing
// time at the head; then it is released to the machine's work queue.
//
// Structure: one SMMU per machine (systolic virtual schedule of DEPTH PEs,
// broadcast bus, cost bus, cost calculator) and one shared iterative cost
// comparator, sequenced by a small controller.
//
// Iteration (NUM_MACHINES + 2 clock cycles, the same for every iteration):
//   LOAD    job_ready is high unless a job is still pending; a job accepted
//           here (job_valid && job_ready) is held in the broadcast register
//           and all SMMUs start evaluating its cost. The comparator starts.
//   COMPARE NUM_MACHINES + 1 cycles: the comparator scans the machines.
//   UPDATE  the last COMPARE cycle (comparator done): every SMMU takes one
//           step -- head virtual work or pop, and, on the chosen machine,
//           insertion of the pending job. assign_* and rel_* are valid in
//           this cycle and iter_done is high.
// A pending job for which no machine has room is kept and tried again in
// the next iteration; `stall` marks such an UPDATE cycle. One iteration is
// one unit of virtual time for the jobs' EPTs and release points.
//
// Interface: job_id/job_w/job_alpha/job_ept with a valid/ready handshake;
// job_ept holds the job's expected processing time on each machine (the
// output of job preprocessing, done outside). Releases come out per machine,
// for the machines' work queues. Reset is synchronous, active low, and
// empties every schedule.
//
// The architecture follows the paper. The fixed-length iteration, the
// handshake and the retry of a job that found no room are this design's.
module stannic_top
  import sosa_pkg::*;
#(
  parameter int unsigned NUM_MACHINES = 10,
  parameter int unsigned DEPTH        = 20,
  localparam int unsigned SEL_W = (NUM_MACHINES > 1) ? $clog2(NUM_MACHINES) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // job input
  input  logic                              job_valid,
  output logic                              job_ready,
  input  logic [ID_W-1:0]                   job_id,
  input  logic [ATTR_W-1:0]                 job_w,
  input  logic [ATTR_W-1:0]                 job_alpha,
  input  logic [NUM_MACHINES-1:0][ATTR_W-1:0] job_ept,
  // machine assignment decision
  output logic                              assign_valid,
  output logic [SEL_W-1:0]                  assign_machine,
  output logic [ID_W-1:0]                   assign_id,
  // releases to the machines' work queues
  output logic [NUM_MACHINES-1:0]           rel_valid,
  output logic [NUM_MACHINES-1:0][ID_W-1:0] rel_id,
  // iteration status
  output logic                              iter_done,
  output logic                              stall
);

  typedef enum logic {S_LOAD, S_COMPARE} state_e;

  state_e                            state_q;
  logic                              pending_q;
  id_t                               jid_q;
  attr_t                             jw_q, jalpha_q;
  logic [NUM_MACHINES-1:0][ATTR_W-1:0] jept_q;

  logic                              cmp_start, cmp_done, cmp_found;
  logic [SEL_W-1:0]                  cmp_sel;
  logic [NUM_MACHINES-1:0][COST_W-1:0] cost;
  logic [NUM_MACHINES-1:0]           eligible;
  logic                              step;

  // Controller
  assign job_ready = (state_q == S_LOAD) && !pending_q;
  assign cmp_start = (state_q == S_LOAD);
  assign step      = (state_q == S_COMPARE) && cmp_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q   <= S_LOAD;
      pending_q <= 1'b0;
      jid_q     <= '0;
      jw_q      <= '0;
      jalpha_q  <= '0;
      jept_q    <= '0;
    end else begin
      unique case (state_q)
        S_LOAD: begin
          if (job_valid && job_ready) begin
            pending_q <= 1'b1;
            jid_q     <= job_id;
            jw_q      <= job_w;
            jalpha_q  <= job_alpha;
            jept_q    <= job_ept;
          end
          state_q <= S_COMPARE;
        end
        S_COMPARE: begin
          if (cmp_done) begin
            if (pending_q && cmp_found) pending_q <= 1'b0;
            state_q <= S_LOAD;
          end
        end
        default: state_q <= S_LOAD;
      endcase
    end
  end

  assign assign_valid   = step && pending_q && cmp_found;
  assign assign_machine = cmp_sel;
  assign assign_id      = jid_q;
  assign iter_done      = step;
  assign stall          = step && pending_q && !cmp_found;

  // One SMMU per machine
  for (genvar m = 0; m < NUM_MACHINES; m++) begin : g_m
    id_t                         rid;
    cost_t                       mcost;
    smmu #(.DEPTH(DEPTH)) u_smmu (
      .clk      (clk),
      .rst_n    (rst_n),
      .step     (step),
      .job_valid(pending_q),
      .jid      (jid_q),
      .jw       (jw_q),
      .jept     (jept_q[m]),
      .jalpha   (jalpha_q),
      .ins      (assign_valid && (32'(cmp_sel) == m)),
      .cost     (mcost),
      .eligible (eligible[m]),
      .rel_valid(rel_valid[m]),
      .rel_id   (rid),
      .occupancy(),
      .schedule ()
    );
    assign cost[m]   = mcost;
    assign rel_id[m] = rid;
  end

  cost_comparator #(.NUM_MACHINES(NUM_MACHINES)) u_cmp (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (cmp_start),
    .cost    (cost),
    .eligible(eligible),
    .done    (cmp_done),
    .found   (cmp_found),
    .sel     (cmp_sel)
  );

endmodule
