// tb_smmu: self-checking testbench of one SMMU (systolic virtual schedule).
//
// Drives random iterations -- with or without an offered job, inserting it
// whenever the schedule has room and a coin says so -- and compares, every
// iteration, the cost, eligibility and release against the job-by-job
// reference model, and after every step the whole array: order of job IDs,
// WSPT, release point, virtual work and both memoized sums of every PE.
// Weights come partly from a small set so that equal WSPT values (ties)
// occur; every other job has a low alpha so that pops are frequent. Runs a
// small array (DEPTH 5) so that full schedules are frequent, and counts
// standard, pop, insert, pop+insert, insert-at-head and full cases; each
// must occur.
//
// The schedule rules are the paper's; one step per iteration as the
// unit of virtual time is this design's.
module tb_smmu;
  import sosa_pkg::*;
  import sosa_ref_pkg::*;

  localparam int DEPTH = 5;
  localparam int ITERS = 4000;

  logic      clk = 1'b0;
  logic      rst_n;
  logic      step, job_valid, ins;
  id_t       jid;
  attr_t     jw, jept, jalpha;
  cost_t     cost;
  logic      eligible, rel_valid;
  id_t       rel_id;
  logic [$clog2(DEPTH+1)-1:0] occupancy;
  pe_state_t schedule [DEPTH];

  int checks = 0, failures = 0;
  int n_std = 0, n_pop = 0, n_ins = 0, n_popins = 0, n_head = 0, n_full = 0;

  always #5 clk = ~clk;

  smmu #(.DEPTH(DEPTH)) dut (
    .clk, .rst_n, .step, .job_valid, .jid, .jw, .jept, .jalpha, .ins,
    .cost, .eligible, .rel_valid, .rel_id, .occupancy, .schedule
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vs_model m = new(DEPTH);
    int      next_id = 1;
    rst_n = 1'b0; step = 1'b0; job_valid = 1'b0; ins = 1'b0;
    jid = '0; jw = '0; jept = '0; jalpha = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int it = 0; it < ITERS; it++) begin
      bit p, want_ins;
      int exp_rel;
      // offer a job
      @(negedge clk);
      job_valid = ($urandom_range(0, 3) != 0);
      jid    = id_t'(next_id % 256);
      jw     = ($urandom_range(0, 2) == 0) ? attr_t'(8 * $urandom_range(1, 4)) : attr_t'($urandom_range(1, 255));
      jept   = ($urandom_range(0, 2) == 0) ? attr_t'(16 * $urandom_range(1, 2)) : attr_t'($urandom_range(10, 40));
      jalpha = (it % 2) ? attr_t'($urandom_range(0, 60)) : attr_t'($urandom_range(0, 255));
      ins    = 1'b0;
      #1;
      p = m.pops();
      if (job_valid) begin
        check(eligible == !m.full(), $sformatf("it %0d eligible %0b", it, eligible));
        check(64'(cost) == m.cost(jw, jept),
              $sformatf("it %0d cost %0d exp %0d", it, cost, m.cost(jw, jept)));
      end else begin
        check(!eligible, "eligible without a job");
      end
      want_ins = job_valid && eligible && ($urandom_range(0, 4) != 0);
      if (job_valid && m.full()) n_full++;
      if (want_ins && m.ins_pos(ref_wspt(jw, jept)) == 0) n_head++;
      if (p && want_ins) n_popins++;
      else if (p)        n_pop++;
      else if (want_ins) n_ins++;
      else               n_std++;
      ins  = want_ins;
      step = 1'b1;
      #1;
      check(rel_valid == p, $sformatf("it %0d rel_valid", it));
      exp_rel = m.step(want_ins, int'(jid), int'(jw), int'(jept), int'(jalpha));
      if (p) check(int'(rel_id) == exp_rel, $sformatf("it %0d rel_id %0d exp %0d", it, rel_id, exp_rel));
      if (want_ins) next_id++;
      @(posedge clk);
      #1;
      step = 1'b0; ins = 1'b0;
      // compare the whole array with the model
      check(int'(occupancy) == m.q.size(), $sformatf("it %0d occupancy %0d exp %0d", it, occupancy, m.q.size()));
      for (int k = 0; k < DEPTH; k++) begin
        if (k < m.q.size()) begin
          check(schedule[k].valid && int'(schedule[k].id) == m.q[k].id % 256 &&
                int'(schedule[k].wspt) == m.q[k].t && int'(schedule[k].alpha_pt) == m.q[k].apt &&
                int'(schedule[k].n) == m.q[k].n,
                $sformatf("it %0d PE %0d job id %0d exp %0d", it, k, schedule[k].id, m.q[k].id));
          check(64'(schedule[k].shi) == m.shi_of(k) && 64'(schedule[k].slo) == m.slo_of(k),
                $sformatf("it %0d PE %0d sums %0d/%0d exp %0d/%0d", it, k,
                          schedule[k].shi, schedule[k].slo, m.shi_of(k), m.slo_of(k)));
        end else begin
          check(!schedule[k].valid, $sformatf("it %0d PE %0d should be empty", it, k));
        end
      end
    end
    $display("iterations: standard=%0d pop=%0d insert=%0d pop+insert=%0d insert_at_head=%0d full=%0d",
             n_std, n_pop, n_ins, n_popins, n_head, n_full);
    check(n_std > 0 && n_pop > 0 && n_ins > 0 && n_popins > 0 && n_head > 0 && n_full > 0,
          "every iteration type occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
