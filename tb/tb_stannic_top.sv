// tb_stannic_top: end-to-end testbench of the scheduler at its default size
// (10 machines, virtual schedules of 20 jobs).
//
// A job source offers jobs through the valid/ready handshake, holding each
// offer until it is taken. Every iteration the testbench runs the same
// iteration on the reference model of all machines -- cost of the pending
// job on every machine, the lowest-cost machine with room (ties to the lower
// index), one pop-or-virtual-work step per machine, insertion -- and compares
// the assignment, the stall flag and the release of every machine. It also
// checks that every iteration lasts NUM_MACHINES + 2 clock cycles.
//
// The run has three phases: a flood of long, high-alpha jobs that fills every
// schedule until jobs stall; a phase of short, low-alpha jobs arriving at a
// random rate, with frequent pops; and an idle phase that drains the
// schedules. It counts standard, pop, insert, pop+insert and insert-at-head
// iterations, full schedules, stalls and idle iterations; each must occur.
//
// The scheduling rule and the four iteration kinds are the
// paper's; the fixed iteration length, handshake and retry are this design's.
module tb_stannic_top;
  import sosa_pkg::*;
  import sosa_ref_pkg::*;

  localparam int M     = 10;   // defaults of stannic_top
  localparam int D     = 20;
  localparam int ITERS = 6000;

  logic                          clk = 1'b0;
  logic                          rst_n;
  logic                          job_valid, job_ready;
  logic [ID_W-1:0]               job_id;
  logic [ATTR_W-1:0]             job_w, job_alpha;
  logic [M-1:0][ATTR_W-1:0]      job_ept;
  logic                          assign_valid;
  logic [$clog2(M)-1:0]          assign_machine;
  logic [ID_W-1:0]               assign_id;
  logic [M-1:0]                  rel_valid;
  logic [M-1:0][ID_W-1:0]        rel_id;
  logic                          iter_done, stall;

  int checks = 0, failures = 0;
  int n_std = 0, n_pop = 0, n_ins = 0, n_popins = 0, n_head = 0;
  int n_full = 0, n_stall = 0, n_idle = 0, n_rel = 0;

  always #5 clk = ~clk;

  stannic_top dut (
    .clk, .rst_n, .job_valid, .job_ready, .job_id, .job_w, .job_alpha, .job_ept,
    .assign_valid, .assign_machine, .assign_id, .rel_valid, .rel_id,
    .iter_done, .stall
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (ITERS * (M + 2) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // job source
  int next_id = 1;
  int phase   = 0;
  task automatic new_offer();
    job_id = ID_W'(next_id);
    next_id++;
    job_w  = ATTR_W'($urandom_range(1, 255));
    if (phase == 0) begin
      job_alpha = ATTR_W'($urandom_range(200, 255));
      for (int m = 0; m < M; m++) job_ept[m] = ATTR_W'($urandom_range(60, 255));
    end else begin
      job_alpha = ATTR_W'($urandom_range(0, 80));
      for (int m = 0; m < M; m++) job_ept[m] = ATTR_W'($urandom_range(10, 60));
    end
  endtask

  initial begin
    vs_model mdl [M];
    bit      pending = 0;
    int      p_id, p_w, p_alpha;
    int      p_ept [M];
    int      iter = 0;
    int      last_done = -1, cyc = 0;
    for (int m = 0; m < M; m++) mdl[m] = new(D);
    rst_n = 1'b0; job_valid = 1'b0; job_id = '0; job_w = '0; job_alpha = '0; job_ept = '0;
    new_offer();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (iter < ITERS) begin
      @(negedge clk);
      cyc++;
      phase = (iter < ITERS / 3) ? 0 : (iter < 5 * ITERS / 6) ? 1 : 2;
      if (iter_done) begin
        automatic int     best = -1;
        automatic longint bc = 0;
        bit      pop_m [M];
        // iteration length
        if (last_done >= 0) check(cyc - last_done == M + 2, $sformatf("iteration length %0d", cyc - last_done));
        last_done = cyc;
        // machine choice
        if (pending) begin
          for (int m = 0; m < M; m++) begin
            if (mdl[m].full()) n_full++;
            else if (best < 0 || mdl[m].cost(p_w, p_ept[m]) < bc) begin
              best = m;
              bc   = mdl[m].cost(p_w, p_ept[m]);
            end
          end
          check(assign_valid == (best >= 0), $sformatf("iter %0d assign_valid", iter));
          check(stall == (best < 0), $sformatf("iter %0d stall", iter));
          if (best >= 0) begin
            check(int'(assign_machine) == best && int'(assign_id) == p_id % 256,
                  $sformatf("iter %0d assigned job %0d to M%0d, expected M%0d", iter, assign_id, assign_machine, best));
            if (mdl[best].ins_pos(ref_wspt(p_w, p_ept[best])) == 0) n_head++;
          end else begin
            n_stall++;
          end
        end else begin
          n_idle++;
          check(!assign_valid && !stall, $sformatf("iter %0d assignment without a job", iter));
        end
        // releases and model step
        for (int m = 0; m < M; m++) begin
          automatic int r;
          automatic bit ins_m = (best == m);
          pop_m[m] = mdl[m].pops();
          if (pop_m[m] && ins_m) n_popins++;
          else if (pop_m[m])     n_pop++;
          else if (ins_m)        n_ins++;
          else                   n_std++;
          check(rel_valid[m] == pop_m[m], $sformatf("iter %0d M%0d rel_valid", iter, m));
          r = mdl[m].step(ins_m, p_id, p_w, ins_m ? p_ept[m] : 0, p_alpha);
          if (pop_m[m]) begin
            n_rel++;
            check(int'(rel_id[m]) == r % 256, $sformatf("iter %0d M%0d released %0d, expected %0d", iter, m, rel_id[m], r));
          end
        end
        if (best >= 0) pending = 0;
        iter++;
      end
      // offer a job now and then (always in the flood phase, never when idle)
      if (!job_valid)
        job_valid = (phase == 0) ? 1'b1 : (phase == 1) ? ($urandom_range(0, 20) == 0) : 1'b0;
      // handshake: an offer taken at the coming edge
      if (job_valid && job_ready) begin
        pending = 1;
        p_id = int'(job_id); p_w = int'(job_w); p_alpha = int'(job_alpha);
        for (int m = 0; m < M; m++) p_ept[m] = int'(job_ept[m]);
        @(posedge clk);
        #1;
        new_offer();
        job_valid = 1'b0;
      end
    end
    $display("iterations=%0d machine-iterations: standard=%0d pop=%0d insert=%0d pop+insert=%0d",
             iter, n_std, n_pop, n_ins, n_popins);
    $display("insert_at_head=%0d full_schedule=%0d stall=%0d idle=%0d released=%0d",
             n_head, n_full, n_stall, n_idle, n_rel);
    check(n_std > 0, "standard iteration occurred");
    check(n_pop > 0, "pop iteration occurred");
    check(n_ins > 0, "insert iteration occurred");
    check(n_popins > 0, "pop+insert iteration occurred");
    check(n_head > 0, "insert at head occurred");
    check(n_full > 0, "full schedule occurred");
    check(n_stall > 0, "stall occurred");
    check(n_idle > 0, "idle iteration occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
