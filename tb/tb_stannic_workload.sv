// tb_stannic_workload: the scheduler on a heterogeneous five-machine system,
// fed by a synthetic workload generator.
//
// Machines M1..M5 are <CPU, best>, <CPU, worst>, <Mixed, best>, <GPU, best>
// and <GPU, worst>; the scheduler is built with five machines and virtual
// schedules of ten jobs (the smallest evaluated size, 5 x 10). Jobs are
// compute-intensive, memory-intensive or mixed. A job's EPT on a machine is a
// random base time (10..60 iterations) scaled by a speed factor of that
// machine for that job type, clamped to 10..255; weights are 1..100 and
// alpha codes uniform. The factor table below is this testbench's own
// choice: it makes GPUs fast on compute jobs and slow on memory jobs, CPUs
// the reverse, the mixed machine good at mixed jobs, and "worst" machines
// about twice as slow as "best" ones.
//
// The generator runs once per scheduling iteration (one tick). Per workload
// it has a job composition, a burst factor BF (at most BF jobs per tick), a
// burst type (random: a random number of jobs, up to BF, at randomly chosen
// ticks, one tick in eight on average; uniform: BF jobs every tick), and an
// idle time IT inserted after every II released jobs. With II = 60 and
// IT = 200 the mean arrival rate stays a little below what five machines
// release, while each burst still fills the virtual schedules. Released jobs wait in a FIFO in front of the
// scheduler's valid/ready input. Five workloads of 2000 jobs run back to
// back, 10,000 jobs in all: evenly mixed (35% memory, 35% compute, 30% mixed),
// memory-skewed, compute-skewed, memory-only and compute-only.
//
// Every iteration the assignment, stall and all releases are compared with
// the reference model, and the iteration length (NUM_MACHINES + 2 cycles)
// is checked. At the end it prints, per workload and machine, the number of
// jobs assigned and the mean delay from a job's arrival to its release, and
// it requires that every machine took jobs and that stalls, full schedules
// and pop+insert iterations occurred.
//
// The machine set and the generator's knobs follow the
// paper's schedule evaluation; their values are this testbench's own, as the
// paper does not list them.
module tb_stannic_workload;
  import sosa_pkg::*;
  import sosa_ref_pkg::*;

  localparam int M       = 5;
  localparam int D       = 10;
  localparam int NWL     = 5;
  localparam int PER_WL  = 2000;

  // speed factor in percent, [machine][job type: compute, memory, mixed]
  localparam int FACTOR [M][3] = '{
    '{100,  60,  80},   // M1 CPU best
    '{200, 120, 160},   // M2 CPU worst
    '{ 80,  80,  60},   // M3 Mixed best
    '{ 40, 150,  90},   // M4 GPU best
    '{ 80, 300, 180}    // M5 GPU worst
  };
  // job composition in percent (compute, memory), the rest is mixed
  localparam int JC [NWL][2] = '{'{35, 35}, '{15, 70}, '{70, 15}, '{0, 100}, '{100, 0}};
  localparam int BF [NWL]    = '{2, 1, 2, 1, 2};
  localparam bit UNIFORM [NWL] = '{1'b0, 1'b1, 1'b0, 1'b1, 1'b0};
  localparam int II = 60;
  localparam int IT = 200;

  typedef struct {
    int id;
    int w;
    int alpha;
    int ept [M];
    int arrival;
    int wl;
  } wl_job_t;

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
  int n_popins = 0, n_full = 0, n_stall = 0, n_head = 0;
  int n_assigned [NWL][M];
  longint delay_sum [NWL][M];
  int n_released [NWL][M];

  always #5 clk = ~clk;

  stannic_top #(.NUM_MACHINES(M), .DEPTH(D)) dut (
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
    repeat (400000 * (M + 2)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic wl_job_t make_job(int id, int wl, int tick);
    wl_job_t j;
    int      r    = $urandom_range(0, 99);
    int      kind = (r < JC[wl][0]) ? 0 : (r < JC[wl][0] + JC[wl][1]) ? 1 : 2;
    int      base = $urandom_range(10, 60);
    j.id      = id;
    j.w       = $urandom_range(1, 100);
    j.alpha   = $urandom_range(0, 255);
    j.arrival = tick;
    j.wl      = wl;
    for (int m = 0; m < M; m++) begin
      automatic int e = base * FACTOR[m][kind] / 100;
      j.ept[m] = (e < 10) ? 10 : (e > 255) ? 255 : e;
    end
    return j;
  endfunction

  initial begin
    vs_model  mdl [M];
    wl_job_t  fifo [$];
    wl_job_t  pend, offer;
    wl_job_t  live [int];          // assigned, not yet released, by full ID
    bit       pending = 0;
    int       tick = 0, last_done = -1, cyc = 0;
    int       gen_wl = 0, gen_n = 0, since_idle = 0, idle_left = 0;
    int       next_id = 1, released = 0;
    for (int m = 0; m < M; m++) mdl[m] = new(D);
    rst_n = 1'b0; job_valid = 1'b0; job_id = '0; job_w = '0; job_alpha = '0; job_ept = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (released < NWL * PER_WL) begin
      @(negedge clk);
      cyc++;
      if (iter_done) begin
        automatic int     best = -1;
        automatic longint bc = 0;
        if (last_done >= 0) check(cyc - last_done == M + 2, "iteration length");
        last_done = cyc;
        if (pending) begin
          for (int m = 0; m < M; m++) begin
            if (mdl[m].full()) n_full++;
            else if (best < 0 || mdl[m].cost(pend.w, pend.ept[m]) < bc) begin
              best = m;
              bc   = mdl[m].cost(pend.w, pend.ept[m]);
            end
          end
          check(assign_valid == (best >= 0) && stall == (best < 0), $sformatf("tick %0d assign/stall", tick));
          if (best >= 0) begin
            check(int'(assign_machine) == best && int'(assign_id) == pend.id % 256,
                  $sformatf("tick %0d job %0d to M%0d, expected M%0d", tick, pend.id, assign_machine + 1, best + 1));
            if (mdl[best].ins_pos(ref_wspt(pend.w, pend.ept[best])) == 0) n_head++;
            n_assigned[pend.wl][best]++;
            live[pend.id] = pend;
          end else begin
            n_stall++;
          end
        end else begin
          check(!assign_valid && !stall, "assignment without a job");
        end
        for (int m = 0; m < M; m++) begin
          automatic bit ins_m = (best == m);
          automatic bit p     = mdl[m].pops();
          automatic int r;
          if (p && ins_m) n_popins++;
          check(rel_valid[m] == p, $sformatf("tick %0d M%0d rel_valid", tick, m + 1));
          r = mdl[m].step(ins_m, pend.id, pend.w, ins_m ? pend.ept[m] : 0, pend.alpha);
          if (p) begin
            check(int'(rel_id[m]) == r % 256, $sformatf("tick %0d M%0d released %0d, expected %0d", tick, m + 1, rel_id[m], r));
            delay_sum[live[r].wl][m] += tick - live[r].arrival;
            n_released[live[r].wl][m]++;
            live.delete(r);
            released++;
          end
        end
        if (best >= 0) pending = 0;
        // workload generator: one tick per iteration
        tick++;
        if (gen_wl < NWL) begin
          if (idle_left > 0) begin
            idle_left--;
          end else begin
            automatic int k = UNIFORM[gen_wl] ? BF[gen_wl]
                            : ($urandom_range(0, 7) == 0) ? $urandom_range(1, BF[gen_wl]) : 0;
            for (int i = 0; i < k && gen_wl < NWL; i++) begin
              fifo.push_back(make_job(next_id, gen_wl, tick));
              next_id++;
              gen_n++;
              since_idle++;
              if (gen_n == PER_WL) begin
                gen_wl++;
                gen_n = 0;
              end
            end
            if (since_idle >= II) begin
              since_idle = 0;
              idle_left  = IT;
            end
          end
        end
      end
      // offer the oldest waiting job
      if (!job_valid && fifo.size() > 0) begin
        offer     = fifo.pop_front();
        job_id    = ID_W'(offer.id);
        job_w     = ATTR_W'(offer.w);
        job_alpha = ATTR_W'(offer.alpha);
        for (int m = 0; m < M; m++) job_ept[m] = ATTR_W'(offer.ept[m]);
        job_valid = 1'b1;
      end
      if (job_valid && job_ready) begin
        pending = 1;
        pend    = offer;
        @(posedge clk);
        #1;
        job_valid = 1'b0;
      end
    end
    for (int wl = 0; wl < NWL; wl++) begin
      automatic string s = $sformatf("workload %0d (compute %0d%%, memory %0d%%):", wl, JC[wl][0], JC[wl][1]);
      for (int m = 0; m < M; m++)
        s = {s, $sformatf("  M%0d %0d jobs, delay %0d", m + 1, n_assigned[wl][m],
                          n_released[wl][m] ? delay_sum[wl][m] / n_released[wl][m] : 0)};
      $display("%s", s);
    end
    $display("ticks=%0d jobs=%0d stall=%0d full=%0d pop+insert=%0d insert_at_head=%0d",
             tick, released, n_stall, n_full, n_popins, n_head);
    for (int m = 0; m < M; m++) begin
      automatic int tot = 0;
      for (int wl = 0; wl < NWL; wl++) tot += n_assigned[wl][m];
      check(tot > 0, $sformatf("M%0d took jobs", m + 1));
    end
    check(n_stall > 0 && n_full > 0 && n_popins > 0 && n_head > 0, "stall, full, pop+insert and head insert occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
