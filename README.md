# Stannic: a systolic stochastic online scheduler in SystemVerilog

Stannic assigns a stream of jobs to a set of heterogeneous machines as the jobs arrive. Each job
has a weight W and, for every machine, an expected processing time EPT. The scheduler places
each job on the machine where it adds the least expected weighted waiting time. The decision is
final.

The scheduler does not hand a job to the machine at once. It keeps the job in that machine's
*virtual schedule*. A virtual schedule is a simulated queue, ordered by WSPT (weighted shortest
processing time first, i.e. the ratio W / EPT). The job at the front of the virtual schedule
accrues simulated work. When that work reaches a fraction alpha of the job's EPT, the job is
released to the machine's real work queue. Until then, jobs that arrive later but have a higher
priority can still go ahead of it. This is the greedy stochastic online scheduling (SOS) rule.

The hardware idea is to hold every virtual schedule in a one-dimensional systolic array. Each
processing element (PE) holds one job, and the jobs sit in WSPT order. Each PE also keeps two
running sums for its job, which the PE updates itself. With these sums, the cost of a new job on
a machine is one lookup plus a multiply-add. Nothing has to be summed over the queue. Keeping
the order and the sums correct takes only local decisions: each PE looks at its own job, its two
neighbours and a few broadcast flags. No central manager reads or moves the queue.

This RTL implements the scheduler core. It covers the per-machine units, the shared comparator
and the iteration sequencer. The host link and the job preprocessing are outside it. The default
size is 10 machines with 20 jobs per virtual schedule.

## 1. The cost of a job

Consider a new job J on machine i. Compare J's WSPT ratio T^J with the ratio T^K of every job K
already in that machine's virtual schedule V_i. This splits V_i into two parts:

* The **high set** holds the jobs with T^K >= T^J. They stay ahead of J, so J waits for the work
  they still have to do.
* The **low set** holds the jobs with T^K < T^J. J goes ahead of them and delays each of them by
  EPT_J. That costs W_K * EPT_J in total.

The cost of J on machine i is:

    cost = W_J * (EPT_J + sum^HI) + EPT_J * sum^LO

* sum^HI is the remaining virtual work of the high set.
* sum^LO is the total weight of the low set.

The machine with the lowest cost wins.

Because V_i is sorted, the high set is always a prefix of the array and the low set is the rest.
Each PE keeps two memoized values for its job K:

* **sum^HI_K**: the remaining work of K and of every job ahead of it. This is what sum^HI would
  be if K were the last job of the high set.
* **sum^LO_K**: the weight of K and of every job behind it. This is what sum^LO would be if K
  were the first job of the low set.

So for any new job, only the two PEs at the boundary matter.

* Only the head does virtual work, so only its remaining work shrinks. Every job's sum^HI_K
  includes the head, so every sum^HI_K shrinks with it.
* The head's own sum^HI is exactly its remaining work. It is not stored separately and is called
  Delta alpha below.
* In sum^LO the head's weight counts in proportion to the work it has left. This matters only
  when the head itself falls in the low set.

## 2. Number formats

All job attributes are 8-bit unsigned integers. The 16-bit cost and the 8-bit ratio follow the
INT8 precision point of the original design study. The sums are wider because they add up a
whole queue.

| Quantity | Width | Format |
|---|---|---|
| W, EPT | 8 | integer |
| alpha code a | 8 | alpha = (a+1)/256, so alpha is in (0, 1] |
| T = W / EPT | 8 | Q5.3: T = min(255, floor(8W / EPT)); EPT = 0 gives 255 |
| release point | 8 | floor((a+1) * EPT / 256), fixed when the job is inserted |
| n (virtual work of the head) | 8 | integer, counts iterations at the head |
| sum^HI | 16 | integer work units |
| sum^LO | 19 | Q.3: sums of 8W, the same scaling as T |
| cost | 16 | saturates at 65535 |
| job ID | 8 | ceil(log2(machines x depth)) = 8 at the default size |

The cost uses floor(sum^LO / 8). Neither sum can overflow at depth 20:

* sum^HI is at most 20 * 255.
* sum^LO is at most 20 * 8 * 255.

The cost does saturate for large jobs on loaded machines. Saturated costs tie, and ties go to
the lowest machine index.

Job IDs are only 8 bits wide. They name the at most machines x depth jobs that are live in the
schedules at any time. A host that streams more jobs than that must reuse IDs.

## 3. The systolic virtual schedule

Each machine has one **SMMU** (systolic memory management unit, `smmu`). It holds:

* a chain of DEPTH PEs, `stannic_pe`. PE_0 is the head and PE_{DEPTH-1} is the tail.
* a **broadcast bus**, a `bcast_t` struct. It carries the new job's T, W and EPT, the insert
  flag, the head's pop flag, the head's Delta alpha and the "head does virtual work" flag.
* a **cost bus**, `cost_bus`. It collects the two volunteered sums.
* a **cost calculator**, `smmu_cost_calc`.

A PE's memory holds:

* a valid bit
* the job ID
* T
* the release point
* n
* sum^HI_K
* sum^LO_K

The array is always *properly ordered*. The valid jobs are packed from the head with no gaps, and
T never rises towards the tail. An assertion in `smmu` checks this every cycle.

**Comparison and threshold.** Every PE compares its T^K with the broadcast T^J:

* C = 0 if it holds a job and T^K >= T^J.
* C = 1 otherwise, including for an empty PE.

In a properly ordered array, C reads 0...01...1 from head to tail. Each PE looks at its
neighbours' C values to find out whether it sits at the boundary:

* The PE with C = 0 and C_R = 1 (the last of the high set) puts its sum^HI_K on the cost bus.
  The slot beyond the tail counts as C = 1.
* The PE with C = 1 and C_L = 0 (the first of the low set) puts its sum^LO_K on the cost bus. The
  head has no left neighbour and counts as C_L = 0.

At most one PE drives each sum. An empty set drives nothing, which reads as zero. The cost bus is
an AND-OR reduction.

**Release.** Only the head PE has an `alpha_check`. It raises pop when the head holds a job and
n >= release point. The SMMU then reports the head's ID on `rel_valid`/`rel_id` and shifts the
array.

## 4. Keeping the sums right: the four iteration kinds

Every iteration, every SMMU writes its whole array back once. Which kind of iteration it is
depends on two flags: pop (the head reached its release point) and insert (this machine won the
new job). Each PE's local ALU (`pe_local_alu`) computes the updated state of its own job. Its
control unit (`pe_control_unit`) chooses what the PE stores: its own ALU output, the left
neighbour's, the right neighbour's, or the new job.

For a valid job K, one formula covers all four kinds:

    vw       = head valid and not pop          (virtual work happens this iteration)
    sum^HI' = sum^HI - vw - (pop ? Delta alpha : 0) + (insert and C=1 ? EPT_J : 0)
    sum^LO' = sum^LO - (head and vw ? T^K : 0)     + (insert and C=0 ? 8 W_J : 0)
    n'      = n + (head and vw)

In words:

* One unit of virtual work by the head lowers every job's sum^HI by one.
* It also lowers the head's own sum^LO by the head's T. The head's weight is worked off in
  proportion to its progress, in the Q.3 units of the sums.
* A pop removes the departing job's remaining work, Delta alpha, from everyone's sum^HI.
* An inserted job adds its EPT to the sum^HI of the jobs behind it.
* An inserted job adds its weight to the sum^LO of the jobs ahead of it.

The write-back rules are:

| pop | insert | PE stores |
|---|---|---|
| 0 | 0 | own ALU (standard iteration) |
| 1 | 0 | right neighbour's ALU: the array shifts left; the tail takes an empty job |
| 0 | 1 | C = 0: own ALU. C = 1 and (head or C_L = 0): the new job. Otherwise: left neighbour (the low set shifts right) |
| 1 | 1 | C = 1: own ALU. C = 0 and C_R = 1: the new job. Otherwise: right neighbour (the high set shifts left) |

The fourth row deserves a closer look. A pop and an insert in the same iteration combine two
shifts:

* The pop shifts everything left.
* The insert shifts the low set right.

The net effect is that the high set moves left and the low set stays put. The new job therefore
goes one slot further left than in a plain insert: into the last slot of the high set.

If the new job outranks every job in the array, no PE has C = 0 and that rule would find no slot.
To handle this, the popping head forces its own C to 0. It becomes the insertion point, because
its right neighbour has C = 1.

**Sums of the new job.** The cost calculator builds the new job's memory contents from the same
two bus values it used for the cost. It applies this iteration's updates as if the job had
always been there:

    sum^HI_J = sum^HI - (pop ? Delta alpha : 0) - (head does virtual work and high set not empty) + EPT_J
    sum^LO_J = sum^LO - (the low-side volunteer is the head doing virtual work ? T^head : 0) + 8 W_J

The stored release point is computed here too, and so is T^J itself, which is broadcast for the
comparisons. T^J uses a combinational divider.

**Cost in a pop iteration.** When the head pops in the same iteration that a job is costed, the
cost uses sum^HI - Delta alpha. So the cost sees the schedule without the departing job. Because
the head's C is forced to 0, the head is never the low-side volunteer in such an iteration.

**Full schedules.** A machine whose tail PE is valid has no room. An insert would push the tail
job out, so such a machine is not eligible for the new job. The `smmu` asserts that it never
inserts when full.

## 5. One scheduling iteration

`stannic_top` holds NUM_MACHINES SMMUs and one `cost_comparator`, and a two-state sequencer
drives them. An iteration always takes **NUM_MACHINES + 2 clock cycles**, which is 12 at the
default size:

1. **LOAD, 1 cycle.** `job_ready` is high if no job is pending. A job offered with `job_valid`
   is taken into the broadcast register at the clock edge. The comparator starts.
2. **COMPARE, NUM_MACHINES + 1 cycles.** Every SMMU computes its cost and eligibility
   combinationally from the registered job. The comparator examines one machine per cycle,
   keeping the eligible machine with the strictly lowest cost, so ties go to the lower index.
3. **UPDATE, the last COMPARE cycle.** `iter_done` is high. At its closing clock edge every SMMU
   steps once: it pops or does virtual work, and the chosen machine also inserts the job. In the
   same cycle:
   * `assign_valid`, `assign_machine` and `assign_id` report the decision.
   * `rel_valid[m]` and `rel_id[m]` report each machine's release.

If no machine has room, `stall` is high instead of `assign_valid`. The job stays pending and is
costed again in the next iteration, after the heads have done more work.

An iteration with no job still advances virtual time on every machine. One iteration is one unit
of virtual time, so EPTs and release points are counted in iterations.

The array state changes only at the UPDATE edge. The costs the comparator reads therefore stay
valid through the scan, and the C values that pick the insertion slot are the same ones that
produced the cost.

## 6. Interface of `stannic_top`

Parameters are `NUM_MACHINES` (default 10) and `DEPTH` (default 20). Reset is synchronous and
active low, and it empties every schedule.

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `job_valid`, `job_ready` | in, out | 1 | job handshake; a job is taken when both are high at a clock edge |
| `job_id` | in | 8 | job identifier |
| `job_w` | in | 8 | weight |
| `job_alpha` | in | 8 | alpha code a, alpha = (a+1)/256 |
| `job_ept` | in | NUM_MACHINES x 8 | EPT of the job on each machine |
| `assign_valid` | out | 1 | the pending job was placed in this cycle |
| `assign_machine` | out | clog2(NUM_MACHINES) | its machine |
| `assign_id` | out | 8 | its ID |
| `rel_valid`, `rel_id` | out | NUM_MACHINES x (1, 8) | job released to each machine's work queue |
| `iter_done` | out | 1 | last cycle of an iteration |
| `stall` | out | 1 | the pending job found no machine with room |

Hold the job fields stable while `job_valid` is high.

The preprocessing that produces W, alpha and the per-machine EPTs lives outside this core, and so
do the host link and the machines' work queues. In the original system these are an FPGA
host-PCIe kernel interface and software.

## 7. Files

| File | Contents |
|---|---|
| `rtl/sosa_pkg.sv` | widths, `pe_state_t` (PE memory), `bcast_t` (broadcast bus), `wb_src_e` |
| `rtl/alpha_check.sv` | head release test |
| `rtl/pe_local_alu.sv` | per-PE update formula |
| `rtl/pe_control_unit.sv` | per-PE write-back source |
| `rtl/stannic_pe.sv` | PE: memory, comparison, volunteers, ALU, CU, and alpha check at the head |
| `rtl/cost_bus.sv` | collects the volunteered sums |
| `rtl/smmu_cost_calc.sv` | T^J, release point, cost, initial sums of the new job |
| `rtl/smmu.sv` | one machine: PE chain, buses, cost calculator, assertions |
| `rtl/cost_comparator.sv` | iterative minimum search over machines |
| `rtl/stannic_top.sv` | the scheduler |
| `tb/sosa_ref_pkg.sv` | job-by-job reference model of a virtual schedule |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_stannic_workload` |

## 8. Verification

Every testbench prints `TB_RESULT checks=<n> failures=<n>`, has a watchdog, and counts the cases
it was meant to reach.

* **Reference model.** `sosa_ref_pkg::vs_model` keeps a plain sorted list of jobs, each with its
  W, EPT, T, release point and virtual work. It computes sums and costs by summing over the
  list, and it never uses the memoized values. The SMMU and top-level testbenches compare the
  hardware against it. They check the array cell by cell, including both memoized sums of every
  PE.
* **`tb_stannic_top`** runs the top at its default size, 10 x 20, for 6000 iterations. The run
  has three phases:
  * a flood of long high-alpha jobs that fills every schedule until jobs stall;
  * a phase of short jobs arriving at random intervals;
  * an idle drain.

  It checks:
  * every assignment, stall and release;
  * that every iteration lasts NUM_MACHINES + 2 cycles.

  It requires each of these cases to occur at least once:
  * standard, pop, insert and pop+insert iterations
  * insertion at the head
  * full schedules
  * stalls
  * idle iterations
* **`tb_stannic_workload`** runs a heterogeneous five-machine system at 5 x 10. Its machines are
  <CPU, best>, <CPU, worst>, <Mixed, best>, <GPU, best> and <GPU, worst>. A synthetic generator
  drives it, with these settings:
  * job composition: compute, memory or mixed jobs;
  * bursts, random or uniform;
  * idle periods after every 60 jobs.

  It streams 10,000 jobs through five workloads: evenly mixed, memory-skewed, compute-skewed,
  memory-only and compute-only. Every decision is checked against the model. The test prints the
  jobs and mean arrival-to-release delay per machine, and it requires every machine to take jobs.
  The per-machine EPT factors are the testbench's own. They make GPUs fast on compute and CPUs
  fast on memory jobs. In this run the three "best" machines take most of the work and the two
  slow machines still receive jobs.
* **`tb_smmu`** drives one SMMU of depth 5 with random jobs, including equal-WSPT ties. It
  compares the cost, eligibility, releases and the whole array after every step.
* **Block testbenches.**
  * `tb_alpha_check` and `tb_pe_control_unit` are exhaustive.
  * `tb_pe_local_alu`, `tb_cost_bus`, `tb_smmu_cost_calc` and `tb_stannic_pe` are randomized and
    check against formulas written independently in the testbench.
  * `tb_cost_comparator` also checks the scan latency (done NUM_MACHINES cycles after start) and
    the tie rule.

To simulate with Verilator 5, put the packages first:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/sosa_pkg.sv tb/sosa_ref_pkg.sv \
      rtl/alpha_check.sv rtl/pe_local_alu.sv rtl/pe_control_unit.sv rtl/stannic_pe.sv \
      rtl/cost_bus.sv rtl/smmu_cost_calc.sv rtl/smmu.sv rtl/cost_comparator.sv rtl/stannic_top.sv \
      tb/tb_stannic_top.sv --top-module tb_stannic_top -o sim
    ./obj_dir/sim

The full-size run builds in well under a minute and simulates in about a second. To change the
size, change the parameters of `stannic_top` or the `M`/`D` localparams of the testbench.

## 9. What is specified and what was chosen here

The following come from the published Stannic description:

* the structure (SMMU per machine, PE chain, broadcast bus, cost bus, per-machine cost
  calculator, one shared iterative comparator);
* the comparison rule;
* the threshold volunteering;
* the four iteration kinds with their write-back sources and sum updates;
* the head's forced C = 0 on a pop;
* the initial sums of an inserted job;
* the INT8 attribute widths with a 16-bit cost;
* the default size, which is the largest of the four evaluated configurations.

The following are choices made for this RTL where the description is silent or is given only at a
higher level:

* **Iteration timing.** The original design was built with high-level synthesis. It reports an
  average of 62 cycles per iteration over its four configurations, and about 5 extra cycles per
  added machine. Here an iteration is a fixed NUM_MACHINES + 2 cycles: one cycle per machine for
  the comparator and two for loading and control. This RTL does not try to match the 62 cycles.
* **Virtual time.** The description says the head's virtual work is tracked every cycle. Here it
  advances once per iteration. An iteration therefore is the unit of EPT, and every iteration
  has the same length, job or no job.
* **Pop iterations.** The head does no virtual work in the iteration in which it pops. The cost
  of a job costed in that iteration excludes the departing head.
* **Number formats.** The following are this design's own:
  * the Q5.3 ratio and its saturation;
  * the alpha code;
  * the widths of the memoized sums (16 and 19 bits);
  * saturation of the cost.

  The earlier task-centric design's job memory listed 8-bit sum fields per job. Memoized prefix
  sums need the wider fields.
* **Tie rules.** A job K with the same T as the new job counts as high set, as the comparison
  rule says. In the comparator, equal costs go to the lower machine index.
* **Handshake and stall.** Job input uses a valid/ready handshake with one job per iteration. A
  job no machine can take is kept and retried. The description only says that full virtual
  schedules cannot take jobs.
* **Reset and observability.** Reset is synchronous and clears all PE memories. `smmu` also has
  `occupancy` and `schedule` outputs for observation. The top leaves them unconnected.
* **Not built:**
  * the host interface, an OpenCL kernel with AXI4 memory-mapped ports over PCIe;
  * the job preprocessing that computes EPTs;
  * the machines' work queues.

  The top has plain ports where they would connect.
* **Size.** The original design routed up to 140 machines. This RTL is parameterized and has no
  size-dependent structure other than the comparator scan length. The sizes simulated are:
  * 10 x 20, the default;
  * 5 x 10, the workload run;
  * single SMMUs of depth 5.
