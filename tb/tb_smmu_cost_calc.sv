// tb_smmu_cost_calc: randomized testbench of the SMMU cost calculator.
//
// Drives random new jobs (including EPT = 0 and weights that saturate the
// WSPT ratio) and random cost-bus contents, with and without a popping head,
// and checks every output against plain integer arithmetic: the WSPT ratio
// T = min(255, floor(8 W / EPT)), the release point floor((a+1) EPT / 256),
// the cost W (EPT + sum^HI') + EPT floor(sum^LO / 8) saturated to 16 bits,
// where sum^HI' has the popping head's Delta alpha removed, and the initial
// memoized sums of the new job.
//
// The cost and initial-sum formulas are the paper's;
// rounding, saturation and the alpha code are this design's.
module tb_smmu_cost_calc;
  import sosa_pkg::*;

  attr_t     jw, jept, jalpha, jt, head_t;
  id_t       jid;
  shi_t      sum_hi, dalpha;
  slo_t      sum_lo;
  logic      hi_any, lo_head, pop, vw;
  cost_t     cost;
  pe_state_t jnew;
  int        checks = 0, failures = 0;
  int        n_sat = 0, n_pop = 0, n_zero_ept = 0;

  smmu_cost_calc dut (.jw, .jept, .jalpha, .jid, .sum_hi, .hi_any, .sum_lo, .lo_head,
                      .pop, .dalpha, .vw, .head_t, .jt, .cost, .jnew);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20000; it++) begin
      longint e_t, e_apt, hi, e_cost, e_shi, e_slo;
      jw      = attr_t'($urandom);
      jept    = ($urandom_range(0, 30) == 0) ? 8'd0 : attr_t'($urandom_range(1, (it % 2) ? 40 : 255));
      jalpha  = attr_t'($urandom);
      jid     = id_t'($urandom);
      hi_any  = ($urandom_range(0, 4) != 0);
      pop     = hi_any && 1'($urandom);
      dalpha  = shi_t'($urandom_range(0, 255));
      sum_hi  = hi_any ? shi_t'(dalpha + $urandom_range(0, (it % 3 == 0) ? 3000 : 60)) : '0;
      sum_lo  = slo_t'($urandom_range(0, (it % 3 == 0) ? 200000 : 3000));
      lo_head = !pop && 1'($urandom);
      vw      = !pop && 1'($urandom);
      head_t  = attr_t'($urandom);
      if (lo_head && vw && sum_lo < head_t) sum_lo = slo_t'(head_t);
      #1;
      e_t   = (jept == 0) ? 255 : ((8 * longint'(jw)) / jept > 255 ? 255 : (8 * longint'(jw)) / jept);
      e_apt = ((longint'(jalpha) + 1) * jept) / 256;
      hi    = hi_any ? longint'(sum_hi) - (pop ? longint'(dalpha) : 0) : 0;
      e_cost = longint'(jw) * (jept + hi) + longint'(jept) * (longint'(sum_lo) / 8);
      if (e_cost > 65535) begin
        e_cost = 65535;
        n_sat++;
      end
      e_shi = hi - ((vw && hi_any) ? 1 : 0) + jept;
      e_slo = longint'(sum_lo) - ((lo_head && vw) ? longint'(head_t) : 0) + 8 * longint'(jw);
      if (pop) n_pop++;
      if (jept == 0) n_zero_ept++;
      check(longint'(jt) == e_t, $sformatf("it %0d T=%0d exp %0d (W=%0d EPT=%0d)", it, jt, e_t, jw, jept));
      check(longint'(cost) == e_cost, $sformatf("it %0d cost=%0d exp %0d", it, cost, e_cost));
      check(jnew.valid && jnew.id == jid && longint'(jnew.wspt) == e_t && jnew.n == 0 &&
            longint'(jnew.alpha_pt) == e_apt, $sformatf("it %0d new job fields", it));
      check(longint'(jnew.shi) == e_shi && longint'(jnew.slo) == e_slo,
            $sformatf("it %0d new job sums %0d/%0d exp %0d/%0d", it, jnew.shi, jnew.slo, e_shi, e_slo));
    end
    $display("saturated=%0d pop=%0d ept0=%0d", n_sat, n_pop, n_zero_ept);
    check(n_sat > 0 && n_pop > 0 && n_zero_ept > 0, "saturation, pop and EPT = 0 occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
