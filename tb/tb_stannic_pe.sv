// tb_stannic_pe: randomized testbench of the processing element, as head
// (IS_HEAD = 1) and as body PE.
//
// Both PEs see random broadcast buses, neighbour comparison bits, neighbour
// ALU outputs and new-job contents. Each cycle the testbench checks the
// comparison bit C (0 iff the PE holds a job whose WSPT is at least the new
// job's; the head forces 0 when it pops), the two cost-bus volunteer bits and
// the head's pop decision, then, with a random step strobe, checks that the
// PE memory takes the source the write-back rules of the four iteration types
// select: its own ALU output, the left or right neighbour's ALU output, or
// the new job. Without step the memory must not change. The expected ALU
// output is computed here from the update rules. The memory starts empty, so
// the first contents come from the neighbours and the new job. Each
// iteration type and write-back source is counted and must occur.
//
// The comparison, volunteer and write-back rules are the
// paper's; the step strobe and reset are this design's.
module tb_stannic_pe;
  import sosa_pkg::*;

  logic      clk = 1'b0;
  logic      rst_n, step;
  bcast_t    bus_h, bus_b;
  pe_state_t jnew, alu_l, alu_r;
  logic      c_l, c_r;
  logic      c_h, c_b, hv_h, hv_b, lv_h, lv_b, pop_h, pop_b;
  pe_state_t alu_h, alu_b, st_h, st_b;

  int checks = 0, failures = 0;
  int n_src [4];
  int n_type [4];

  always #5 clk = ~clk;

  stannic_pe #(.IS_HEAD(1'b1)) u_head (
    .clk, .rst_n, .step, .bus(bus_h), .jnew, .c_l(1'b0), .c_r, .alu_l('0), .alu_r,
    .c(c_h), .alu(alu_h), .state(st_h), .hi_vol(hv_h), .lo_vol(lv_h), .pop(pop_h)
  );
  stannic_pe #(.IS_HEAD(1'b0)) u_body (
    .clk, .rst_n, .step, .bus(bus_b), .jnew, .c_l, .c_r, .alu_l, .alu_r,
    .c(c_b), .alu(alu_b), .state(st_b), .hi_vol(hv_b), .lo_vol(lv_b), .pop(pop_b)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic pe_state_t rand_state();
    pe_state_t s;
    s          = '0;
    s.valid    = ($urandom_range(0, 5) != 0);
    if (!s.valid) return s;
    s.id       = id_t'($urandom);
    s.wspt     = attr_t'($urandom);
    s.alpha_pt = attr_t'($urandom_range(0, 12));
    s.n        = attr_t'($urandom_range(0, 10));
    s.shi      = shi_t'($urandom_range(300, 5000));
    s.slo      = slo_t'($urandom_range(3000, 90000));
    return s;
  endfunction

  function automatic pe_state_t exp_alu(bit head, pe_state_t s, bit cc, bcast_t b);
    pe_state_t e;
    if (!s.valid) return '0;
    e = s;
    if (b.vw) e.shi = e.shi - 1'b1;
    if (b.vw && head) begin
      e.slo = e.slo - slo_t'(s.wspt);
      e.n   = s.n + 1'b1;
    end
    if (b.pop) e.shi = e.shi - b.dalpha;
    if (b.ins &&  cc) e.shi = e.shi + shi_t'(b.jept);
    if (b.ins && !cc) e.slo = e.slo + (slo_t'(b.jw) << 3);
    return e;
  endfunction

  // write-back source: 0 self, 1 left, 2 right, 3 new job
  function automatic int exp_src(bit head, bit p, bit ins, bit cc, bit cl, bit cr);
    if (!p && !ins) return 0;
    if (p && !ins)  return 2;
    if (!p && ins)  return !cc ? 0 : (head || !cl) ? 3 : 1;
    return cc ? 0 : cr ? 3 : 2;
  endfunction

  function automatic bcast_t rand_bus();
    bcast_t b;
    b        = '0;
    b.ins    = 1'($urandom);
    b.dalpha = shi_t'($urandom_range(0, 255));
    b.jt     = attr_t'($urandom);
    b.jw     = attr_t'($urandom);
    b.jept   = attr_t'($urandom);
    return b;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; step = 1'b0; bus_h = '0; bus_b = '0;
    jnew = '0; alu_l = '0; alu_r = '0; c_l = 1'b0; c_r = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(st_h == '0 && st_b == '0, "reset empties the PEs");
    for (int it = 0; it < 20000; it++) begin
      pe_state_t old_h, old_b, e_h, e_b, src_h [4], src_b [4];
      bit        e_pop, ec_h, ec_b;
      int        sh, sb;
      @(negedge clk);
      old_h = st_h;
      old_b = st_b;
      jnew  = rand_state();
      jnew.valid = 1'b1;
      alu_l = rand_state();
      alu_r = rand_state();
      c_l   = 1'($urandom);
      c_r   = 1'($urandom);
      // head: the bus carries its own pop decision, as in the SMMU
      e_pop     = old_h.valid && (old_h.n >= old_h.alpha_pt);
      bus_h     = rand_bus();
      bus_h.pop = e_pop;
      bus_h.vw  = old_h.valid && !e_pop;
      // body: a random head elsewhere
      bus_b     = rand_bus();
      bus_b.pop = 1'($urandom);
      bus_b.vw  = !bus_b.pop && 1'($urandom);
      step      = ($urandom_range(0, 4) != 0);
      #1;
      ec_h = e_pop ? 1'b0 : !(old_h.valid && old_h.wspt >= bus_h.jt);
      ec_b = !(old_b.valid && old_b.wspt >= bus_b.jt);
      check(pop_h == e_pop && !pop_b, $sformatf("it %0d pop", it));
      check(c_h == ec_h && c_b == ec_b, $sformatf("it %0d comparison", it));
      check(hv_h == (!ec_h && c_r) && hv_b == (!ec_b && c_r), $sformatf("it %0d sum^HI volunteer", it));
      check(lv_h == ec_h && lv_b == (ec_b && !c_l), $sformatf("it %0d sum^LO volunteer", it));
      e_h = exp_alu(1, old_h, ec_h, bus_h);
      e_b = exp_alu(0, old_b, ec_b, bus_b);
      check(alu_h == e_h && alu_b == e_b, $sformatf("it %0d ALU output", it));
      src_h = '{e_h, '0, alu_r, jnew};
      src_b = '{e_b, alu_l, alu_r, jnew};
      sh = exp_src(1, bus_h.pop, bus_h.ins, ec_h, 1'b0, c_r);
      sb = exp_src(0, bus_b.pop, bus_b.ins, ec_b, c_l, c_r);
      if (step) begin
        n_src[sh]++; n_src[sb]++;
        n_type[{bus_h.pop, bus_h.ins}]++;
        n_type[{bus_b.pop, bus_b.ins}]++;
      end
      @(posedge clk);
      #1;
      check(st_h == (step ? src_h[sh] : old_h), $sformatf("it %0d head write-back (source %0d)", it, sh));
      check(st_b == (step ? src_b[sb] : old_b), $sformatf("it %0d body write-back (source %0d)", it, sb));
    end
    $display("write-back self=%0d left=%0d right=%0d new=%0d", n_src[0], n_src[1], n_src[2], n_src[3]);
    $display("iterations standard=%0d insert=%0d pop=%0d pop+insert=%0d", n_type[0], n_type[1], n_type[2], n_type[3]);
    for (int k = 0; k < 4; k++) check(n_src[k] > 0 && n_type[k] > 0, "every source and iteration type occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
