// tb_pe_local_alu: randomized testbench of the PE Local ALU.
//
// A head ALU and a body ALU receive random job states, comparison values and
// broadcast-bus contents (every mix of pop, insert and virtual work). The
// expected state is built field by field from the update rules of the
// iteration types: the head's virtual work takes one from sum^HI and T from
// sum^LO and adds one to n; every other job takes one from sum^HI; a pop
// takes Delta alpha from sum^HI; an insert adds J.EPT to sum^HI of the low
// set and 8 J.W to sum^LO of the high set. Empty slots must give all zero.
//
// The update rules are the paper's; the Q.3 scaling and the
// value ranges of the stimulus are this design's.
module tb_pe_local_alu;
  import sosa_pkg::*;

  pe_state_t cur, nxt_head, nxt_body;
  logic      c;
  bcast_t    bus;
  int        checks = 0, failures = 0;

  pe_local_alu #(.IS_HEAD(1'b1)) u_head (.cur, .c, .bus, .nxt(nxt_head));
  pe_local_alu #(.IS_HEAD(1'b0)) u_body (.cur, .c, .bus, .nxt(nxt_body));

  function automatic pe_state_t expected(bit head, pe_state_t s, bit cc, bcast_t b);
    pe_state_t e;
    longint    hi, lo;
    if (!s.valid) return '0;
    e  = s;
    hi = s.shi;
    lo = s.slo;
    if (b.vw) hi -= 1;
    if (b.vw && head) begin
      lo -= s.wspt;
      e.n = s.n + 1;
    end
    if (b.pop) hi -= b.dalpha;
    if (b.ins &&  cc) hi += b.jept;
    if (b.ins && !cc) lo += 8 * b.jw;
    e.shi = shi_t'(hi);
    e.slo = slo_t'(lo);
    return e;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20000; it++) begin
      cur          = '0;
      cur.valid    = ($urandom_range(0, 7) != 0);
      cur.id       = id_t'($urandom);
      cur.wspt     = attr_t'($urandom);
      cur.alpha_pt = attr_t'($urandom);
      cur.n        = attr_t'($urandom_range(0, 200));
      cur.shi      = shi_t'($urandom_range(300, 60000));
      cur.slo      = slo_t'($urandom_range(60000, 400000));
      c            = 1'($urandom);
      bus          = '0;
      bus.pop      = 1'($urandom);
      bus.ins      = 1'($urandom);
      bus.vw       = !bus.pop && 1'($urandom);
      bus.dalpha   = shi_t'($urandom_range(0, 255));
      bus.jt       = attr_t'($urandom);
      bus.jw       = attr_t'($urandom);
      bus.jept     = attr_t'($urandom);
      #1;
      checks += 2;
      if (nxt_head != expected(1, cur, c, bus)) begin
        failures++;
        if (failures < 10) $display("FAIL head it=%0d", it);
      end
      if (nxt_body != expected(0, cur, c, bus)) begin
        failures++;
        if (failures < 10) $display("FAIL body it=%0d", it);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
