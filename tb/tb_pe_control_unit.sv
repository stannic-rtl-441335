// tb_pe_control_unit: exhaustive testbench of the PE control unit.
//
// For a head and a body PE, every combination of pop, insert, C, C_L and C_R
// is applied and the write-back source is compared with the reordering rules
// of the four iteration types:
//   standard: stay; pop: take from the right (left shift);
//   insert: high set stays, first low slot takes the new job, the rest of the
//           low set takes from the left (right shift);
//   pop + insert: low set stays, last high slot takes the new job, the rest
//           of the high set takes from the right.
// The head has no left neighbour and is the insertion point whenever C = 1.
//
// The write-back rules are the paper's; the treatment of the
// missing neighbours at head and tail is this design's.
module tb_pe_control_unit;
  import sosa_pkg::*;

  logic    pop, ins, c, c_l, c_r;
  wb_src_e sel_head, sel_body;
  int      checks = 0, failures = 0;

  pe_control_unit #(.IS_HEAD(1'b1)) u_head (.pop, .ins, .c, .c_l, .c_r, .sel(sel_head));
  pe_control_unit #(.IS_HEAD(1'b0)) u_body (.pop, .ins, .c, .c_l, .c_r, .sel(sel_body));

  function automatic wb_src_e expected(bit head, bit p, bit i, bit cc, bit cl, bit cr);
    if (!p && !i) return WB_SELF;
    if (p && !i)  return WB_RIGHT;
    if (!p && i) begin
      if (!cc)             return WB_SELF;       // high set: stationary
      if (head || !cl)     return WB_NEW;        // insertion point
      return WB_LEFT;                            // low set: right shift
    end
    if (cc)  return WB_SELF;                     // low set: stationary
    if (cr)  return WB_NEW;                      // high end of the threshold
    return WB_RIGHT;                             // high set: left shift
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      {pop, ins, c, c_l, c_r} = 5'(v);
      #1;
      checks += 2;
      if (sel_head != expected(1, pop, ins, c, c_l, c_r)) begin
        failures++;
        $display("FAIL head pop=%0b ins=%0b c=%0b cl=%0b cr=%0b sel=%0d", pop, ins, c, c_l, c_r, sel_head);
      end
      if (sel_body != expected(0, pop, ins, c, c_l, c_r)) begin
        failures++;
        $display("FAIL body pop=%0b ins=%0b c=%0b cl=%0b cr=%0b sel=%0d", pop, ins, c, c_l, c_r, sel_body);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
