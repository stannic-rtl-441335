// pe_control_unit: Control Unit of one processing element.
//
// Chooses where the PE memory is written back from at the end of an
// iteration, using only the two global flags of the broadcast bus (pop,
// insert) and three local comparison values: its own C and those of its
// left and right neighbours, C_L and C_R. Because the schedule is kept in
// WSPT order, C read from head to tail is a run of zeros then a run of ones,
// so the threshold between the two runs is found locally.
//
//   iteration      C = 0 (high set)           C = 1 (low set)
//   standard       own ALU                    own ALU
//   pop            right neighbour            right neighbour
//   insert         own ALU                    new job if C_L = 0, else left
//   pop + insert   new job if C_R = 1,        own ALU
//                  else right neighbour
//
// The head PE has no left neighbour and takes C_L = 0, so it is the
// insertion point whenever its C = 1 (new job beats every job, or the
// schedule is empty). The tail's right neighbour is wired as an empty slot,
// C_R = 1. These rules are the paper's; the encoding of the select is this
// implementation's. Combinational.
module pe_control_unit
  import sosa_pkg::*;
#(
  parameter bit IS_HEAD = 1'b0
) (
  input  logic    pop,  // head pops this iteration
  input  logic    ins,  // new job is inserted into this schedule
  input  logic    c,    // own comparison value
  input  logic    c_l,  // left neighbour's comparison value
  input  logic    c_r,  // right neighbour's comparison value
  output wb_src_e sel   // write-back source
);

  logic left_c;

  always_comb begin
    left_c = IS_HEAD ? 1'b0 : c_l;
    unique case ({pop, ins})
      2'b00: sel = WB_SELF;
      2'b10: sel = WB_RIGHT;
      2'b01: sel = !c ? WB_SELF : (!left_c ? WB_NEW : WB_LEFT);
      2'b11: sel = c ? WB_SELF : (c_r ? WB_NEW : WB_RIGHT);
      default: sel = WB_SELF;
    endcase
  end

endmodule
