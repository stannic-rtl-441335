// tb_alpha_check: exhaustive testbench of the head PE's alpha_J release test.
//
// Applies every combination of valid, virtual work n and release point
// (2 x 256 x 256) and compares pop with the release rule "the head job
// leaves once its virtual work has reached alpha_J x EPT".
//
// The release condition is the paper's; the alpha code is this design's.
module tb_alpha_check;
  import sosa_pkg::*;

  logic  valid, pop;
  attr_t n, alpha_pt;
  int    checks = 0, failures = 0;

  alpha_check dut (.valid, .n, .alpha_pt, .pop);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 2; v++)
      for (int a = 0; a < 256; a++)
        for (int k = 0; k < 256; k++) begin
          automatic bit expect_pop = (v == 1) && (k >= a);
          valid = v[0]; alpha_pt = attr_t'(a); n = attr_t'(k);
          #1;
          checks++;
          if (pop !== expect_pop) begin
            failures++;
            if (failures < 10) $display("FAIL valid=%0d n=%0d pt=%0d pop=%0b", v, k, a, pop);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
