// tb_cost_bus: randomized testbench of the SMMU cost bus.
//
// Fills the PE memories with random sums and picks at most one sum^HI and at
// most one sum^LO volunteer, as a properly ordered schedule would. The bus
// must deliver exactly the volunteers' values (zero when nobody volunteers),
// flag whether anyone volunteered and whether the sum^LO came from the head.
//
// The one-lookup delivery is the paper's; the any/head flags are this design's.
module tb_cost_bus;
  import sosa_pkg::*;

  localparam int DEPTH = 20;

  logic [DEPTH-1:0] hi_vol, lo_vol;
  pe_state_t        pe_state [DEPTH];
  shi_t             sum_hi;
  slo_t             sum_lo;
  logic             hi_any, lo_any, lo_head;
  int               checks = 0, failures = 0;

  cost_bus #(.DEPTH(DEPTH)) dut (.hi_vol, .lo_vol, .pe_state, .sum_hi, .hi_any, .sum_lo, .lo_any, .lo_head);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      int h, l;
      for (int i = 0; i < DEPTH; i++) begin
        pe_state[i]     = '0;
        pe_state[i].shi = shi_t'($urandom);
        pe_state[i].slo = slo_t'($urandom);
      end
      h = $urandom_range(0, DEPTH);   // DEPTH means nobody
      l = $urandom_range(0, DEPTH);
      hi_vol = '0; lo_vol = '0;
      if (h < DEPTH) hi_vol[h] = 1'b1;
      if (l < DEPTH) lo_vol[l] = 1'b1;
      #1;
      checks++;
      if (sum_hi != ((h < DEPTH) ? pe_state[h].shi : '0) || hi_any != (h < DEPTH) ||
          sum_lo != ((l < DEPTH) ? pe_state[l].slo : '0) || lo_any != (l < DEPTH) ||
          lo_head != (l == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL it=%0d h=%0d l=%0d", it, h, l);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
