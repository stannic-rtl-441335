// tb_cost_comparator: self-checking testbench of the iterative cost
// comparator, at the default 10 machines.
//
// Each round presents random costs (often from a small set, so that ties
// occur) and a random eligibility mask (sometimes all zero, sometimes all
// one), pulses start and checks that done rises exactly NUM_MACHINES cycles
// after the start edge, for one cycle, with found telling whether any machine
// was eligible and sel the eligible machine of lowest cost, the lowest index
// among equal costs. Costs change while the comparator is idle between
// rounds, and the round gap is random.
//
// The one-machine-per-cycle scan follows the paper; the tie
// rule and the start/done handshake are this design's.
module tb_cost_comparator;
  import sosa_pkg::*;

  localparam int M = 10;

  logic                      clk = 1'b0;
  logic                      rst_n, start;
  logic [M-1:0][COST_W-1:0]  cost;
  logic [M-1:0]              eligible;
  logic                      done, found;
  logic [$clog2(M)-1:0]      sel;
  int                        checks = 0, failures = 0, n_none = 0, n_tie = 0;

  always #5 clk = ~clk;

  cost_comparator #(.NUM_MACHINES(M)) dut (.clk, .rst_n, .start, .cost, .eligible, .done, .found, .sel);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; start = 1'b0; cost = '0; eligible = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 3000; r++) begin
      automatic int best = -1, cycles = 0, nbest = 0;
      @(negedge clk);
      for (int m = 0; m < M; m++)
        cost[m] = ($urandom_range(0, 1) == 0) ? COST_W'($urandom_range(0, 3)) : COST_W'($urandom);
      case ($urandom_range(0, 9))
        0:       eligible = '0;
        1:       eligible = '1;
        default: eligible = M'($urandom);
      endcase
      for (int m = 0; m < M; m++)
        if (eligible[m] && (best < 0 || cost[m] < cost[best])) best = m;
      for (int m = 0; m < M; m++)
        if (best >= 0 && eligible[m] && cost[m] == cost[best]) nbest++;
      if (best < 0) n_none++;
      if (nbest > 1) n_tie++;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done && cycles < 4 * M) begin
        @(negedge clk);
        cycles++;
      end
      // after the start edge, M edges examine the machines; done is high after the last
      check(cycles == M, $sformatf("round %0d done %0d cycles after start", r, cycles));
      check(found == (best >= 0), $sformatf("round %0d found", r));
      if (best >= 0) check(int'(sel) == best, $sformatf("round %0d sel %0d exp %0d", r, sel, best));
      @(negedge clk);
      check(!done, "done lasts one cycle");
      check(found == (best >= 0) && (best < 0 || int'(sel) == best), "result held after done");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("rounds with no eligible machine=%0d with tied minimum=%0d", n_none, n_tie);
    check(n_none > 0 && n_tie > 0, "no-eligible and tie cases occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
