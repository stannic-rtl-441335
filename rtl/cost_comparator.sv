// cost_comparator: the single cost comparator shared by all SMMUs.
//
// Finds the machine with the lowest cost for the new job among those whose
// virtual schedule can still take it. It is iterative: after a `start` pulse
// it looks at one machine per clock, machine 0 first, keeping the best so
// far, so a scan takes NUM_MACHINES cycles. A machine replaces the best only
// with a strictly lower cost, so ties go to the lower machine index.
//
// Timing: `start` is sampled at a clock edge; the next NUM_MACHINES edges
// examine machines 0 .. NUM_MACHINES-1; `done` is then high for exactly one
// cycle, with `found` (some machine was eligible) and `sel` valid from then
// until the next start. The caller keeps `cost` and `eligible` steady during
// the scan. Iterative comparison is what the paper uses; the tie rule and
// the handshake are this implementation's.
module cost_comparator
  import sosa_pkg::*;
#(
  parameter int unsigned NUM_MACHINES = 10,
  localparam int unsigned SEL_W = (NUM_MACHINES > 1) ? $clog2(NUM_MACHINES) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [NUM_MACHINES-1:0][COST_W-1:0] cost,
  input  logic [NUM_MACHINES-1:0]        eligible,
  output logic                           done,
  output logic                           found,
  output logic [SEL_W-1:0]               sel
);

  logic             busy;
  logic [SEL_W-1:0] idx;
  cost_t            best;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      idx   <= '0;
      best  <= '0;
      found <= 1'b0;
      sel   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        idx   <= '0;
        found <= 1'b0;
        sel   <= '0;
        best  <= '1;
      end else if (busy) begin
        if (eligible[idx] && (!found || cost[idx] < best)) begin
          found <= 1'b1;
          best  <= cost[idx];
          sel   <= idx;
        end
        if (32'(idx) == NUM_MACHINES - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

endmodule
