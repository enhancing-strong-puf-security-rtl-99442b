// nmq_trap_counter: the trap counter of one NMQ-RO instance.
//
// Counts rising edges of ring oscillator q (used directly as the clock) and
// raises `hit` on the edge that brings the count to the final value g. The
// control logic uses `hit` to disable both rings, so the count freezes at g.
// `hit` is a flip-flop set by the same edge that loads count = g, rather than
// a decode of the count, so the stop signal cannot glitch while the counter
// bits settle. Once `hit` is set further edges are ignored.
//
// Interface: ro_clk (q), clr (asynchronous clear, active high, from the
// control logic), g (final value, g = 0 acts as 2^CNT_W), count, hit.
// Counting edges of q up to g follows the described circuit; the width,
// the asynchronous clear and the registered flag are this design's choices.
module nmq_trap_counter #(
  parameter int CNT_W = 16
) (
  input  logic             ro_clk,
  input  logic             clr,
  input  logic [CNT_W-1:0] g,
  output logic [CNT_W-1:0] count,
  output logic             hit
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge ro_clk or posedge clr) begin
    if (clr) begin
      count <= '0;
      hit   <= 1'b0;
    end else if (!hit) begin
      count <= count + 1'b1;
      hit   <= (count == g - 1'b1);
    end
  end
endmodule
