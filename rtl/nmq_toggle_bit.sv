// nmq_toggle_bit: the toggling bit of one NMQ-RO instance.
//
// A T flip-flop clocked by ring oscillator p: it is complemented at every
// rising edge of p, so when the rings are stopped it holds the parity of the
// number of p edges seen in the evaluation. That parity is the PUF response.
//
// Interface: ro_clk (p), clr (asynchronous clear to 0, active high), q.
// Toggling on rising edges of p follows the described circuit; the clear to
// 0 before each evaluation is this design's choice.
module nmq_toggle_bit (
  input  logic ro_clk,
  input  logic clr,
  output logic q
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge ro_clk or posedge clr) begin
    if (clr) q <= 1'b0;
    else     q <= ~q;
  end
endmodule
