// nmq_test_counter: characterisation counter of one NMQ-RO instance.
//
// Counts every rising edge of ring oscillator p, i.e. the total number of
// toggles of the toggle bit in one evaluation. It plays no part in the
// response (whose value is this count's LSB); it lets a tester read
// g - toggles per challenge to see how far the two rings differ. It wraps
// modulo 2^CNT_W.
//
// Interface: ro_clk (p), clr (asynchronous clear, active high), count.
// The counter's purpose follows the described testchip; its width and clear
// are this design's choices.
module nmq_test_counter #(
  parameter int CNT_W = 16
) (
  input  logic             ro_clk,
  input  logic             clr,
  output logic [CNT_W-1:0] count
);
  timeunit 1ps;
  timeprecision 1fs;

  always_ff @(posedge ro_clk or posedge clr) begin
    if (clr) count <= '0;
    else     count <= count + 1'b1;
  end
endmodule
