// nmq_xor_combine: the XOR of a k-XOR-NMQ-RO composition.
//
// k NMQ-RO instances evaluate the same challenge and the composed response
// is the XOR of their responses. Here the XOR spans N instances and a mask
// selects which of them take part (k = number of ones in mask), so one set
// of instances can serve as 1-, 2- or 3-XOR compositions; a mask with one
// bit set passes that instance's response unchanged, an all-zero mask gives 0.
//
// Interface: resp[N] (instance responses), mask[N], r. Purely combinational.
// The XOR composition follows the described design; the mask is this
// design's choice, standing in for off-chip post-processing.
module nmq_xor_combine #(
  parameter int N = 10
) (
  input  logic [N-1:0] resp,
  input  logic [N-1:0] mask,
  output logic         r
);
  timeunit 1ps;
  timeprecision 1fs;

  always_comb r = ^(resp & mask);
endmodule
