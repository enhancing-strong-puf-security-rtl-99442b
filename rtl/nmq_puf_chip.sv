// nmq_puf_chip: PUF section of the testchip, ten NMQ-RO instances and the
// XOR composition.
//
// All instances evaluate the same challenge with the same trap counter final
// value g when start is pulsed; each is a separate simulated die region
// (SEED = BASE_SEED + i). Every instance's response and test-counter value
// is available, and nmq_xor_combine forms the k-XOR-NMQ-RO response from the
// instances selected by xor_mask (k = popcount(xor_mask)), so the chip can be
// used as ten single NMQ-ROs or as 2-/3-XOR compositions.
//
// Interface: clk, rst_n, start (pulse), challenge, g, xor_mask ->
// responses[N_INST], xor_response, busy (any instance busy), done (all
// instances done), toggles[N_INST] (test counters), trap_counts[N_INST]
// (trap counters, equal to g after a run).
// Timing: done rises a few cycles after the slowest instance's trap counter
// reaches g; responses and xor_response stay valid until the next start.
// The instance count and the composition follow the described testchip and
// composition; that the XOR sits on chip behind a mask, the shared challenge
// and the parallel ports (the test logic and pads are not described) are
// this design's choices.
module nmq_puf_chip
  import nmq_pkg::*;
#(
  parameter int          N_INST    = NMQ_N_INST,
  parameter int          CHAL_W    = NMQ_CHAL_W,
  parameter int          CNT_W     = NMQ_CNT_W,
  parameter int unsigned BASE_SEED = 1,
  parameter real         T_INV_PS  = 20.0,
  parameter real         T_NAND_PS = 15.0,
  parameter real         SIGMA     = 0.036,
  parameter real         JITTER_PS = 0.0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [CHAL_W-1:0] challenge,
  input  logic [CNT_W-1:0]  g,
  input  logic [N_INST-1:0] xor_mask,
  output logic [N_INST-1:0] responses,
  output logic              xor_response,
  output logic              busy,
  output logic              done,
  output logic [CNT_W-1:0]  toggles [N_INST],
  output logic [CNT_W-1:0]  trap_counts [N_INST]
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [N_INST-1:0] busy_i, done_i;

  for (genvar i = 0; i < N_INST; i++) begin : g_inst
    nmq_ro #(
      .CHAL_W(CHAL_W), .CNT_W(CNT_W), .SEED(BASE_SEED + i),
      .T_INV_PS(T_INV_PS), .T_NAND_PS(T_NAND_PS), .SIGMA(SIGMA), .JITTER_PS(JITTER_PS)
    ) u_ro (
      .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge), .g(g),
      .response(responses[i]), .busy(busy_i[i]), .done(done_i[i]),
      .toggles(toggles[i]), .trap_count(trap_counts[i])
    );
  end

  nmq_xor_combine #(.N(N_INST)) u_xor (
    .resp(responses), .mask(xor_mask), .r(xor_response)
  );

  assign busy = |busy_i;
  assign done = &done_i;
endmodule
