// nmq_ro: one non-monotonically quantized ring-oscillator strong PUF
// (NMQ-RO) instance.
//
// Two challenge-dependent ring oscillators run from the same start. Ring q
// clocks the trap counter, ring p clocks the toggle bit and the test counter.
// When the trap counter reaches g the control logic disables both rings and
// the toggle bit, the parity of the number of p edges, is the response.
// With traversal delays D_p, D_q the number of p edges is about
// g*D_q/D_p (exactly: the number of k >= 1 with (2k-1)*D_p < 2*g*D_q, for the
// stop behaviour of nmq_ring_pair), so the response is the LSB of a ratio
// scaled by g: it alternates between 0 and 1 as the frequency difference of
// the rings grows, instead of encoding which ring is faster.
// Note: the published equation writes the ratio the other way round,
// LSB(floor(g*D_p/D_q)); this block follows the described wiring (toggle bit
// on p, trap counter on q).
//
// Interface: clk, rst_n, start, challenge, g -> response, busy, done,
// toggles (test counter), trap_count (ends at g). Ring parameters are passed
// to the behavioural ring model; SEED selects the simulated die.
// Timing: see nmq_ctrl; evaluation takes 3 + ~2*g*D_q/T_clk + 3 cycles.
module nmq_ro
  import nmq_pkg::*;
#(
  parameter int          CHAL_W    = NMQ_CHAL_W,
  parameter int          CNT_W     = NMQ_CNT_W,
  parameter int unsigned SEED      = 1,
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
  output logic              response,
  output logic              busy,
  output logic              done,
  output logic [CNT_W-1:0]  toggles,
  output logic [CNT_W-1:0]  trap_count
);
  timeunit 1ps;
  timeprecision 1fs;

  logic ro_en, ro_p, ro_q, clr, trap_hit, tbit;

  nmq_ring_pair #(
    .SEED(SEED), .N_STAGES(CHAL_W), .T_INV_PS(T_INV_PS), .T_NAND_PS(T_NAND_PS),
    .SIGMA(SIGMA), .JITTER_PS(JITTER_PS)
  ) u_rings (
    .en(ro_en), .challenge(challenge), .ro_p(ro_p), .ro_q(ro_q)
  );

  nmq_trap_counter #(.CNT_W(CNT_W)) u_trap (
    .ro_clk(ro_q), .clr(clr), .g(g), .count(trap_count), .hit(trap_hit)
  );

  nmq_toggle_bit u_toggle (
    .ro_clk(ro_p), .clr(clr), .q(tbit)
  );

  nmq_test_counter #(.CNT_W(CNT_W)) u_test (
    .ro_clk(ro_p), .clr(clr), .count(toggles)
  );

  nmq_ctrl u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .trap_hit(trap_hit), .toggle_bit(tbit),
    .clr(clr), .ro_en(ro_en), .busy(busy), .done(done), .response(response)
  );
endmodule
