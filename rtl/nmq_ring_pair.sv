// nmq_ring_pair: BEHAVIOURAL MODEL (not synthesizable) of the two identical
// challenge-dependent ring oscillators p and q of one NMQ-RO instance.
//
// Structure modelled: each ring is a NAND2 gate (one input is the shared
// enable, the other the ring's own output) followed by N_STAGES delay stages.
// A stage holds two tri-state inverters in parallel; challenge bit c_i enables
// one of them and its complement the other, so c_i chooses which device's
// delay the stage contributes. Both rings see the same c_i. The structure is
// the one described for the fabricated part; the delay numbers are this
// model's own: nominal T_INV_PS per inverter, T_NAND_PS per NAND, each device
// scaled by (1 + SIGMA * gauss) with gauss drawn from nmq_pkg::nmq_gauss at
//   idx = ring*(2*N_STAGES+1) + 2*stage + sel     (inverters)
//   idx = ring*(2*N_STAGES+1) + 2*N_STAGES        (NAND)
// and rounded to 1 fs. One traversal of ring r takes
//   D_r(c) = t_nand_r + sum_i t_inv_r[i][c_i]
// and the ring oscillates with period 2*D_r(c).
//
// Timing: a disabled ring rests high (NAND output forced to 1, even number
// of inverting stages). When en rises the first edge at the output is
// falling, after D; edges then follow every D. When en falls, a rising
// wavefront already travelling in the ring still arrives (the NAND output is
// 1 in that case and stays 1), while a falling one is cancelled (the NAND
// returns to 1 and the ring settles high). So a ring stopped with its output
// high stops at once, and a ring stopped with its output low makes one last
// rising edge. JITTER_PS adds white Gaussian noise to each traversal (0 gives
// a noise-free, repeatable die). Temperature is not modelled. Every
// traversal is clamped to at least 1 fs, so no delay here is ever zero.
module nmq_ring_pair
  import nmq_pkg::*;
#(
  parameter int unsigned SEED      = 1,
  parameter int          N_STAGES  = NMQ_CHAL_W,
  parameter real         T_INV_PS  = 20.0,
  parameter real         T_NAND_PS = 15.0,
  parameter real         SIGMA     = 0.036,
  parameter real         JITTER_PS = 0.0
) (
  input  logic                en,
  input  logic [N_STAGES-1:0] challenge,
  output logic                ro_p,
  output logic                ro_q
);
  timeunit 1ps;
  timeprecision 1fs;

  // Device delays in femtoseconds: [ring][stage][sel], and per-ring NAND.
  longint t_inv  [2][N_STAGES][2];
  longint t_nand [2];

  function automatic longint dev_fs(input real nominal_ps, input int unsigned idx);
    return longint'(nominal_ps * 1000.0 * (1.0 + SIGMA * nmq_gauss(SEED, idx)));
  endfunction

  initial begin
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < N_STAGES; i++)
        for (int s = 0; s < 2; s++)
          t_inv[r][i][s] = dev_fs(T_INV_PS, r * (2 * N_STAGES + 1) + 2 * i + s);
      t_nand[r] = dev_fs(T_NAND_PS, r * (2 * N_STAGES + 1) + 2 * N_STAGES);
    end
  end

  // One traversal of ring r for the current challenge, in femtoseconds.
  function automatic longint traversal_fs(input logic r);
    longint d;
    d = t_nand[r];
    for (int i = 0; i < N_STAGES; i++)
      d += t_inv[r][i][challenge[i]];
    return d;
  endfunction

  function automatic real jitter_ps();
    real s;
    s = 0.0;
    for (int j = 0; j < 4; j++)
      s += real'($urandom) / 4294967296.0;
    return (s - 2.0) * 1.7320508075688772 * JITTER_PS;
  endfunction

  logic [1:0] osc;
  assign ro_p = osc[0];
  assign ro_q = osc[1];

  for (genvar r = 0; r < 2; r++) begin : g_ring
    initial begin
      logic   running;
      real    d_ps;
      osc[r] = 1'b1;
      forever begin
        wait (en);
        running = 1'b1;
        while (running) begin
          d_ps = real'(traversal_fs(1'(r))) / 1000.0 + jitter_ps();
          if (d_ps < 0.001) d_ps = 0.001;
          #(d_ps);
          if (!en && osc[r]) begin
            running = 1'b0;          // falling wavefront cancelled by the NAND
          end else begin
            osc[r] = ~osc[r];
            if (!en) running = 1'b0; // last rising wavefront has landed
          end
        end
      end
    end
  end
endmodule
