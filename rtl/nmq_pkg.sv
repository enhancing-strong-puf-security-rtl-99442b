// nmq_pkg: types, sizes and the process-variation hash shared by the NMQ-RO
// strong PUF (non-monotonically quantized ring-oscillator PUF).
//
// NMQ_CHAL_W (64) and NMQ_N_INST (10) follow the described testchip; NMQ_CNT_W (16) is
// this design's choice, wide enough for every trap counter final value g
// used in characterisation (100..800) and in model studies (5000).
//
// nmq_hash / nmq_gauss turn a seed and a device index into a repeatable
// pseudo-random mismatch value. They are used only by the behavioural ring
// oscillator model (simulation), never by synthesizable logic:
//   h(x)      = 32-bit avalanche hash (xor-shift / multiply, three rounds)
//   u_j       = h(seed * 0x9E3779B9 + 4*idx + j) / 2^32,  j = 0..3
//   gauss     = (u_0 + u_1 + u_2 + u_3 - 2) * sqrt(3)   (zero mean, unit variance)
package nmq_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int NMQ_CHAL_W = 64;
  localparam int NMQ_CNT_W  = 16;
  localparam int NMQ_N_INST = 10;

  typedef logic [NMQ_CHAL_W-1:0] chal_t;
  typedef logic [NMQ_CNT_W-1:0]  cnt_t;

  // Control-logic states of one NMQ-RO instance.
  typedef enum logic [1:0] {
    CTRL_IDLE  = 2'd0,  // waiting for start, results held
    CTRL_CLEAR = 2'd1,  // counters and toggle bit held in clear
    CTRL_RUN   = 2'd2,  // rings enabled until the trap counter reaches g
    CTRL_DONE  = 2'd3   // response captured, valid until the next start
  } ctrl_state_t;

  function automatic int unsigned nmq_hash(input int unsigned x);
    int unsigned h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb352d;
    h = h ^ (h >> 15);
    h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic real nmq_gauss(input int unsigned seed, input int unsigned idx);
    real s;
    s = 0.0;
    for (int j = 0; j < 4; j++)
      s += real'(nmq_hash(seed * 32'h9E3779B9 + idx * 4 + j)) / 4294967296.0;
    return (s - 2.0) * 1.7320508075688772;
  endfunction
endpackage
