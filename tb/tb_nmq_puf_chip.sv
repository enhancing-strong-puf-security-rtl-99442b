// tb_nmq_puf_chip: end-to-end test of the ten-instance NMQ-RO chip at its
// default parameters (64-bit challenges, 16-bit counters, 10 instances).
//
// Each evaluation pulses start once for all instances with one challenge,
// g and XOR mask. For every instance the expected toggle count comes from
// the device-delay formula in nmq_ref_pkg (seed BASE_SEED + i = 1 + i);
// the test checks all ten responses, test counters and trap counters, and
// the XOR output for the mask, which cycles through single instances and
// 2- and 3-instance compositions. Evaluations use g = 200 (the composition
// setting) and, less often, 100, 400, 800 and 5000.
//
// Mechanisms counted; each must occur at least once:
//   single NMQ-RO responses, 2-XOR and 3-XOR compositions, every g value,
//   information loss (g*D_q/D_p >= 2), the stop landing with ring p low
//   (one last rising edge after the stop) and with ring p high, responses of
//   both values, a repeated challenge giving the same answer, and the
//   non-monotonic pattern itself: along challenges sorted by D_q/D_p, the
//   response of instance 0 must change value more than once.
// Uniformity (share of ones) and uniqueness (share of differing instance
// pairs) are printed and loosely bounded (0.3 .. 0.7).
module tb_nmq_puf_chip;
  timeunit 1ps;
  timeprecision 1fs;
  import nmq_ref_pkg::*;

  localparam int N_INST = 10;
  localparam realtime TCLK = 10000.0;
  logic              clk, rst_n, start;
  logic [63:0]       challenge;
  logic [15:0]       g;
  logic [N_INST-1:0] xor_mask, responses;
  logic              xor_response, busy, done;
  logic [15:0]       toggles [N_INST];
  logic [15:0]       trap_counts [N_INST];
  int checks = 0, failures = 0;

  nmq_puf_chip dut (
    .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge), .g(g),
    .xor_mask(xor_mask), .responses(responses), .xor_response(xor_response),
    .busy(busy), .done(done), .toggles(toggles), .trap_counts(trap_counts));

  initial clk = 0;
  always #(TCLK / 2) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_single = 0, n_xor2 = 0, n_xor3 = 0, n_loss = 0, n_stop_low = 0, n_stop_high = 0;
  int n_g [5] = '{0, 0, 0, 0, 0};
  int n_ones = 0, n_bits = 0, n_pairs = 0, n_diff = 0, n_repeat = 0, n_ties = 0;
  real ratio0 [$];
  bit  resp0  [$];

  task automatic evaluate(input logic [63:0] c, input int gv, input logic [N_INST-1:0] m,
                          output logic [N_INST-1:0] r_out);
    longint dp, dq, exp_t, x;
    bit tie;
    int ones_m;
    logic [N_INST-1:0] exp_r;
    bit exp_valid [N_INST];
    challenge = c; g = 16'(gv); xor_mask = m;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    for (int i = 0; i < N_INST; i++) begin
      dp = ref_traversal_fs(1 + i, 0, c, 64, 20.0, 15.0, 0.036);
      dq = ref_traversal_fs(1 + i, 1, c, 64, 20.0, 15.0, 0.036);
      exp_t = ref_toggles(dp, dq, longint'(gv), tie);
      exp_r[i] = exp_t[0];
      exp_valid[i] = !tie;
      x = 2 * longint'(gv) * dq;
      check(trap_counts[i] == 16'(gv), $sformatf("inst %0d trap count %0d g %0d", i, trap_counts[i], gv));
      if (tie) begin n_ties++; continue; end
      check(longint'(toggles[i]) == exp_t,
            $sformatf("inst %0d g %0d toggles %0d expected %0d", i, gv, toggles[i], exp_t));
      check(responses[i] == exp_r[i], $sformatf("inst %0d response", i));
      if (x >= 4 * dp) n_loss++;
      if (exp_t > 0 && 2 * exp_t * dp > x) n_stop_low++; else n_stop_high++;
      if (i == 0 && gv == 200) begin
        ratio0.push_back(real'(dq) / real'(dp));
        resp0.push_back(exp_r[0]);
      end
    end
    ones_m = 0;
    for (int i = 0; i < N_INST; i++) if (m[i] && exp_r[i]) ones_m++;
    check(xor_response == ones_m[0], $sformatf("xor mask %b", m));
    case ($countones(m))
      1: n_single++;
      2: n_xor2++;
      3: n_xor3++;
      default: ;
    endcase
    r_out = responses;
  endtask

  initial begin
    static int gs[5] = '{100, 200, 400, 800, 5000};
    logic [N_INST-1:0] r, r2, m;
    logic [63:0] c, c_rep;
    int gi, trans;
    rst_n = 0; start = 0; challenge = '0; g = 16'd200; xor_mask = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      c = {$urandom, $urandom};
      gi = (t % 4 == 3) ? (t / 4) % 5 : 1;
      case (t % 3)
        0: m = N_INST'(1) << (t % N_INST);
        1: m = N_INST'(3) << (t % (N_INST - 1));
        default: m = N_INST'(7) << (t % (N_INST - 2));
      endcase
      evaluate(c, gs[gi], m, r);
      n_g[gi]++;
      if (t == 5) c_rep = c;
      if (gs[gi] == 200) begin
        n_bits += N_INST;
        n_ones += $countones(r);
        for (int a = 0; a < N_INST; a++)
          for (int b = a + 1; b < N_INST; b++) begin n_pairs++; if (r[a] != r[b]) n_diff++; end
      end
    end
    // repeatability of a challenge seen before (t == 5 used g = 200)
    evaluate(c_rep, 200, N_INST'(1), r);
    evaluate(c_rep, 200, N_INST'(1), r2);
    check(r == r2, "repeated challenge gives the same responses");
    n_repeat++;
    // non-monotonic quantization: sort instance 0's responses by D_q/D_p
    for (int a = 0; a < ratio0.size(); a++)
      for (int b = a + 1; b < ratio0.size(); b++)
        if (ratio0[b] < ratio0[a]) begin
          real tr; bit tb;
          tr = ratio0[a]; ratio0[a] = ratio0[b]; ratio0[b] = tr;
          tb = resp0[a];  resp0[a]  = resp0[b];  resp0[b]  = tb;
        end
    trans = 0;
    for (int a = 1; a < resp0.size(); a++) if (resp0[a] != resp0[a-1]) trans++;

    $display("info: g counts 100:%0d 200:%0d 400:%0d 800:%0d 5000:%0d", n_g[0], n_g[1], n_g[2], n_g[3], n_g[4]);
    $display("info: single %0d, 2-XOR %0d, 3-XOR %0d, info loss %0d, stop low %0d, stop high %0d, ties %0d",
             n_single, n_xor2, n_xor3, n_loss, n_stop_low, n_stop_high, n_ties);
    $display("info: instance 0 response changes along sorted D_q/D_p: %0d over %0d challenges", trans, resp0.size());
    $display("info: uniformity %0.3f, uniqueness %0.3f (g=200)",
             real'(n_ones) / real'(n_bits), real'(n_diff) / real'(n_pairs));
    check(n_single > 0, "single NMQ-RO evaluated");
    check(n_xor2 > 0, "2-XOR composition evaluated");
    check(n_xor3 > 0, "3-XOR composition evaluated");
    foreach (n_g[k]) check(n_g[k] > 0, $sformatf("g = %0d evaluated", gs[k]));
    check(n_loss > 0, "information loss occurred");
    check(n_stop_low > 0, "stop with ring p low occurred");
    check(n_stop_high > 0, "stop with ring p high occurred");
    check(n_repeat > 0, "repeat evaluated");
    check(trans > 1, "response is non-monotonic in D_q/D_p");
    check(real'(n_ones) / real'(n_bits) > 0.3 && real'(n_ones) / real'(n_bits) < 0.7, "uniformity");
    check(real'(n_diff) / real'(n_pairs) > 0.3 && real'(n_diff) / real'(n_pairs) < 0.7, "uniqueness");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
