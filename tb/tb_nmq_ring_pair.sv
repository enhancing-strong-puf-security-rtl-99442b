// tb_nmq_ring_pair: self-checking test of the behavioural ring-oscillator
// pair. For random challenges it enables both rings and timestamps their
// edges: the first edge must be falling after one traversal D_r(c) and
// every following edge must come D_r(c) later, with D_r(c) recomputed from
// the device-delay formula in nmq_ref_pkg. It then checks the stop rule:
// disabling a ring while its output is low lets one last rising edge land
// after the rest of the traversal; disabling it while high stops it at once;
// a disabled ring rests high.
module tb_nmq_ring_pair;
  timeunit 1ps;
  timeprecision 1fs;
  import nmq_ref_pkg::*;

  localparam int unsigned SEED = 7;
  localparam int N = 64;
  logic          en;
  logic [N-1:0]  challenge;
  logic          ro_p, ro_q;
  int checks = 0, failures = 0;

  nmq_ring_pair #(.SEED(SEED), .N_STAGES(N)) dut (.en(en), .challenge(challenge), .ro_p(ro_p), .ro_q(ro_q));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Edge log per ring.
  realtime t_edge [2][$];
  logic    v_edge [2][$];
  always @(ro_p) begin t_edge[0].push_back($realtime); v_edge[0].push_back(ro_p); end
  always @(ro_q) begin t_edge[1].push_back($realtime); v_edge[1].push_back(ro_q); end

  function automatic longint fs_of(input realtime t);
    return longint'(t * 1000.0);
  endfunction

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0;
    longint  d [2];
    en = 0; challenge = '0;
    #1000;
    check(ro_p && ro_q, "rings rest high");
    for (int t = 0; t < 12; t++) begin
      challenge = {$urandom, $urandom};
      for (int r = 0; r < 2; r++) begin
        d[r] = ref_traversal_fs(SEED, r, challenge, N, 20.0, 15.0, 0.036);
        t_edge[r].delete(); v_edge[r].delete();
      end
      #1000 t0 = $realtime; en = 1;
      #30000;
      for (int r = 0; r < 2; r++) begin
        check(t_edge[r].size() >= 10, $sformatf("ring %0d oscillates", r));
        for (int k = 0; k < 10 && k < t_edge[r].size(); k++) begin
          check(fs_of(t_edge[r][k] - t0) == (longint'(k) + 1) * d[r],
                $sformatf("chal %0d ring %0d edge %0d at %0d fs, expected %0d fs",
                          t, r, k, fs_of(t_edge[r][k] - t0), (longint'(k) + 1) * d[r]));
          check(v_edge[r][k] == k[0], $sformatf("ring %0d edge %0d polarity", r, k));
        end
      end
      // Stop ring p while low: wait for a falling edge of p, disable shortly after.
      @(negedge ro_p) #100;
      for (int r = 0; r < 2; r++) begin t_edge[r].delete(); v_edge[r].delete(); end
      en = 0;
      #5000;
      check(t_edge[0].size() == 1 && v_edge[0].size() == 1 && v_edge[0][0] == 1'b1,
            $sformatf("ring p stopped low makes one rising edge (%0d edges)", t_edge[0].size()));
      check(ro_p && ro_q, "both rings rest high after stop");
    end
    // Stop while high: disable just after a rising edge of p.
    en = 1;
    @(posedge ro_p) #100;
    t_edge[0].delete();
    en = 0;
    #5000;
    check(t_edge[0].size() == 0, "ring p stopped high makes no further edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
