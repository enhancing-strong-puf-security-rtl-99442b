// tb_nmq_ro: self-checking test of one NMQ-RO instance (behavioural rings +
// trap counter + toggle bit + test counter + control logic).
// For random challenges and trap counter final values g (1 .. 800) the
// expected number of p edges is worked out from the device-delay formula in
// nmq_ref_pkg as #{k >= 1 : (2k-1) D_p < 2 g D_q}; the test checks the test
// counter against it, the response against its LSB, the trap counter
// against g, and the start-to-done time against 4 + ceil(2 g D_q / Tclk) + 3
// cycles (plus one cycle of slack for where the stop falls in a cycle).
// It also counts how many challenges showed information loss
// (g*D_q/D_p >= 2, i.e. more than one bit of the ratio discarded).
module tb_nmq_ro;
  timeunit 1ps;
  timeprecision 1fs;
  import nmq_ref_pkg::*;

  localparam int unsigned SEED = 3;
  localparam realtime TCLK = 10000.0;
  logic        clk, rst_n, start;
  logic [63:0] challenge;
  logic [15:0] g, toggles, trap_count;
  logic        response, busy, done;
  int checks = 0, failures = 0;

  nmq_ro #(.SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge), .g(g),
    .response(response), .busy(busy), .done(done), .toggles(toggles), .trap_count(trap_count));

  initial clk = 0;
  always #(TCLK / 2) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int gs[6] = '{1, 5, 100, 200, 400, 800};
    longint dp, dq, exp_t, cycles, max_cycles;
    bit tie;
    int ties, loss, ones;
    rst_n = 0; start = 0; challenge = '0; g = 16'd200;
    ties = 0; loss = 0; ones = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 36; t++) begin
      challenge = {$urandom, $urandom};
      g = 16'(gs[t % 6]);
      dp = ref_traversal_fs(SEED, 0, challenge, 64, 20.0, 15.0, 0.036);
      dq = ref_traversal_fs(SEED, 1, challenge, 64, 20.0, 15.0, 0.036);
      exp_t = ref_toggles(dp, dq, longint'(g), tie);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cycles = 1;
      while (!done) begin @(posedge clk); #1; cycles++; end
      max_cycles = 4 + (2 * longint'(g) * dq + longint'(TCLK * 1000.0) - 1) / longint'(TCLK * 1000.0) + 3 + 1;
      check(trap_count == g, $sformatf("t %0d trap count %0d, g %0d", t, trap_count, g));
      check(cycles <= max_cycles && cycles >= max_cycles - 2,
            $sformatf("t %0d latency %0d cycles, expected %0d..%0d", t, cycles, max_cycles - 2, max_cycles));
      if (tie) ties++;
      else begin
        check(longint'(toggles) == exp_t, $sformatf("t %0d g %0d toggles %0d expected %0d", t, g, toggles, exp_t));
        check(response == exp_t[0], $sformatf("t %0d response %0d expected %0d", t, response, exp_t[0]));
      end
      if (2 * longint'(g) * dq >= 4 * dp) loss++;
      if (response) ones++;
    end
    $display("info: %0d ties skipped, %0d challenges with information loss, %0d ones of 36", ties, loss, ones);
    check(loss > 0, "information loss occurred");
    check(ones > 0 && ones < 36, "both response values seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
