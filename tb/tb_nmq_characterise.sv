// tb_nmq_characterise: characterisation run of the NMQ-RO chip with ring
// noise switched on (white jitter of JITTER_PS per ring traversal), the
// same kind of measurement the design was evaluated with, scaled down to
// what simulates in seconds: NC challenges enrolled once at each g in
// {100, 200, 400}, then re-evaluated NR times.
//
// Reported per g, over all ten instances:
//   BER            share of re-evaluated responses differing from enrolment
//   BER 2-/3-XOR   the same for instances {0,1} and {0,1,2} XOR-composed,
//                  read from the chip's XOR output
//   std(g-toggles) spread of the test counter per instance, mean removed
//   uniformity     share of ones at enrolment
// Checked: BER and std(g - toggles) grow with g; at g = 200 the 3-XOR BER
// exceeds the single-instance BER; the XOR output always equals the XOR of
// the instance responses read alongside it; uniformity stays within
// 0.3..0.7. The jitter value is chosen so that single-instance BER at
// g = 200 lands near the single-digit percentages reported for silicon; it
// is a property of the noise model, not of the logic.
module tb_nmq_characterise;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int N_INST = 10;
  localparam int NC = 100;
  localparam int NR = 4;
  localparam real JITTER = 3.0;
  localparam realtime TCLK = 10000.0;

  logic              clk, rst_n, start;
  logic [63:0]       challenge;
  logic [15:0]       g;
  logic [N_INST-1:0] xor_mask, responses;
  logic              xor_response, busy, done;
  logic [15:0]       toggles [N_INST];
  logic [15:0]       trap_counts [N_INST];
  int checks = 0, failures = 0;

  nmq_puf_chip #(.JITTER_PS(JITTER)) dut (
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
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_once(input logic [63:0] c, input int gv, input logic [N_INST-1:0] m);
    challenge = c; g = 16'(gv); xor_mask = m;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    check(^(responses & m) == xor_response, "xor output matches instance responses");
  endtask

  initial begin
    static int gs[3] = '{100, 200, 400};
    logic [63:0]       chal [NC];
    logic [N_INST-1:0] enr  [NC];
    real ber [3], ber2 [3], ber3 [3], sd [3], unif [3];
    real sum, sum2, dlt;
    int  err, err2, err3, ones;
    rst_n = 0; start = 0; challenge = '0; g = 16'd200; xor_mask = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < NC; c++) chal[c] = {$urandom, $urandom};
    for (int k = 0; k < 3; k++) begin
      real s1 [N_INST], s2 [N_INST];
      err = 0; err2 = 0; err3 = 0; ones = 0;
      for (int i = 0; i < N_INST; i++) begin s1[i] = 0.0; s2[i] = 0.0; end
      for (int c = 0; c < NC; c++) begin
        run_once(chal[c], gs[k], N_INST'(3));
        enr[c] = responses;
        ones += $countones(responses);
        for (int i = 0; i < N_INST; i++) begin
          dlt = real'(gs[k]) - real'(toggles[i]);
          s1[i] += dlt; s2[i] += dlt * dlt;
        end
        for (int r = 0; r < NR; r++) begin
          run_once(chal[c], gs[k], (r % 2 == 0) ? N_INST'(3) : N_INST'(7));
          err += $countones(responses ^ enr[c]);
          err2 += (^(responses[1:0]) != ^(enr[c][1:0]));
          err3 += (^(responses[2:0]) != ^(enr[c][2:0]));
        end
      end
      ber[k]  = real'(err)  / real'(NC * NR * N_INST);
      ber2[k] = real'(err2) / real'(NC * NR);
      ber3[k] = real'(err3) / real'(NC * NR);
      unif[k] = real'(ones) / real'(NC * N_INST);
      sum = 0.0;
      for (int i = 0; i < N_INST; i++) begin
        sum2 = s2[i] / NC - (s1[i] / NC) * (s1[i] / NC);
        sum += $sqrt(sum2 > 0.0 ? sum2 : 0.0);
      end
      sd[k] = sum / N_INST;
      $display("info: g=%0d  BER %0.3f  BER 2-XOR %0.3f  BER 3-XOR %0.3f  std(g-toggles) %0.2f  uniformity %0.3f",
               gs[k], ber[k], ber2[k], ber3[k], sd[k], unif[k]);
      check(unif[k] > 0.3 && unif[k] < 0.7, $sformatf("uniformity at g=%0d", gs[k]));
    end
    check(ber[2] > ber[0], "BER grows from g=100 to g=400");
    check(sd[1] > sd[0] && sd[2] > sd[1], "std(g - toggles) grows with g");
    check(ber3[1] > ber[1], "3-XOR BER above single-instance BER at g=200");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
