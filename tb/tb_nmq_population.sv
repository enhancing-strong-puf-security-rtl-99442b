// tb_nmq_population: uniformity and uniqueness over a population of six
// simulated dies of the NMQ-RO chip (60 instances), the population size the
// design was characterised on, at g = 200 and with a reduced challenge set
// (NC challenges instead of a million).
//
// Die d is an nmq_puf_chip with BASE_SEED = 1 + 10*d, so all 60 instances
// have distinct device mismatch. The same challenges go to every die.
// Responses are grouped into 32-bit words (32 consecutive challenges).
//   uniformity  share of ones per instance; mean and spread over instances
//   uniqueness  Hamming distance / 32 between the words of every pair of the
//               60 instances, averaged over words and pairs
// Checked: mean uniformity and mean uniqueness within 0.45..0.55, every
// die finishes every evaluation with all trap counters at g.
module tb_nmq_population;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int N_DIE  = 6;
  localparam int N_INST = 10;
  localparam int NC     = 128;   // four 32-bit response words
  localparam realtime TCLK = 10000.0;

  logic              clk, rst_n, start;
  logic [63:0]       challenge;
  logic [15:0]       g;
  logic [N_INST-1:0] responses [N_DIE];
  logic [N_DIE-1:0]  done_d;
  int checks = 0, failures = 0;

  for (genvar d = 0; d < N_DIE; d++) begin : g_die
    logic              xr, bz;
    logic [15:0]       tg [N_INST];
    logic [15:0]       tc [N_INST];
    nmq_puf_chip #(.BASE_SEED(1 + 10 * d)) u_chip (
      .clk(clk), .rst_n(rst_n), .start(start), .challenge(challenge), .g(g),
      .xor_mask('0), .responses(responses[d]), .xor_response(xr),
      .busy(bz), .done(done_d[d]), .toggles(tg), .trap_counts(tc));
  end

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

  logic [NC-1:0] resp_bits [N_DIE * N_INST];

  initial begin
    int  ones, hd, pairs;
    real u, u_sum, u_sq, u_mean, u_sd, uniq;
    rst_n = 0; start = 0; challenge = '0; g = 16'd200;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      challenge = {$urandom, $urandom};
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!(&done_d)) @(negedge clk);
      for (int d = 0; d < N_DIE; d++)
        for (int i = 0; i < N_INST; i++) begin
          resp_bits[d * N_INST + i][c] = responses[d][i];
          check(g_die_trap(d, i) == g, $sformatf("die %0d inst %0d trap count", d, i));
        end
    end
    u_sum = 0.0; u_sq = 0.0;
    for (int n = 0; n < N_DIE * N_INST; n++) begin
      ones = $countones(resp_bits[n]);
      u = real'(ones) / real'(NC);
      u_sum += u; u_sq += u * u;
    end
    u_mean = u_sum / (N_DIE * N_INST);
    u_sd = $sqrt(u_sq / (N_DIE * N_INST) - u_mean * u_mean);
    hd = 0; pairs = 0;
    for (int a = 0; a < N_DIE * N_INST; a++)
      for (int b = a + 1; b < N_DIE * N_INST; b++)
        for (int w = 0; w < NC / 32; w++) begin
          hd += $countones(resp_bits[a][w*32 +: 32] ^ resp_bits[b][w*32 +: 32]);
          pairs++;
        end
    uniq = real'(hd) / (32.0 * real'(pairs));
    $display("info: %0d instances, %0d challenges: uniformity mean %0.3f sd %0.3f, uniqueness %0.3f",
             N_DIE * N_INST, NC, u_mean, u_sd, uniq);
    check(u_mean > 0.45 && u_mean < 0.55, "mean uniformity");
    check(uniq > 0.45 && uniq < 0.55, "mean uniqueness");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] g_die_trap(input int d, input int i);
    logic [15:0] v;
    v = '0;
    case (d)
      0: v = g_die[0].tc[i];
      1: v = g_die[1].tc[i];
      2: v = g_die[2].tc[i];
      3: v = g_die[3].tc[i];
      4: v = g_die[4].tc[i];
      default: v = g_die[5].tc[i];
    endcase
    return v;
  endfunction
endmodule
