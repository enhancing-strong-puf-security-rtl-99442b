// tb_nmq_test_counter: self-checking test of the test (toggle) counter.
// Counts random numbers of edges after a clear, including a run long enough
// to wrap a narrow counter, and checks the count against an integer model.
module tb_nmq_test_counter;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int CNT_W = 6;
  logic             ro_clk, clr;
  logic [CNT_W-1:0] count;
  int checks = 0, failures = 0;

  nmq_test_counter #(.CNT_W(CNT_W)) dut (.ro_clk(ro_clk), .clr(clr), .count(count));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    ro_clk = 0; clr = 0;
    for (int run = 0; run < 10; run++) begin
      #100 clr = 1; #100 clr = 0;
      check(count == 0, "cleared");
      n = (run == 9) ? 150 : 1 + ($urandom % 50);
      for (int e = 1; e <= n; e++) begin
        #300 ro_clk = 1; #300 ro_clk = 0;
      end
      check(count == CNT_W'(n), $sformatf("run %0d: %0d edges, count=%0d", run, n, count));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
