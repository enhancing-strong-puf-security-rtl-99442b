// tb_nmq_toggle_bit: self-checking test of the toggle bit. After a clear it
// applies random numbers of rising edges and checks the bit equals the
// parity of the edge count after every edge; also checks the clear.
module tb_nmq_toggle_bit;
  timeunit 1ps;
  timeprecision 1fs;

  logic ro_clk, clr, q;
  int checks = 0, failures = 0;

  nmq_toggle_bit dut (.ro_clk(ro_clk), .clr(clr), .q(q));

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
    for (int run = 0; run < 20; run++) begin
      #100 clr = 1; #100 clr = 0;
      check(q == 1'b0, "cleared");
      n = 1 + ($urandom % 40);
      for (int e = 1; e <= n; e++) begin
        #300 ro_clk = 1; #300 ro_clk = 0;
        check(q == e[0], $sformatf("run %0d edge %0d q=%0d", run, e, q));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
