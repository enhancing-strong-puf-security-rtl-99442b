// tb_nmq_trap_counter: self-checking test of the trap counter.
// For several final values g (including 1 and a wrap-around case) it clears
// the counter, applies edges one by one and checks after every edge that the
// count follows the edges and that `hit` rises exactly on the g-th edge, then
// applies extra edges and checks that the counter stays frozen at g.
module tb_nmq_trap_counter;
  timeunit 1ps;
  timeprecision 1fs;

  localparam int CNT_W = 8;
  logic             ro_clk, clr;
  logic [CNT_W-1:0] g, count;
  logic             hit;
  int checks = 0, failures = 0;

  nmq_trap_counter #(.CNT_W(CNT_W)) dut (.ro_clk(ro_clk), .clr(clr), .g(g), .count(count), .hit(hit));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic edge_once();
    #500 ro_clk = 1'b1;
    #500 ro_clk = 1'b0;
  endtask

  initial begin
    #1_000_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int gs[5] = '{1, 2, 7, 200, 0};
    int gv, expect_cnt;
    ro_clk = 0; clr = 0; g = '0;
    foreach (gs[n]) begin
      gv = (gs[n] == 0) ? (1 << CNT_W) : gs[n];
      g = CNT_W'(gs[n]);
      #100 clr = 1; #100 clr = 0;
      check(count == 0 && !hit, $sformatf("cleared g=%0d", gv));
      for (int e = 1; e <= gv + 3; e++) begin
        edge_once();
        expect_cnt = (e < gv) ? e : gv;
        check(count == CNT_W'(expect_cnt), $sformatf("g=%0d edge %0d count=%0d", gv, e, count));
        check(hit == (e >= gv), $sformatf("g=%0d edge %0d hit=%0d", gv, e, hit));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
