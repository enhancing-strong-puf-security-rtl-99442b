// tb_nmq_ctrl: self-checking test of the NMQ-RO control logic. The
// testbench plays the trap counter and toggle bit: the trap flag is dropped
// by clr and raised asynchronously a random time after the rings were
// enabled. Checked per evaluation: clr is high for exactly 3 cycles and never
// together with ro_en; ro_en rises right after the clear; ro_en falls in the
// same instant the trap flag rises; done rises exactly 3 clock edges after
// the trap flag; response equals the toggle bit; a start while busy is
// ignored; done stays high until the next start.
module tb_nmq_ctrl;
  timeunit 1ps;
  timeprecision 1fs;

  localparam realtime TCLK = 10000.0;  // 100 MHz test clock
  logic clk, rst_n, start, trap_hit, toggle_bit;
  logic clr, ro_en, busy, done, response;
  int checks = 0, failures = 0;

  nmq_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .trap_hit(trap_hit),
                .toggle_bit(toggle_bit), .clr(clr), .ro_en(ro_en), .busy(busy),
                .done(done), .response(response));

  initial clk = 0;
  always #(TCLK / 2) clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Trap counter stand-in: cleared by clr.
  always @(posedge clr) trap_hit = 1'b0;

  int clr_cycles;
  always @(posedge clk) if (clr) clr_cycles++;
  always @(posedge clk) if (rst_n && clr && ro_en) begin failures++; $display("FAIL: clr with ro_en"); end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int edges_after_hit;
    bit tb_val;
    rst_n = 0; start = 0; trap_hit = 1; toggle_bit = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    check(!busy && !done && !ro_en, "idle after reset");
    for (int ev = 0; ev < 30; ev++) begin
      clr_cycles = 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      check(clr && busy, $sformatf("ev %0d clr after start", ev));
      // start while busy must be ignored
      if (ev % 3 == 1) begin @(negedge clk) start = 1; @(negedge clk) start = 0; end
      wait (ro_en);
      check(clr_cycles == 3, $sformatf("ev %0d clear lasted %0d cycles", ev, clr_cycles));
      check(!done && busy, "busy while running");
      tb_val = 1'($urandom);
      toggle_bit = tb_val;
      #(realtime'(1000 + $urandom % 80000));
      trap_hit = 1;
      #1;
      check(!ro_en, $sformatf("ev %0d rings disabled at trap hit", ev));
      edges_after_hit = 0;
      while (!done) begin @(posedge clk); #1; edges_after_hit++; end
      check(edges_after_hit == 3, $sformatf("ev %0d done after %0d edges", ev, edges_after_hit));
      check(response == tb_val, $sformatf("ev %0d response %0d expected %0d", ev, response, tb_val));
      check(!busy, "not busy when done");
      toggle_bit = ~tb_val;
      repeat (5) @(posedge clk);
      check(done && response == tb_val, "result held until next start");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
