// nmq_ctrl: control logic of one NMQ-RO instance.
//
// Runs one evaluation per start pulse:
//   IDLE/DONE --start--> CLEAR (3 cycles): clr held high, clearing the trap
//       counter, toggle bit and test counter, long enough for the old trap
//       flag to drain out of the 2-flop synchroniser;
//   CLEAR --> RUN: run flag set, both rings enabled;
//   RUN: the rings' enable is ro_en = run & ~trap_hit, an asynchronous gate,
//       so both rings are disabled the instant the trap counter reaches g,
//       independent of this clock; the synchronised trap flag ends RUN;
//   RUN --> DONE: the toggle bit is captured into `response`, `done` is held
//       high until the next start.
// Latency: start to clr = 1 cycle, 3 cycles clear, then the ring run time
// (about 2*g*D_q), then 3 cycles from the stop to `done`.
//
// Interface: clk/rst_n (test clock domain), start (pulse, ignored while
// busy), trap_hit and toggle_bit (from the ring-clocked domain), clr, ro_en,
// busy, done, response.
// Timing rule: the clock period must be longer than half a ring period, so
// that the last in-flight ring edge lands before the toggle bit is sampled,
// two cycles after the stop. Disabling both rings when the counter reaches g
// follows the described circuit; the handshake, the clear sequence and the
// synchroniser are this design's choices. The rings have no timeout: a
// start with dead rings leaves the block busy until reset.
module nmq_ctrl
  import nmq_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic trap_hit,
  input  logic toggle_bit,
  output logic clr,
  output logic ro_en,
  output logic busy,
  output logic done,
  output logic response
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int CLR_CYCLES = 3;

  ctrl_state_t state;
  logic [1:0]  clr_cnt;
  logic        run;
  logic [1:0]  hit_sync;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hit_sync <= '0;
    else        hit_sync <= {hit_sync[0], trap_hit};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= CTRL_IDLE;
      clr_cnt  <= '0;
      clr      <= 1'b0;
      run      <= 1'b0;
      response <= 1'b0;
    end else begin
      unique case (state)
        CTRL_IDLE, CTRL_DONE: begin
          if (start) begin
            state   <= CTRL_CLEAR;
            clr     <= 1'b1;
            clr_cnt <= 2'(CLR_CYCLES - 1);
          end
        end
        CTRL_CLEAR: begin
          if (clr_cnt == 0) begin
            state <= CTRL_RUN;
            clr   <= 1'b0;
            run   <= 1'b1;
          end else begin
            clr_cnt <= clr_cnt - 1'b1;
          end
        end
        CTRL_RUN: begin
          if (hit_sync[1]) begin
            state    <= CTRL_DONE;
            run      <= 1'b0;
            response <= toggle_bit;
          end
        end
        default: state <= CTRL_IDLE;
      endcase
    end
  end

  assign ro_en = run & ~trap_hit;
  assign busy  = (state == CTRL_CLEAR) || (state == CTRL_RUN);
  assign done  = (state == CTRL_DONE);

  // The counters are never cleared while the rings may run.
  a_clr_not_run: assert property (@(posedge clk) disable iff (!rst_n) !(clr && run));
  // done only rises after the synchronised trap flag was seen.
  a_done_after_hit: assert property (@(posedge clk) disable iff (!rst_n)
                                     $rose(done) |-> $past(hit_sync[1]));
  // The rings are only enabled in RUN.
  a_run_state: assert property (@(posedge clk) disable iff (!rst_n)
                                run |-> state == CTRL_RUN);
endmodule
