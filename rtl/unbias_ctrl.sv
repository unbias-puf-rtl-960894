// unbias_ctrl: measurement sequencer of the UNBIAS PUF.
//
// One request (start high for a cycle in IDLE) runs one challenge through the PUF:
//   IDLE    -> latch the challenge, go to CLEAR
//   CLEAR   -> CLEAR_CYCLES cycles with the RO counters held in reset (ro_rst_n low),
//              the clock counters cleared (cnt_clr) and Trigger low, long enough for
//              every synchroniser to flush
//   RUN     -> Trigger high; wait until both clock counters report STOP (done_a, done_b)
//   CAPTURE -> one cycle of capture: the difference register loads cnt_a - cnt_b
//   DONE    -> resp_valid high for one cycle; the response and difference hold
// busy is high from the cycle after start until the cycle after DONE. A start
// during a measurement is ignored. Trigger stays high from RUN until the next
// CLEAR, so the path signals are levels and every counter sees a clean edge.
//
// ro_rst_n, the asynchronous clear of all RO counters, is the external rst_n
// combined with a registered (glitch-free) clear flag; lint notes rst_n being used
// both as a reset and as data, which is intended here.
//
// The paper only says that a challenge is applied and a signal is then given at
// Trigger; the states, the clear phase and the handshake are this design's own.
module unbias_ctrl
  import unbias_pkg::*;
#(
  parameter int unsigned N            = unbias_pkg::N_STAGES,
  parameter int unsigned CLEAR_CYCLES = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] challenge,
  input  logic         done_a,
  input  logic         done_b,
  output logic [N-1:0] challenge_q,
  output logic         busy,
  output logic         ro_rst_n,
  output logic         cnt_clr,
  output logic         trigger,
  output logic         capture,
  output logic         resp_valid,
  output ctrl_state_e  state
);

  localparam int unsigned TW = $clog2(CLEAR_CYCLES + 1);

  logic [TW-1:0] timer;
  logic          clear_q;  // registered copy of (state == ST_CLEAR): glitch-free reset

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_IDLE;
      timer       <= '0;
      challenge_q <= '0;
      trigger     <= 1'b0;
      clear_q     <= 1'b0;
    end else begin
      unique case (state)
        ST_IDLE: begin
          if (start) begin
            challenge_q <= challenge;
            timer       <= '0;
            trigger     <= 1'b0;
            clear_q     <= 1'b1;
            state       <= ST_CLEAR;
          end
        end
        ST_CLEAR: begin
          if (timer == TW'(CLEAR_CYCLES - 1)) begin
            trigger <= 1'b1;
            clear_q <= 1'b0;
            state   <= ST_RUN;
          end else begin
            timer <= timer + 1'b1;
          end
        end
        ST_RUN:     if (done_a && done_b) state <= ST_CAPTURE;
        ST_CAPTURE: state <= ST_DONE;
        ST_DONE:    state <= ST_IDLE;
        default:    state <= ST_IDLE;
      endcase
    end
  end

  assign busy       = (state != ST_IDLE);
  assign ro_rst_n   = rst_n && !clear_q;
  assign cnt_clr    = clear_q;
  assign capture    = (state == ST_CAPTURE);
  assign resp_valid = (state == ST_DONE);

  // The difference is only taken once both race signals have stopped their counters.
  a_capture_after_stops: assert property (@(posedge clk) disable iff (!rst_n)
    capture |-> (done_a && done_b));
  // Trigger does not fall while the race is in flight.
  a_trigger_held: assert property (@(posedge clk) disable iff (!rst_n)
    (state == ST_RUN) |-> trigger);

endmodule
