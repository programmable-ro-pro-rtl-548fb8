// monitor_fsm: the controller that runs the PRO counters and the reference
// counter over measurement windows, the hardware FSM alternative to host
// control mentioned in the published design.
//
// Two ways to run a window:
//  * free running (start_i ... stop_i): the counters are cleared, run until
//    stop_i, and are then left for the host to read. This is the published
//    measurement flow, where a host script starts both counters, waits an
//    arbitrary time and reads C_PRO and C_clk.
//  * timed (auto_i or char_i): the window ends by itself when the reference
//    counter reaches interval_i, after which the counts are evaluated
//    (eval_o) or, for a characterisation window (char_i), stored as the
//    normal baseline (capture_o). With auto_i held, timed windows repeat
//    back to back: continuous monitoring.
// States: IDLE -> CLEAR (clr_o for CLR_CYCLES) -> RUN (run_o) -> SETTLE
// (SETTLE_CYCLES, lets the ring-domain counters stop and their synchronised
// values settle) -> EVAL (one-cycle eval_o or capture_o) -> IDLE or CLEAR.
// stop_i in any running state aborts the window without an evaluation.
// A timed window keeps run_o high for exactly interval_i clock cycles.
// State encoding, settle time and the abort rule are this implementation's
// choices.
module monitor_fsm
  import pro_pkg::*;
#(
  parameter int unsigned W             = COUNT_W,
  parameter int unsigned CLR_CYCLES    = 4,
  parameter int unsigned SETTLE_CYCLES = 8
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         start_i,     // pulse: free-running window
  input  logic         stop_i,      // pulse: end free-running window / abort
  input  logic         auto_i,      // level: repeat timed windows
  input  logic         char_i,      // pulse: one timed characterisation window
  input  logic [W-1:0] interval_i,  // timed window length, clock cycles
  input  logic [W-1:0] ref_count_i, // reference counter value
  output logic         clr_o,
  output logic         run_o,
  output logic         eval_o,
  output logic         capture_o,
  output logic         busy_o
);
  timeunit 1ns; timeprecision 1ps;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RUN, S_SETTLE, S_EVAL} state_e;

  state_e      state_q, state_d;
  logic        timed_q, timed_d;   // window ends on interval_i
  logic        char_q,  char_d;    // window is a characterisation window
  logic        abort_q, abort_d;   // window aborted, skip evaluation
  logic [7:0]  wait_q,  wait_d;

  always_comb begin
    state_d = state_q;
    timed_d = timed_q;
    char_d  = char_q;
    abort_d = abort_q;
    wait_d  = wait_q;
    unique case (state_q)
      S_IDLE: begin
        abort_d = 1'b0;
        wait_d  = '0;
        if (start_i) begin
          state_d = S_CLEAR; timed_d = 1'b0; char_d = 1'b0;
        end else if (char_i) begin
          state_d = S_CLEAR; timed_d = 1'b1; char_d = 1'b1;
        end else if (auto_i) begin
          state_d = S_CLEAR; timed_d = 1'b1; char_d = 1'b0;
        end
      end
      S_CLEAR: begin
        if (stop_i) begin
          state_d = S_IDLE; wait_d = '0;
        end else if (wait_q == 8'(CLR_CYCLES - 1)) begin
          state_d = S_RUN; wait_d = '0;
        end else begin
          wait_d = wait_q + 8'd1;
        end
      end
      S_RUN: begin
        if (stop_i) begin
          state_d = S_SETTLE; abort_d = timed_q;
        end else if (timed_q && (ref_count_i + 1'b1 >= interval_i)) begin
          state_d = S_SETTLE;
        end
      end
      S_SETTLE: begin
        if (wait_q == 8'(SETTLE_CYCLES - 1)) begin
          wait_d  = '0;
          state_d = (timed_q && !abort_q) ? S_EVAL : S_IDLE;
        end else begin
          wait_d = wait_q + 8'd1;
        end
      end
      S_EVAL: begin
        char_d  = 1'b0;
        state_d = (auto_i && !stop_i) ? S_CLEAR : S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  // Outputs are registered so that the counter clear, an asynchronous
  // reset in the ring domain, is glitch free.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      timed_q   <= 1'b0;
      char_q    <= 1'b0;
      abort_q   <= 1'b0;
      wait_q    <= '0;
      clr_o     <= 1'b0;
      run_o     <= 1'b0;
      eval_o    <= 1'b0;
      capture_o <= 1'b0;
      busy_o    <= 1'b0;
    end else begin
      state_q   <= state_d;
      timed_q   <= timed_d;
      char_q    <= char_d;
      abort_q   <= abort_d;
      wait_q    <= wait_d;
      clr_o     <= (state_d == S_CLEAR);
      run_o     <= (state_d == S_RUN);
      eval_o    <= (state_d == S_EVAL) && !char_d;
      capture_o <= (state_d == S_EVAL) &&  char_d;
      busy_o    <= (state_d != S_IDLE);
    end
  end
endmodule
