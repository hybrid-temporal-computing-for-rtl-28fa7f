// htc_mac_fsm: control FSM of one HTC MAC.
//
// The paper shows only an "FSM" block driving the counter's en and reset and
// the accumulator's reset. The two states and the start/done handshake here
// are this design's choice.
//   IDLE: waits for `start`. In the cycle `start` is seen, `clear` resets the
//         counter, the LFSR and the accumulator, and the FSM moves to RUN.
//   RUN:  `en` is high for the 2^N cycles of the epoch. In the last cycle
//         (`last` from the counter) the FSM returns to IDLE, or stays in RUN
//         if `start` is high again. The counter then wraps and the next epoch
//         follows with no idle cycle.
// `done` is a registered one-cycle pulse in the cycle after `last`, when the
// accumulator's result register holds the new result. From a start in IDLE
// to `done` takes 2^N + 1 cycles.
module htc_mac_fsm (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic last,
  output logic clear,
  output logic en,
  output logic busy,
  output logic done
);

  typedef enum logic [0:0] {IDLE = 1'b0, RUN = 1'b1} state_t;

  state_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      done  <= 1'b0;
    end else begin
      done <= (state == RUN) && last;
      case (state)
        IDLE:    if (start) state <= RUN;
        RUN:     if (last && !start) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  assign clear = (state == IDLE) && start;
  assign en    = (state == RUN);
  assign busy  = (state == RUN);

  // The counter may only report the end of an epoch while one is running.
  a_last_in_run: assert property (@(posedge clk) disable iff (!rst_n) last |-> state == RUN);

endmodule
