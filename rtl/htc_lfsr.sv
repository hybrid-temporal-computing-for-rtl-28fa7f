// htc_lfsr: selector-stream generator for the scaled adder.
//
// A left-shifting Fibonacci LFSR: each step shifts the state up by one and
// feeds the XOR of the tapped bits into bit 0. With the default taps (from
// htc_pkg::lfsr_taps) the sequence has maximal length 2^W-1. The paper only
// names an LFSR as the selector source. Width, polynomial and seed are this
// design's choices.
//
// Interface and timing: `clear` (synchronous, has priority) reloads SEED and
// `en` advances one step per cycle. rst_n (asynchronous, active low) also
// loads SEED. SEED must be non-zero.
module htc_lfsr #(
  parameter int unsigned  W    = htc_pkg::HTC_N,
  parameter logic [W-1:0] TAPS = W'(htc_pkg::lfsr_taps(W)),
  parameter logic [W-1:0] SEED = W'(1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  output logic [W-1:0] state
);

  logic fb;

  assign fb = ^(state & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= SEED;
    else if (clear) state <= SEED;
    else if (en)    state <= {state[W-2:0], fb};
  end

  initial assert (SEED != '0) else $error("htc_lfsr: SEED must be non-zero");

endmodule
