// htc_up_counter: the shared epoch counter of one HTC MAC.
//
// An N-bit up-counter that every regulated-bitstream (RB) and
// temporal-bitstream (TB) generator of a MAC reads. One pass from 0 to 2^N-1
// is one epoch. The paper draws it as "Up Counter" with count, en and reset
// pins, driven by the MAC's FSM.
//
// Interface and timing: `clear` (synchronous, has priority) loads 0 and `en`
// advances the count by one per cycle. At 2^N-1 the count wraps to 0, so
// epochs can follow each other without a gap; the wrap is this design's
// choice. `last` is combinational: it is high in the final cycle of an epoch
// (en high and count == 2^N-1). rst_n is an asynchronous active-low reset.
module htc_up_counter #(
  parameter int unsigned N = htc_pkg::HTC_N
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  output logic [N-1:0] count,
  output logic         last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (clear) count <= '0;
    else if (en)    count <= count + 1'b1;
  end

  assign last = en && (count == {N{1'b1}});

endmodule
