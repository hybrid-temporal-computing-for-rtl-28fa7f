// htc_accumulator: HTC accumulator (incrementer followed by a left shift).
//
// Converts the general bitstream leaving the scaled adder back to binary. An
// incrementer, enabled by the stream bit, counts ones during the epoch. In
// the last cycle the count, including that cycle's bit, moves to the result
// register and the incrementer restarts from 0. The scaled adder divided the
// sum by L, so the result is shifted left by log2(L) (<<2 for L = 4) to undo
// the scaling. The incrementer, the shift and the reset from the FSM are the
// paper's.
//
// Output coding (c = ones counted in the finished epoch, 0..2^N):
//   unipolar: mac_out = c << log2(L), an unsigned sum at scale 2^N;
//   bipolar:  mac_out = (c << log2(L)) - L*2^(N-1), a two's complement sum at
//             scale 2^(N-1).
// The bipolar offset is this design's addition: the paper only shows the
// shift. It follows from c/2^N = (mean+1)/2. The incrementer has N+1 bits so
// that 2^N ones (possible with XNOR products) do not wrap.
//
// Timing: `clear` zeroes the incrementer. `ones` and `mac_out` change on the
// clock edge that ends an epoch and then hold until the next epoch ends.
module htc_accumulator #(
  parameter int unsigned N       = htc_pkg::HTC_N,
  parameter int unsigned L       = htc_pkg::HTC_L,
  parameter bit          BIPOLAR = 1'b0,
  localparam int unsigned SH = $clog2(L),
  localparam int unsigned MW = N + SH + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          en,
  input  logic          last,
  input  logic          bit_in,
  output logic [N:0]    ones,
  output logic [MW-1:0] mac_out
);

  logic [N:0] acc;
  logic [N:0] acc_next;

  assign acc_next = acc + (N+1)'(bit_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      ones <= '0;
    end else if (clear) begin
      acc <= '0;
    end else if (en) begin
      if (last) begin
        ones <= acc_next;
        acc  <= '0;
      end else begin
        acc <= acc_next;
      end
    end
  end

  localparam logic [MW-1:0] OFFSET = BIPOLAR ? (MW'(L) << (N-1)) : '0;

  assign mac_out = (MW'(ones) << SH) - OFFSET;

endmodule
