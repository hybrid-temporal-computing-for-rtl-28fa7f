// htc_tb_gen: temporal-bitstream (TB) generator.
//
// Encodes a value as a single pulse that starts with the epoch: the output is
// 1 while the shared count is below the value and 0 afterwards, so the pulse
// is exactly `value` cycles wide. The comparison "count < Y" is the paper's.
//
// With BIPOLAR = 1 the operand is two's complement (value y/2^(N-1)) and the
// pulse lasts y + 2^(N-1) cycles; the sign bit is inverted before comparing.
// For example, with N = 3, 3/4 (011) gives 11111110. VW, the width of the
// value, defaults to N. The MAC uses VW = N+1 with BIPOLAR = 0 to re-emit its
// own result, a ones count of 0..2^N, as a downstream TB.
//
// Purely combinational.
module htc_tb_gen #(
  parameter int unsigned N       = htc_pkg::HTC_N,
  parameter int unsigned VW      = N,
  parameter bit          BIPOLAR = 1'b0
) (
  input  logic [VW-1:0] y,
  input  logic [N-1:0]  count,
  output logic          t
);

  logic [VW-1:0] yv;

  assign yv = BIPOLAR ? (y ^ (VW'(1) << (VW-1))) : y;
  assign t  = (VW+1)'(count) < (VW+1)'(yv);

endmodule
