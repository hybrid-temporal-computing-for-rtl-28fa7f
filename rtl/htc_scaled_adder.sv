// htc_scaled_adder: stochastic scaled addition.
//
// An L:1 multiplexer. The select changes pseudo-randomly every cycle, driven
// by the LFSR, so each input is passed about 1/L of the time. The output
// bitstream then holds about the mean of the inputs' ones: the sum scaled by
// 1/L. Select value i passes input i (codes 00..11 for L = 4, as the paper's
// MAC figure prints them).
//
// Purely combinational. L must be a power of two.
module htc_scaled_adder #(
  parameter int unsigned L  = htc_pkg::HTC_L,
  localparam int unsigned SW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0]  in_bits,
  input  logic [SW-1:0] sel,
  output logic          out_bit
);

  assign out_bit = in_bits[sel];

endmodule
