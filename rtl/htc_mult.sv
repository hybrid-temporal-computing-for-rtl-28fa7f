// htc_mult: HTC multiplier.
//
// Multiplies a regulated bitstream by a temporal bitstream, one bit per
// cycle. Because the RB spreads its ones evenly and the TB is a single pulse
// of width B, the ones of the RB that fall inside the pulse are close to A*B
// of the epoch. Unipolar coding uses an AND gate and bipolar coding an XNOR
// gate, as in the paper. The output is a general bitstream (GB): only its
// count of ones carries the value.
//
// Purely combinational.
module htc_mult #(
  parameter bit BIPOLAR = 1'b0
) (
  input  logic r,
  input  logic t,
  output logic p
);

  assign p = BIPOLAR ? ~(r ^ t) : (r & t);

endmodule
