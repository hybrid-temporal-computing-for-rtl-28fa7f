// htc_rb_gen: regulated-bitstream (RB) generator.
//
// Spreads an N-bit binary operand evenly over a 2^N-cycle epoch, so that the
// number of ones in the epoch equals the operand. The shared count selects
// one operand bit through a multiplexer: when the count ends in exactly k
// ones followed by a zero, bit x[N-1-k] is output. The MSB is thus output on
// every even count (2^(N-1) times) and bit i 2^i times. The all-ones count
// outputs 0. For 3 bits the slots are X2 X1 X2 X0 X2 X1 X2 0. This selection
// pattern is the paper's.
//
// With BIPOLAR = 1 the operand is a two's complement number x/2^(N-1) in
// [-1,1). The stream must then hold x + 2^(N-1) ones, which is the operand
// with its sign bit inverted (offset binary). The paper calls this step a
// two's complement. That name matches its example 110 -> 010 but not the
// general case, so this design inverts the sign bit instead.
//
// Purely combinational: r follows x and count in the same cycle.
module htc_rb_gen #(
  parameter int unsigned N       = htc_pkg::HTC_N,
  parameter bit          BIPOLAR = 1'b0
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] count,
  output logic         r
);

  logic [N-1:0] xv;  // number of ones the stream must hold

  assign xv = BIPOLAR ? {~x[N-1], x[N-2:0]} : x;

  always_comb begin
    logic found;
    found = 1'b0;
    r     = 1'b0;
    for (int k = 0; k < N; k++) begin
      if (!found && !count[k]) begin
        r     = xv[N-1-k];
        found = 1'b1;
      end
    end
  end

endmodule
