// htc_gb2tb: converts the general bitstream of a scaled adder back into a
// temporal bitstream of the unscaled sum, for the next HTC stage.
//
// The scaled adder's output holds `ones` ones in an epoch: the mean of its L
// inputs. This block undoes the division by L and then emits that many ones
// as a single pulse, `t = count < n_out`, from the shared epoch counter:
//   unipolar: n_out = L*ones                          (value L * mean)
//   bipolar:  n_out = L*ones - (L-1)*2^(N-1)          (value L * mean, bipolar)
// n_out is clamped to 0..2^N, because a sum can leave the range one epoch can
// carry. With N = 3 and L = 2 this reproduces the paper's two printed
// conversions: 3 ones (3/8) become 6 ones (6/8), and in bipolar coding 3 ones
// (-1/4) become 2 ones (-2/4). Doing the conversion with the epoch counter
// follows the paper's MAC description. The formulas and the clamping are
// this design's.
//
// `ones` must hold steady for the epoch in which `t` is read (in the MAC it
// is the registered result of the previous epoch). Combinational.
module htc_gb2tb #(
  parameter int unsigned N       = htc_pkg::HTC_N,
  parameter int unsigned L       = htc_pkg::HTC_L,
  parameter bit          BIPOLAR = 1'b0
) (
  input  logic [N:0]   ones,
  input  logic [N-1:0] count,
  output logic         t,
  output logic [N:0]   n_out
);

  localparam int unsigned SH = $clog2(L);
  localparam int unsigned WW = N + SH + 2;  // signed working width
  localparam logic signed [WW-1:0] FULL = WW'(1) << N;
  localparam logic signed [WW-1:0] OFFS = BIPOLAR ? WW'(L - 1) << (N - 1) : '0;

  logic signed [WW-1:0] scaled;

  assign scaled = (WW'(ones) << SH) - OFFS;

  always_comb begin
    if (scaled < 0)         n_out = '0;
    else if (scaled > FULL) n_out = (N+1)'(FULL);
    else                    n_out = (N+1)'(scaled);
  end

  htc_tb_gen #(.N(N), .VW(N+1), .BIPOLAR(1'b0)) u_tb (.y(n_out), .count, .t);

endmodule
