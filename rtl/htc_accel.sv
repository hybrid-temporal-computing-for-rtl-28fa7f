// htc_accel: top level holding the two hybrid temporal computing (HTC)
// accelerators.
//
// The paper evaluates two accelerators built from its 4-input HTC MAC:
//   * fir_*: a 6-tap unipolar FIR filter (Gaussian blur), see htc_fir;
//   * dct_*: an 8-point bipolar DCT/IDCT engine, see htc_dct.
// Both run from one clock and reset and are independent of each other.
// Putting the two under one top is this design's choice. Each keeps its own
// coefficient-load port, valid/ready input handshake and output pulse.
// A result takes one epoch of 2^N cycles (256 at N = 8) plus two cycles of
// handshake.
module htc_accel #(
  parameter int unsigned N = htc_pkg::HTC_N,
  localparam int unsigned MW = N + $clog2(htc_pkg::HTC_L) + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // FIR filter
  input  logic                fir_coef_we,
  input  logic [2:0]          fir_coef_addr,
  input  logic [N-1:0]        fir_coef_data,
  input  logic                fir_in_valid,
  output logic                fir_in_ready,
  input  logic [N-1:0]        fir_in_data,
  output logic                fir_out_valid,
  output logic [MW:0]         fir_out_data,
  // DCT / IDCT engine
  input  logic                dct_coef_we,
  input  logic [5:0]          dct_coef_addr,
  input  logic [N-1:0]        dct_coef_data,
  input  logic                dct_in_valid,
  output logic                dct_in_ready,
  input  logic [7:0][N-1:0]   dct_in_block,
  output logic                dct_out_valid,
  output logic [2:0]          dct_out_index,
  output logic signed [MW:0]  dct_out_data,
  output logic                dct_out_last
);

  htc_fir #(.N(N), .TAPS(6)) u_fir (
    .clk, .rst_n,
    .coef_we   (fir_coef_we),
    .coef_addr (fir_coef_addr),
    .coef_data (fir_coef_data),
    .in_valid  (fir_in_valid),
    .in_ready  (fir_in_ready),
    .in_data   (fir_in_data),
    .out_valid (fir_out_valid),
    .out_data  (fir_out_data)
  );

  htc_dct #(.N(N), .POINTS(8)) u_dct (
    .clk, .rst_n,
    .coef_we   (dct_coef_we),
    .coef_addr (dct_coef_addr),
    .coef_data (dct_coef_data),
    .in_valid  (dct_in_valid),
    .in_ready  (dct_in_ready),
    .in_block  (dct_in_block),
    .out_valid (dct_out_valid),
    .out_index (dct_out_index),
    .out_data  (dct_out_data),
    .out_last  (dct_out_last)
  );

endmodule
