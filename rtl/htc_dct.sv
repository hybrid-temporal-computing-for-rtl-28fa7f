// htc_dct: 8-point bipolar DCT / IDCT engine from two 4-input HTC MACs.
//
// Computes out[k] = sum_{n=0}^{7} C[k][n] * in[n] for k = 0..7, with all
// values signed N-bit fractions (value / 2^(N-1)) in bipolar HTC coding
// (XNOR multipliers). Loading the DCT-II matrix makes it a DCT; loading its
// transpose makes it the inverse DCT. Following the paper, two 4-input MACs
// form the 8-point dot product: inputs 0..3 go to the first MAC and 4..7 to
// the second. Adding their two results in binary, the 8-row coefficient
// memory and the block handshake are this design's choices.
//
// Coefficients C[k][n] are written at address 8k+n while the engine is
// idle. They drive the MACs' regulated-bitstream side and the samples the
// temporal side.
//
// Interface and timing: a block of 8 samples is taken when in_valid &&
// in_ready. The engine then runs 8 epochs, one per output k. Each output
// appears as an out_valid pulse with out_index = k and out_data = out[k] at
// scale 2^(N-1) (two's complement). out_last marks k = 7. Each output takes
// 2^N + 2 cycles; in_ready rises again with the last output.
module htc_dct #(
  parameter int unsigned N      = htc_pkg::HTC_N,
  parameter int unsigned POINTS = 8,
  localparam int unsigned L  = htc_pkg::HTC_L,
  localparam int unsigned MW = N + $clog2(L) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     coef_we,
  input  logic [5:0]               coef_addr,
  input  logic [N-1:0]             coef_data,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [POINTS-1:0][N-1:0] in_block,
  output logic                     out_valid,
  output logic [2:0]               out_index,
  output logic signed [MW:0]       out_data,
  output logic                     out_last
);

  logic [POINTS-1:0][POINTS-1:0][N-1:0] coef;  // coef[k][n]
  logic [POINTS-1:0][N-1:0]             xs;
  logic [2:0]                           k;
  logic                                 active;
  logic                                 start_q;
  logic [1:0]                           busy, done;
  logic [1:0][MW-1:0]                   mac_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) coef <= '0;
    else if (coef_we) coef[coef_addr[5:3]][coef_addr[2:0]] <= coef_data;
  end

  assign in_ready = !active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs      <= '0;
      k       <= '0;
      active  <= 1'b0;
      start_q <= 1'b0;
    end else begin
      start_q <= 1'b0;
      if (in_valid && in_ready) begin
        xs      <= in_block;
        k       <= '0;
        active  <= 1'b1;
        start_q <= 1'b1;
      end else if (done[0]) begin
        if (k == 3'(POINTS-1)) begin
          active <= 1'b0;
        end else begin
          k       <= k + 1'b1;
          start_q <= 1'b1;
        end
      end
    end
  end

  for (genvar m = 0; m < 2; m++) begin : g_mac
    htc_mac #(.N(N), .L(L), .BIPOLAR(1'b1)) u_mac (
      .clk, .rst_n,
      .start   (start_q),
      .x       (coef[k][m*L +: L]),
      .y       (xs[m*L +: L]),
      .busy    (busy[m]),
      .done    (done[m]),
      .mac_out (mac_out[m]),
      .ones    (),
      .tb_out  ()
    );
  end

  assign out_valid = done[0];
  assign out_index = k;
  assign out_last  = done[0] && (k == 3'(POINTS-1));
  assign out_data  = signed'((MW+1)'(signed'(mac_out[0]))) + signed'((MW+1)'(signed'(mac_out[1])));

  a_coef_idle: assert property (@(posedge clk) disable iff (!rst_n) coef_we |-> !active);
  a_macs_lockstep: assert property (@(posedge clk) disable iff (!rst_n) done[0] == done[1]);
  initial assert (POINTS == 2 * L) else $error("htc_dct: POINTS must equal two MACs of L inputs");

endmodule
