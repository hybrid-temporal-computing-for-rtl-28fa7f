// htc_fir: unipolar FIR filter built from two 4-input HTC MACs.
//
// y[n] = sum_{k=0}^{TAPS-1} h[k] * x[n-k], with samples and coefficients
// unsigned N-bit fractions (value / 2^N). The paper uses this filter, with
// 6 taps, as a Gaussian blur over image rows. Taps 0..3 go to the first MAC
// and taps 4..TAPS-1 to the second. The second MAC's unused inputs have a
// zero coefficient, so they add nothing. The two MAC results are added in
// binary. The paper does not say how the taps are split or how the two
// MAC results are combined; both are this design's choice.
//
// The coefficients sit in a register file, loaded once through coef_we /
// coef_addr / coef_data while the filter is idle. Coefficients drive the
// MACs' regulated-bitstream side and samples the temporal side. The delay
// line holds the last TAPS samples and starts at zero after reset.
//
// Interface and timing: a sample is taken when in_valid && in_ready. The
// MACs start one cycle later and run one epoch (2^N cycles). out_valid then
// pulses with out_data = y at scale 2^N (y_real = out_data / 2^N), in the
// cycle in_ready rises again: 2^N + 2 cycles per sample.
module htc_fir #(
  parameter int unsigned N    = htc_pkg::HTC_N,
  parameter int unsigned TAPS = 6,
  localparam int unsigned L  = htc_pkg::HTC_L,
  localparam int unsigned MW = N + $clog2(L) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          coef_we,
  input  logic [2:0]    coef_addr,
  input  logic [N-1:0]  coef_data,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [N-1:0]  in_data,
  output logic          out_valid,
  output logic [MW:0]   out_data
);

  localparam int unsigned SLOTS = 2 * L;

  logic [SLOTS-1:0][N-1:0] coef;   // h[k], unused slots stay 0
  logic [SLOTS-1:0][N-1:0] dline;  // x[n-k], unused slots stay 0
  logic                    start_q;
  logic [1:0]              busy, done;
  logic [1:0][MW-1:0]      mac_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coef <= '0;
    end else if (coef_we && (32'(coef_addr) < TAPS)) begin
      coef[coef_addr] <= coef_data;
    end
  end

  assign in_ready = !start_q && !busy[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dline   <= '0;
      start_q <= 1'b0;
    end else begin
      start_q <= in_valid && in_ready;
      if (in_valid && in_ready) begin
        for (int k = SLOTS-1; k > 0; k--)
          dline[k] <= (k < TAPS) ? dline[k-1] : '0;
        dline[0] <= in_data;
      end
    end
  end

  for (genvar m = 0; m < 2; m++) begin : g_mac
    htc_mac #(.N(N), .L(L), .BIPOLAR(1'b0)) u_mac (
      .clk, .rst_n,
      .start   (start_q),
      .x       (coef[m*L +: L]),
      .y       (dline[m*L +: L]),
      .busy    (busy[m]),
      .done    (done[m]),
      .mac_out (mac_out[m]),
      .ones    (),
      .tb_out  ()
    );
  end

  assign out_valid = done[0];
  assign out_data  = (MW+1)'(mac_out[0]) + (MW+1)'(mac_out[1]);

  a_coef_idle: assert property (@(posedge clk) disable iff (!rst_n) coef_we |-> in_ready);
  a_macs_lockstep: assert property (@(posedge clk) disable iff (!rst_n) done[0] == done[1]);
  initial assert (TAPS >= 1 && TAPS <= SLOTS) else $error("htc_fir: TAPS must be 1..8");

endmodule
