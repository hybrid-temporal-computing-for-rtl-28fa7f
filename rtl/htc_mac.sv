// htc_mac: L-input hybrid temporal computing multiply-accumulate (L = 4).
//
// Computes the dot product sum_i x[i]*y[i] in one epoch of 2^N cycles,
// without a binary multiplier or adder in the datapath:
//   * one up-counter, shared by all generators, sweeps 0..2^N-1;
//   * for every input i, an RB generator turns x[i] into an evenly spread
//     regulated bitstream and a TB generator turns y[i] into a single pulse
//     of width y[i];
//   * an HTC multiplier (AND, or XNOR when BIPOLAR) multiplies each pair;
//   * an L:1 scaled adder, selected by the low log2(L) bits of an LFSR, mixes
//     the L products into one general bitstream that carries their mean;
//   * the accumulator counts the ones of that stream and shifts the count
//     left by log2(L) to give the binary sum (mac_out);
//   * an FSM starts, runs and ends the epoch.
// The block structure follows the paper's 4-input MAC figure. LFSR width,
// polynomial and seed, the FSM handshake and the bipolar output offset are
// this design's choices. The LFSR is reloaded at each epoch start so every
// epoch sees the same select sequence.
//
// The sum is also re-emitted as a temporal bitstream `tb_out` during the
// next epoch, using the same counter (htc_gb2tb). That block rescales the
// counted ones by L and clamps the result to one epoch. This is the
// downstream TB that feeds a following HTC stage. It is valid only while
// that next epoch runs.
//
// Operands: x (RB side, coefficients) and y (TB side, data), N bits each,
// unsigned fractions of 2^N, or two's complement fractions of 2^(N-1) when
// BIPOLAR. They are not registered here and must stay stable while `busy`.
// Timing: a `start` in idle begins an epoch in the next cycle, and `done`
// pulses 2^N + 1 cycles after `start`. A `start` held high through the last
// cycle chains the next epoch with no gap: one result every 2^N cycles.
module htc_mac #(
  parameter int unsigned N       = htc_pkg::HTC_N,
  parameter int unsigned L       = htc_pkg::HTC_L,
  parameter bit          BIPOLAR = 1'b0,
  localparam int unsigned SH = $clog2(L),
  localparam int unsigned MW = N + SH + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [L-1:0][N-1:0] x,
  input  logic [L-1:0][N-1:0] y,
  output logic                busy,
  output logic                done,
  output logic [MW-1:0]       mac_out,
  output logic [N:0]          ones,
  output logic                tb_out
);

  logic         clear, en, last;
  logic [N-1:0] count;
  logic [N-1:0] lfsr_state;
  logic [L-1:0] r, t, prod;
  logic         sum_bit;

  htc_mac_fsm u_fsm (
    .clk, .rst_n, .start, .last, .clear, .en, .busy, .done
  );

  htc_up_counter #(.N(N)) u_counter (
    .clk, .rst_n, .clear, .en, .count, .last
  );

  for (genvar i = 0; i < L; i++) begin : g_lane
    htc_rb_gen #(.N(N), .BIPOLAR(BIPOLAR)) u_rb (.x(x[i]), .count, .r(r[i]));
    htc_tb_gen #(.N(N), .VW(N), .BIPOLAR(BIPOLAR)) u_tb (.y(y[i]), .count, .t(t[i]));
    htc_mult   #(.BIPOLAR(BIPOLAR)) u_mul (.r(r[i]), .t(t[i]), .p(prod[i]));
  end

  // The selector LFSR is reloaded at every epoch boundary.
  htc_lfsr #(.W(N)) u_lfsr (
    .clk, .rst_n, .clear(clear || last), .en, .state(lfsr_state)
  );

  htc_scaled_adder #(.L(L)) u_add (
    .in_bits(prod), .sel(lfsr_state[SH-1:0]), .out_bit(sum_bit)
  );

  htc_accumulator #(.N(N), .L(L), .BIPOLAR(BIPOLAR)) u_acc (
    .clk, .rst_n, .clear, .en, .last, .bit_in(sum_bit), .ones, .mac_out
  );

  // Downstream temporal bitstream of the sum, from the same counter.
  htc_gb2tb #(.N(N), .L(L), .BIPOLAR(BIPOLAR)) u_gb2tb (
    .ones, .count, .t(tb_out), .n_out()
  );

  // Operands feed the generators directly, so they must hold during an epoch
  // (they may change in the last cycle's successor, i.e. at a chained start).
  a_operands_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (en && !last) |=> ($stable(x) && $stable(y)));

endmodule
