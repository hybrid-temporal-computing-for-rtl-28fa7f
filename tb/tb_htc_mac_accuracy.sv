// tb_htc_mac_accuracy: accuracy workload for one MAC at its default size.
//
// The MAC is instantiated with no parameter list (N = 8, L = 4, unipolar):
// a dot product of two 4-element vectors of 8-bit unsigned fractions. Random
// vectors are run back to back with `start` held high, one result per
// 256-cycle epoch. Every result must match the bit-exact reference model,
// and the epoch-to-epoch spacing must be 2^N cycles.
//
// The error of each result against the exact dot product is then reported
// two ways, as RMSE and as SDE (the standard deviation of the error):
//   * relative to the full range of the 4-input sum (0..4);
//   * relative to 1.0, the full range of one product.
// The published figure for this configuration is an RMSE of 6.96 % and an
// SDE of 4.46 %, with its normalisation unstated. The checks bound the
// second measure at 10 % and the mean error (bias) at 2 % of 1.0.
module tb_htc_mac_accuracy;
  import htc_model_pkg::*;
  localparam int unsigned NVEC = 50_000;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [3:0][7:0] x, y;
  logic busy, done, tb_out;
  logic [10:0] mac_out;
  logic [8:0]  ones;

  htc_mac dut (.clk, .rst_n, .start, .x, .y, .busy, .done, .mac_out, .ones, .tb_out);

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s x=%h y=%h mac_out=%0d", what, x, y, mac_out);
    end
  endtask

  initial begin
    #200_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    real se, s1, err, ex, rmse_full, rmse_one, sde_one, mean_one;
    int  last_done, spacing_bad;
    int unsigned xa[4], ya[4];
    se = 0.0;
    s1 = 0.0;
    last_done = -1;
    spacing_bad = 0;
    for (int i = 0; i < 4; i++) begin
      x[i] = 8'($urandom);
      y[i] = 8'($urandom);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1;
    for (int v = 0; v < NVEC; v++) begin
      while (!done && cycle < 20_000_000) @(negedge clk);
      if (last_done >= 0 && cycle - last_done != 256) spacing_bad++;
      last_done = cycle;
      for (int i = 0; i < 4; i++) begin
        xa[i] = x[i];
        ya[i] = y[i];
      end
      check(int'(mac_out) == mac_result(xa, ya, 8, 0), "mac_out against the reference model");
      ex = 0.0;
      for (int i = 0; i < 4; i++) ex += (real'(xa[i]) / 256.0) * (real'(ya[i]) / 256.0);
      err = real'(mac_out) / 256.0 - ex;
      se += err * err;
      s1 += err;
      // New operands for the epoch that has just begun.
      if (v == NVEC - 1) start = 1'b0;
      for (int i = 0; i < 4; i++) begin
        x[i] = 8'($urandom);
        y[i] = 8'($urandom);
      end
      @(negedge clk);
    end
    check(spacing_bad == 0, "one result every 256 cycles");
    rmse_one  = 100.0 * $sqrt(se / NVEC);
    mean_one  = 100.0 * s1 / NVEC;
    sde_one   = $sqrt(rmse_one * rmse_one - mean_one * mean_one);
    rmse_full = rmse_one / 4.0;
    $display("%0d vectors: RMSE %0.2f%% and SDE %0.2f%% of 1.0; RMSE %0.2f%% and SDE %0.2f%% of the sum's range; bias %0.3f%%",
             NVEC, rmse_one, sde_one, rmse_full, sde_one / 4.0, mean_one);
    check(rmse_one < 10.0, "RMSE below 10% of 1.0");
    check(mean_one < 2.0 && mean_one > -2.0, "bias below 2% of 1.0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
