// tb_htc_mac: checks the 4-input HTC MAC at its default size (N = 8,
// 256-cycle epoch), unipolar and bipolar side by side.
//  * Random operand vectors: `ones` and `mac_out` must match the bit-exact
//    reference model in htc_model_pkg, which is written without the RTL.
//  * Latency: `done` 2^N + 1 = 257 cycles after `start`.
//  * Chained epochs (start held high): one result every 256 cycles.
//  * The downstream temporal stream `tb_out` carries the rescaled sum during
//    the following epoch: min(4*ones, 256) ones unipolar, and
//    clamp(4*ones - 3*128, 0, 256) ones bipolar.
//  * Accuracy against the exact dot product, reported as RMSE of the mean
//    (sum/4) in percent of full scale, which must stay below 10%.
module tb_htc_mac;
  import htc_model_pkg::*;
  localparam int unsigned N = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [3:0][N-1:0] x, y;
  logic busy_u, done_u, tbo_u, busy_b, done_b, tbo_b;
  logic [10:0] out_u, out_b;
  logic [8:0]  ones_u, ones_b;

  htc_mac #(.N(N), .L(4), .BIPOLAR(1'b0)) uu (.clk, .rst_n, .start, .x, .y,
    .busy(busy_u), .done(done_u), .mac_out(out_u), .ones(ones_u), .tb_out(tbo_u));
  htc_mac #(.N(N), .L(4), .BIPOLAR(1'b1)) ub (.clk, .rst_n, .start, .x, .y,
    .busy(busy_b), .done(done_b), .mac_out(out_b), .ones(ones_b), .tb_out(tbo_b));

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s x=%h y=%h out_u=%0d out_b=%0d", what, x, y, out_u, $signed(out_b)); end
  endtask

  task automatic expect_result(string tag);
    int unsigned xa[4], ya[4];
    for (int i = 0; i < 4; i++) begin xa[i] = x[i]; ya[i] = y[i]; end
    check(ones_u == 9'(mac_ones(xa, ya, N, 0)), {tag, " unipolar ones"});
    check(int'(out_u) == mac_result(xa, ya, N, 0), {tag, " unipolar mac_out"});
    check(ones_b == 9'(mac_ones(xa, ya, N, 1)), {tag, " bipolar ones"});
    check(sx(out_b, 11) == mac_result(xa, ya, N, 1), {tag, " bipolar mac_out"});
  endtask

  task automatic randomize_ops();
    for (int i = 0; i < 4; i++) begin
      x[i] = N'($urandom);
      y[i] = N'($urandom);
    end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real se_u = 0.0, se_b = 0.0;
    int  nvec = 0;
    x = '0; y = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // Single, separately started dot products.
    for (int v = 0; v < 120; v++) begin
      int lat;
      if (v == 0) begin x = '1; y = '1; end
      else if (v == 1) begin x = '0; y = '0; end
      else randomize_ops();
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done_u && lat < 400) begin @(negedge clk); lat++; end
      check(lat == (1 << N) + 1, "latency 2^N+1");
      check(done_b, "both polarities finish together");
      expect_result("single");
      begin
        real ex_u, ex_b;
        ex_u = 0.0; ex_b = 0.0;
        for (int i = 0; i < 4; i++) begin
          ex_u += (real'(x[i]) / 256.0) * (real'(y[i]) / 256.0);
          ex_b += (real'(sx(x[i], N)) / 128.0) * (real'(sx(y[i], N)) / 128.0);
        end
        se_u += ((real'(out_u) / 256.0 - ex_u) / 4.0) ** 2;
        se_b += ((real'(sx(out_b, 11)) / 128.0 - ex_b) / 4.0) ** 2;
        nvec++;
      end
    end
    begin
      real rmse_u, rmse_b;
      rmse_u = 100.0 * $sqrt(se_u / nvec);
      rmse_b = 100.0 * $sqrt(se_b / nvec) / 2.0;  // bipolar range [-1,1] spans 2
      $display("RMSE of the mean: unipolar %0.2f%%, bipolar %0.2f%%", rmse_u, rmse_b);
      check(rmse_u < 10.0, "unipolar RMSE below 10%");
      check(rmse_b < 10.0, "bipolar RMSE below 10%");
    end
    // Chained epochs: start held high, operands change after each done.
    randomize_ops();
    start = 1'b1;
    @(negedge clk);
    begin
      int last_done = -1;
      for (int e = 0; e < 4; e++) begin
        int tb_ones, tb_ones_b, exp_u, exp_b;
        int unsigned prev_ones, prev_ones_b;
        tb_ones = 0;
        tb_ones_b = 0;
        while (!done_u && cycle < 100000) @(negedge clk);
        if (e > 0) check(cycle - last_done == (1 << N), "chained epoch every 2^N cycles");
        last_done = cycle;
        expect_result("chained");
        prev_ones = ones_u;
        prev_ones_b = ones_b;
        // Next operands are applied in the first cycle of the next epoch.
        if (e == 3) start = 1'b0;
        randomize_ops();
        // Measure the downstream TB over the first 2^N-1 cycles of the
        // epoch that just began (counts 0..2^N-2).
        if (e < 3) begin
          for (int c = 0; c < (1 << N) - 1; c++) begin
            tb_ones += tbo_u;
            tb_ones_b += tbo_b;
            @(negedge clk);
          end
          // Only counts 0..254 are observed, so at most 255 ones are seen.
          exp_u = 4 * int'(prev_ones);
          exp_b = 4 * int'(prev_ones_b) - 3 * 128;
          if (exp_u > 255) exp_u = 255;
          if (exp_b > 255) exp_b = 255;
          if (exp_b < 0) exp_b = 0;
          check(tb_ones == exp_u, "downstream TB width, unipolar");
          check(tb_ones_b == exp_b, "downstream TB width, bipolar");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
