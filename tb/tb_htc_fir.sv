// tb_htc_fir: checks the 6-tap unipolar FIR filter at its default size
// (N = 8). It loads a 6-tap Gaussian kernel and streams a row of pixels,
// holding in_valid high so that the filter's in_ready stalls the source.
//  * Every output must match the bit-exact reference (two MACs of the
//    reference model, taps 0-3 and 4-5, added).
//  * Each sample takes 2^N + 2 cycles from acceptance to out_valid.
//  * The outputs must track the exact filter within an RMSE of 5% of full
//    scale. The RMSE is printed.
module tb_htc_fir;
  import htc_model_pkg::*;
  localparam int unsigned N = 8;
  localparam int NSAMP = 24;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic coef_we = 1'b0;
  logic [2:0] coef_addr = '0;
  logic [N-1:0] coef_data = '0, in_data = '0;
  logic in_valid = 1'b0, in_ready, out_valid;
  logic [11:0] out_data;

  htc_fir #(.N(N), .TAPS(6)) dut (.*);

  always #5 clk = ~clk;

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Cycles in which the source offered a sample the filter could not take.
  int stalls = 0;
  always @(posedge clk) if (in_valid && !in_ready) stalls <= stalls + 1;

  // Gaussian kernel, sum 256 (= 1.0).
  int unsigned h[6] = '{10, 41, 77, 77, 41, 10};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s out=%0d", what, out_data); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned xs[$];
    int accepted_at;
    int unsigned pix[NSAMP];
    real se = 0.0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 6; k++) begin
      coef_we = 1'b1; coef_addr = 3'(k); coef_data = N'(h[k]);
      @(negedge clk);
    end
    coef_we = 1'b0;
    for (int s = 0; s < NSAMP; s++)
      pix[s] = (s < 4) ? 255 : (s < 8) ? 0 : $urandom_range(0, 255);
    in_data = N'(pix[0]); in_valid = 1'b1;
    for (int s = 0; s < NSAMP; s++) begin
      while (!in_ready) @(negedge clk);
      accepted_at = cycle;
      xs.push_front(pix[s]);
      @(negedge clk);
      in_valid = 1'b0;
      // Offer the next sample while the filter is busy: it must wait.
      repeat (5) @(negedge clk);
      if (s + 1 < NSAMP) begin in_data = N'(pix[s+1]); in_valid = 1'b1; end
      while (!out_valid) @(negedge clk);
      check(cycle - accepted_at == (1 << N) + 2, "latency 2^N+2");
      begin
        int unsigned a0[4], b0[4], a1[4], b1[4];
        int expect_v;
        real exact;
        for (int i = 0; i < 4; i++) begin
          a0[i] = h[i]; b0[i] = (i < xs.size()) ? xs[i] : 0;
          a1[i] = (i < 2) ? h[4+i] : 0; b1[i] = (i < 2 && 4 + i < xs.size()) ? xs[4+i] : 0;
        end
        exact = 0.0;
        for (int k = 0; k < 6; k++)
          if (k < xs.size()) exact += real'(h[k]) / 256.0 * real'(xs[k]) / 256.0;
        expect_v = mac_result(a0, b0, N, 0) + mac_result(a1, b1, N, 0);
        check(int'(out_data) == expect_v, "bit-exact output");
        se += (real'(out_data) / 256.0 - exact) ** 2;
      end
    end
    begin
      real rmse;
      rmse = 100.0 * $sqrt(se / NSAMP);
      $display("FIR RMSE %0.2f%% of full scale", rmse);
      check(rmse < 5.0, "RMSE below 5%");
    end
    check(stalls > 0, "source stalled by in_ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
