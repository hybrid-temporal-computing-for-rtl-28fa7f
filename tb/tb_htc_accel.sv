// tb_htc_accel: end-to-end test of the top level at its default parameters
// (N = 8, 256-cycle epochs, no parameter overrides).
//
// The FIR filter and the DCT engine run at the same time:
//  * FIR: a 6-tap Gaussian kernel is loaded and a row of 16 pixels streamed
//    through, with the source offering samples early so that in_ready stalls
//    it. Every output must match the bit-exact reference model.
//  * DCT: the quantised DCT-II matrix is loaded and two 8-sample blocks are
//    transformed. Then the engine is switched to the inverse transform by
//    loading the transposed matrix. The (clamped) coefficients are
//    transformed back and compared with the original samples. Every output
//    must match the reference model. The reconstruction PSNR is printed and
//    must exceed 10 dB.
// Mechanisms that must each happen at least once: FIR stall, DCT stall,
// both accelerators busy in the same cycle, a negative DCT output, the
// DCT -> IDCT coefficient switch, coefficient writes.
module tb_htc_accel;
  import htc_model_pkg::*;
  localparam int unsigned N = 8;
  localparam int NPIX = 16;
  localparam int NBLK = 2;
  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic fir_coef_we = 1'b0; logic [2:0] fir_coef_addr = '0; logic [7:0] fir_coef_data = '0;
  logic fir_in_valid = 1'b0, fir_in_ready; logic [7:0] fir_in_data = '0;
  logic fir_out_valid; logic [11:0] fir_out_data;
  logic dct_coef_we = 1'b0; logic [5:0] dct_coef_addr = '0; logic [7:0] dct_coef_data = '0;
  logic dct_in_valid = 1'b0, dct_in_ready; logic [7:0][7:0] dct_in_block = '0;
  logic dct_out_valid, dct_out_last; logic [2:0] dct_out_index; logic signed [11:0] dct_out_data;

  htc_accel dut (.*);

  always #5 clk = ~clk;

  // Mechanism counters.
  int n_fir_stall = 0, n_dct_stall = 0, n_both_busy = 0, n_neg = 0, n_switch = 0, n_coef = 0;
  always @(posedge clk) begin
    if (fir_in_valid && !fir_in_ready) n_fir_stall <= n_fir_stall + 1;
    if (dct_in_valid && !dct_in_ready) n_dct_stall <= n_dct_stall + 1;
    if (!fir_in_ready && !dct_in_ready) n_both_busy <= n_both_busy + 1;
    if (dct_out_valid && dct_out_data < 0) n_neg <= n_neg + 1;
    if (fir_coef_we || dct_coef_we) n_coef <= n_coef + 1;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c[8][8];
  int unsigned h[6] = '{10, 41, 77, 77, 41, 10};

  task automatic load_dct(bit inverse);
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < 8; n++) begin
        dct_coef_we = 1'b1; dct_coef_addr = 6'(8 * k + n);
        dct_coef_data = 8'(inverse ? c[n][k] : c[k][n]);
        @(negedge clk);
      end
    dct_coef_we = 1'b0;
  endtask

  // Runs one block through the DCT engine and checks each output against the
  // model for coefficient matrix m.
  task automatic run_block(input int xs[8], input bit inverse, output int ys[8]);
    for (int n = 0; n < 8; n++) dct_in_block[n] = 8'(xs[n]);
    dct_in_valid = 1'b1;
    while (!dct_in_ready) @(negedge clk);
    @(negedge clk);
    // Offer the same block again at once: the engine must hold it off.
    repeat (3) @(negedge clk);
    dct_in_valid = 1'b0;
    for (int k = 0; k < 8; k++) begin
      int unsigned a0[4], b0[4], a1[4], b1[4];
      int expect_v;
      while (!dct_out_valid) @(negedge clk);
      for (int i = 0; i < 4; i++) begin
        a0[i] = (inverse ? c[i][k] : c[k][i]) & 255;     b0[i] = xs[i] & 255;
        a1[i] = (inverse ? c[4+i][k] : c[k][4+i]) & 255; b1[i] = xs[4+i] & 255;
      end
      expect_v = mac_result(a0, b0, N, 1) + mac_result(a1, b1, N, 1);
      check(dct_out_index == 3'(k), "DCT output order");
      check(int'(dct_out_data) == expect_v, "DCT bit-exact output");
      ys[k] = int'(dct_out_data);
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < 8; n++) c[k][n] = dct_coef(k, n);
    // Coefficient loads for both accelerators.
    for (int k = 0; k < 6; k++) begin
      fir_coef_we = 1'b1; fir_coef_addr = 3'(k); fir_coef_data = 8'(h[k]);
      @(negedge clk);
    end
    fir_coef_we = 1'b0;
    load_dct(1'b0);
    fork
      // ---------------- FIR row ----------------
      begin
        int unsigned xs[$];
        int unsigned pix;
        for (int s = 0; s < NPIX; s++) begin
          pix = $rtoi(128.0 + 100.0 * $sin(real'(s) * 0.8));
          fir_in_data = 8'(pix); fir_in_valid = 1'b1;
          while (!fir_in_ready) @(negedge clk);
          xs.push_front(pix);
          @(negedge clk);
          // Leave in_valid high for a few cycles more with the same data; the
          // filter is busy, so this must stall rather than be accepted.
          repeat (2) @(negedge clk);
          fir_in_valid = 1'b0;
          while (!fir_out_valid) @(negedge clk);
          begin
            int unsigned a0[4], b0[4], a1[4], b1[4];
            for (int i = 0; i < 4; i++) begin
              a0[i] = h[i]; b0[i] = (i < xs.size()) ? xs[i] : 0;
              a1[i] = (i < 2) ? h[4+i] : 0; b1[i] = (i < 2 && 4 + i < xs.size()) ? xs[4+i] : 0;
            end
            check(int'(fir_out_data) == mac_result(a0, b0, N, 0) + mac_result(a1, b1, N, 0),
                  "FIR bit-exact output");
          end
        end
      end
      // ---------------- DCT -> IDCT ----------------
      begin
        real se, sig;
        se = 0.0; sig = 0.0;
        for (int b = 0; b < NBLK; b++) begin
          int xs[8], ys[8], zs[8];
          for (int n = 0; n < 8; n++) xs[n] = 40 - ((b * 13 + n * 29) % 81);
          load_dct(1'b0);
          run_block(xs, 1'b0, ys);
          for (int k = 0; k < 8; k++) ys[k] = (ys[k] > 127) ? 127 : (ys[k] < -128) ? -128 : ys[k];
          // Mode switch: load the transposed matrix, run the inverse.
          load_dct(1'b1);
          n_switch++;
          run_block(ys, 1'b1, zs);
          for (int n = 0; n < 8; n++) begin
            se  += real'((zs[n] - xs[n]) ** 2);
            sig += 1.0;
          end
        end
        begin
          real rmse, psnr;
          rmse = $sqrt(se / sig);
          psnr = 20.0 * $log10(255.0 / (rmse > 0.01 ? rmse : 0.01));
          $display("DCT->IDCT reconstruction: RMSE %0.2f LSB, PSNR %0.2f dB", rmse, psnr);
          check(psnr > 10.0, "reconstruction PSNR above 10 dB");
        end
      end
    join
    $display("mechanisms: fir_stall=%0d dct_stall=%0d both_busy=%0d neg_out=%0d switch=%0d coef_writes=%0d",
             n_fir_stall, n_dct_stall, n_both_busy, n_neg, n_switch, n_coef);
    check(n_fir_stall > 0, "FIR stall happened");
    check(n_dct_stall > 0, "DCT stall happened");
    check(n_both_busy > 0, "both accelerators busy together");
    check(n_neg > 0, "negative DCT output seen");
    check(n_switch > 0, "DCT -> IDCT switch happened");
    check(n_coef > 0, "coefficient writes happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
