// tb_htc_image_workloads: runs the two image workloads the accelerators are
// meant for on a generated 32x32 8-bit test image (smooth shading, a sharp
// diagonal edge and a checkered patch), through the top level at its
// default parameters.
//  * Gaussian blur: every image row streams through the 6-tap FIR filter
//    (coefficients 10 41 77 77 41 10, sum 256 = 1.0). Every output is checked
//    bit-exactly against the reference model. The PSNR of the blurred image
//    against an exact floating-point blur is printed and must exceed 20 dB.
//  * DCT: every 8-pixel row segment (pixel - 128, as a signed fraction of
//    128) goes through the DCT engine. The outputs are transformed back with
//    an exact floating-point IDCT and compared with the original image: the
//    PSNR is printed and must exceed 14 dB. Outputs are also checked
//    bit-exactly.
// The two workloads run at the same time.
module tb_htc_image_workloads;
  import htc_model_pkg::*;
  localparam int unsigned N = 8;
  localparam int W = 32, H = 32;
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

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img[H][W];
  int c[8][8];
  int unsigned h[6] = '{10, 41, 77, 77, 41, 10};

  function automatic int pixel(int r, int col);
    int v;
    v = 40 + 4 * r + 2 * col;                          // shading
    if (col > r + 4) v += 90;                          // diagonal edge
    if (r >= 20 && r < 28 && col >= 4 && col < 12)     // checkered patch
      v = (((r + col) % 2) == 1) ? 230 : 20;
    return (v > 255) ? 255 : v;
  endfunction

  function automatic real psnr(real se, real n);
    real rmse;
    rmse = $sqrt(se / n);
    return 20.0 * $log10(255.0 / ((rmse > 0.001) ? rmse : 0.001));
  endfunction

  initial begin
    for (int r = 0; r < H; r++) for (int col = 0; col < W; col++) img[r][col] = pixel(r, col);
    for (int k = 0; k < 8; k++) for (int n = 0; n < 8; n++) c[k][n] = dct_coef(k, n);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 6; k++) begin
      fir_coef_we = 1'b1; fir_coef_addr = 3'(k); fir_coef_data = 8'(h[k]);
      @(negedge clk);
    end
    fir_coef_we = 1'b0;
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < 8; n++) begin
        dct_coef_we = 1'b1; dct_coef_addr = 6'(8 * k + n); dct_coef_data = 8'(c[k][n]);
        @(negedge clk);
      end
    dct_coef_we = 1'b0;
    fork
      // ---------------- Gaussian blur ----------------
      begin
        real se;
        int bad;
        se = 0.0; bad = 0;
        for (int r = 0; r < H; r++) begin
          // The delay line is flushed with zeros at the start of each row
          // by the previous row's tail; the reference model tracks it.
          int unsigned xs[$];
          for (int z = 0; z < 6; z++) xs.push_front(0);
          for (int col = 0; col < W; col++) begin
            int unsigned a0[4], b0[4], a1[4], b1[4];
            real exact;
            fir_in_data = 8'(img[r][col]); fir_in_valid = 1'b1;
            while (!fir_in_ready) @(negedge clk);
            @(negedge clk);
            fir_in_valid = 1'b0;
            xs.push_front(img[r][col]);
            while (!fir_out_valid) @(negedge clk);
            for (int i = 0; i < 4; i++) begin
              a0[i] = h[i]; b0[i] = xs[i];
              a1[i] = (i < 2) ? h[4+i] : 0; b1[i] = (i < 2) ? xs[4+i] : 0;
            end
            if (int'(fir_out_data) != mac_result(a0, b0, N, 0) + mac_result(a1, b1, N, 0)) bad++;
            exact = 0.0;
            for (int k = 0; k < 6; k++) exact += real'(h[k]) / 256.0 * real'(xs[k]);
            if (col >= 5) se += (real'(fir_out_data) - exact) ** 2;  // skip row warm-up
          end
          // Flush the delay line with zeros so the next row starts clean.
          for (int z = 0; z < 6; z++) begin
            fir_in_data = '0; fir_in_valid = 1'b1;
            while (!fir_in_ready) @(negedge clk);
            @(negedge clk);
            fir_in_valid = 1'b0;
            while (!fir_out_valid) @(negedge clk);
          end
        end
        check(bad == 0, "FIR outputs bit-exact");
        $display("blur: PSNR against exact blur %0.2f dB", psnr(se, real'(H * (W - 5))));
        check(psnr(se, real'(H * (W - 5))) > 20.0, "blur PSNR above 20 dB");
      end
      // ---------------- DCT with exact inverse ----------------
      begin
        real se;
        int bad;
        se = 0.0; bad = 0;
        for (int r = 0; r < H; r++)
          for (int s = 0; s < W / 8; s++) begin
            int xs[8];
            real ys[8];
            for (int n = 0; n < 8; n++) begin
              xs[n] = img[r][8*s+n] - 128;
              dct_in_block[n] = 8'(xs[n]);
            end
            dct_in_valid = 1'b1;
            while (!dct_in_ready) @(negedge clk);
            @(negedge clk);
            dct_in_valid = 1'b0;
            for (int k = 0; k < 8; k++) begin
              int unsigned a0[4], b0[4], a1[4], b1[4];
              while (!dct_out_valid) @(negedge clk);
              for (int i = 0; i < 4; i++) begin
                a0[i] = c[k][i] & 255;   b0[i] = xs[i] & 255;
                a1[i] = c[k][4+i] & 255; b1[i] = xs[4+i] & 255;
              end
              if (int'(dct_out_data) != mac_result(a0, b0, N, 1) + mac_result(a1, b1, N, 1)) bad++;
              ys[k] = real'(dct_out_data);
              @(negedge clk);
            end
            // Exact orthonormal IDCT.
            for (int n = 0; n < 8; n++) begin
              real v;
              v = 0.0;
              for (int k = 0; k < 8; k++)
                v += ((k == 0) ? $sqrt(1.0 / 8.0) : 0.5)
                     * $cos(3.14159265358979 * real'((2 * n + 1) * k) / 16.0) * ys[k];
              se += (v - real'(xs[n])) ** 2;
            end
          end
        check(bad == 0, "DCT outputs bit-exact");
        $display("DCT: PSNR of exact-IDCT reconstruction %0.2f dB", psnr(se, real'(H * W)));
        check(psnr(se, real'(H * W)) > 14.0, "DCT reconstruction PSNR above 14 dB");
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
