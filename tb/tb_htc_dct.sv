// tb_htc_dct: checks the 8-point bipolar DCT engine at its default size
// (N = 8). It loads the quantised DCT-II matrix and transforms random blocks.
//  * Every output must match the bit-exact reference (two bipolar MACs of
//    the reference model, inputs 0-3 and 4-7, added).
//  * Outputs arrive in order k = 0..7, out_last marks k = 7, in_ready stays
//    low for the whole block, and each output takes 2^N + 2 cycles.
//  * The outputs must track the exact transform within an RMSE of 0.5 (in
//    units of 1.0). That bound reflects the scaled addition: each 4-input
//    MAC carries about 0.2 of RMS error on its sum. The RMSE is printed.
module tb_htc_dct;
  import htc_model_pkg::*;
  localparam int unsigned N = 8;
  localparam int NBLK = 3;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic coef_we = 1'b0;
  logic [5:0] coef_addr = '0;
  logic [N-1:0] coef_data = '0;
  logic in_valid = 1'b0, in_ready, out_valid, out_last;
  logic [7:0][N-1:0] in_block = '0;
  logic [2:0] out_index;
  logic signed [11:0] out_data;

  htc_dct #(.N(N), .POINTS(8)) dut (.*);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s k=%0d out=%0d", what, out_index, out_data); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c[8][8];
    real se = 0.0;
    int nout = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++)
      for (int n = 0; n < 8; n++) begin
        c[k][n] = dct_coef(k, n);
        coef_we = 1'b1; coef_addr = 6'(8 * k + n); coef_data = N'(c[k][n]);
        @(negedge clk);
      end
    coef_we = 1'b0;
    for (int b = 0; b < NBLK; b++) begin
      int xs[8];
      int t0;
      for (int n = 0; n < 8; n++) begin
        xs[n] = (b == 0) ? 100 : $urandom_range(0, 255) - 128;
        in_block[n] = N'(xs[n]);
      end
      check(in_ready, "ready before block");
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      t0 = cycle - 1;
      for (int k = 0; k < 8; k++) begin
        int unsigned a0[4], b0[4], a1[4], b1[4];
        int expect_v;
        real exact;
        while (!out_valid) begin
          check(!in_ready, "not ready during block");
          @(negedge clk);
        end
        check(cycle - t0 == ((1 << N) + 2) * (k + 1), "output cadence");
        check(out_index == 3'(k), "output index order");
        check(out_last == (k == 7), "out_last");
        for (int i = 0; i < 4; i++) begin
          a0[i] = c[k][i] & 255;   b0[i] = xs[i] & 255;
          a1[i] = c[k][4+i] & 255; b1[i] = xs[4+i] & 255;
        end
        exact = 0.0;
        for (int n = 0; n < 8; n++) exact += real'(c[k][n]) / 128.0 * real'(xs[n]) / 128.0;
        expect_v = mac_result(a0, b0, N, 1) + mac_result(a1, b1, N, 1);
        check(int'(out_data) == expect_v, "bit-exact output");
        se += (real'(out_data) / 128.0 - exact) ** 2;
        nout++;
        @(negedge clk);
      end
    end
    begin
      real rmse;
      rmse = $sqrt(se / nout);
      $display("DCT RMSE %0.4f (full scale 1.0)", rmse);
      check(rmse < 0.5, "RMSE below 0.5");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
