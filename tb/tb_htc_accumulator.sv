// tb_htc_accumulator: checks the ones-counting accumulator at N = 8, L = 4,
// unipolar and bipolar. Random bitstreams run for whole epochs, with `last`
// in cycle 255. `ones` must equal the ones driven and `mac_out` must equal
// 4*ones (unipolar) or 4*ones - 512 (bipolar, two's complement). It also
// checks the all-ones epoch (256 ones), back-to-back epochs and clear.
module tb_htc_accumulator;
  localparam int unsigned N = 8;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0, last = 1'b0, bit_in = 1'b0;
  logic [N:0]  ones_u, ones_b;
  logic [10:0] out_u, out_b;

  htc_accumulator #(.N(N), .L(4), .BIPOLAR(1'b0)) uu (.clk, .rst_n, .clear, .en, .last, .bit_in, .ones(ones_u), .mac_out(out_u));
  htc_accumulator #(.N(N), .L(4), .BIPOLAR(1'b1)) ub (.clk, .rst_n, .clear, .en, .last, .bit_in, .ones(ones_b), .mac_out(out_b));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s ones=%0d out_u=%0d out_b=%0d", what, ones_u, out_u, out_b); end
  endtask

  task automatic epoch(input int density, output int n);
    n = 0;
    en = 1'b1;
    for (int c = 0; c < 256; c++) begin
      bit_in = (density >= 256) ? 1'b1 : ($urandom_range(0, 255) < density);
      last   = (c == 255);
      n += bit_in;
      @(negedge clk);
    end
    en = 1'b0; last = 1'b0; bit_in = 1'b0;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    for (int e = 0; e < 12; e++) begin
      int d;
      d = (e == 0) ? 0 : (e == 1) ? 256 : $urandom_range(0, 255);
      epoch(d, n);
      check(ones_u == (N+1)'(n) && ones_b == (N+1)'(n), "ones count");
      check(out_u == 11'(4 * n), "unipolar result");
      check($signed(out_b) == 11'(4 * n - 512), "bipolar result");
      if (e == 1) check(ones_u == 9'd256, "full epoch of ones does not wrap");
    end
    // Clear in mid-epoch discards the partial count.
    en = 1'b1; bit_in = 1'b1;
    repeat (10) @(negedge clk);
    en = 1'b0; clear = 1'b1; @(negedge clk); clear = 1'b0;
    epoch(0, n);
    check(ones_u == 0, "clear discards partial count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
