// tb_htc_gb2tb: checks the GB-to-TB conversion.
//  * The two worked conversions for a 2-input adder with a 3-bit counter:
//    unipolar 10001010 (3/8) -> 11111100 (6/8), and bipolar 01010100 (-1/4)
//    -> 11000000 (-2/4), including the exact output stream.
//  * Exhaustive at N = 3, L = 2 and at the default N = 8, L = 4, both
//    codings: n_out against an independent formula, and the number and
//    position of ones in the emitted stream over a full epoch.
module tb_htc_gb2tb;
  int checks = 0, failures = 0;

  logic [3:0] ones3u, ones3b, n3u, n3b;
  logic [2:0] cnt3;
  logic       t3u, t3b;
  logic [8:0] ones8u, ones8b, n8u, n8b;
  logic [7:0] cnt8;
  logic       t8u, t8b;

  htc_gb2tb #(.N(3), .L(2), .BIPOLAR(1'b0)) u3u (.ones(ones3u), .count(cnt3), .t(t3u), .n_out(n3u));
  htc_gb2tb #(.N(3), .L(2), .BIPOLAR(1'b1)) u3b (.ones(ones3b), .count(cnt3), .t(t3b), .n_out(n3b));
  htc_gb2tb #(.N(8), .L(4), .BIPOLAR(1'b0)) u8u (.ones(ones8u), .count(cnt8), .t(t8u), .n_out(n8u));
  htc_gb2tb #(.N(8), .L(4), .BIPOLAR(1'b1)) u8b (.ones(ones8b), .count(cnt8), .t(t8b), .n_out(n8b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int expected(input int ones, input int n, input int l, input bit bip);
    int v;
    v = ones * l;
    if (bip) v = v - (l - 1) * (1 << (n - 1));
    if (v < 0) v = 0;
    if (v > (1 << n)) v = 1 << n;
    return v;
  endfunction

  initial begin
    #1ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    string s_u, s_b;
    // Printed examples: the adder outputs 10001010 (3/8) and, bipolar,
    // 01010100 (-1/4); their ones are counted over one epoch, then the
    // converted streams are read over counts 0..7.
    ones3u = 4'($countones(8'b10001010));
    ones3b = 4'($countones(8'b01010100));
    s_u = "";
    s_b = "";
    for (int c = 0; c < 8; c++) begin
      cnt3 = 3'(c);
      #1;
      s_u = {s_u, t3u ? "1" : "0"};
      s_b = {s_b, t3b ? "1" : "0"};
    end
    check(n3u == 4'd6 && s_u == "11111100", $sformatf("unipolar example: %0d ones, %s", n3u, s_u));
    check(n3b == 4'd2 && s_b == "11000000", $sformatf("bipolar example: %0d ones, %s", n3b, s_b));

    // Exhaustive, N = 3, L = 2.
    for (int o = 0; o <= 8; o++) begin
      int cu, cb;
      ones3u = 4'(o);
      ones3b = 4'(o);
      cu = 0;
      cb = 0;
      for (int c = 0; c < 8; c++) begin
        cnt3 = 3'(c);
        #1;
        check(t3u == (c < expected(o, 3, 2, 0)), "N=3 unipolar stream bit");
        check(t3b == (c < expected(o, 3, 2, 1)), "N=3 bipolar stream bit");
        cu += t3u;
        cb += t3b;
      end
      check(int'(n3u) == expected(o, 3, 2, 0), $sformatf("N=3 unipolar n_out for %0d", o));
      check(int'(n3b) == expected(o, 3, 2, 1), $sformatf("N=3 bipolar n_out for %0d", o));
      check(cu == ((n3u > 8) ? 8 : int'(n3u)), "N=3 unipolar ones per epoch");
      check(cb == ((n3b > 8) ? 8 : int'(n3b)), "N=3 bipolar ones per epoch");
    end

    // Exhaustive, N = 8, L = 4.
    for (int o = 0; o <= 256; o++) begin
      int cu, cb;
      ones8u = 9'(o);
      ones8b = 9'(o);
      cu = 0;
      cb = 0;
      #1;
      check(int'(n8u) == expected(o, 8, 4, 0), $sformatf("N=8 unipolar n_out for %0d", o));
      check(int'(n8b) == expected(o, 8, 4, 1), $sformatf("N=8 bipolar n_out for %0d", o));
      for (int c = 0; c < 256; c++) begin
        cnt8 = 8'(c);
        #1;
        cu += t8u;
        cb += t8b;
        if (c == 0 || c == 255 || c == int'(n8u) - 1 || c == int'(n8u)) begin
          check(t8u == (c < int'(n8u)), "N=8 unipolar stream edge");
          check(t8b == (c < int'(n8b)), "N=8 bipolar stream edge");
        end
      end
      check(cu == expected(o, 8, 4, 0), "N=8 unipolar ones per epoch");
      check(cb == expected(o, 8, 4, 1), "N=8 bipolar ones per epoch");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
