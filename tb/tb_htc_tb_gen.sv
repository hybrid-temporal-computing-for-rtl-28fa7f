// tb_htc_tb_gen: checks the temporal-bitstream generator.
//  * Every operand and count at N = 8: one pulse of y cycles (unipolar) or
//    y + 2^(N-1) cycles (bipolar), starting at count 0.
//  * The paper's 3-bit examples: 5/8 -> 11111000, bipolar 3/4 -> 11111110.
//  * The N+1-bit form used for a MAC's downstream stream: 2^N gives ones
//    throughout the epoch.
module tb_htc_tb_gen;
  int checks = 0, failures = 0;

  logic [7:0] y8, c8;
  logic [8:0] y9;
  logic       t8u, t8b, t9;
  logic [2:0] y3, c3;
  logic       t3u, t3b;

  htc_tb_gen #(.N(8), .VW(8), .BIPOLAR(1'b0)) u8u (.y(y8), .count(c8), .t(t8u));
  htc_tb_gen #(.N(8), .VW(8), .BIPOLAR(1'b1)) u8b (.y(y8), .count(c8), .t(t8b));
  htc_tb_gen #(.N(8), .VW(9), .BIPOLAR(1'b0)) u9  (.y(y9), .count(c8), .t(t9));
  htc_tb_gen #(.N(3), .VW(3), .BIPOLAR(1'b0)) u3u (.y(y3), .count(c3), .t(t3u));
  htc_tb_gen #(.N(3), .VW(3), .BIPOLAR(1'b1)) u3b (.y(y3), .count(c3), .t(t3b));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok && failures < 20) $display("FAIL %s y=%0d", what, y8);
    if (!ok) failures++;
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int y = 0; y < 256; y++) begin
      int pulse_u, pulse_b, bad;
      bit ended_u, ended_b;
      pulse_u = 0; pulse_b = 0; bad = 0; ended_u = 0; ended_b = 0;
      for (int c = 0; c < 256; c++) begin
        y8 = 8'(y); c8 = 8'(c); #1;
        // A single pulse: once low, never high again.
        if (t8u && ended_u) bad++;
        if (t8b && ended_b) bad++;
        if (!t8u) ended_u = 1; else pulse_u++;
        if (!t8b) ended_b = 1; else pulse_b++;
      end
      check(bad == 0, "single pulse");
      check(pulse_u == y, "unipolar width");
      check(pulse_b == (y < 128 ? y + 128 : y - 128), "bipolar width");
    end
    begin
      int w;
      w = 0; y9 = 9'd256; for (int c = 0; c < 256; c++) begin c8 = 8'(c); #1; w += t9; end
      check(w == 256, "9-bit value 256");
      w = 0; y9 = 9'd77;  for (int c = 0; c < 256; c++) begin c8 = 8'(c); #1; w += t9; end
      check(w == 77, "9-bit value 77");
    end
    begin
      logic [7:0] s, b;
      for (int c = 0; c < 8; c++) begin
        y3 = 3'b101; c3 = 3'(c); #1; s[7-c] = t3u;
        y3 = 3'b011; #1; b[7-c] = t3b;
      end
      checks++; if (s != 8'b1111_1000) begin failures++; $display("FAIL 5/8 -> %b", s); end
      checks++; if (b != 8'b1111_1110) begin failures++; $display("FAIL bipolar 3/4 -> %b", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
