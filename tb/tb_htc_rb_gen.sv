// tb_htc_rb_gen: checks the regulated-bitstream generator.
//  * Every operand and count at N = 8 (unipolar and bipolar) against the
//    reference rule (bit N-1-k at k trailing ones, 0 at the all-ones count).
//  * The ones in an epoch equal x (unipolar) or x + 2^(N-1) (bipolar).
//  * The 3-bit streams printed in the paper: 011 -> 01010100,
//    110 -> 11101110 and bipolar 110 -> 01000100.
module tb_htc_rb_gen;
  import htc_model_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0] x8, c8;
  logic       r8u, r8b;
  logic [2:0] x3, c3;
  logic       r3u, r3b;

  htc_rb_gen #(.N(8), .BIPOLAR(1'b0)) u8u (.x(x8), .count(c8), .r(r8u));
  htc_rb_gen #(.N(8), .BIPOLAR(1'b1)) u8b (.x(x8), .count(c8), .r(r8b));
  htc_rb_gen #(.N(3), .BIPOLAR(1'b0)) u3u (.x(x3), .count(c3), .r(r3u));
  htc_rb_gen #(.N(3), .BIPOLAR(1'b1)) u3b (.x(x3), .count(c3), .r(r3b));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok && failures < 20) $display("FAIL %s x=%0d", what, x8);
    if (!ok) failures++;
  endtask

  task automatic stream3(input logic [2:0] x, input bit bip, output logic [7:0] s);
    for (int c = 0; c < 8; c++) begin
      x3 = x; c3 = 3'(c); #1;
      s[7-c] = bip ? r3b : r3u;  // slot 0 printed first (leftmost)
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++) begin
      int onesu, onesb, bad;
      onesu = 0; onesb = 0; bad = 0;
      for (int c = 0; c < 256; c++) begin
        x8 = 8'(x); c8 = 8'(c); #1;
        if (r8u != rb_bit(x, c, 8, 0)) bad++;
        if (r8b != rb_bit(x, c, 8, 1)) bad++;
        onesu += r8u; onesb += r8b;
      end
      check(bad == 0, "per-cycle bits");
      check(onesu == x, "unipolar ones count");
      check(onesb == (x ^ 128), "bipolar ones count");
    end
    begin
      logic [7:0] s;
      stream3(3'b011, 0, s); checks++; if (s != 8'b0101_0100) begin failures++; $display("FAIL 011 -> %b", s); end
      stream3(3'b110, 0, s); checks++; if (s != 8'b1110_1110) begin failures++; $display("FAIL 110 -> %b", s); end
      stream3(3'b110, 1, s); checks++; if (s != 8'b0100_0100) begin failures++; $display("FAIL bipolar 110 -> %b", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
