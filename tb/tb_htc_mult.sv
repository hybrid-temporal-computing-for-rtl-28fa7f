// tb_htc_mult: checks the HTC multiplier gates (AND unipolar, XNOR bipolar)
// on their truth tables and on the paper's two 8-cycle examples:
//   RB 11101110 x TB 11111000 -> 11101000 (6/8 x 5/8, AND)
//   RB 01000100 x TB 11111110 -> 01000101 (-2/4 x 3/4, XNOR)
module tb_htc_mult;
  int checks = 0, failures = 0;
  logic r, t, pu, pb;

  htc_mult #(.BIPOLAR(1'b0)) uu (.r, .t, .p(pu));
  htc_mult #(.BIPOLAR(1'b1)) ub (.r, .t, .p(pb));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s r=%0b t=%0b", what, r, t); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {r, t} = 2'(i); #1;
      check(pu == (i == 3), "AND truth table");
      check(pb == (i == 0 || i == 3), "XNOR truth table");
    end
    begin
      logic [7:0] ra = 8'b1110_1110, ta = 8'b1111_1000, rb = 8'b0100_0100, tb = 8'b1111_1110;
      logic [7:0] ya, yb;
      for (int c = 7; c >= 0; c--) begin
        r = ra[c]; t = ta[c]; #1; ya[c] = pu;
        r = rb[c]; t = tb[c]; #1; yb[c] = pb;
      end
      check(ya == 8'b1110_1000, "unipolar example");
      check(yb == 8'b0100_0101, "bipolar example");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
