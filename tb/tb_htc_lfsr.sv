// tb_htc_lfsr: checks that the selector LFSR at widths 4 and 8 visits every
// non-zero state exactly once per period (maximal length 2^W-1), follows the
// reference feedback rule, holds while en is low and reloads its seed on
// clear and reset.
module tb_htc_lfsr;
  import htc_model_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [7:0] s8;
  logic [3:0] s4;

  htc_lfsr #(.W(8)) u8 (.clk, .rst_n, .clear, .en, .state(s8));
  htc_lfsr #(.W(4)) u4 (.clk, .rst_n, .clear, .en, .state(s4));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s s8=%h s4=%h", what, s8, s4); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen8[256];
    bit seen4[16];
    int unsigned m8 = 1, m4 = 1;
    repeat (2) @(posedge clk);
    @(negedge clk);
    check(s8 == 8'd1 && s4 == 4'd1, "seed after reset");
    rst_n = 1'b1;
    en = 1'b1;
    for (int i = 0; i < 255; i++) begin
      check(!seen8[s8] && s8 != 0, "8-bit state unique and non-zero");
      seen8[s8] = 1'b1;
      if (i < 15) begin
        check(!seen4[s4] && s4 != 0, "4-bit state unique and non-zero");
        seen4[s4] = 1'b1;
      end
      check(s8 == 8'(m8), "8-bit sequence");
      @(posedge clk); @(negedge clk);
      m8 = ((m8 << 1) | ($countones(m8 & taps_of(8)) & 1)) & 8'hFF;
    end
    check(s8 == 8'd1, "8-bit period 255");
    en = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    check(s8 == 8'd1, "hold while disabled");
    en = 1'b1;
    repeat (5) @(posedge clk);
    clear = 1'b1;
    @(posedge clk); @(negedge clk);
    clear = 1'b0;
    check(s8 == 8'd1 && s4 == 4'd1, "clear reloads seed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
