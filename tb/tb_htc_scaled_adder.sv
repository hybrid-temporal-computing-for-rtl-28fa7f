// tb_htc_scaled_adder: checks the scaled-addition multiplexer exhaustively
// for L = 2 (the 2:1 adder of the worked examples), L = 4 (the MAC's) and
// L = 8: select value i passes input i.
module tb_htc_scaled_adder;
  int checks = 0, failures = 0;
  logic [1:0] in2;  logic       sel2; logic o2;
  logic [3:0] in4;  logic [1:0] sel4; logic o4;
  logic [7:0] in8;  logic [2:0] sel8; logic o8;

  htc_scaled_adder #(.L(2)) u2 (.in_bits(in2), .sel(sel2), .out_bit(o2));
  htc_scaled_adder #(.L(4)) u4 (.in_bits(in4), .sel(sel4), .out_bit(o4));
  htc_scaled_adder #(.L(8)) u8 (.in_bits(in8), .sel(sel8), .out_bit(o8));

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++)
      for (int s = 0; s < 2; s++) begin
        in2 = 2'(v); sel2 = 1'(s); #1;
        checks++; if (o2 != ((v >> s) & 1)) begin failures++; $display("FAIL L=2 v=%h s=%0d", v, s); end
      end
    for (int v = 0; v < 16; v++)
      for (int s = 0; s < 4; s++) begin
        in4 = 4'(v); sel4 = 2'(s); #1;
        checks++; if (o4 != ((v >> s) & 1)) begin failures++; $display("FAIL L=4 v=%h s=%0d", v, s); end
      end
    for (int v = 0; v < 256; v++)
      for (int s = 0; s < 8; s++) begin
        in8 = 8'(v); sel8 = 3'(s); #1;
        checks++; if (o8 != ((v >> s) & 1)) begin failures++; $display("FAIL L=8 v=%h s=%0d", v, s); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
