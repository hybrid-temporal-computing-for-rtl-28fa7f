// tb_htc_up_counter: checks the epoch counter. It counts 0..2^N-1 and wraps,
// holds while en is low, clears synchronously and raises `last` only in the
// final cycle of an epoch. Expected values come from a plain integer model.
module tb_htc_up_counter;
  localparam int unsigned N = 8;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  logic [N-1:0] count;
  logic last;
  int checks = 0, failures = 0;
  int unsigned model = 0;

  htc_up_counter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: count=%0d model=%0d last=%0b", what, count, model, last); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(count == 0, "reset value");
    // Two full epochs with random pauses of en.
    for (int i = 0; i < 700; i++) begin
      en = ($urandom_range(0, 3) != 0);
      #1;
      check(last == (en && model == (1 << N) - 1), "last flag");
      @(posedge clk);
      if (en) model = (model + 1) % (1 << N);
      @(negedge clk);
      check(count == N'(model), "count value");
    end
    // Synchronous clear has priority over en.
    en = 1'b1; clear = 1'b1;
    @(posedge clk); model = 0; @(negedge clk);
    clear = 1'b0;
    check(count == 0, "clear");
    en = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    check(count == 0, "hold while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
