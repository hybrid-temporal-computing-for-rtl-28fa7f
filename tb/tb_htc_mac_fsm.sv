// tb_htc_mac_fsm: checks the MAC control FSM together with a behavioural
// 16-cycle epoch counter in the testbench. It checks that `clear` appears
// only in the start cycle, that `en` lasts exactly one epoch, that `done`
// pulses one cycle after `last` (2^4 + 1 cycles after start), that a start
// held high chains epochs without a gap, and that the FSM returns to idle.
module tb_htc_mac_fsm;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, last;
  logic clear, en, busy, done;
  int unsigned cnt = 0;

  htc_mac_fsm dut (.*);

  always #5 clk = ~clk;

  // Behavioural epoch counter (16 cycles).
  always @(posedge clk) begin
    if (clear) cnt <= 0;
    else if (en) cnt <= (cnt + 1) % 16;
  end
  assign last = en && (cnt == 15);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, en_cycles, done_at;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!en && !busy && !done && !clear, "idle after reset");
    // Single epoch.
    start = 1'b1; #1;
    check(clear, "clear in start cycle");
    @(negedge clk); start = 1'b0;
    en_cycles = 0; done_at = -1;
    for (cyc = 1; cyc <= 20; cyc++) begin
      if (en) en_cycles++;
      check(!clear, "no clear while running");
      if (done) done_at = cyc;
      @(negedge clk);
    end
    check(en_cycles == 16, "en for one epoch");
    check(done_at == 17, "done 2^N+1 cycles after start");
    check(!busy, "back to idle");
    // Chained epochs: start held high.
    start = 1'b1;
    @(negedge clk);
    begin
      int dones, gaps;
      dones = 0; gaps = 0;
      for (cyc = 0; cyc < 48; cyc++) begin
        if (!en) gaps++;
        if (done) dones++;
        @(negedge clk);
      end
      check(gaps == 0, "no idle cycle between chained epochs");
      check(dones == 2, "one done per chained epoch");
    end
    start = 1'b0;
    repeat (20) @(negedge clk);
    check(!busy, "idle after chained run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
