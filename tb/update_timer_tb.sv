// update_timer_tb -- checks that update_timer emits a one-cycle tick every
// DIV = 300 clocks (5 us at 60 MHz, the 200 kHz control-update rate), with
// the first tick DIV cycles after reset, and that reset restarts the count.
module update_timer_tb;
  logic clk = 1'b0, rst_n = 1'b0, tick;
  int   checks = 0, failures = 0;
  int   cyc = 0, last_tick = -1, nticks = 0;

  update_timer dut (.clk, .rst_n, .tick);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Every tick must be exactly 300 cycles after the previous one.
  always @(posedge clk) if (rst_n && tick) begin
    if (last_tick >= 0) check(cyc - last_tick == 300, $sformatf("tick spacing %0d", cyc - last_tick));
    last_tick = cyc;
    nticks++;
  end

  initial begin
    int rel;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk); rel = cyc;
    wait (tick); @(negedge clk);
    check(cyc - rel == 300, $sformatf("first tick after %0d cycles", cyc - rel));
    @(negedge clk); check(!tick, "tick lasts one cycle");
    wait (nticks == 12);
    // reset in the middle of a period restarts the count
    repeat (100) @(posedge clk);
    rst_n <= 1'b0; last_tick = -1;
    @(posedge clk); rst_n <= 1'b1;
    @(posedge clk); rel = cyc;
    wait (tick); @(negedge clk);
    check(cyc - rel == 300, $sformatf("tick after re-reset %0d", cyc - rel));
    @(posedge clk); @(negedge clk);
    check(nticks == 13, $sformatf("tick count %0d", nticks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
