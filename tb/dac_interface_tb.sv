// dac_interface_tb -- sends random 16-bit codes and decodes the serial
// frame the way a DAC would (bits taken on rising sclk while sync_n is low,
// frame ends when sync_n rises). Checks each received word, the bit count,
// the sclk period (2 system clocks: 30 MHz from 60 MHz), the 33 busy cycles
// and the busy flag. Also checks the Q0.17 <-> code helpers of the package.
module dac_interface_tb;
  import ngrc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [15:0] code = '0;
  logic busy, sclk, sync_n, din;
  int   checks = 0, failures = 0;
  int   cyc = 0, last_rise = -1, nbits = 0, frames = 0;
  logic [15:0] rx;
  logic sclk_q = 1'b0, sync_q = 1'b1;
  logic [15:0] sent [$];

  dac_interface dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // DAC model: sample din on sclk rising edges, word ends on sync_n rising
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (sclk && !sclk_q) begin
        check(!sync_n, "sclk only toggles inside a frame");
        if (last_rise >= 0 && nbits > 0) check(cyc - last_rise == 2, "sclk period 2 clocks");
        last_rise = cyc;
        rx = {rx[14:0], din};
        nbits++;
      end
      if (sync_n && !sync_q) begin
        check(nbits == 16, $sformatf("bits in frame %0d", nbits));
        check(sent.size() > 0 && rx == sent[0], $sformatf("word %h", rx));
        if (sent.size() > 0) void'(sent.pop_front());
        frames++;
        nbits = 0; last_rise = -1;
      end
      sclk_q <= sclk;
      sync_q <= sync_n;
    end
  end

  initial begin
    int t0;
    check(q_to_dac(18'sd0) == 16'h8000, "zero -> mid-scale");
    check(q_to_dac(18'sh1FFFF) == 16'hFFFF, "max -> full scale");
    check(q_to_dac(-18'sh20000) == 16'h0000, "min -> zero code");
    check(dac_to_q(16'hC000) == 18'sd65536, "code 0xC000 -> 0.5");
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk) begin
        load = 1'b1;
        code = (n == 0) ? 16'hFFFF : (n == 1) ? 16'h0000 : 16'($urandom);
        sent.push_back(code);
      end
      t0 = cyc;
      @(negedge clk) load = 1'b0;
      check(busy, "busy after load");
      wait (!busy);
      @(negedge clk);
      check(cyc - t0 == 33 + 1, $sformatf("busy cycles %0d", cyc - t0 - 1));
      repeat ($urandom_range(0, 4)) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    check(frames == 200 && sent.size() == 0, "all frames received");
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
