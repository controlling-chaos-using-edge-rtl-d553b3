// adc_frontend_tb -- drives random 12-bit code pairs at random times and
// checks that on each update tick the block freezes the latest pair (also a
// pair arriving in the tick cycle itself) and converts it to Q0.17 as
// (code - 2048) * 64, one cycle after the tick, holding it until the next.
module adc_frontend_tb;
  import ngrc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic adc_valid = 1'b0, tick = 1'b0;
  logic [11:0] adc_v1_code = '0, adc_v2_code = '0;
  logic [11:0] v1_code, v2_code;
  q_t   v1_q, v2_q;
  logic samp_valid;
  int   checks = 0, failures = 0;
  logic [11:0] last1 = 12'h800, last2 = 12'h800, exp1, exp2;
  bit   pending = 0;

  adc_frontend dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int to_q(input logic [11:0] c);
    return (int'(c) - 2048) * 64;
  endfunction

  // reference: what the block must hold after the last tick
  always @(posedge clk) if (rst_n) begin
    if (pending) begin
      check(samp_valid, "samp_valid after tick");
      check(v1_code == exp1 && v2_code == exp2, "codes frozen");
      check(int'(v1_q) == to_q(exp1), $sformatf("v1_q %0d exp %0d", v1_q, to_q(exp1)));
      check(int'(v2_q) == to_q(exp2), $sformatf("v2_q %0d exp %0d", v2_q, to_q(exp2)));
    end else begin
      check(!samp_valid, "no samp_valid without tick");
      check(int'(v1_q) == to_q(exp1) && int'(v2_q) == to_q(exp2), "held between ticks");
    end
    pending = tick;
    if (tick) begin
      exp1 = adc_valid ? adc_v1_code : last1;
      exp2 = adc_valid ? adc_v2_code : last2;
    end
    if (adc_valid) begin last1 = adc_v1_code; last2 = adc_v2_code; end
  end

  initial begin
    exp1 = 12'h800; exp2 = 12'h800;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      adc_valid   = ($urandom_range(0, 3) == 0);
      adc_v1_code = 12'($urandom);
      adc_v2_code = 12'($urandom);
      if (n % 97 == 5) begin adc_v1_code = 12'h000; adc_v2_code = 12'hFFF; end
      tick = ($urandom_range(0, 6) == 0) && !tick;
    end
    @(negedge clk) begin tick = 0; adc_valid = 0; end
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
