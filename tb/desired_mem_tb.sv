// desired_mem_tb -- loads a full 4200-entry table (one-step-ahead, M = 1)
// and a short 7-entry table with M = 2, ticks through more than one full
// repetition of each and checks des_ahead = entry n, des_now = entry n-M
// (zero before the table has been read M times), the two-cycle latency, the
// wrap pulse at the last entry, and that restart returns to entry 0.
module desired_mem_tb;
  import ngrc_pkg::*;
  localparam int D1 = 4200, D2 = 7;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0, restart = 1'b0;
  logic wr1 = 0, wr2 = 0;
  logic [12:0] a1 = '0;
  logic [2:0]  a2 = '0;
  q_t   d1 = '0, d2 = '0;
  q_t   now1, ahead1, now2, ahead2;
  logic val1, val2, wrap1, wrap2;
  int   checks = 0, failures = 0, nwrap1 = 0, nwrap2 = 0;

  desired_mem dut1 (.clk, .rst_n, .wr_en(wr1), .wr_addr(a1), .wr_data(d1),
                    .restart, .tick, .des_now(now1), .des_ahead(ahead1),
                    .valid(val1), .wrap(wrap1));
  desired_mem #(.DEPTH(D2), .M(2)) dut2 (
                    .clk, .rst_n, .wr_en(wr2), .wr_addr(a2), .wr_data(d2),
                    .restart, .tick, .des_now(now2), .des_ahead(ahead2),
                    .valid(val2), .wrap(wrap2));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // table contents: a simple hash of the address, distinct per table
  function automatic q_t tab1(input int a); return q_t'(a * 37 - 70000); endfunction
  function automatic q_t tab2(input int a); return q_t'(-(a + 1) * 1001); endfunction

  task automatic step(input int n);   // n = number of ticks since (re)start
    @(negedge clk) tick = 1'b1;
    @(negedge clk) tick = 1'b0;
    check(!val1 && !val2, "no result one cycle after tick");
    @(negedge clk);
    check(val1 && val2, "result two cycles after tick");
    check(ahead1 == tab1(n % D1), $sformatf("M=1 ahead at %0d", n));
    check(now1 == ((n >= 1) ? tab1((n - 1) % D1) : q_t'(0)), $sformatf("M=1 now at %0d", n));
    check(ahead2 == tab2(n % D2), $sformatf("M=2 ahead at %0d", n));
    check(now2 == ((n >= 2) ? tab2((n - 2) % D2) : q_t'(0)), $sformatf("M=2 now at %0d", n));
    check(wrap1 == ((n % D1) == D1 - 1), $sformatf("M=1 wrap at %0d", n));
    check(wrap2 == ((n % D2) == D2 - 1), $sformatf("M=2 wrap at %0d", n));
    if (wrap1) nwrap1++;
    if (wrap2) nwrap2++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int a = 0; a < D1; a++) begin
      @(negedge clk);
      wr1 = 1; a1 = 13'(a); d1 = tab1(a);
      wr2 = (a < D2); a2 = 3'(a); d2 = tab2(a);
    end
    @(negedge clk) begin wr1 = 0; wr2 = 0; end
    for (int n = 0; n < D1 + 20; n++) step(n);
    check(nwrap1 == 1 && nwrap2 == (D1 + 20) / D2, "wrap counts");
    @(negedge clk) restart = 1'b1;
    @(negedge clk) restart = 1'b0;
    for (int n = 0; n < 10; n++) step(n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
