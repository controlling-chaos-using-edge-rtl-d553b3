// perturb_mem_tb -- loads the 4000-entry training sequence, plays it for
// more than one repetition and checks each code (one cycle after its tick),
// the wrap pulse after entry 3999, that ticks with enable low neither
// advance nor pulse valid, and that restart returns to entry 0.
module perturb_mem_tb;
  import ngrc_pkg::*;
  localparam int D = 4000;
  logic clk = 1'b0, rst_n = 1'b0, tick = 1'b0, restart = 1'b0, enable = 1'b1;
  logic wr_en = 1'b0;
  logic [11:0] wr_addr = '0;
  logic [15:0] wr_data = '0, code;
  logic valid, wrap;
  int   checks = 0, failures = 0, nwrap = 0, pos = 0;

  perturb_mem dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] tab(input int a);
    return 16'((a * 40503) ^ 16'h5A5A);
  endfunction

  task automatic play(input bit en);
    @(negedge clk) begin tick = 1'b1; enable = en; end
    @(negedge clk) tick = 1'b0;
    if (en) begin
      check(valid, "valid one cycle after tick");
      check(code == tab(pos % D), $sformatf("code at %0d", pos));
      check(wrap == ((pos % D) == D - 1), $sformatf("wrap at %0d", pos));
      if (wrap) nwrap++;
      pos++;
    end else begin
      check(!valid && !wrap, "disabled: no output");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk) begin wr_en = 1; wr_addr = 12'(a); wr_data = tab(a); end
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < D + 400; n++) play((n % 17) != 9);
    check(nwrap == 1, "one wrap");
    @(negedge clk) restart = 1'b1;
    @(negedge clk) restart = 1'b0;
    pos = 0;
    for (int n = 0; n < 10; n++) play(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
