// capture_mem_tb -- arms a record, offers more samples than fit (4000 words)
// and checks that exactly the first 4000 are stored in order, that count and
// done behave, that samples before arm are ignored, and that a second arm
// starts a new record from address 0.
module capture_mem_tb;
  import ngrc_pkg::*;
  localparam int D = 4000;
  logic clk = 1'b0, rst_n = 1'b0, arm = 1'b0, samp_valid = 1'b0;
  logic [11:0] v1_code = '0, v2_code = '0, rd_addr = '0;
  logic [23:0] rd_data;
  logic capturing, done;
  logic [11:0] count;
  int   checks = 0, failures = 0;

  capture_mem dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [23:0] smp(input int n, input int salt);
    return 24'((n * 2654435 + salt) & 24'hFFFFFF);
  endfunction

  task automatic offer(input int n, input int salt);
    @(negedge clk) begin
      samp_valid = 1'b1;
      {v1_code, v2_code} = smp(n, salt);
    end
    @(negedge clk) samp_valid = 1'b0;
  endtask

  task automatic read_back(input int upto, input int salt);
    for (int a = 0; a < upto; a++) begin
      @(negedge clk) rd_addr = 12'(a);
      @(negedge clk);
      check(rd_data == smp(a, salt), $sformatf("word %0d", a));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    offer(0, 99);                               // before arm: ignored
    check(!capturing && !done && count == 0, "idle before arm");
    @(negedge clk) arm = 1'b1;
    @(negedge clk) arm = 1'b0;
    check(capturing && !done, "capturing after arm");
    for (int n = 0; n < D + 25; n++) begin
      offer(n, 1);
      if (n == D - 2) check(!done && count == 12'(D - 1), "not yet done");
    end
    check(done && !capturing, "done after 4000 samples");
    check(count == 12'(D), $sformatf("count %0d", count));
    read_back(D, 1);
    // second record, stopped half way
    @(negedge clk) arm = 1'b1;
    @(negedge clk) arm = 1'b0;
    check(!done && count == 0, "re-armed");
    for (int n = 0; n < 100; n++) offer(n, 7);
    check(count == 12'd100 && capturing, "partial record");
    read_back(100, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
