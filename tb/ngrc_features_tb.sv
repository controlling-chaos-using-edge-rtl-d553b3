// ngrc_features_tb -- feeds ngrc_features a random sequence of (V1, V2,
// u_{i-1}) triples and compares each feature vector with one computed from
// scratch: the reference keeps the raw past samples and recomputes every
// product (no reuse), so a wrong reuse, a wrong delay or a wrong index shows.
// It also checks the two-cycle latency and that the delayed terms are zero
// on the first evaluation after reset.
module ngrc_features_tb;
  import ngrc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  q_t   v1 = '0, v2 = '0, u_prev = '0;
  feat_vec_t feat;
  logic valid;
  int   checks = 0, failures = 0;

  ngrc_features dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference arithmetic, written independently of the package
  function automatic longint sat(input longint x);
    return (x > 131071) ? 131071 : (x < -131072) ? -131072 : x;
  endfunction
  function automatic longint mulq(input longint a, input longint b);
    return sat((a * b) >>> 17);
  endfunction

  longint ref_f [9];
  longint pv1 = 0, pv2 = 0;

  task automatic reference(input longint a1, input longint a2, input longint au);
    longint d, dp;
    d  = sat(a1 - a2);
    dp = sat(pv1 - pv2);
    ref_f[0] = au;
    ref_f[1] = a1;
    ref_f[2] = pv1;
    ref_f[3] = mulq(d, mulq(pv1, pv1));
    ref_f[4] = mulq(dp, mulq(a1, a1));
    ref_f[5] = mulq(mulq(d, d), d);
    ref_f[6] = mulq(mulq(dp, dp), dp);
    ref_f[7] = a2;
    ref_f[8] = pv2;
    pv1 = a1; pv2 = a2;
  endtask

  function automatic q_t rnd(input int n);
    case (n % 5)
      0: return 18'sh1FFFF;                       // largest positive
      1: return -18'sh20000;                      // largest negative
      default: return q_t'($urandom);
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      v1 = (n % 13 == 3) ? rnd(n) : q_t'($urandom);
      v2 = (n % 11 == 4) ? rnd(n + 1) : q_t'($urandom);
      if (n % 3 == 0) begin v1 = v1 >>> 2; v2 = v2 >>> 2; end
      u_prev = q_t'($urandom);
      start = 1'b1;
      reference(longint'(v1), longint'(v2), longint'(u_prev));
      @(negedge clk) start = 1'b0;
      v1 = q_t'($urandom); v2 = q_t'($urandom);     // inputs only count on start
      check(!valid, "no result after one cycle");
      @(negedge clk);
      check(valid, "result after two cycles");
      for (int j = 0; j < 9; j++)
        check(longint'(feat[j]) == ref_f[j],
              $sformatf("step %0d feature %0d: got %0d exp %0d", n, j, feat[j], ref_f[j]));
      @(negedge clk);
      check(!valid, "valid is a pulse");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
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
