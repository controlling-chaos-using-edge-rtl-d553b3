// control_law_tb -- random feature vectors, weights, gains and desired
// values; each result is compared with the control law evaluated in the
// testbench with 64-bit integers:
//   br = sat((des_ahead*2^15 - sum w_j f_j + K*sat(v1-des_now)) >> 15)
//   u  = sat((Wu^-1 * br) >> 13)
// The test also checks the one-cycle latency, the saturation flag, and a
// case with known numbers (a plant x' = 0.5 x + 0.25 u, so Wu^-1 = 4).
module control_law_tb;
  import ngrc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  feat_vec_t feat, w_f;
  q_t   v1, des_now, des_ahead, k_gain, wu_inv, u;
  logic out_valid, sat;
  int   checks = 0, failures = 0, nsat = 0;

  control_law dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint s18(input longint x);
    return (x > 131071) ? 131071 : (x < -131072) ? -131072 : x;
  endfunction

  task automatic apply_and_check(input string tag);
    longint acc, br_w, u_w, exp_u;
    bit     exp_sat;
    acc = longint'(des_ahead) * 32768;
    for (int j = 0; j < 9; j++) acc -= longint'(w_f[j]) * longint'(feat[j]);
    acc += longint'(k_gain) * s18(longint'(v1) - longint'(des_now));
    br_w = acc >>> 15;
    u_w  = (longint'(wu_inv) * s18(br_w)) >>> 13;
    exp_u   = s18(u_w);
    exp_sat = (br_w != s18(br_w)) || (u_w != exp_u);
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    check(out_valid, {tag, ": one-cycle latency"});
    check(longint'(u) == exp_u, $sformatf("%s: u %0d exp %0d", tag, u, exp_u));
    check(sat == exp_sat, $sformatf("%s: sat %0b exp %0b", tag, sat, exp_sat));
    if (exp_sat) nsat++;
    @(negedge clk);
    check(!out_valid, {tag, ": valid is a pulse"});
    check(longint'(u) == exp_u, {tag, ": u holds"});
  endtask

  initial begin
    for (int j = 0; j < 9; j++) begin feat[j] = '0; w_f[j] = '0; end
    v1 = '0; des_now = '0; des_ahead = '0; k_gain = '0; wu_inv = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // known numbers: model x_{i+1} = 0.5 x_i + 0.25 u_i, K = 0.5,
    // x = 0.25, des_now = 0.125, des_ahead = 0.1875.
    // br = 0.1875 - 0.125 + 0.5*0.125 = 0.125 ; u = 4 * 0.125 = 0.5
    feat[F_V1] = 18'sd32768;            // 0.25
    w_f[F_V1]  = 18'sd16384;            // 0.5 in Q2.15
    v1         = 18'sd32768;
    des_now    = 18'sd16384;            // 0.125
    des_ahead  = 18'sd24576;            // 0.1875
    k_gain     = 18'sd16384;            // 0.5 in Q2.15
    wu_inv     = 18'sd32768;            // 4.0 in Q4.13
    apply_and_check("known");
    check(u == 18'sd65536, "known case gives u = 0.5");

    for (int n = 0; n < 3000; n++) begin
      int sh;
      sh = (n % 4 == 0) ? 0 : 3;        // mostly moderate values, some large
      for (int j = 0; j < 9; j++) begin
        feat[j] = q_t'($urandom) >>> sh;
        w_f[j]  = q_t'($urandom) >>> (sh + 1);
      end
      v1        = q_t'($urandom) >>> sh;
      des_now   = q_t'($urandom) >>> sh;
      des_ahead = q_t'($urandom) >>> sh;
      k_gain    = q_t'($urandom) >>> (sh + 1);
      wu_inv    = q_t'($urandom) >>> sh;
      apply_and_check($sformatf("random %0d", n));
    end
    check(nsat > 0, "saturation happened");
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
