// ngrc_tasks_tb -- runs the controller at its default sizes on the two
// control tasks the end-to-end test does not cover:
//   origin task           desired V1 = 0 everywhere (a table of zeros); the
//                         plant starts far from the origin
//   random waveform task  a smooth random trajectory that repeats with the
//                         table: a sum of 40 sinusoids with random amplitudes
//                         and phases and a whole number (1..52) of periods per
//                         4200-entry table, i.e. no energy above ~2.5 kHz at
//                         the 200 kHz update rate, peak value scaled to 0.45
// The plant and the model weights are those of ngrc_controller_tb
// (V1' = 0.9 V1 - 0.5 (V1-V2)^3 + 0.125 u, V2' = V2 + 0.1 (V1-V2), K = 0.75).
// For each task the loop is closed for 4400 updates; after 60 settling
// updates every sample must lie within 0.005 of the desired value, and the
// RMS tracking error of each task is printed.
module ngrc_tasks_tb;
  import ngrc_pkg::*;

  localparam int DES_N = 4200;

  logic clk = 1'b0, rst_n = 1'b0;
  phase_e phase = PHASE_CONTROL;
  logic ctrl_en = 1'b0;
  logic adc_valid = 1'b0;
  logic [11:0] adc_v1_code = 12'h800, adc_v2_code = 12'h800;
  feat_vec_t w_f;
  q_t   k_gain, wu_inv;
  logic des_wr_en = 1'b0;
  logic [12:0] des_wr_addr = '0;
  q_t   des_wr_data = '0;
  logic pert_wr_en = 1'b0;
  logic [11:0] pert_wr_addr = '0;
  logic [15:0] pert_wr_data = '0;
  logic [11:0] cap_rd_addr = '0;
  logic [23:0] cap_rd_data;
  logic cap_done, cap_busy;
  logic [11:0] cap_count;
  logic dac_sclk, dac_sync_n, dac_din;
  q_t   u_applied, u_law;
  logic u_valid, law_sat, tick, des_wrap, pert_wrap;

  ngrc_controller dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- desired tables ----------------
  q_t  table_q [DES_N];
  real amp [40], ph [40];
  int  cyc_n [40];

  task automatic make_random_waveform();
    real v, peak;
    real w [DES_N];
    for (int h = 0; h < 40; h++) begin
      cyc_n[h] = 1 + h * 51 / 39;
      amp[h]   = real'($urandom_range(0, 1000)) / 1000.0;
      ph[h]    = real'($urandom_range(0, 6283)) / 1000.0;
    end
    peak = 0.0;
    for (int i = 0; i < DES_N; i++) begin
      v = 0.0;
      for (int h = 0; h < 40; h++)
        v += amp[h] * $sin(6.283185307 * cyc_n[h] * i / DES_N + ph[h]);
      w[i] = v;
      if (v > peak) peak = v;
      if (-v > peak) peak = -v;
    end
    for (int i = 0; i < DES_N; i++) table_q[i] = q_t'($rtoi(0.45 * w[i] / peak * 131072.0));
  endtask

  task automatic load_table();
    for (int a = 0; a < DES_N; a++) begin
      @(negedge clk);
      des_wr_en = 1'b1; des_wr_addr = 13'(a); des_wr_data = table_q[a];
    end
    @(negedge clk) des_wr_en = 1'b0;
  endtask

  // ---------------- plant, ADC, DAC ----------------
  real x1 = 0.55, x2 = 0.2;
  int  cyc = 0;

  function automatic logic [11:0] adc_code(input real v);
    int c;
    c = $rtoi(v * 2048.0 + 2048.5);
    if (c < 0) c = 0;
    if (c > 4095) c = 4095;
    return 12'(c);
  endfunction

  always @(negedge clk) begin
    cyc <= cyc + 1;
    adc_valid <= (cyc % 60 == 17);
    if (cyc % 60 == 17) begin
      adc_v1_code <= adc_code(x1);
      adc_v2_code <= adc_code(x2);
    end
  end

  int  n_tick = 0, on_tick = -1;
  real sq_err = 0.0;
  int  n_err = 0;
  always @(posedge clk) if (rst_n && tick) n_tick++;

  logic [15:0] rx;
  logic sclk_q = 1'b0, sync_q = 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (dac_sclk && !sclk_q && !dac_sync_n) rx = {rx[14:0], dac_din};
    if (dac_sync_n && !sync_q) begin
      real u, d, e;
      int  k;
      u  = (real'(int'(rx)) - 32768.0) / 32768.0;
      d  = x1 - x2;
      x1 = 0.9 * x1 - 0.5 * d * d * d + 0.125 * u;
      x2 = x2 + 0.1 * d;
      k  = n_tick - 1;                   // update index since the restart
      if (ctrl_en && on_tick >= 0 && k - on_tick >= 60) begin
        e = x1 - real'(int'(table_q[k % DES_N])) / 131072.0;
        check(e < 0.005 && e > -0.005, $sformatf("tracking error %f at update %0d", e, k));
        sq_err += e * e;
        n_err++;
      end
    end
    sclk_q <= dac_sclk;
    sync_q <= dac_sync_n;
  end

  // restart the desired table (entering the control phase) and run a task
  task automatic run_task(input string name);
    @(negedge clk) phase = PHASE_LEARN;
    @(negedge clk) begin phase = PHASE_CONTROL; n_tick = 0; sq_err = 0.0; n_err = 0; end
    repeat (40) begin @(posedge clk); while (!tick) @(posedge clk); end
    @(negedge clk) begin ctrl_en = 1'b1; on_tick = n_tick; end
    while (n_tick < on_tick + DES_N + 200) @(posedge clk);
    @(negedge clk) begin ctrl_en = 1'b0; on_tick = -1; end
    check(n_err > DES_N, {name, ": enough updates checked"});
    if (n_err > 0) $display("%s: tracking RMSE %f over %0d updates", name, $sqrt(sq_err / n_err), n_err);
  endtask

  initial begin
    for (int j = 0; j < NF; j++) w_f[j] = '0;
    w_f[F_V1]   = 18'sd29491;
    w_f[F_CUBE] = -18'sd16384;
    k_gain      = 18'sd24576;
    wu_inv      = 18'sd65536;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    for (int i = 0; i < DES_N; i++) table_q[i] = '0;
    load_table();
    run_task("origin");

    make_random_waveform();
    load_table();
    x1 = -0.4;
    run_task("random waveform");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
