// ngrc_controller_tb -- end-to-end test of the controller at its default
// sizes (4200-entry desired table, 4000-entry training sequence and record,
// 300-cycle update period), closing the loop around a plant model.
//
// The plant is a small discrete-time model written in real arithmetic, in
// the ADC's full-scale units (+-1):
//     V1' = 0.9 V1 - 0.5 (V1 - V2)^3 + 0.125 u,     V2' = V2 + 0.1 (V1 - V2)
// It is sampled by a 12-bit ADC model every 60 cycles (1 Msample/s at 60 MHz)
// and advanced once per update, when the DAC frame carrying u has been
// received by a DAC model. The controller is given that plant's own weights
// (W_F: 0.9 on V1_i and -0.5 on (V1_i-V2_i)^3, Wu^-1 = 8, K = 0.75), so with
// the loop closed the tracking error must shrink by K every update.
//
// Sequence and checks:
//   learning phase  every DAC word equals the next training entry (wrapping
//                   after 4000); the record holds exactly the ADC pairs seen
//                   at the first 4000 updates
//   control, off    DAC receives mid-scale (zero) while the law runs
//   control, on     DAC word = law result; after a settling interval
//                   |V1 - V1,des| stays below 0.005 while the two-USS
//                   desired signal 0.571 tanh(sin(0.0076 i)/0.11) is tracked
//                   over more than one repetition of the table (except
//                   for 60 updates after switch-on and after the jump where
//                   the non-periodic test table wraps)
//   control, off    DAC back at zero
// Every update also checks the schedule: u_valid exactly 6 cycles after the
// tick (the law itself takes 3 cycles, 50 ns at 60 MHz). Each mechanism
// (phase switch, training wrap, record full, desired wrap, saturation,
// control on/off) is counted and must have happened.
module ngrc_controller_tb;
  import ngrc_pkg::*;

  localparam int DES_N  = 4200;
  localparam int PERT_N = 4000;
  localparam int CAP_N  = 4000;

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

  // ---------------- tables ----------------
  function automatic q_t des_val(input int i);
    real v;
    v = 0.571 * $tanh($sin(0.0076 * i) / 0.11);
    return q_t'($rtoi(v * 131072.0));
  endfunction
  function automatic logic [15:0] pert_val(input int a);
    real v;
    v = 0.6 * $sin(6.283185307 * 7.0 * a / PERT_N) + 0.4 * $sin(6.283185307 * 23.0 * a / PERT_N);
    return 16'(32768 + $rtoi(0.2 * 32767.0 * v));
  endfunction

  // ---------------- plant, ADC and DAC models ----------------
  real x1 = 0.3, x2 = 0.1;
  int  cyc = 0;
  logic [11:0] last1 = 12'h800, last2 = 12'h800;

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

  // ---------------- bookkeeping ----------------
  int  n_tick_phase = 0;          // ticks since the last phase change
  int  tick_cyc = -1;
  logic [23:0] cap_log [CAP_N];
  int  n_learn = 0, n_pert_wrap = 0, n_des_wrap = 0, n_sat = 0;
  int  n_ctrl_on = 0, n_off_frames = 0, n_track = 0, n_lat = 0;
  real sq_err = 0.0;
  int  n_err = 0;
  int  ctrl_on_tick = -1;

  always @(posedge clk) if (rst_n) begin
    if (tick) begin
      if (phase == PHASE_LEARN && n_tick_phase < CAP_N)
        cap_log[n_tick_phase] = adc_valid ? {adc_v1_code, adc_v2_code} : {last1, last2};
      n_tick_phase++;
      tick_cyc = cyc;
    end
    if (adc_valid) begin last1 = adc_v1_code; last2 = adc_v2_code; end
    if (u_valid) begin
      check(cyc - tick_cyc == 6, $sformatf("u_valid %0d cycles after tick", cyc - tick_cyc));
      n_lat++;
    end
    if (pert_wrap) n_pert_wrap++;
    if (des_wrap)  n_des_wrap++;
    if (u_valid && law_sat && phase == PHASE_CONTROL && ctrl_en) n_sat++;
  end

  // DAC model: collect a word, then advance the plant with it
  logic [15:0] rx;
  int  nb = 0;
  logic sclk_q = 1'b0, sync_q = 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (dac_sclk && !sclk_q && !dac_sync_n) begin rx = {rx[14:0], dac_din}; nb++; end
    if (dac_sync_n && !sync_q) begin
      real u, d;
      int  k;
      check(nb == 16, "DAC frame has 16 bits");
      nb = 0;
      k = n_tick_phase - 1;                  // update index in this phase
      if (k < 0) begin
        // frame of the last update before a phase change: nothing to check
      end else if (phase == PHASE_LEARN) begin
        check(rx == pert_val(k % PERT_N), $sformatf("learn word %0d: %h", k, rx));
      end else if (!ctrl_en) begin
        check(rx == 16'h8000, "control off: zero perturbation");
        n_off_frames++;
      end else begin
        check(rx == q_to_dac(u_law), "control on: DAC carries the law result");
      end
      // plant step
      u  = (real'(int'(rx)) - 32768.0) / 32768.0;
      d  = x1 - x2;
      x1 = 0.9 * x1 - 0.5 * d * d * d + 0.125 * u;
      x2 = x2 + 0.1 * d;
      if (phase == PHASE_CONTROL && ctrl_en && ctrl_on_tick >= 0 && k - ctrl_on_tick >= 60
          && (k % DES_N) >= 60) begin
        real e;
        e = x1 - real'(int'(des_val(k % DES_N))) / 131072.0;
        check(e < 0.005 && e > -0.005, $sformatf("tracking error %f at update %0d", e, k));
        sq_err += e * e;
        n_err++;
        n_track++;
      end
    end
    sclk_q <= dac_sclk;
    sync_q <= dac_sync_n;
  end

  task automatic wait_ticks(input int n);
    int target;
    target = n_tick_phase + n;
    while (n_tick_phase < target) @(posedge clk);
  endtask

  initial begin
    for (int j = 0; j < NF; j++) w_f[j] = '0;
    w_f[F_V1]   = 18'sd29491;             // 0.9 in Q2.15
    w_f[F_CUBE] = -18'sd16384;            // -0.5
    k_gain      = 18'sd24576;             // 0.75
    wu_inv      = 18'sd65536;             // 8.0 in Q4.13

    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // load the tables
    for (int a = 0; a < DES_N; a++) begin
      @(negedge clk);
      des_wr_en = 1'b1; des_wr_addr = 13'(a); des_wr_data = des_val(a);
      pert_wr_en = (a < PERT_N); pert_wr_addr = 12'(a); pert_wr_data = pert_val(a);
    end
    @(negedge clk) begin des_wr_en = 1'b0; pert_wr_en = 1'b0; end

    // ---- learning phase ----
    @(negedge clk) begin phase = PHASE_LEARN; n_tick_phase = 0; end
    n_learn++;
    wait_ticks(PERT_N + 10);
    repeat (20) @(negedge clk);
    check(cap_done && !cap_busy && cap_count == 12'(CAP_N), "record complete");
    for (int a = 0; a < CAP_N; a++) begin
      @(negedge clk) cap_rd_addr = 12'(a);
      @(negedge clk);
      check(cap_rd_data == cap_log[a], $sformatf("record word %0d: %h exp %h", a, cap_rd_data, cap_log[a]));
    end

    // ---- control phase, loop open ----
    @(negedge clk) begin phase = PHASE_CONTROL; ctrl_en = 1'b0; n_tick_phase = 0; end
    wait_ticks(300);
    // ---- close the loop ----
    @(negedge clk) begin ctrl_en = 1'b1; ctrl_on_tick = n_tick_phase; end
    n_ctrl_on++;
    wait_ticks(DES_N + 200);
    // ---- open it again ----
    @(negedge clk) ctrl_en = 1'b0;
    wait_ticks(20);
    repeat (100) @(negedge clk);

    if (n_err > 0) $display("tracking RMSE over %0d updates: %f (full scale 1.0)", n_err, $sqrt(sq_err / n_err));
    $display("mechanisms: learn=%0d pert_wrap=%0d cap_done=%0b des_wrap=%0d sat=%0d ctrl_on=%0d off_frames=%0d tracked=%0d latency_checks=%0d",
             n_learn, n_pert_wrap, cap_done, n_des_wrap, n_sat, n_ctrl_on, n_off_frames, n_track, n_lat);
    check(n_learn > 0, "learning phase entered");
    check(n_pert_wrap > 0, "training sequence wrapped");
    check(cap_done, "record filled");
    check(n_des_wrap > 0, "desired table wrapped");
    check(n_sat > 0, "control law saturated");
    check(n_ctrl_on > 0 && n_off_frames > 300, "control switched off and on");
    check(n_track > DES_N, "tracking checked over a full table");
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
