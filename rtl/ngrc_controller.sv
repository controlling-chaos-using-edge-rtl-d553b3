// ngrc_controller -- FPGA controller that steers a chaotic circuit with a
// next-generation reservoir computer (NG-RC).
//
// The controller measures the two capacitor voltages V1, V2 of a
// double-scroll circuit and injects a current u1 at the V1 node. It has two
// phases, selected by `phase`:
//   * PHASE_LEARN: the loop is open. A stored random training sequence
//     (perturb_mem) is sent to the DAC one entry per update, and the
//     measured voltages are recorded (capture_mem) for offline fitting of the
//     model weights. Entering this phase restarts the sequence and arms a new
//     record.
//   * PHASE_CONTROL: the loop is closed. Every update, ngrc_features builds
//     the feature vector from the new and the previous samples and
//     control_law evaluates u = Wu^-1 [Y_des,i+m - W_F O_F + K e]. The desired
//     trajectory comes from desired_mem, which restarts at entry 0 when this
//     phase is entered. `ctrl_en` switches the control on; while it is low
//     the DAC receives zero (the law keeps running, so its delay registers are
//     current when control is switched on).
// The value that reaches the DAC in either phase is also fed back as u_{i-1}
// for the next evaluation.
//
// Update sequence (tick every UPDATE_DIV cycles; 300 cycles = 5 us at the
// assumed 60 MHz clock):
//   T+1  ADC pair frozen and converted; training entry read; sample recorded
//   T+2  desired values ready; feature computation starts
//   T+5  u ready (3 cycles = 50 ns of computation), applied value chosen,
//        DAC frame starts (33 cycles at a 30 MHz serial clock)
// The 200 kHz update rate, 50 ns computation time, 30 MHz DAC clock, 18-bit
// arithmetic, feature set and control law follow the source; the 60 MHz clock,
// the exact cycle schedule and the port-level handshakes are this design's.
//
// The learned weights (W_F, K, Wu^-1) are inputs: the source fits them on a
// host and builds them into the FPGA image, so a build would tie them to
// constants. The ADC hard block and the DAC chip are outside this module.
module ngrc_controller
  import ngrc_pkg::*;
#(
  parameter int unsigned UPDATE_DIV = 300,   // clocks per control update
  parameter int unsigned M          = 1,     // prediction horizon (1 or 2)
  parameter int unsigned W_FRAC     = 15,    // W_F and K are Q2.15
  parameter int unsigned WINV_FRAC  = 13,    // Wu^-1 is Q4.13
  parameter int unsigned DES_DEPTH  = 4200,  // desired table, 21 ms
  parameter int unsigned PERT_DEPTH = 4000,  // training sequence length
  parameter int unsigned CAP_DEPTH  = 4000,  // training record length
  parameter int unsigned DAC_HALF   = 1,     // sclk = clk / (2*DAC_HALF)
  localparam int unsigned DES_AW  = (DES_DEPTH  > 1) ? $clog2(DES_DEPTH)  : 1,
  localparam int unsigned PERT_AW = (PERT_DEPTH > 1) ? $clog2(PERT_DEPTH) : 1,
  localparam int unsigned CAP_AW  = (CAP_DEPTH  > 1) ? $clog2(CAP_DEPTH)  : 1,
  localparam int unsigned CAP_CW  = $clog2(CAP_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // operating mode
  input  phase_e             phase,
  input  logic               ctrl_en,
  // dual ADC (12-bit codes, offset binary)
  input  logic               adc_valid,
  input  logic [ADC_W-1:0]   adc_v1_code,
  input  logic [ADC_W-1:0]   adc_v2_code,
  // learned model
  input  feat_vec_t          w_f,
  input  q_t                 k_gain,
  input  q_t                 wu_inv,
  // table loading
  input  logic               des_wr_en,
  input  logic [DES_AW-1:0]  des_wr_addr,
  input  q_t                 des_wr_data,
  input  logic               pert_wr_en,
  input  logic [PERT_AW-1:0] pert_wr_addr,
  input  logic [DAC_W-1:0]   pert_wr_data,
  // training record read-out
  input  logic [CAP_AW-1:0]  cap_rd_addr,
  output logic [2*ADC_W-1:0] cap_rd_data,
  output logic               cap_done,
  output logic               cap_busy,
  output logic [CAP_CW-1:0]  cap_count,
  // serial DAC
  output logic               dac_sclk,
  output logic               dac_sync_n,
  output logic               dac_din,
  // status
  output q_t                 u_applied,   // value sent to the DAC (Q0.17)
  output q_t                 u_law,       // latest control-law result
  output logic               u_valid,     // pulse when u_applied changes
  output logic               law_sat,     // latest result was clipped
  output logic               tick,        // control-update strobe
  output logic               des_wrap,    // desired table restarted
  output logic               pert_wrap    // training sequence restarted
);
  // ---- phase changes --------------------------------------------------
  phase_e phase_q;
  logic   enter_learn, enter_control;

  always_ff @(posedge clk) begin
    if (!rst_n) phase_q <= PHASE_CONTROL;
    else        phase_q <= phase;
  end
  assign enter_learn   = (phase == PHASE_LEARN)   && (phase_q != PHASE_LEARN);
  assign enter_control = (phase == PHASE_CONTROL) && (phase_q != PHASE_CONTROL);

  // ---- update strobe and its delayed copies ---------------------------
  logic tick_d1, tick_d2;

  update_timer #(.DIV(UPDATE_DIV)) u_timer (.clk, .rst_n, .tick);

  always_ff @(posedge clk) begin
    if (!rst_n) {tick_d1, tick_d2} <= '0;
    else        {tick_d1, tick_d2} <= {tick, tick_d1};
  end

  // ---- sensor side ----------------------------------------------------
  logic [ADC_W-1:0] v1_code, v2_code;
  q_t               v1_q, v2_q;
  logic             samp_valid;

  adc_frontend u_adc (
    .clk, .rst_n, .adc_valid, .adc_v1_code, .adc_v2_code, .tick,
    .v1_code, .v2_code, .v1_q, .v2_q, .samp_valid
  );

  // ---- learning phase -------------------------------------------------
  logic [DAC_W-1:0] pert_code;
  logic             pert_valid;

  perturb_mem #(.DEPTH(PERT_DEPTH)) u_pert (
    .clk, .rst_n,
    .wr_en(pert_wr_en), .wr_addr(pert_wr_addr), .wr_data(pert_wr_data),
    .restart(enter_learn), .enable(phase == PHASE_LEARN), .tick,
    .code(pert_code), .valid(pert_valid), .wrap(pert_wrap)
  );

  capture_mem #(.DEPTH(CAP_DEPTH)) u_cap (
    .clk, .rst_n, .arm(enter_learn),
    .samp_valid(samp_valid && (phase == PHASE_LEARN)),
    .v1_code, .v2_code,
    .rd_addr(cap_rd_addr), .rd_data(cap_rd_data),
    .capturing(cap_busy), .done(cap_done), .count(cap_count)
  );

  // ---- control phase --------------------------------------------------
  q_t        des_now, des_ahead;
  logic      des_valid;
  feat_vec_t feat;
  logic      feat_valid, law_valid;

  desired_mem #(.DEPTH(DES_DEPTH), .M(M)) u_des (
    .clk, .rst_n,
    .wr_en(des_wr_en), .wr_addr(des_wr_addr), .wr_data(des_wr_data),
    .restart(enter_control), .tick,
    .des_now, .des_ahead, .valid(des_valid), .wrap(des_wrap)
  );

  ngrc_features u_feat (
    .clk, .rst_n, .start(tick_d2), .v1(v1_q), .v2(v2_q), .u_prev(u_applied),
    .feat, .valid(feat_valid)
  );

  control_law #(.W_FRAC(W_FRAC), .WINV_FRAC(WINV_FRAC)) u_law_i (
    .clk, .rst_n, .in_valid(feat_valid), .feat, .v1(v1_q),
    .des_now, .des_ahead, .w_f, .k_gain, .wu_inv,
    .u(u_law), .out_valid(law_valid), .sat(law_sat)
  );

  // ---- actuator side --------------------------------------------------
  q_t               next_u;
  logic [DAC_W-1:0] next_code;
  logic             dac_busy;

  always_comb begin
    if (phase == PHASE_LEARN) begin
      next_code = pert_code;
      next_u    = dac_to_q(pert_code);
    end else begin
      next_u    = ctrl_en ? u_law : '0;
      next_code = q_to_dac(next_u);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u_applied <= '0;
      u_valid   <= 1'b0;
    end else begin
      u_valid <= law_valid;
      if (law_valid) u_applied <= next_u;
    end
  end

  dac_interface #(.HALF(DAC_HALF)) u_dac (
    .clk, .rst_n, .load(law_valid), .code(next_code), .busy(dac_busy),
    .sclk(dac_sclk), .sync_n(dac_sync_n), .din(dac_din)
  );

  // The per-update schedule must fit in one update period.
  initial assert (UPDATE_DIV >= 2 * DAC_HALF * DAC_W + 8)
    else $error("ngrc_controller: UPDATE_DIV too short for a DAC frame");
  assert property (@(posedge clk) disable iff (!rst_n) law_valid |-> !dac_busy)
    else $error("ngrc_controller: DAC still busy at a new update");
  // Table outputs arrive exactly in the cycles the schedule uses them.
  assert property (@(posedge clk) disable iff (!rst_n) pert_valid |-> tick_d1)
    else $error("ngrc_controller: training entry out of step");
  assert property (@(posedge clk) disable iff (!rst_n) des_valid |-> tick_d2)
    else $error("ngrc_controller: desired value out of step");
endmodule
