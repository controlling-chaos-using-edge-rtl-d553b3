// control_law -- feedback-linearising NG-RC control law.
//
// Computes, once per control update,
//     u_i = Wu^-1 * [ Y_des,i+m  -  W_F . O_F,i  +  K * e_i ],   e_i = V1_i - Y_des,i
// where O_F is the nine-entry feature vector from ngrc_features, W_F the
// learned readout weights of those features, K the scalar feedback gain and
// Wu^-1 the inverse of the learned weight of the present perturbation u_i.
// With a perfect model the tracking error then obeys e_{i+1} = K e_i.
//
// Number formats follow the source: features, V1, the desired values and u
// are Q0.17; W_F and K share one 18-bit format with W_FRAC fractional bits
// (Q2.15 in all reported trials); Wu^-1 has WINV_FRAC fractional bits (Q4.13
// in most one-step-ahead trials, Q5.12, Q3.14 or Q2.15 in others). The sum in
// brackets is accumulated at full precision (W_FRAC+17 fractional bits),
// then truncated and saturated to Q0.17 so that the last product is again
// 18x18; u is truncated and saturated to Q0.17. Truncation, saturation and
// the accumulator width are this design's choices. Eleven 18x18
// multiplications are used: nine for W_F . O_F, one for K e, one for Wu^-1.
//
// Timing: inputs are sampled when in_valid is high; u and out_valid appear
// one cycle later and u holds until the next result. `sat` flags an update
// in which the bracket or u was clipped.
module control_law
  import ngrc_pkg::*;
#(
  parameter int unsigned W_FRAC    = 15,  // fractional bits of W_F and K
  parameter int unsigned WINV_FRAC = 13   // fractional bits of Wu^-1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  feat_vec_t feat,       // O_F,i (Q0.17)
  input  q_t        v1,         // Y_i = V1_i (Q0.17)
  input  q_t        des_now,    // Y_des,i
  input  q_t        des_ahead,  // Y_des,i+m
  input  feat_vec_t w_f,        // W_F
  input  q_t        k_gain,     // K
  input  q_t        wu_inv,     // Wu^-1
  output q_t        u,
  output logic      out_valid,
  output logic      sat
);
  typedef logic signed [47:0] acc_t;

  q_t                 err;
  acc_t               dot, ke, acc;
  logic signed [63:0] br_wide, u_wide;
  q_t                 br;

  always_comb begin
    err = qsub(v1, des_now);
    dot = '0;
    for (int j = 0; j < NF; j++) dot += acc_t'(w_f[j]) * acc_t'(feat[j]);
    ke  = acc_t'(k_gain) * acc_t'(err);
    acc = (acc_t'(des_ahead) <<< W_FRAC) - dot + ke;
    br_wide = 64'(acc >>> W_FRAC);
    br      = sat18(br_wide);
    u_wide  = (64'(wu_inv) * 64'(br)) >>> WINV_FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u         <= '0;
      out_valid <= 1'b0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        u   <= sat18(u_wide);
        sat <= clips18(br_wide) || clips18(u_wide);
      end
    end
  end
endmodule
