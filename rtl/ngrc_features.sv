// ngrc_features -- builds the NG-RC feature vector O_F for one evaluation of
// the control law.
//
// With k = 2 time steps of memory and features chosen by system
// identification, O_F holds nine terms:
//   u_{i-1}, V1_i, V1_{i-1}, (V1_i-V2_i) V1_{i-1}^2, (V1_{i-1}-V2_{i-1}) V1_i^2,
//   (V1_i-V2_i)^3, (V1_{i-1}-V2_{i-1})^3, V2_i, V2_{i-1}
// (indices in ngrc_pkg::feat_idx_e). Following the source, products computed
// at step i are kept and reused at step i+1 instead of being recomputed: the
// cube (V1-V2)^3 becomes the delayed cube, V1^2 becomes V1_{i-1}^2, and the
// difference V1-V2 and the voltages become their delayed versions. Each
// evaluation therefore needs five 18x18 multiplications: V1_i^2 and d_i^2 in
// the first stage, d_i^3 and the two mixed terms in the second (d = V1-V2).
// All terms are Q0.17; the difference and every product saturate to the
// Q0.17 range (saturation and truncation are this design's choice).
//
// The delay registers are cleared by reset, so the first evaluation after
// reset sees zero for every delayed term. They advance once per `start`, so
// start must be pulsed exactly once per control update.
//
// Timing: inputs are sampled on the `start` cycle; feat/valid appear two
// cycles later (valid is a one-cycle pulse) and hold until the next result.
module ngrc_features
  import ngrc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  q_t        v1,       // V1_i
  input  q_t        v2,       // V2_i
  input  q_t        u_prev,   // u_{1,i-1}, the perturbation last applied
  output feat_vec_t feat,
  output logic      valid
);
  // stage 1
  logic s1_valid;
  q_t   s1_v1, s1_v2, s1_u, s1_d, s1_v1sq, s1_dsq;
  // values kept from the previous evaluation
  q_t   h_v1, h_v2, h_d, h_v1sq, h_cube;

  q_t d_now, cube_now;
  assign d_now    = qsub(v1, v2);
  assign cube_now = qmul(s1_dsq, s1_d);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_v1 <= '0; s1_v2 <= '0; s1_u <= '0;
      s1_d  <= '0; s1_v1sq <= '0; s1_dsq <= '0;
      h_v1 <= '0; h_v2 <= '0; h_d <= '0; h_v1sq <= '0; h_cube <= '0;
      valid <= 1'b0;
      for (int j = 0; j < NF; j++) feat[j] <= '0;
    end else begin
      s1_valid <= start;
      if (start) begin
        s1_v1   <= v1;
        s1_v2   <= v2;
        s1_u    <= u_prev;
        s1_d    <= d_now;
        s1_v1sq <= qmul(v1, v1);
        s1_dsq  <= qmul(d_now, d_now);
      end
      valid <= s1_valid;
      if (s1_valid) begin
        feat[F_U_PREV]   <= s1_u;
        feat[F_V1]       <= s1_v1;
        feat[F_V1_PREV]  <= h_v1;
        feat[F_MIX_A]    <= qmul(s1_d, h_v1sq);
        feat[F_MIX_B]    <= qmul(h_d, s1_v1sq);
        feat[F_CUBE]     <= cube_now;
        feat[F_CUBE_PRV] <= h_cube;
        feat[F_V2]       <= s1_v2;
        feat[F_V2_PREV]  <= h_v2;
        // this step's values become the next step's delayed terms
        h_v1   <= s1_v1;
        h_v2   <= s1_v2;
        h_d    <= s1_d;
        h_v1sq <= s1_v1sq;
        h_cube <= cube_now;
      end
    end
  end

  // A new evaluation may not start while one is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !s1_valid)
    else $error("ngrc_features: start while busy");
endmodule
