// ngrc_pkg -- types, constants and fixed-point helpers shared by the NG-RC
// chaos controller.
//
// Every quantity in the datapath is an 18-bit two's-complement word, the width
// of the FPGA's hard multipliers. Features, measured voltages, the desired
// trajectory and the control perturbation use Q0.17 (sign bit, 17 fractional
// bits). Weights and the gain K use an 18-bit format whose number of
// fractional bits is a parameter (Q2.15 in every reported trial); Wu^-1 has
// its own format (Q4.13 in most one-step-ahead trials). Products are reduced
// back to 18 bits by an arithmetic right shift (truncation towards minus
// infinity) followed by saturation; the 18-bit width and the Q formats follow
// the paper, truncation and saturation are this design's choice.
package ngrc_pkg;

  localparam int unsigned DW        = 18;  // datapath word width
  localparam int unsigned FEAT_FRAC = 17;  // Q0.17 fractional bits
  localparam int unsigned NF        = 9;   // entries of the feature vector O_F
  localparam int unsigned ADC_W     = 12;  // ADC resolution
  localparam int unsigned DAC_W     = 16;  // DAC resolution

  typedef logic signed [DW-1:0] q_t;       // any 18-bit fixed-point word

  // Position of each entry of O_F (and of its weight in W_F). The order is
  // the one the feature vector is written in.
  typedef enum logic [3:0] {
    F_U_PREV   = 4'd0,  // u_{1,i-1}
    F_V1       = 4'd1,  // V_{1,i}
    F_V1_PREV  = 4'd2,  // V_{1,i-1}
    F_MIX_A    = 4'd3,  // (V_{1,i}-V_{2,i}) V_{1,i-1}^2
    F_MIX_B    = 4'd4,  // (V_{1,i-1}-V_{2,i-1}) V_{1,i}^2
    F_CUBE     = 4'd5,  // (V_{1,i}-V_{2,i})^3
    F_CUBE_PRV = 4'd6,  // (V_{1,i-1}-V_{2,i-1})^3
    F_V2       = 4'd7,  // V_{2,i}
    F_V2_PREV  = 4'd8   // V_{2,i-1}
  } feat_idx_e;

  typedef q_t feat_vec_t [NF];

  // Operating phase of the controller (Fig. 1 of the source: learning phase
  // with the loop open, control phase with the loop closed).
  typedef enum logic {
    PHASE_LEARN   = 1'b0,
    PHASE_CONTROL = 1'b1
  } phase_e;

  // Saturate a wide signed value to an 18-bit word.
  function automatic q_t sat18(input logic signed [63:0] x);
    localparam logic signed [63:0] MAXV = 64'sd131071;
    localparam logic signed [63:0] MINV = -64'sd131072;
    if (x > MAXV)      return q_t'(MAXV);
    else if (x < MINV) return q_t'(MINV);
    else               return q_t'(x);
  endfunction

  // True when sat18 would clip x.
  function automatic logic clips18(input logic signed [63:0] x);
    return (x > 64'sd131071) || (x < -64'sd131072);
  endfunction

  // Q0.17 x Q0.17 -> Q0.17 with truncation and saturation.
  function automatic q_t qmul(input q_t a, input q_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return sat18(p >>> FEAT_FRAC);
  endfunction

  // Saturating Q0.17 subtraction.
  function automatic q_t qsub(input q_t a, input q_t b);
    return sat18(64'(a) - 64'(b));
  endfunction

  // Q0.17 perturbation -> 16-bit offset-binary DAC code (top 16 bits, sign
  // bit inverted) and back (two low bits padded with zeros).
  function automatic logic [DAC_W-1:0] q_to_dac(input q_t q);
    return {~q[DW-1], q[DW-2:DW-DAC_W]};
  endfunction

  function automatic q_t dac_to_q(input logic [DAC_W-1:0] c);
    return q_t'({~c[DAC_W-1], c[DAC_W-2:0], {(DW-DAC_W){1'b0}}});
  endfunction

endpackage
