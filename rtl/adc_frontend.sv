// adc_frontend -- sample holder and format converter for the two measured
// voltages V1 and V2.
//
// The dual ADC delivers a pair of 12-bit codes (one per capacitor voltage)
// about once per microsecond, with `adc_valid` high for one cycle. The block
// keeps the most recent pair. On every control-update `tick` it freezes that
// pair for the rest of the update period and presents it both as raw codes
// (for the training-data capture) and as Q0.17 words for the NG-RC datapath.
// The source pads the 12-bit values with zeros in the low bits to reach
// Q0.17; the ADC codes are taken here to be offset binary (mid-scale code
// 0x800 = 0 V), so the top bit is inverted to give two's complement. That
// coding is this design's choice. The six low bits of v1_q and v2_q are
// therefore always zero.
//
// Timing: v1_q, v2_q, v1_code, v2_code and samp_valid change one cycle after
// tick and then hold until the next tick. A code pair that arrives in the same
// cycle as tick is still taken for that update.
module adc_frontend
  import ngrc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             adc_valid,    // new code pair
  input  logic [ADC_W-1:0] adc_v1_code,
  input  logic [ADC_W-1:0] adc_v2_code,
  input  logic             tick,         // control update strobe
  output logic [ADC_W-1:0] v1_code,      // frozen codes for this update
  output logic [ADC_W-1:0] v2_code,
  output q_t               v1_q,         // same values in Q0.17
  output q_t               v2_q,
  output logic             samp_valid    // one-cycle pulse after tick
);
  logic [ADC_W-1:0] last_v1, last_v2;
  logic [ADC_W-1:0] cur_v1, cur_v2;

  // Offset-binary code to Q0.17: invert the MSB, pad the LSBs with zeros.
  function automatic q_t code_to_q(input logic [ADC_W-1:0] c);
    return q_t'({~c[ADC_W-1], c[ADC_W-2:0], {(DW-ADC_W){1'b0}}});
  endfunction

  always_comb begin
    cur_v1 = adc_valid ? adc_v1_code : last_v1;
    cur_v2 = adc_valid ? adc_v2_code : last_v2;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_v1    <= ADC_W'(1) << (ADC_W-1);
      last_v2    <= ADC_W'(1) << (ADC_W-1);
      v1_code    <= ADC_W'(1) << (ADC_W-1);
      v2_code    <= ADC_W'(1) << (ADC_W-1);
      v1_q       <= '0;
      v2_q       <= '0;
      samp_valid <= 1'b0;
    end else begin
      last_v1    <= cur_v1;
      last_v2    <= cur_v2;
      samp_valid <= tick;
      if (tick) begin
        v1_code <= cur_v1;
        v2_code <= cur_v2;
        v1_q    <= code_to_q(cur_v1);
        v2_q    <= code_to_q(cur_v2);
      end
    end
  end
endmodule
