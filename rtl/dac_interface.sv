// dac_interface -- serial link to the off-chip 16-bit DAC.
//
// The control perturbation leaves the FPGA through a 16-bit DAC clocked at
// 30 MHz (the fastest the device allows, per the source). The source does not
// describe the serial protocol, so this block uses a generic three-wire frame:
// sync_n falls, 16 data bits follow MSB first on din, each held stable around
// the rising edge of sclk, and sync_n rises after the last bit. sclk is the
// system clock divided by 2*HALF (HALF = 1: 30 MHz from the assumed 60 MHz
// system clock) and idles low.
//
// The package helpers q_to_dac/dac_to_q convert between a Q0.17 perturbation
// and the DAC code: the top 16 bits of the word, with the sign bit inverted
// (offset binary, mid-scale code = zero current). That mapping is this
// design's choice.
//
// Timing: `load` with `code` starts a frame when `busy` is low (a load while
// busy is an error). busy rises the next cycle and falls after sync_n has
// risen, after 2*HALF*16 + 1 cycles (33 at HALF = 1, 0.55 us at 60 MHz).
module dac_interface
  import ngrc_pkg::*;
#(
  parameter int unsigned HALF = 1   // system clocks per half sclk period
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [DAC_W-1:0] code,
  output logic             busy,
  output logic             sclk,
  output logic             sync_n,
  output logic             din
);
  localparam int unsigned HW = (HALF > 1) ? $clog2(HALF) : 1;

  typedef enum logic [1:0] {S_IDLE, S_SHIFT, S_END} state_e;
  state_e           state;
  logic [DAC_W-1:0] sh;
  logic [4:0]       nbits;   // rising edges still to come
  logic [HW-1:0]    hcnt;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      sh     <= '0;
      nbits  <= '0;
      hcnt   <= '0;
      sclk   <= 1'b0;
      sync_n <= 1'b1;
      din    <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (load) begin
          state  <= S_SHIFT;
          sh     <= code << 1;
          din    <= code[DAC_W-1];
          nbits  <= 5'(DAC_W);
          hcnt   <= '0;
          sclk   <= 1'b0;
          sync_n <= 1'b0;
        end
        S_SHIFT: begin
          if (hcnt == HW'(HALF - 1)) begin
            hcnt <= '0;
            sclk <= ~sclk;
            if (!sclk) begin                 // rising edge now
              nbits <= nbits - 1'b1;
            end else begin                   // falling edge: next bit
              if (nbits == 0) begin
                state  <= S_END;
                sync_n <= 1'b1;
              end else begin
                din <= sh[DAC_W-1];
                sh  <= sh << 1;
              end
            end
          end else begin
            hcnt <= hcnt + 1'b1;
          end
        end
        S_END: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) load |-> !busy)
    else $error("dac_interface: load while busy");
endmodule
