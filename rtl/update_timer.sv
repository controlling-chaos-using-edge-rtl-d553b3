// update_timer -- control-update strobe generator.
//
// The controller evaluates its control law once per update period, 5 us
// (200 kHz), while the ADC samples faster (1 Msample/s). This block divides
// the system clock by DIV and emits a one-cycle `tick` at the start of every
// update period. With the 60 MHz system clock assumed by this design, DIV =
// 300 gives the 200 kHz update rate of the source. The counter restarts from
// zero on reset; the first tick comes DIV cycles after reset is released.
//
// Interface: clk, rst_n (active-low synchronous reset), tick (output pulse).
// Timing: tick is high for one cycle every DIV cycles.
module update_timer #(
  parameter int unsigned DIV = 300   // clock cycles per control update
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);
  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt == CW'(DIV - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end

  initial assert (DIV >= 2) else $error("update_timer: DIV must be at least 2");
endmodule
