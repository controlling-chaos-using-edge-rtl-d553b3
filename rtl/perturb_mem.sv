// perturb_mem -- playback store for the training perturbation.
//
// During the learning phase the controller drives the circuit with a
// precomputed low-pass-filtered random sequence (4000 points in the source,
// 16-bit DAC codes, shaped by an envelope so that it can be repeated without
// a jump). This block holds that sequence and returns the next code on every
// control update, wrapping from the last entry back to the first so that
// longer training runs simply repeat it. The sequence is written through a
// plain write port; the source stores it in on-chip memory with the FPGA
// image. Playing one entry per control update is this design's choice; the
// source does not state the playback rate.
//
// Timing: on `tick` with `enable` high the entry at the read pointer is read
// (synchronous read) and code/valid appear one cycle later; `wrap` pulses with
// valid when that entry was the last one. `restart` returns the pointer to 0.
module perturb_mem
  import ngrc_pkg::*;
#(
  parameter int unsigned DEPTH = 4000,  // points in the training sequence
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [DAC_W-1:0] wr_data,
  input  logic             restart,
  input  logic             enable,
  input  logic             tick,
  output logic [DAC_W-1:0] code,
  output logic             valid,
  output logic             wrap
);
  logic [DAC_W-1:0] mem [DEPTH];
  logic [AW-1:0]    ptr;

  always_ff @(posedge clk) begin
    if (wr_en)          mem[wr_addr] <= wr_data;
    if (tick && enable) code         <= mem[ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      ptr   <= '0;
      valid <= 1'b0;
      wrap  <= 1'b0;
    end else begin
      valid <= tick && enable;
      wrap  <= tick && enable && (ptr == AW'(DEPTH - 1));
      if (tick && enable) ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> wr_addr < AW'(DEPTH))
    else $error("perturb_mem: write address out of range");
endmodule
