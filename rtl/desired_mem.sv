// desired_mem -- on-chip store of the desired trajectory Y_des = V1,des.
//
// The desired signal is a finite table that is read out one entry per
// control update and repeats: with DEPTH = 4200 entries at 200 kHz it repeats
// every 21 ms, as in the source. Entries are Q0.17. The table is written
// through a plain write port (addr/data/enable), which is how this design
// loads it; the source compiles it into the FPGA image.
//
// The control law needs both the present desired value Y_des,i (for the
// tracking error) and the value M steps ahead, Y_des,i+M (M = 1 for the
// one-step-ahead controller, 2 for the two-step-ahead one). The table is
// read M entries ahead and a short register chain of M+1 words delays the
// read value: des_ahead is the newest word and des_now the oldest. For M = 2
// the chain holds one word more, the extra registers the source reports for
// the two-step-ahead controller. After reset the chain is zero, so the first
// M updates see Y_des,i = 0.
//
// Timing: on `tick` the next entry is read (synchronous read); one cycle
// later the chain shifts; des_now/des_ahead/valid change two cycles after the
// tick. `wrap` pulses with valid when the entry just shifted in was the last
// one of the table. `restart` returns the read pointer to entry 0 and clears
// the chain.
module desired_mem
  import ngrc_pkg::*;
#(
  parameter int unsigned DEPTH = 4200,  // 21 ms at 200 kHz
  parameter int unsigned M     = 1,     // prediction horizon in steps
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  q_t            wr_data,
  input  logic          restart,
  input  logic          tick,
  output q_t            des_now,    // Y_des,i
  output q_t            des_ahead,  // Y_des,i+M
  output logic          valid,
  output logic          wrap
);
  q_t            mem [DEPTH];
  q_t            rd_data;
  logic          rd_valid, rd_last;
  logic [AW-1:0] ptr;
  q_t            chain [M+1];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (tick)  rd_data      <= mem[ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      ptr      <= '0;
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
      valid    <= 1'b0;
      wrap     <= 1'b0;
      for (int k = 0; k <= M; k++) chain[k] <= '0;
    end else begin
      rd_valid <= tick;
      if (tick) begin
        rd_last <= (ptr == AW'(DEPTH - 1));
        ptr     <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
      end
      valid <= rd_valid;
      wrap  <= rd_valid && rd_last;
      if (rd_valid) begin
        chain[0] <= rd_data;
        for (int k = 1; k <= M; k++) chain[k] <= chain[k-1];
      end
    end
  end

  assign des_ahead = chain[0];
  assign des_now   = chain[M];

  initial assert (M >= 1 && M <= 2) else $error("desired_mem: M must be 1 or 2");
  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> wr_addr < AW'(DEPTH))
    else $error("desired_mem: write address out of range");
endmodule
