// capture_mem -- training-data recorder.
//
// In the learning phase the two measured voltages are stored at every
// control update while the training perturbation is applied; after the run
// the host reads the record out and fits the NG-RC weights offline. This
// block stores one 24-bit word {V1 code, V2 code} (raw 12-bit ADC codes) per
// update, from address 0 upwards, starting when `arm` is pulsed and stopping
// when DEPTH words have been written; `done` then stays high until the next
// arm. The host reads any word through a synchronous read port. The applied
// perturbation is not stored, since the host already holds the sequence
// it loaded; the record length (4000, the number of points of one training
// sequence) follows the source, the word layout and the arm/done handshake
// are this design's choice.
//
// Timing: a sample is written in the cycle `samp_valid` is high, if capturing.
// `count` is the number of words written. rd_data is valid one cycle after
// rd_addr.
module capture_mem
  import ngrc_pkg::*;
#(
  parameter int unsigned DEPTH = 4000,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               arm,         // start a new record
  input  logic               samp_valid,
  input  logic [ADC_W-1:0]   v1_code,
  input  logic [ADC_W-1:0]   v2_code,
  input  logic [AW-1:0]      rd_addr,
  output logic [2*ADC_W-1:0] rd_data,
  output logic               capturing,
  output logic               done,
  output logic [CW-1:0]      count
);
  logic [2*ADC_W-1:0] mem [DEPTH];
  logic               wr;

  assign wr = capturing && samp_valid;

  always_ff @(posedge clk) begin
    if (wr) mem[AW'(count)] <= {v1_code, v2_code};
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      capturing <= 1'b0;
      done      <= 1'b0;
      count     <= '0;
    end else if (arm) begin
      capturing <= 1'b1;
      done      <= 1'b0;
      count     <= '0;
    end else if (wr) begin
      count <= count + 1'b1;
      if (count == CW'(DEPTH - 1)) begin
        capturing <= 1'b0;
        done      <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(capturing && done))
    else $error("capture_mem: capturing and done together");
endmodule
