// ser2par_fifo: serial-to-parallel input buffer of the bit-plane compressor.
//
// Accepts 1024-bit words of 64 FP16 values one per cycle (valid/ready) and
// gathers NLANES of them; word i goes to lane i. When all NLANES are present it
// offers them at once (out_valid) and empties when the compressor takes them
// (out_valid & out_ready), after which it accepts new words in the next cycle.
// The paper names the block only; the depth of one lane-set and the handshake
// are this design's choices.
module ser2par_fifo
  import anda_pkg::*;
#(
  parameter int NLANES = LANES,
  parameter int W      = WORD_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [W-1:0]             in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [NLANES-1:0][W-1:0] out_data
);

  localparam int CW = $clog2(NLANES + 1);
  logic [CW-1:0] count;

  assign out_valid = (count == CW'(NLANES));
  assign in_ready  = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      out_data <= '0;
    end else if (out_valid) begin
      if (out_ready) count <= '0;
    end else if (in_valid) begin
      out_data[count[$clog2(NLANES)-1:0]] <= in_data;
      count <= count + 1'b1;
    end
  end

  // a word is only taken while the buffer is not full
  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && out_valid) |=> $stable(count) || count == '0);

endmodule
