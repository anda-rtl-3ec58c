// weight_buffer: on-chip weight buffer.
//
// 2048 words; each word holds the INT4 weights of one 64-value group for all
// 16 MXU columns (16 x 64 x 4 = 4096 bits, column c at [256c +: 256], weight j
// of a column at [4j +: 4]) followed by the 16 FP16 group scale factors
// (column c at [4096 + 16c +: 16]). The weight part is the paper's 1 MB; the
// scale factors alongside the weights are this design's choice, as is the
// word layout. One read port (data in the next cycle) and one write port.
module weight_buffer
  import anda_pkg::*;
#(
  parameter int DEPTH = 2048,
  parameter int W     = COLS * (GS * WBITS + 16)
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [W-1:0]             rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [W-1:0]             wr_data
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
