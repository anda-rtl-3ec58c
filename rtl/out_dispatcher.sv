// out_dispatcher: output data dispatcher between the MXU and the BPC.
//
// An MXU output tile is 16 tokens x 16 output channels. An Anda group spans 64
// consecutive channels of one token, so the dispatcher gathers TPG = 4
// consecutive tiles of the same tokens into a gather buffer (tile t, column c
// lands at channel 16t + c). When the fourth tile arrives the gather buffer is
// copied into an emit buffer, freeing it for the next tiles, and the emit
// buffer is sent out as 16 words of 64 FP16 values, word r = token r, with a
// valid/ready handshake. quad_done pulses when the last word of a set has been
// taken. The same words feed the BPC or, for uncompressed output, the
// activation buffer directly.
//
// The caller must not complete a new set while the previous one is still being
// emitted (the address generator's credit check ensures it; an assertion
// checks it). The paper only says the results are delivered to the BPC through
// this dispatcher; the gather/emit buffering is this design's choice.
module out_dispatcher
  import anda_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCOLS = COLS,
  parameter int TPG   = TILES_PER_GROUP
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               tile_valid,
  input  fp16_t [NROWS-1:0][NCOLS-1:0]       tile,
  output logic                               out_valid,
  input  logic                               out_ready,
  output logic [NCOLS*TPG*16-1:0]            out_data,
  output logic                               quad_done
);

  localparam int TW = (TPG > 1) ? $clog2(TPG) : 1;
  localparam int RW = $clog2(NROWS);

  fp16_t [NROWS-1:0][NCOLS*TPG-1:0] gather, emit;
  logic [TW-1:0] tcnt;
  logic [RW-1:0] rcnt;
  logic          emitting;

  assign out_valid = emitting;
  assign out_data  = emit[rcnt];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gather <= '0; emit <= '0; tcnt <= '0; rcnt <= '0;
      emitting <= 1'b0; quad_done <= 1'b0;
    end else begin
      quad_done <= 1'b0;
      if (emitting && out_ready) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == RW'(NROWS - 1)) begin
          emitting  <= 1'b0;
          quad_done <= 1'b1;
        end
      end
      if (tile_valid) begin
        for (int r = 0; r < NROWS; r++)
          for (int c = 0; c < NCOLS; c++)
            gather[r][int'(tcnt)*NCOLS + c] <= tile[r][c];
        if (tcnt == TW'(TPG - 1)) begin
          tcnt <= '0;
          for (int r = 0; r < NROWS; r++) begin
            emit[r] <= gather[r];
            for (int c = 0; c < NCOLS; c++) emit[r][(TPG-1)*NCOLS + c] <= tile[r][c];
          end
          emitting <= 1'b1;
          rcnt     <= '0;
        end else begin
          tcnt <= tcnt + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    !(tile_valid && tcnt == TW'(TPG - 1) && emitting))
    else $error("out_dispatcher: tile set completed while the previous set is still being emitted");

endmodule
