// weight_dispatcher: weight data dispatcher between the weight buffer and the
// MXU.
//
// A weight-buffer word holds, for each of the COLS MXU columns, the 64 INT4
// weights of one group (256 bits per column) followed by COLS FP16 group scale
// factors. The dispatcher delays the read strobe by the buffer latency and
// registers the returned word; column c's slice is then broadcast to every APU
// of column c, which loads it into its shadow weight register (w_load), so
// weight loading overlaps with computation.
//
// Timing: read issued in cycle t, w_load to the APUs in cycle t+2. The word
// layout is this design's choice.
module weight_dispatcher
  import anda_pkg::*;
#(
  parameter int NCOLS = COLS,
  parameter int GSZ   = GS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                req_valid,
  input  logic [NCOLS*(GSZ*WBITS+16)-1:0]     w_word,
  output logic                                w_load,
  output logic [NCOLS-1:0][GSZ*WBITS-1:0]     w_col,
  output fp16_t [NCOLS-1:0]                   scale_col
);

  logic t_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid   <= 1'b0;
      w_load    <= 1'b0;
      w_col     <= '0;
      scale_col <= '0;
    end else begin
      t_valid <= req_valid;
      w_load  <= t_valid;
      if (t_valid) begin
        for (int c = 0; c < NCOLS; c++) begin
          w_col[c]     <= w_word[c*GSZ*WBITS +: GSZ*WBITS];
          scale_col[c] <= w_word[NCOLS*GSZ*WBITS + c*16 +: 16];
        end
      end
    end
  end

endmodule
