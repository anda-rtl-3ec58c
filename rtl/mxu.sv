// mxu: matrix computation unit, a ROWS x COLS array of APUs (16 x 16).
//
// Output stationary: APU (r, c) accumulates output element (token r, output
// channel c) of a 16 x 16 output tile over all 64-value groups of the
// reduction dimension. The activation dispatcher gives row r the 64-bit slice r
// of each buffer word (sign plane, then M mantissa planes) and row r's shared
// exponent; the slice is shared by all columns. The weight dispatcher gives
// column c its 64 INT4 weights and scale, shared by all rows.
//
// Interface: buffer-side inputs (read tags, 1024-bit mantissa word, 80-bit
// exponent word, weight word). Output: out_valid for one cycle with the whole
// tile, out_tile[r][c] in FP16.
//
// Timing: a group costs 1 + M cycles; the tile appears 5 cycles after the last
// plane's read was issued (2 dispatcher + 3 APU cycles).
module mxu
  import anda_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCOLS = COLS,
  parameter int GSZ   = GS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [MLEN_W-1:0]                 m_len,
  // activation read tag and data
  input  logic                              a_req_valid,
  input  logic                              a_req_is_sign,
  input  logic                              a_req_is_last,
  input  logic                              a_req_g_first,
  input  logic                              a_req_g_last,
  input  logic [NROWS*GSZ-1:0]              a_mant_word,
  input  logic [NROWS*EXP_W-1:0]            a_exp_word,
  // weight read strobe and data
  input  logic                              w_req_valid,
  input  logic [NCOLS*(GSZ*WBITS+16)-1:0]   w_word,
  // result tile
  output logic                              out_valid,
  output fp16_t [NROWS-1:0][NCOLS-1:0]      out_tile
);

  logic                        sign_valid, plane_valid, plane_last, group_first, group_last;
  logic [NROWS*GSZ-1:0]        plane_vec;
  logic [NROWS*EXP_W-1:0]      exp_vec;
  logic                        w_load;
  logic [NCOLS-1:0][GSZ*WBITS-1:0] w_col;
  fp16_t [NCOLS-1:0]           scale_col;
  logic [NROWS-1:0][NCOLS-1:0] v;

  act_dispatcher #(.NROWS(NROWS), .GSZ(GSZ)) u_adisp (
    .clk, .rst_n,
    .req_valid (a_req_valid), .req_is_sign (a_req_is_sign), .req_is_last (a_req_is_last),
    .req_g_first (a_req_g_first), .req_g_last (a_req_g_last),
    .mant_word (a_mant_word), .exp_word (a_exp_word),
    .sign_valid, .plane_valid, .plane_last, .group_first, .group_last, .plane_vec, .exp_vec
  );

  weight_dispatcher #(.NCOLS(NCOLS), .GSZ(GSZ)) u_wdisp (
    .clk, .rst_n, .req_valid (w_req_valid), .w_word, .w_load, .w_col, .scale_col
  );

  for (genvar r = 0; r < NROWS; r++) begin : g_row
    for (genvar c = 0; c < NCOLS; c++) begin : g_col
      apu #(.GSZ(GSZ)) u_apu (
        .clk, .rst_n,
        .w_load, .w_in (w_col[c]), .w_scale_in (scale_col[c]),
        .sign_valid, .sign_plane (plane_vec[r*GSZ +: GSZ]), .exp_in (exp_vec[r*EXP_W +: EXP_W]),
        .group_first, .group_last,
        .plane_valid, .plane_last, .plane (plane_vec[r*GSZ +: GSZ]), .m_len,
        .out_valid (v[r][c]), .out_half (out_tile[r][c])
      );
    end
  end

  // all APUs run in lockstep; APU (0,0) speaks for the array
  assign out_valid = v[0][0];

endmodule
