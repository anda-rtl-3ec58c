// act_dispatcher: activation data dispatcher between the activation buffer and
// the MXU.
//
// The address generator issues one activation-buffer read per cycle together
// with a tag saying whether the word is a group's sign plane (with its shared
// exponents) or a mantissa bit-plane, whether that plane is the group's last,
// and whether the group is the first/last of the output's reduction. The
// dispatcher delays the tag by the buffer's one-cycle read latency, pairs it
// with the returned 1024-bit word (ROWS banks of 64 bits, bank r belonging to
// MXU row r) and the 80-bit exponent word, and registers both for the MXU.
// Each row's 64-bit slice is shared by all APUs of that row.
//
// Timing: tag issued in cycle t, buffer data in cycle t+1, MXU inputs in cycle
// t+2. The tag format and the register stage are this design's choices; the
// paper states only that one bit-plane vector is supplied per cycle and shared
// across columns.
module act_dispatcher
  import anda_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int GSZ   = GS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // tag of the read issued this cycle
  input  logic                     req_valid,
  input  logic                     req_is_sign,
  input  logic                     req_is_last,
  input  logic                     req_g_first,
  input  logic                     req_g_last,
  // activation buffer read data (one cycle after the request)
  input  logic [NROWS*GSZ-1:0]     mant_word,
  input  logic [NROWS*EXP_W-1:0]   exp_word,
  // to the MXU
  output logic                     sign_valid,
  output logic                     plane_valid,
  output logic                     plane_last,
  output logic                     group_first,
  output logic                     group_last,
  output logic [NROWS*GSZ-1:0]     plane_vec,
  output logic [NROWS*EXP_W-1:0]   exp_vec
);

  logic t_valid, t_sign, t_last, t_first, t_glast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= 1'b0; t_sign <= 1'b0; t_last <= 1'b0; t_first <= 1'b0; t_glast <= 1'b0;
      sign_valid <= 1'b0; plane_valid <= 1'b0; plane_last <= 1'b0;
      group_first <= 1'b0; group_last <= 1'b0;
      plane_vec <= '0; exp_vec <= '0;
    end else begin
      t_valid <= req_valid;
      t_sign  <= req_is_sign;
      t_last  <= req_is_last;
      t_first <= req_g_first;
      t_glast <= req_g_last;
      sign_valid  <= t_valid &  t_sign;
      plane_valid <= t_valid & ~t_sign;
      plane_last  <= t_valid & ~t_sign & t_last;
      group_first <= t_first;
      group_last  <= t_glast;
      if (t_valid) begin
        plane_vec <= mant_word;
        if (t_sign) exp_vec <= exp_word;
      end
    end
  end

endmodule
