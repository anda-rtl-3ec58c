// bpc_lane: one lane of the bit-plane compressor.
//
// Compresses a group of 64 FP16 values into Anda form: FP field extractor,
// maximum exponent catcher and parallel-to-serial mantissa aligner, as in the
// paper. On start the lane captures the signs, the shared (maximum) exponent
// and, in the aligner, each element's exponent difference and mantissa; then
// each step cycle it outputs one aligned mantissa bit-plane.
//
// Interface: start with fp_in (64 FP16 values); sign_plane and exp_shared hold
// from the cycle after start; step/plane as in mant_aligner.
module bpc_lane
  import anda_pkg::*;
#(
  parameter int GSZ = GS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [GSZ*16-1:0] fp_in,
  input  logic              step,
  output logic [GSZ-1:0]    sign_plane,
  output logic [EXP_W-1:0]  exp_shared,
  output logic [GSZ-1:0]    plane
);

  logic [GSZ-1:0]            sign;
  logic [GSZ-1:0][EXP_W-1:0] exp, diff;
  logic [GSZ-1:0][10:0]      mant;
  logic [EXP_W-1:0]          exp_max;

  fp_field_extractor #(.GSZ(GSZ)) u_fx (.fp_in, .sign, .exp, .mant);
  max_exp_catcher    #(.GSZ(GSZ)) u_mx (.exp, .exp_max, .exp_diff (diff));
  mant_aligner       #(.GSZ(GSZ)) u_al (.clk, .rst_n, .load (start), .diff_in (diff),
                                        .mant_in (mant), .step, .plane);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sign_plane <= '0;
      exp_shared <= '0;
    end else if (start) begin
      sign_plane <= sign;
      exp_shared <= exp_max;
    end
  end

endmodule
