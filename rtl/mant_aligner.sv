// mant_aligner: parallel-to-serial mantissa aligner of a BPC lane.
//
// Holds, per element, its exponent difference to the group maximum and its
// 11-bit mantissa (leading one included). In every step cycle, an element whose
// difference is zero emits its mantissa MSB and shifts the mantissa left by
// one; an element with a non-zero difference emits 0 and decrements the
// difference. The 64 emitted bits form one bit-plane of the aligned, truncated
// mantissas, most significant plane first, which is exactly the paper's
// described behaviour; the BPC stops after M steps.
//
// Interface: load (with diff_in, mant_in) initialises the registers; step
// advances by one plane; plane is the combinational output of the current
// state, valid in the step cycle.
module mant_aligner
  import anda_pkg::*;
#(
  parameter int GSZ = GS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      load,
  input  logic [GSZ-1:0][EXP_W-1:0] diff_in,
  input  logic [GSZ-1:0][10:0]      mant_in,
  input  logic                      step,
  output logic [GSZ-1:0]            plane
);

  logic [GSZ-1:0][EXP_W-1:0] diff;
  logic [GSZ-1:0][10:0]      mant;

  always_comb
    for (int i = 0; i < GSZ; i++) plane[i] = (diff[i] == '0) ? mant[i][10] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      diff <= '0;
      mant <= '0;
    end else if (load) begin
      diff <= diff_in;
      mant <= mant_in;
    end else if (step) begin
      for (int i = 0; i < GSZ; i++) begin
        if (diff[i] == '0) mant[i] <= mant[i] << 1;
        else               diff[i] <= diff[i] - 1'b1;
      end
    end
  end

endmodule
