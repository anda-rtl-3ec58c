// fp_field_extractor: first stage of a BPC lane (combinational).
//
// Splits a 1024-bit word of 64 FP16 values (value i at bits [16i +: 16]) into
// 64 signs, 64 five-bit exponents and 64 eleven-bit mantissas that include the
// leading one. A zero or subnormal input (exponent field 0) gets a mantissa of
// 0, so it becomes an Anda zero; this flush is this design's choice.
module fp_field_extractor
  import anda_pkg::*;
#(
  parameter int GSZ = GS
) (
  input  logic [GSZ*16-1:0]         fp_in,
  output logic [GSZ-1:0]            sign,
  output logic [GSZ-1:0][EXP_W-1:0] exp,
  output logic [GSZ-1:0][10:0]      mant
);

  always_comb begin
    for (int i = 0; i < GSZ; i++) begin
      sign[i] = fp_in[16*i + 15];
      exp[i]  = fp_in[16*i + 10 +: 5];
      mant[i] = (exp[i] == '0) ? 11'd0 : {1'b1, fp_in[16*i +: 10]};
    end
  end

endmodule
