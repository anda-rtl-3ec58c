// max_exp_catcher: second stage of a BPC lane (combinational).
//
// Finds the largest of the group's 64 exponents, which becomes the shared
// exponent, and each element's difference to it (the number of right shifts
// its mantissa needs). Built as a comparator tree of depth log2(64).
module max_exp_catcher
  import anda_pkg::*;
#(
  parameter int GSZ = GS
) (
  input  logic [GSZ-1:0][EXP_W-1:0] exp,
  output logic [EXP_W-1:0]          exp_max,
  output logic [GSZ-1:0][EXP_W-1:0] exp_diff
);

  localparam int LV = $clog2(GSZ);

  logic [EXP_W-1:0] tree [LV+1][GSZ];

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int i = 0; i < GSZ; i++) tree[l][i] = '0;
    for (int i = 0; i < GSZ; i++) tree[0][i] = exp[i];
    for (int l = 0; l < LV; l++)
      for (int i = 0; i < (GSZ >> (l + 1)); i++)
        tree[l+1][i] = (tree[l][2*i] > tree[l][2*i+1]) ? tree[l][2*i] : tree[l][2*i+1];
    exp_max = tree[LV][0];
    for (int i = 0; i < GSZ; i++) exp_diff[i] = exp_max - exp[i];
  end

endmodule
