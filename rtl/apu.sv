// apu: Anda-enhanced bit-serial processing unit.
//
// An Anda PE (bit-serial INT dot product of a 64-value Anda group with 64 INT4
// weights, converted to FP16 with the shared exponent) followed by an FP
// accumulator (weight-scale multiply and FP32 accumulation across groups,
// FP16 output). See anda_pe and fp_accumulator for the detailed behaviour.
//
// Timing: per group one sign cycle and M plane cycles; the output of a
// dot product whose last group ended with plane_last at cycle t appears as
// out_valid at cycle t + 3.
module apu
  import anda_pkg::*;
#(
  parameter int GSZ = GS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_load,
  input  logic [GSZ*WBITS-1:0] w_in,
  input  fp16_t                w_scale_in,
  input  logic                 sign_valid,
  input  logic [GSZ-1:0]       sign_plane,
  input  logic [EXP_W-1:0]     exp_in,
  input  logic                 group_first,
  input  logic                 group_last,
  input  logic                 plane_valid,
  input  logic                 plane_last,
  input  logic [GSZ-1:0]       plane,
  input  logic [MLEN_W-1:0]    m_len,
  output logic                 out_valid,
  output fp16_t                out_half
);

  logic  dp_valid, dp_first, dp_last;
  fp16_t dp_half, dp_scale;

  anda_pe #(.GSZ(GSZ)) u_pe (
    .clk, .rst_n, .w_load, .w_in, .w_scale_in,
    .sign_valid, .sign_plane, .exp_in, .group_first, .group_last,
    .plane_valid, .plane_last, .plane, .m_len,
    .dp_valid, .dp_half, .dp_scale, .dp_first, .dp_last
  );

  fp_accumulator u_acc (
    .clk, .rst_n,
    .in_valid (dp_valid), .in_half (dp_half), .in_scale (dp_scale),
    .in_first (dp_first), .in_last (dp_last),
    .out_valid, .out_half
  );

endmodule
