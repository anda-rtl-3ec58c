// bpc: on-the-fly bit-plane compressor (BPC), FP16 to Anda.
//
// 16 lanes, each compressing one group of 64 FP16 values. Words of 64 FP16
// values arrive serially (one per cycle) in the ser2par FIFO; once 16 words are
// present they start all lanes together. Each lane finds its group's largest
// exponent and aligns the mantissas bit-serially; the data packager emits one
// Anda-M word of the 16 sign planes with the Anda-E word of the 16 shared
// exponents, then M Anda-M words of mantissa bit-planes. In the accelerator
// word i of a lane-set is token i, so the output words are exactly the
// activation-buffer words the MXU reads in a later layer.
//
// Interface: in_valid/in_ready/in_data (1024 bits); m_len (1..16) sampled when
// the lanes start; out_* as in data_packager; group_done pulses with out_last.
// Timing: after the 16th input word, the lanes start in the next cycle and the
// M+1 output words follow 2 cycles later; a new lane-set may be gathered while
// the lanes work.
module bpc
  import anda_pkg::*;
#(
  parameter int NLANES = LANES,
  parameter int GSZ    = GS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [MLEN_W-1:0]           m_len,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [GSZ*16-1:0]           in_data,
  output logic                        out_valid,
  output logic                        out_is_sign,
  output logic                        out_last,
  output logic [NLANES*GSZ-1:0]       out_m,
  output logic [NLANES*EXP_W-1:0]     out_e,
  output logic                        busy
);

  logic                             f_valid, f_ready, start, step, pk_busy;
  logic [NLANES-1:0][GSZ*16-1:0]    f_data;
  logic [NLANES-1:0][GSZ-1:0]       lane_sign, lane_plane;
  logic [NLANES-1:0][EXP_W-1:0]     lane_exp;

  ser2par_fifo #(.NLANES(NLANES), .W(GSZ*16)) u_fifo (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid (f_valid), .out_ready (f_ready), .out_data (f_data)
  );

  assign f_ready = !pk_busy;
  assign start   = f_valid && f_ready;

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    bpc_lane #(.GSZ(GSZ)) u_lane (
      .clk, .rst_n, .start, .fp_in (f_data[l]), .step,
      .sign_plane (lane_sign[l]), .exp_shared (lane_exp[l]), .plane (lane_plane[l])
    );
  end

  data_packager #(.NLANES(NLANES), .GSZ(GSZ)) u_pack (
    .clk, .rst_n, .start, .m_len, .lane_sign, .lane_exp, .lane_plane,
    .step, .busy (pk_busy), .out_valid, .out_is_sign, .out_last, .out_m, .out_e
  );

  // anything in flight: words gathered, lanes running or words leaving
  assign busy = pk_busy || start || out_valid || !in_ready;

endmodule
