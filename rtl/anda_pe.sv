// anda_pe: Anda processing element, the integer half of an APU.
//
// Computes the dot product of one 64-value Anda activation group with 64
// INT4 weights, one mantissa bit-plane per cycle. Following the paper's
// "first element, then bit-plane" reduction, each cycle the 64 one-bit
// mantissas select their weights, the sign bits negate them, and an adder tree
// sums them into one bit-plane partial sum. A single INT32 register then
// accumulates acc = (acc << 1) + psum, most significant plane first (the
// first plane selects 0 instead of the shifted register, as in the paper's
// figure). After the last plane the sum is shifted left by (16 - M) so that the
// binary point no longer depends on the mantissa length M, and converted to
// FP16 with the group's shared exponent (value = acc * 2^(E - 15 - (M - 1))).
//
// Weights are double buffered: w_load writes the shadow copy at any time, and
// the sign cycle of a group (sign_valid) moves the shadow copy into use, so the
// next group's weights load while the current group computes. The group's
// weight scale factor travels in the same buffer and is passed on with the
// result, together with the group_first/group_last flags given at sign time.
//
// Timing: a group takes 1 sign cycle plus M plane cycles; planes may follow the
// sign cycle back to back, and the next group's sign cycle may follow the last
// plane directly. dp_valid rises 2 cycles after the cycle with plane_last.
//
// From the paper: 64 INT4 multipliers, adder tree with sign input, INT32
// shift-accumulate with mux to 0, left shift by mantissa length, INT2Half with
// the shared exponent, double-buffered weights. This design's choices: signed
// two's-complement INT4 weights without zero point, a separate sign cycle, the
// scale travelling with the weights, truncating INT2Half that saturates/flushes.
module anda_pe
  import anda_pkg::*;
#(
  parameter int GSZ    = GS,
  parameter int ACC_W  = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // weight double buffer
  input  logic                   w_load,
  input  logic [GSZ*WBITS-1:0]   w_in,        // weight j at [4j +: 4], signed
  input  fp16_t                  w_scale_in,
  // activation group
  input  logic                   sign_valid,
  input  logic [GSZ-1:0]         sign_plane,
  input  logic [EXP_W-1:0]       exp_in,
  input  logic                   group_first, // sampled with sign_valid
  input  logic                   group_last,  // sampled with sign_valid
  input  logic                   plane_valid,
  input  logic                   plane_last,
  input  logic [GSZ-1:0]         plane,
  input  logic [MLEN_W-1:0]      m_len,       // 1..16, constant during a group
  // result of the group
  output logic                   dp_valid,
  output fp16_t                  dp_half,
  output fp16_t                  dp_scale,
  output logic                   dp_first,
  output logic                   dp_last
);

  logic [GSZ*WBITS-1:0] w_shadow, w_active;
  fp16_t                scale_shadow, scale_active;
  logic [GSZ-1:0]       sign_q;
  logic [EXP_W-1:0]     exp_q;
  logic                 first_q, last_q;
  logic                 first_plane;
  logic signed [ACC_W-1:0] acc;
  logic                 done_q;

  // bit-plane partial sum: adder tree over the 64 signed selected weights
  logic signed [ACC_W-1:0] psum;
  always_comb begin
    psum = '0;
    for (int j = 0; j < GSZ; j++) begin
      logic signed [WBITS-1:0] w;
      w = w_active[j*WBITS +: WBITS];
      if (plane[j]) psum = sign_q[j] ? psum - ACC_W'(w) : psum + ACC_W'(w);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_shadow     <= '0;
      w_active     <= '0;
      scale_shadow <= '0;
      scale_active <= '0;
      sign_q       <= '0;
      exp_q        <= '0;
      first_q      <= 1'b0;
      last_q       <= 1'b0;
      first_plane  <= 1'b0;
      acc          <= '0;
      done_q       <= 1'b0;
    end else begin
      if (w_load) begin
        w_shadow     <= w_in;
        scale_shadow <= w_scale_in;
      end
      if (sign_valid) begin
        w_active     <= w_shadow;
        scale_active <= scale_shadow;
        sign_q       <= sign_plane;
        exp_q        <= exp_in;
        first_q      <= group_first;
        last_q       <= group_last;
        first_plane  <= 1'b1;
      end
      if (plane_valid) begin
        acc         <= (first_plane ? '0 : (acc <<< 1)) + psum;
        first_plane <= 1'b0;
      end
      done_q <= plane_valid & plane_last;
    end
  end

  // shift by mantissa length, then INT2Half with the shared exponent
  logic signed [ACC_W-1:0] aligned;
  always_comb aligned = acc <<< (MLEN_W'(MAX_M) - m_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dp_valid <= 1'b0;
      dp_half  <= '0;
      dp_scale <= '0;
      dp_first <= 1'b0;
      dp_last  <= 1'b0;
    end else begin
      dp_valid <= done_q;
      if (done_q) begin
        dp_half  <= int2half(32'(aligned), exp_q);
        dp_scale <= scale_active;
        dp_first <= first_q;
        dp_last  <= last_q;
      end
    end
  end

endmodule
