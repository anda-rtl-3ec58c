// anda_pkg: constants, types and floating-point helper functions shared by the
// Anda accelerator.
//
// The Anda activation format groups 64 values that share one 5-bit exponent
// (the largest FP16 exponent in the group). Each value keeps a sign bit and an
// M-bit mantissa, M = 1..16, which includes the formerly hidden leading one
// and is right-aligned to the shared exponent and truncated. In memory a group
// is stored bit-plane by bit-plane: one word of 64 sign bits, then M words of
// mantissa bits, most significant plane first.
//
// The FP helpers are this design's own: every conversion truncates (rounds
// toward zero), subnormal FP16/FP32 values are flushed to zero and a result
// past the largest finite value saturates to it. Inf and NaN are not produced
// and inputs are assumed finite.
package anda_pkg;

  localparam int GS       = 64;   // Anda group size (values per shared exponent)
  localparam int EXP_W    = 5;    // FP16 / Anda shared exponent width
  localparam int MAX_M    = 16;   // longest Anda mantissa, bits
  localparam int MLEN_W   = 5;    // width of a mantissa-length field (1..16)
  localparam int WBITS    = 4;    // INT4 weights
  localparam int ROWS     = 16;   // MXU rows (tokens of an output tile)
  localparam int COLS     = 16;   // MXU columns (output channels of a tile)
  localparam int LANES    = 16;   // BPC lanes
  localparam int WORD_W   = GS * 16;       // 1024-bit FP16 word: 64 values
  localparam int PLANE_W  = LANES * GS;    // 1024-bit Anda-M word: 16 planes
  localparam int EWORD_W  = LANES * EXP_W; // 80-bit Anda-E word
  localparam int TILES_PER_GROUP = GS / COLS; // MXU tiles that form one output group

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  typedef enum logic [1:0] {
    OP_END  = 2'd0,  // stop and return to idle
    OP_GEMM = 2'd1,  // FP-INT GeMM of one 16-token tile
    OP_VEC  = 2'd2   // store vector-unit results (optionally compressed)
  } opcode_e;

  // One instruction of the top controller.
  typedef struct packed {
    opcode_e      op;
    logic [4:0]   m_in;        // mantissa length of the input activations
    logic [4:0]   m_out;       // mantissa length of the compressed outputs
    logic         compress;    // 1: outputs through the BPC, 0: stored as FP16
    logic [9:0]   k_groups;    // K / 64
    logic [7:0]   n_tiles;     // N / 16 (GEMM) or 16-word output groups (VEC) x 4
    logic [12:0]  act_base;    // first mantissa-buffer word of the input
    logic [12:0]  act_exp_base;// first exponent-buffer word of the input
    logic [10:0]  w_base;      // first weight-buffer word
    logic [12:0]  out_base;    // first mantissa-buffer word of the output
    logic [12:0]  out_exp_base;// first exponent-buffer word of the output
  } instr_t;

  // Position of the most significant set bit of a 32-bit magnitude.
  function automatic logic [4:0] msb32(input logic [31:0] v);
    logic [4:0] p;
    p = '0;
    for (int i = 0; i < 32; i++) if (v[i]) p = 5'(i);
    return p;
  endfunction

  function automatic logic [5:0] msb49(input logic [48:0] v);
    logic [5:0] p;
    p = '0;
    for (int i = 0; i < 49; i++) if (v[i]) p = 6'(i);
    return p;
  endfunction

  // Signed integer v times 2^(shexp - 30), as FP16 (INT2Half of the Anda PE).
  function automatic fp16_t int2half(input logic signed [31:0] v, input logic [EXP_W-1:0] shexp);
    logic [31:0] mag;
    logic [4:0]  p;
    logic signed [7:0] e;
    logic [31:0] norm;
    mag = v[31] ? 32'(-v) : 32'(v);
    if (mag == 0) return 16'h0000;
    p    = msb32(mag);
    e    = 8'(p) + 8'(shexp) - 8'sd15;   // biased FP16 exponent
    norm = mag << (5'd31 - p);
    if (e >= 8'sd31) return {v[31], 15'h7bff};
    if (e <= 8'sd0)  return 16'h0000;
    return {v[31], e[4:0], norm[30:21]};
  endfunction

  // Exact FP16 x FP16 product as FP32.
  function automatic fp32_t fp16_mul(input fp16_t a, input fp16_t b);
    logic [21:0] prod;
    logic [7:0]  e;
    logic [22:0] frac;
    if (a[14:10] == 0 || b[14:10] == 0) return 32'h0;
    prod = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e    = 8'(a[14:10]) + 8'(b[14:10]) + 8'd97;   // -15 -15 +127
    if (prod[21]) begin
      e    = e + 8'd1;
      frac = {prod[20:0], 2'b0};
    end else begin
      frac = {prod[19:0], 3'b0};
    end
    return {a[15] ^ b[15], e, frac};
  endfunction

  // FP32 addition, truncating.
  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t big, sml;
    logic [7:0]  d;
    logic [48:0] mb, ms, sum;
    logic [5:0]  p;
    logic signed [9:0] e;
    logic [48:0] norm;
    if (a[30:23] == 0) return (b[30:23] == 0) ? 32'h0 : b;
    if (b[30:23] == 0) return a;
    if (a[30:0] >= b[30:0]) begin big = a; sml = b; end
    else begin big = b; sml = a; end
    d  = big[30:23] - sml[30:23];
    mb = {1'b0, 1'b1, big[22:0], 24'b0};
    ms = {1'b0, 1'b1, sml[22:0], 24'b0};
    ms = (d > 8'd48) ? 49'h0 : (ms >> d);
    sum = (big[31] == sml[31]) ? (mb + ms) : (mb - ms);
    if (sum == 0) return 32'h0;
    p    = msb49(sum);
    e    = 10'(big[30:23]) + 10'(p) - 10'sd47;
    norm = sum << (6'd48 - p);
    if (e >= 10'sd255) return {big[31], 8'hfe, 23'h7fffff};
    if (e <= 10'sd0)   return 32'h0;
    return {big[31], e[7:0], norm[47:25]};
  endfunction

  // FP32 to FP16, truncating (FP2Half of the FP accumulator).
  function automatic fp16_t fp32_to_half(input fp32_t a);
    logic signed [9:0] e;
    if (a[30:23] == 0) return 16'h0;
    e = 10'(a[30:23]) - 10'sd112;   // -127 +15
    if (e >= 10'sd31) return {a[31], 15'h7bff};
    if (e <= 10'sd0)  return 16'h0;
    return {a[31], e[4:0], a[22:13]};
  endfunction

endpackage
