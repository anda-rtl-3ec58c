// fp_accumulator: the floating-point half of an APU.
//
// Each group result from the Anda PE (an FP16 dot product) is multiplied by the
// weight group's FP16 scale factor, giving an exact FP32 product, and added to
// an FP32 accumulator. The first group of an output selects 0 instead of the
// register (the mux in the paper's figure); after the last group the FP32 sum
// is converted to FP16 and presented for one cycle.
//
// Interface: in_valid with in_half, in_scale, in_first, in_last. Timing: the
// accumulator updates at the clock edge after in_valid; out_valid is high in
// the cycle after the in_valid that carried in_last.
//
// From the paper: multiply by the weight scale, FP32 accumulation across
// groups, FP2Half on output. This design's choices: one-cycle multiply-add,
// truncating rounding, flush-to-zero of subnormals, saturation at the largest
// finite value.
module fp_accumulator
  import anda_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp16_t in_half,
  input  fp16_t in_scale,
  input  logic  in_first,
  input  logic  in_last,
  output logic  out_valid,
  output fp16_t out_half
);

  fp32_t acc, acc_next;

  always_comb acc_next = fp32_add(in_first ? 32'h0 : acc, fp16_mul(in_half, in_scale));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_half  <= '0;
    end else begin
      out_valid <= in_valid & in_last;
      if (in_valid) begin
        acc <= acc_next;
        if (in_last) out_half <= fp32_to_half(acc_next);
      end
    end
  end

endmodule
