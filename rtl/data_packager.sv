// data_packager: output stage of the bit-plane compressor.
//
// Sequences the lanes after a start and assembles what they produce into the
// activation-buffer format: first one Anda-M word holding every lane's sign
// plane (lane l at bits [64l +: 64]) together with the Anda-E word of all
// lanes' shared exponents (lane l at bits [5l +: 5]), then M Anda-M words of
// mantissa bit-planes, most significant first. While emitting planes it
// drives step to the lanes' aligners.
//
// Timing: start in cycle s; out_valid in cycles s+2 .. s+2+M (sign word first,
// out_last on the final plane); busy from s+1 to s+1+M, so the next start may
// come in cycle s+2+M. The word order follows the paper's bit-plane layout
// figure (sign plane at the group's first address); the sequencing is this
// design's choice.
module data_packager
  import anda_pkg::*;
#(
  parameter int NLANES = LANES,
  parameter int GSZ    = GS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic [MLEN_W-1:0]               m_len,
  input  logic [NLANES-1:0][GSZ-1:0]      lane_sign,
  input  logic [NLANES-1:0][EXP_W-1:0]    lane_exp,
  input  logic [NLANES-1:0][GSZ-1:0]      lane_plane,
  output logic                            step,
  output logic                            busy,
  output logic                            out_valid,
  output logic                            out_is_sign,
  output logic                            out_last,
  output logic [NLANES*GSZ-1:0]           out_m,
  output logic [NLANES*EXP_W-1:0]         out_e
);

  logic [MLEN_W-1:0] m_q, cnt;

  assign step = busy && (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; m_q <= '0;
      out_valid <= 1'b0; out_is_sign <= 1'b0; out_last <= 1'b0;
      out_m <= '0; out_e <= '0;
    end else begin
      out_valid   <= busy;
      out_is_sign <= busy && (cnt == '0);
      out_last    <= busy && (cnt == m_q);
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
        m_q  <= m_len;
      end else if (busy) begin
        if (cnt == '0) begin
          out_m <= lane_sign;
          out_e <= lane_exp;
        end else begin
          out_m <= lane_plane;
        end
        if (cnt == m_q) busy <= 1'b0;
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
