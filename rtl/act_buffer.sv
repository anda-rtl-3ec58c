// act_buffer: on-chip activation buffer in the bit-plane layout.
//
// Two memories. The mantissa memory (1 MB: 8192 words of 1024 bits) holds,
// per Anda group row, one word of sign planes followed by M words of mantissa
// bit-planes, most significant first; bits [64r +: 64] of a word belong to
// bank r (token r). A different mantissa length only changes how many
// addresses a group occupies, not the word width. The exponent memory holds
// one 80-bit word per group row: 16 shared 5-bit exponents, bank r at
// [5r +: 5]. Without compression the mantissa memory may also hold plain FP16
// words (64 values per word).
//
// Each memory has one read and one write port; reads return data in the next
// cycle (registered output, like an SRAM macro). Written as arrays; a chip
// would use SRAM macros here.
//
// Sizes: the paper gives 1 MB of mantissa and 0.125 MB of exponent storage.
// The 1 MB is kept. For the exponents this design keeps one 5-bit exponent per
// bank and word, 8192 x 80 bits (0.078 MB); 0.125 MB would correspond to one
// byte per exponent.
module act_buffer
  import anda_pkg::*;
#(
  parameter int MDEPTH = 8192,
  parameter int MW     = PLANE_W,
  parameter int EDEPTH = 8192,
  parameter int EW     = EWORD_W
) (
  input  logic                      clk,
  input  logic                      m_rd_en,
  input  logic [$clog2(MDEPTH)-1:0] m_rd_addr,
  output logic [MW-1:0]             m_rd_data,
  input  logic                      m_wr_en,
  input  logic [$clog2(MDEPTH)-1:0] m_wr_addr,
  input  logic [MW-1:0]             m_wr_data,
  input  logic                      e_rd_en,
  input  logic [$clog2(EDEPTH)-1:0] e_rd_addr,
  output logic [EW-1:0]             e_rd_data,
  input  logic                      e_wr_en,
  input  logic [$clog2(EDEPTH)-1:0] e_wr_addr,
  input  logic [EW-1:0]             e_wr_data
);

  logic [MW-1:0] mmem [MDEPTH];
  logic [EW-1:0] emem [EDEPTH];

  always_ff @(posedge clk) begin
    if (m_wr_en) mmem[m_wr_addr] <= m_wr_data;
    if (m_rd_en) m_rd_data <= mmem[m_rd_addr];
  end

  always_ff @(posedge clk) begin
    if (e_wr_en) emem[e_wr_addr] <= e_wr_data;
    if (e_rd_en) e_rd_data <= emem[e_rd_addr];
  end

endmodule
