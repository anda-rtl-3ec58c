// anda_top: the Anda accelerator for FP-INT GeMM with Anda-format activations.
//
// Blocks: top controller with instruction memory, address generator,
// activation buffer (bit-plane layout), weight buffer, MXU (16 x 16 APUs with
// activation and weight dispatchers), output dispatcher and bit-plane
// compressor (BPC). The vector unit and the external memory are outside this
// RTL: the vector unit's FP16 results enter through the vec_* port, and the
// host/external memory reaches the buffers through the ext_* ports.
//
// Operation of a GeMM instruction: the address generator streams, per output
// tile of 16 tokens x 16 channels and per 64-value group, a sign/exponent word
// and M mantissa bit-plane words from the activation buffer into the MXU, and
// one weight word per group from the weight buffer. Each APU accumulates its
// output element; finished tiles go through the output dispatcher, four at a
// time, as 16 words of 64 FP16 values (one per token). With compress = 1 the
// BPC turns each set of 16 words into one Anda group row (sign word plus m_out
// bit-plane words and an exponent word); with compress = 0 the FP16 words are
// stored as they are. Results land in the activation buffer from out_base on,
// ready to be the next layer's input or to be read out through ext_*.
//
// External buffer ports act only while the controller is idle (busy = 0),
// except the weight-buffer write port, which is always open (the datapath never
// writes weights).
module anda_top
  import anda_pkg::*;
#(
  parameter int MDEPTH     = 8192,   // activation mantissa words (1 MB)
  parameter int EDEPTH     = 8192,   // activation exponent words
  parameter int WDEPTH     = 2048,   // weight words (1 MB of INT4)
  parameter int IMEM_DEPTH = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // program and control
  input  logic                          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t                        imem_wdata,
  input  logic                          run,
  output logic                          busy,
  output logic                          done,
  // external access to the activation buffer (idle only)
  input  logic                          ext_m_we,
  input  logic                          ext_m_re,
  input  logic [$clog2(MDEPTH)-1:0]     ext_m_addr,
  input  logic [PLANE_W-1:0]            ext_m_wdata,
  output logic [PLANE_W-1:0]            ext_m_rdata,
  input  logic                          ext_e_we,
  input  logic                          ext_e_re,
  input  logic [$clog2(EDEPTH)-1:0]     ext_e_addr,
  input  logic [EWORD_W-1:0]            ext_e_wdata,
  output logic [EWORD_W-1:0]            ext_e_rdata,
  // external write port of the weight buffer
  input  logic                          ext_w_we,
  input  logic [$clog2(WDEPTH)-1:0]     ext_w_addr,
  input  logic [COLS*(GS*WBITS+16)-1:0] ext_w_wdata,
  // FP16 results of the vector unit (used by OP_VEC)
  input  logic                          vec_valid,
  output logic                          vec_ready,
  input  logic [WORD_W-1:0]             vec_data,
  // status
  output logic                          stall_cycle
);

  localparam int MAW = $clog2(MDEPTH);
  localparam int EAW = $clog2(EDEPTH);
  localparam int WAW = $clog2(WDEPTH);
  localparam int WW  = COLS * (GS * WBITS + 16);

  instr_t instr;
  logic   wr_init, gemm_start, vec_mode, ag_done, group_written;

  top_ctrl #(.IMEM_DEPTH(IMEM_DEPTH)) u_ctrl (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .run, .busy, .done,
    .instr, .wr_init, .gemm_start, .vec_mode, .ag_done, .group_written
  );

  // address generator
  logic           ag_a_rd_en, ag_e_rd_en, ag_w_rd_en, ag_busy, quad_done;
  logic [MAW-1:0] ag_a_rd_addr, wr_addr;
  logic [EAW-1:0] ag_e_rd_addr, wr_exp_addr;
  logic [WAW-1:0] ag_w_rd_addr;
  logic           tag_is_sign, tag_is_last, tag_g_first, tag_g_last;
  logic           wr_word, wr_is_sign;

  addr_gen #(.MAW(MAW), .EAW(EAW), .WAW(WAW)) u_ag (
    .clk, .rst_n, .start (gemm_start), .instr,
    .a_rd_en (ag_a_rd_en), .a_rd_addr (ag_a_rd_addr),
    .e_rd_en (ag_e_rd_en), .e_rd_addr (ag_e_rd_addr),
    .tag_is_sign, .tag_is_last, .tag_g_first, .tag_g_last,
    .w_rd_en (ag_w_rd_en), .w_rd_addr (ag_w_rd_addr),
    .quad_done, .busy (ag_busy), .done (ag_done), .stall (stall_cycle),
    .wr_init, .wr_word, .wr_is_sign, .wr_addr, .wr_exp_addr
  );

  // output path: out dispatcher or vector unit, then BPC or plain store
  logic                      od_valid, od_ready, tile_valid;
  logic [WORD_W-1:0]         od_data;
  fp16_t [ROWS-1:0][COLS-1:0] tile;
  logic                      src_valid, src_ready;
  logic [WORD_W-1:0]         src_data;
  logic                      b_in_ready, b_out_valid, b_out_is_sign, b_out_last, b_busy;
  logic [PLANE_W-1:0]        b_out_m;
  logic [EWORD_W-1:0]        b_out_e;
  logic [3:0]                byp_cnt;
  logic                      compress;

  assign compress  = instr.compress;
  assign src_valid = vec_mode ? vec_valid : od_valid;
  assign src_data  = vec_mode ? vec_data  : od_data;
  assign src_ready = compress ? b_in_ready : 1'b1;
  assign od_ready  = !vec_mode && src_ready;
  assign vec_ready = vec_mode && src_ready;

  out_dispatcher u_odisp (
    .clk, .rst_n, .tile_valid, .tile,
    .out_valid (od_valid), .out_ready (od_ready), .out_data (od_data), .quad_done
  );

  bpc u_bpc (
    .clk, .rst_n, .m_len (instr.m_out),
    .in_valid (src_valid && compress), .in_ready (b_in_ready), .in_data (src_data),
    .out_valid (b_out_valid), .out_is_sign (b_out_is_sign), .out_last (b_out_last),
    .out_m (b_out_m), .out_e (b_out_e), .busy (b_busy)
  );

  // plain FP16 store: count words to know when a set of 16 is complete
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              byp_cnt <= '0;
    else if (wr_init)                        byp_cnt <= '0;
    else if (!compress && src_valid && busy) byp_cnt <= byp_cnt + 1'b1;
  end

  assign wr_word       = busy && (compress ? b_out_valid : src_valid);
  assign wr_is_sign    = busy && compress && b_out_valid && b_out_is_sign;
  assign group_written = busy && (compress ? b_out_last : (src_valid && byp_cnt == 4'd15));

  // activation buffer with its port muxes
  logic              m_rd_en, m_wr_en, e_rd_en, e_wr_en;
  logic [MAW-1:0]    m_rd_addr, m_wr_addr;
  logic [EAW-1:0]    e_rd_addr, e_wr_addr;
  logic [PLANE_W-1:0] m_wr_data, m_rd_data;
  logic [EWORD_W-1:0] e_wr_data, e_rd_data;

  assign m_rd_en   = busy ? ag_a_rd_en   : ext_m_re;
  assign m_rd_addr = busy ? ag_a_rd_addr : ext_m_addr;
  assign e_rd_en   = busy ? ag_e_rd_en   : ext_e_re;
  assign e_rd_addr = busy ? ag_e_rd_addr : ext_e_addr;
  assign m_wr_en   = busy ? wr_word      : ext_m_we;
  assign m_wr_addr = busy ? wr_addr      : ext_m_addr;
  assign m_wr_data = busy ? (compress ? b_out_m : src_data) : ext_m_wdata;
  assign e_wr_en   = busy ? wr_is_sign   : ext_e_we;
  assign e_wr_addr = busy ? wr_exp_addr  : ext_e_addr;
  assign e_wr_data = busy ? b_out_e      : ext_e_wdata;
  assign ext_m_rdata = m_rd_data;
  assign ext_e_rdata = e_rd_data;

  act_buffer #(.MDEPTH(MDEPTH), .EDEPTH(EDEPTH)) u_abuf (
    .clk, .m_rd_en, .m_rd_addr, .m_rd_data, .m_wr_en, .m_wr_addr, .m_wr_data,
    .e_rd_en, .e_rd_addr, .e_rd_data, .e_wr_en, .e_wr_addr, .e_wr_data
  );

  logic [WW-1:0] w_rd_data;

  weight_buffer #(.DEPTH(WDEPTH)) u_wbuf (
    .clk, .rd_en (ag_w_rd_en), .rd_addr (ag_w_rd_addr), .rd_data (w_rd_data),
    .wr_en (ext_w_we), .wr_addr (ext_w_addr), .wr_data (ext_w_wdata)
  );

  mxu u_mxu (
    .clk, .rst_n, .m_len (instr.m_in),
    .a_req_valid (ag_a_rd_en), .a_req_is_sign (tag_is_sign), .a_req_is_last (tag_is_last),
    .a_req_g_first (tag_g_first), .a_req_g_last (tag_g_last),
    .a_mant_word (m_rd_data), .a_exp_word (e_rd_data),
    .w_req_valid (ag_w_rd_en), .w_word (w_rd_data),
    .out_valid (tile_valid), .out_tile (tile)
  );

endmodule
