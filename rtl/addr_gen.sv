// addr_gen: address generator for the activation and weight buffers.
//
// Read side (GeMM): for each 16-column output tile n and each 64-value group k
// of the reduction dimension it reads the group's sign word and exponent word
// (address act_base + k*(1+M), exponent act_exp_base + k), then its M mantissa
// bit-plane words, one word per cycle, tagging each read for the activation
// dispatcher. The bit-plane layout makes the group stride simply 1+M words. The
// input activation row is re-read for every output tile.
// Weights are read one word per group at w_base + n*K/64 + k, i.e. sequentially;
// the first group's word is read one cycle before its sign word, every later
// group's word during the previous group's first plane, so it sits in the
// APUs' shadow registers before the group starts (overlapped loading).
//
// Stall: output tiles come in sets of four (64 channels), and the output
// dispatcher can hold one set being gathered and one being emitted. So the
// last tile of set q may only start once sets 0..q-1 have been emitted
// (quad_done count); otherwise the generator waits in the sign state and
// raises stall.
//
// Write side: each word written into the activation buffer takes the next
// mantissa address from out_base; each sign word of a compressed group also
// takes the next exponent address from out_exp_base. Outputs are thus stored
// contiguously, group after group.
//
// Timing: GeMM issue takes 1 + N/16 * K/64 * (1 + M) cycles plus stalls; done
// pulses with the last read. The loop order and the credit rule are this
// design's choices; the paper states only that this block produces the read and
// write addresses of both buffers.
module addr_gen
  import anda_pkg::*;
#(
  parameter int MAW = 13,   // mantissa-buffer address bits
  parameter int EAW = 13,   // exponent-buffer address bits
  parameter int WAW = 11    // weight-buffer address bits
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction
  input  logic              start,
  input  instr_t            instr,
  // read side
  output logic              a_rd_en,
  output logic [MAW-1:0]    a_rd_addr,
  output logic              e_rd_en,
  output logic [EAW-1:0]    e_rd_addr,
  output logic              tag_is_sign,
  output logic              tag_is_last,
  output logic              tag_g_first,
  output logic              tag_g_last,
  output logic              w_rd_en,
  output logic [WAW-1:0]    w_rd_addr,
  input  logic              quad_done,
  output logic              busy,
  output logic              done,
  output logic              stall,
  // write side
  input  logic              wr_init,      // load the write counters from instr
  input  logic              wr_word,      // a word is written this cycle
  input  logic              wr_is_sign,   // ... and it is a compressed group's sign word
  output logic [MAW-1:0]    wr_addr,
  output logic [EAW-1:0]    wr_exp_addr
);

  typedef enum logic [1:0] {S_IDLE, S_WPRE, S_SIGN, S_PLANE} state_e;
  state_e state;

  instr_t            iq;
  logic [7:0]        n;
  logic [9:0]        k;
  logic [MLEN_W-1:0] p;
  logic [MAW-1:0]    gbase;     // sign-word address of the current group
  logic [WAW-1:0]    waddr;     // next weight word
  logic [7:0]        quads_done;
  logic              credit_ok, last_group, last_tile;

  assign last_group = (k == iq.k_groups - 1'b1) && (n == iq.n_tiles - 1'b1);
  assign last_tile  = (k == '0) && (n[1:0] == 2'b11);
  // the last tile of set n/4 starts once all earlier sets have left the dispatcher
  assign credit_ok  = !last_tile || (quads_done >= {2'b00, n[7:2]});
  assign stall      = (state == S_SIGN) && !credit_ok;

  always_comb begin
    a_rd_en     = 1'b0;
    a_rd_addr   = gbase;
    e_rd_en     = 1'b0;
    e_rd_addr   = iq.act_exp_base[EAW-1:0] + EAW'(k);
    tag_is_sign = 1'b0;
    tag_is_last = 1'b0;
    tag_g_first = (k == '0);
    tag_g_last  = (k == iq.k_groups - 1'b1);
    w_rd_en     = 1'b0;
    w_rd_addr   = waddr;
    case (state)
      S_WPRE: w_rd_en = 1'b1;
      S_SIGN: if (credit_ok) begin
        a_rd_en     = 1'b1;
        e_rd_en     = 1'b1;
        tag_is_sign = 1'b1;
      end
      S_PLANE: begin
        a_rd_en     = 1'b1;
        a_rd_addr   = gbase + MAW'(p);
        tag_is_last = (p == iq.m_in);
        w_rd_en     = (p == MLEN_W'(1)) && !last_group;
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; iq <= '0; n <= '0; k <= '0; p <= '0;
      gbase <= '0; waddr <= '0; done <= 1'b0;
      quads_done <= '0;
    end else begin
      done <= 1'b0;
      if (quad_done) quads_done <= quads_done + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          iq    <= instr;
          n     <= '0;
          k     <= '0;
          gbase <= instr.act_base[MAW-1:0];
          waddr <= instr.w_base[WAW-1:0];
          quads_done <= '0;
          state <= S_WPRE;
        end
        S_WPRE: begin
          waddr <= waddr + 1'b1;
          state <= S_SIGN;
        end
        S_SIGN: if (credit_ok) begin
          p     <= MLEN_W'(1);
          state <= S_PLANE;
        end
        S_PLANE: begin
          if (p == MLEN_W'(1) && !last_group) waddr <= waddr + 1'b1;
          if (p == iq.m_in) begin
            if (last_group) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_SIGN;
              if (k == iq.k_groups - 1'b1) begin
                k     <= '0;
                n     <= n + 1'b1;
                gbase <= iq.act_base[MAW-1:0];
              end else begin
                k     <= k + 1'b1;
                gbase <= gbase + MAW'(p) + 1'b1;
              end
            end
          end else begin
            p <= p + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // write-side address counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_addr     <= '0;
      wr_exp_addr <= '0;
    end else if (wr_init) begin
      wr_addr     <= instr.out_base[MAW-1:0];
      wr_exp_addr <= instr.out_exp_base[EAW-1:0];
    end else if (wr_word) begin
      wr_addr <= wr_addr + 1'b1;
      if (wr_is_sign) wr_exp_addr <= wr_exp_addr + 1'b1;
    end
  end

endmodule
