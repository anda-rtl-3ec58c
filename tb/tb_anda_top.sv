// tb_anda_top: end-to-end testbench of the Anda accelerator at its full,
// default size.
//
// The host side loads Anda activations and INT4 weights through the external
// ports, writes a four-instruction program and runs it:
//   1. GEMM  16 tokens x K=128 (M=4) x N=64, outputs compressed by the BPC to
//            M=3 Anda groups;
//   2. GEMM  those compressed outputs as the next layer's input, K=64, N=192,
//            outputs stored as plain FP16 (BPC bypass); its quick tiles make
//            the address generator stall for the output dispatcher;
//   3. VEC   16 words of FP16 from the vector-unit port, compressed to M=6;
//   4. END.
// Results are read back through the external port and compared with reference
// values computed here in real arithmetic (layer 1 within the Anda truncation
// step, layer 2 within FP16/FP32 truncation error, the VEC group bit-exactly).
// It also counts the mechanisms the design has and fails if one never
// happened: compression, bypass, vector-unit mode, stall, overlapped weight
// loading, and a layer consuming the previous layer's compressed output.
module tb_anda_top;
  import anda_pkg::*;
  import tb_util_pkg::*;

  localparam int WW = COLS * (GS * WBITS + 16);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               imem_we, run, busy, done;
  logic [5:0]         imem_addr;
  instr_t             imem_wdata;
  logic               ext_m_we, ext_m_re, ext_e_we, ext_e_re, ext_w_we;
  logic [12:0]        ext_m_addr, ext_e_addr;
  logic [10:0]        ext_w_addr;
  logic [PLANE_W-1:0] ext_m_wdata, ext_m_rdata;
  logic [EWORD_W-1:0] ext_e_wdata, ext_e_rdata;
  logic [WW-1:0]      ext_w_wdata;
  logic               vec_valid, vec_ready, stall_cycle;
  logic [WORD_W-1:0]  vec_data;

  anda_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_stall = 0, n_wload_overlap = 0, n_bpc_groups = 0, n_bypass_words = 0, n_vec_words = 0;
  always @(posedge clk) if (rst_n) begin
    if (stall_cycle) n_stall++;
    if (dut.u_mxu.u_wdisp.w_load && dut.u_mxu.u_adisp.plane_valid) n_wload_overlap++;
    if (dut.u_bpc.out_last) n_bpc_groups++;
    if (dut.busy && !dut.instr.compress && dut.src_valid) n_bypass_words++;
    if (vec_valid && vec_ready) n_vec_words++;
  end

  // ---------------- data sets ----------------
  // layer 1: K1 groups, M1 mantissa bits, NT1 tiles
  localparam int K1 = 2, M1 = 4, NT1 = 4, MO1 = 3;
  localparam int K2 = 1, NT2 = 12;
  localparam int MV = 6;
  logic [15:0]       a1m [K1][ROWS][GS];
  logic              a1s [K1][ROWS][GS];
  logic [4:0]        a1e [K1][ROWS];
  logic signed [3:0] w1  [NT1*K1][COLS][GS];
  fp16_t             s1  [NT1*K1][COLS];
  logic signed [3:0] w2  [NT2*K2][COLS][GS];
  fp16_t             s2  [NT2*K2][COLS];
  logic [15:0]       vv  [LANES][GS];

  task automatic ext_write_m(input int a, input logic [PLANE_W-1:0] d);
    @(negedge clk); ext_m_we = 1; ext_m_addr = 13'(a); ext_m_wdata = d;
    @(negedge clk); ext_m_we = 0;
  endtask
  task automatic ext_write_e(input int a, input logic [EWORD_W-1:0] d);
    @(negedge clk); ext_e_we = 1; ext_e_addr = 13'(a); ext_e_wdata = d;
    @(negedge clk); ext_e_we = 0;
  endtask
  task automatic ext_read(input int a, input int ea, output logic [PLANE_W-1:0] d, output logic [EWORD_W-1:0] e);
    @(negedge clk); ext_m_re = 1; ext_m_addr = 13'(a); ext_e_re = 1; ext_e_addr = 13'(ea);
    @(negedge clk); ext_m_re = 0; ext_e_re = 0;
    d = ext_m_rdata; e = ext_e_rdata;
  endtask
  task automatic write_weights(input int base, input int nw, input bit second);
    for (int i = 0; i < nw; i++) begin
      logic [WW-1:0] wd;
      wd = '0;
      for (int c = 0; c < COLS; c++) begin
        for (int j = 0; j < GS; j++) wd[c*256 + 4*j +: 4] = second ? w2[i][c][j] : w1[i][c][j];
        wd[COLS*256 + 16*c +: 16] = second ? s2[i][c] : s1[i][c];
      end
      @(negedge clk); ext_w_we = 1; ext_w_addr = 11'(base + i); ext_w_wdata = wd;
      @(negedge clk); ext_w_we = 0;
    end
  endtask

  function automatic instr_t mk(opcode_e op, int m_in, int m_out, bit comp, int kg, int nt,
                                int ab, int aeb, int wb, int ob, int oeb);
    instr_t i;
    i.op = op; i.m_in = 5'(m_in); i.m_out = 5'(m_out); i.compress = comp;
    i.k_groups = 10'(kg); i.n_tiles = 8'(nt); i.act_base = 13'(ab); i.act_exp_base = 13'(aeb);
    i.w_base = 11'(wb); i.out_base = 13'(ob); i.out_exp_base = 13'(oeb);
    return i;
  endfunction

  // decoded layer-1 output (hardware values), token r, channel n
  real l1_hw [ROWS][64];
  real l1_ref [ROWS][64], l1_abs [ROWS][64];

  initial begin : main
    int t_run, t_done;
    logic [PLANE_W-1:0] d;
    logic [EWORD_W-1:0] e;
    imem_we = 0; run = 0; imem_addr = 0; imem_wdata = '0;
    ext_m_we = 0; ext_m_re = 0; ext_e_we = 0; ext_e_re = 0; ext_w_we = 0;
    ext_m_addr = 0; ext_e_addr = 0; ext_w_addr = 0; ext_m_wdata = '0; ext_e_wdata = '0; ext_w_wdata = '0;
    vec_valid = 0; vec_data = '0;
    // random data
    for (int k = 0; k < K1; k++)
      for (int r = 0; r < ROWS; r++) begin
        a1e[k][r] = 5'(12 + $urandom_range(4));
        for (int j = 0; j < GS; j++) begin
          a1m[k][r][j] = 16'($urandom_range((1 << M1) - 1));
          a1s[k][r][j] = 1'($urandom);
        end
      end
    for (int i = 0; i < NT1*K1; i++)
      for (int c = 0; c < COLS; c++) begin
        s1[i][c] = rand_half(12, 14);
        for (int j = 0; j < GS; j++) w1[i][c][j] = 4'($urandom);
      end
    for (int i = 0; i < NT2*K2; i++)
      for (int c = 0; c < COLS; c++) begin
        s2[i][c] = rand_half(12, 14);
        for (int j = 0; j < GS; j++) w2[i][c][j] = 4'($urandom);
      end
    for (int l = 0; l < LANES; l++)
      for (int j = 0; j < GS; j++) vv[l][j] = rand_half(10, 17);

    repeat (3) @(posedge clk);
    rst_n = 1;

    // load layer-1 activations in bit-plane layout: sign word then M1 planes per group
    for (int k = 0; k < K1; k++) begin
      d = '0; e = '0;
      for (int r = 0; r < ROWS; r++) begin
        e[5*r +: 5] = a1e[k][r];
        for (int j = 0; j < GS; j++) d[r*GS + j] = a1s[k][r][j];
      end
      ext_write_m(k*(M1+1), d);
      ext_write_e(k, e);
      for (int b = 0; b < M1; b++) begin
        d = '0;
        for (int r = 0; r < ROWS; r++) for (int j = 0; j < GS; j++) d[r*GS + j] = a1m[k][r][j][M1-1-b];
        ext_write_m(k*(M1+1) + 1 + b, d);
      end
    end
    write_weights(0, NT1*K1, 0);
    write_weights(16, NT2*K2, 1);

    // program
    imem_we = 1;
    @(negedge clk); imem_addr = 0; imem_wdata = mk(OP_GEMM, M1, MO1, 1, K1, NT1, 0, 0, 0, 100, 50);
    @(negedge clk); imem_addr = 1; imem_wdata = mk(OP_GEMM, MO1, 0, 0, K2, NT2, 100, 50, 16, 200, 0);
    @(negedge clk); imem_addr = 2; imem_wdata = mk(OP_VEC, 0, MV, 1, 0, 4, 0, 0, 0, 300, 60);
    @(negedge clk); imem_addr = 3; imem_wdata = mk(OP_END, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    @(negedge clk); imem_we = 0;
    run = 1; t_run = cycle;
    @(negedge clk); run = 0;

    // vector-unit words, offered once the controller is in VEC mode
    fork
      begin
        for (int l = 0; l < LANES; ) begin
          @(negedge clk);
          vec_valid = 1;
          for (int j = 0; j < GS; j++) vec_data[16*j +: 16] = vv[l][j];
          @(posedge clk);
          if (vec_ready) l++;
        end
        @(negedge clk); vec_valid = 0;
      end
      begin
        while (!done) @(posedge clk);
        t_done = cycle;
      end
    join
    $display("program ran in %0d cycles", t_done - t_run);

    // ---- layer 1: compressed output group at 100..103, exponents at 50
    for (int r = 0; r < ROWS; r++)
      for (int n = 0; n < 64; n++) begin
        real acc, ab;
        acc = 0.0; ab = 0.0;
        for (int k = 0; k < K1; k++) begin
          int wi;
          real dd;
          wi = (n / 16) * K1 + k;
          dd = 0.0;
          for (int j = 0; j < GS; j++) begin
            real t;
            t  = real'(a1m[k][r][j]) * real'(w1[wi][n % 16][j]) * pow2(int'(a1e[k][r]) - 15 - (M1 - 1));
            dd = a1s[k][r][j] ? dd - t : dd + t;
            ab = ab + fabs(t) * fabs(half_to_real(s1[wi][n % 16]));
          end
          acc = acc + dd * half_to_real(s1[wi][n % 16]);
        end
        l1_ref[r][n] = acc; l1_abs[r][n] = ab;
      end
    begin
      logic [PLANE_W-1:0] words [MO1+1];
      logic [EWORD_W-1:0] ew;
      for (int i = 0; i <= MO1; i++) ext_read(100 + i, 50, words[i], ew);
      for (int r = 0; r < ROWS; r++) begin
        int es;
        real step, maxref;
        es = int'(ew[5*r +: 5]);
        step = pow2(es - 15 - (MO1 - 1));
        maxref = 0.0;
        for (int n = 0; n < 64; n++) begin
          int t;
          t = 0;
          for (int b = 0; b < MO1; b++) t = t * 2 + int'(words[1 + b][r*GS + n]);
          l1_hw[r][n] = words[0][r*GS + n] ? -real'(t) * step : real'(t) * step;
          if (fabs(l1_ref[r][n]) > maxref) maxref = fabs(l1_ref[r][n]);
          checks++;
          if (fabs(l1_hw[r][n] - l1_ref[r][n]) > step + 8.0e-3 * l1_abs[r][n] + 1.0e-3 * fabs(l1_ref[r][n])) begin
            failures++;
            if (failures < 10) $display("FAIL L1 r%0d n%0d hw %g ref %g step %g", r, n, l1_hw[r][n], l1_ref[r][n], step);
          end
        end
        // the shared exponent is that of the group's largest value
        checks++;
        if (maxref > 0.0 && (maxref >= pow2(es - 14) * 1.01 || maxref < pow2(es - 15) * 0.99)) begin
          failures++; $display("FAIL L1 shared exponent %0d for max %g", es, maxref);
        end
      end
    end

    // ---- layer 2: plain FP16 at 200 + 16*q + r, input = hardware layer-1 values
    for (int q = 0; q < NT2 / 4; q++)
      for (int r = 0; r < ROWS; r++) begin
        logic [PLANE_W-1:0] word;
        logic [EWORD_W-1:0] ew;
        ext_read(200 + 16*q + r, 0, word, ew);
        for (int ch = 0; ch < 64; ch++) begin
          int tile, c;
          real acc, ab, got;
          tile = 4*q + ch / 16; c = ch % 16;
          acc = 0.0; ab = 0.0;
          for (int j = 0; j < GS; j++) begin
            real t;
            t = l1_hw[r][j] * real'(w2[tile][c][j]);
            acc = acc + t; ab = ab + fabs(t);
          end
          acc = acc * half_to_real(s2[tile][c]);
          ab  = ab * fabs(half_to_real(s2[tile][c]));
          got = half_to_real(word[16*ch +: 16]);
          checks++;
          if (fabs(got - acc) > 4.0e-3 * ab + 1.0e-3 * fabs(acc)) begin
            failures++;
            if (failures < 20) $display("FAIL L2 q%0d r%0d ch%0d got %g ref %g", q, r, ch, got, acc);
          end
        end
      end

    // ---- VEC: group at 300..306, exponent at 60, bit-exact
    begin
      logic [PLANE_W-1:0] words [MV+1];
      logic [EWORD_W-1:0] ew;
      for (int i = 0; i <= MV; i++) ext_read(300 + i, 60, words[i], ew);
      for (int l = 0; l < LANES; l++) begin
        int emax;
        emax = 0;
        for (int j = 0; j < GS; j++) if (int'(vv[l][j][14:10]) > emax) emax = int'(vv[l][j][14:10]);
        checks++;
        if (int'(ew[5*l +: 5]) != emax) begin failures++; $display("FAIL VEC exp lane %0d", l); end
        for (int j = 0; j < GS; j++) begin
          longint t;
          t = (longint'({1'b1, vv[l][j][9:0]}) << (MV - 1)) >> (10 + emax - int'(vv[l][j][14:10]));
          checks++;
          if (words[0][l*GS + j] != vv[l][j][15]) begin failures++; $display("FAIL VEC sign"); end
          for (int b = 0; b < MV; b++) begin
            checks++;
            if (words[1 + b][l*GS + j] != t[MV - 1 - b]) begin
              failures++;
              if (failures < 20) $display("FAIL VEC lane %0d elem %0d plane %0d", l, j, b);
            end
          end
        end
      end
    end

    // ---- mechanisms
    $display("mechanisms: stall cycles %0d, weight loads during compute %0d, BPC groups %0d, bypass words %0d, vector words %0d",
             n_stall, n_wload_overlap, n_bpc_groups, n_bypass_words, n_vec_words);
    checks += 5;
    if (n_stall == 0)         begin failures++; $display("FAIL: no stall happened"); end
    if (n_wload_overlap == 0) begin failures++; $display("FAIL: no overlapped weight load"); end
    if (n_bpc_groups != 2)    begin failures++; $display("FAIL: %0d BPC groups, expected 2", n_bpc_groups); end
    if (n_bypass_words != 48) begin failures++; $display("FAIL: %0d bypass words, expected 48", n_bypass_words); end
    if (n_vec_words != 16)    begin failures++; $display("FAIL: %0d vector words, expected 16", n_vec_words); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
