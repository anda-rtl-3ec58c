// tb_mxu: self-checking testbench of the MXU with its activation and weight
// dispatchers.
//
// The testbench plays the buffers: it holds random Anda groups for the 16 rows
// (bit-plane words: sign word, then M plane words, plus exponent words) and
// random weight words (16 columns of 64 INT4 weights and an FP16 scale), and
// issues reads in the order the address generator uses. Every one of the 256
// FP16 outputs of the tile is compared with a real-valued reference; the tile
// must appear 5 cycles after the last plane read. Several tiles run back to
// back with different mantissa lengths.
module tb_mxu;
  import anda_pkg::*;
  import tb_util_pkg::*;

  localparam int KMAX = 3;
  localparam int WW   = COLS * (GS * WBITS + 16);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [MLEN_W-1:0] m_len;
  logic a_req_valid, a_req_is_sign, a_req_is_last, a_req_g_first, a_req_g_last, w_req_valid;
  logic [ROWS*GS-1:0]    a_mant_word;
  logic [ROWS*EXP_W-1:0] a_exp_word;
  logic [WW-1:0]         w_word;
  logic                  out_valid;
  fp16_t [ROWS-1:0][COLS-1:0] out_tile;

  mxu dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int M, K;
  logic [15:0]       mant [KMAX][ROWS][GS];
  logic              sgn  [KMAX][ROWS][GS];
  logic [4:0]        ex   [KMAX][ROWS];
  logic signed [3:0] w    [KMAX][COLS][GS];
  fp16_t             sc   [KMAX][COLS];

  // buffer models: data one cycle after the request
  logic [ROWS*GS-1:0]    amem [KMAX*17];
  logic [ROWS*EXP_W-1:0] emem [KMAX];
  logic [WW-1:0]         wmem [KMAX];
  int a_addr, e_addr, w_addr;
  always_ff @(posedge clk) begin
    if (a_req_valid) a_mant_word <= amem[a_addr];
    if (a_req_valid) a_exp_word  <= emem[e_addr];
    if (w_req_valid) w_word      <= wmem[w_addr];
  end

  task automatic make_case(input int m, input int k);
    M = m; K = k;
    for (int g = 0; g < K; g++) begin
      for (int r = 0; r < ROWS; r++) begin
        ex[g][r] = 5'(10 + $urandom_range(8));
        for (int j = 0; j < GS; j++) begin
          mant[g][r][j] = 16'($urandom) & 16'((1 << M) - 1);
          sgn[g][r][j]  = 1'($urandom);
        end
      end
      for (int c = 0; c < COLS; c++) begin
        sc[g][c] = rand_half(13, 15);
        for (int j = 0; j < GS; j++) w[g][c][j] = 4'($urandom);
      end
      // pack the buffer words
      emem[g] = '0;
      amem[g*(M+1)] = '0;
      for (int r = 0; r < ROWS; r++) begin
        emem[g][r*5 +: 5] = ex[g][r];
        for (int j = 0; j < GS; j++) amem[g*(M+1)][r*GS + j] = sgn[g][r][j];
      end
      for (int b = 0; b < M; b++) begin
        amem[g*(M+1) + 1 + b] = '0;
        for (int r = 0; r < ROWS; r++)
          for (int j = 0; j < GS; j++) amem[g*(M+1) + 1 + b][r*GS + j] = mant[g][r][j][M-1-b];
      end
      wmem[g] = '0;
      for (int c = 0; c < COLS; c++) begin
        for (int j = 0; j < GS; j++) wmem[g][c*256 + 4*j +: 4] = w[g][c][j];
        wmem[g][COLS*256 + c*16 +: 16] = sc[g][c];
      end
    end
  endtask

  function automatic real ref_out(input int r, input int c, output real absum);
    real acc;
    acc = 0.0; absum = 0.0;
    for (int g = 0; g < K; g++) begin
      real d;
      d = 0.0;
      for (int j = 0; j < GS; j++) begin
        real t;
        t = real'(mant[g][r][j]) * real'(w[g][c][j]) * pow2(int'(ex[g][r]) - 15 - (M - 1));
        d = sgn[g][r][j] ? d - t : d + t;
        absum = absum + fabs(t) * fabs(half_to_real(sc[g][c]));
      end
      acc = acc + d * half_to_real(sc[g][c]);
    end
    return acc;
  endfunction

  int last_req;
  task automatic run_case();
    @(negedge clk);
    m_len = MLEN_W'(M);
    w_req_valid = 1'b1; w_addr = 0;
    @(negedge clk);
    w_req_valid = 1'b0;
    for (int g = 0; g < K; g++) begin
      a_req_valid = 1'b1; a_req_is_sign = 1'b1; a_req_is_last = 1'b0;
      a_req_g_first = (g == 0); a_req_g_last = (g == K - 1);
      a_addr = g*(M+1); e_addr = g;
      @(negedge clk);
      a_req_is_sign = 1'b0;
      for (int p = 1; p <= M; p++) begin
        a_addr = g*(M+1) + p;
        a_req_is_last = (p == M);
        w_req_valid = (p == 1) && (g + 1 < K);
        w_addr = g + 1;
        if (p == M) last_req = cycle;
        @(negedge clk);
        w_req_valid = 1'b0;
      end
      a_req_valid = 1'b0; a_req_is_last = 1'b0;
    end
  endtask

  task automatic check_tile();
    int n;
    n = 0;
    while (!out_valid && n < 40) begin @(posedge clk); #1; n++; end
    checks++;
    if (!out_valid) begin failures++; $display("FAIL: no tile"); return; end
    checks++;
    if (cycle - last_req != 5) begin
      failures++; $display("FAIL tile latency %0d, expected 5", cycle - last_req);
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        real rv, ab, got;
        rv  = ref_out(r, c, ab);
        got = half_to_real(out_tile[r][c]);
        checks++;
        if (fabs(got - rv) > 4.0e-3 * ab + 1.0e-4 * fabs(rv)) begin
          failures++;
          if (failures < 10) $display("FAIL M=%0d K=%0d (%0d,%0d) got %g ref %g", M, K, r, c, got, rv);
        end
      end
  endtask

  initial begin
    m_len = 5'd4; a_req_valid = 0; a_req_is_sign = 0; a_req_is_last = 0; a_req_g_first = 0;
    a_req_g_last = 0; w_req_valid = 0; a_addr = 0; e_addr = 0; w_addr = 0;
    a_mant_word = '0; a_exp_word = '0; w_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6; t++) begin
      make_case((t == 0) ? 1 : (t == 1) ? 16 : 2 + int'($urandom_range(10)), 1 + int'($urandom_range(KMAX - 1)));
      run_case();
      check_tile();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
