// tb_apu: self-checking testbench of the APU (Anda PE + FP accumulator).
//
// Builds random dot products of K Anda groups (random mantissa length 1..16,
// signs, shared exponents, INT4 weights, FP16 weight scales), streams them into
// the APU as sign cycle plus M bit-plane cycles per group, and compares the
// FP16 result with a real-valued reference computed from the integer
// mantissas, within the error that truncating FP16/FP32 arithmetic allows.
// Also checks the latency (result 3 cycles after the last plane) and, with
// back-to-back dot products, that the weight double buffer and the
// accumulator restart work.
module tb_apu;
  import anda_pkg::*;
  import tb_util_pkg::*;

  localparam int KMAX = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 w_load, sign_valid, group_first, group_last, plane_valid, plane_last;
  logic [GS*WBITS-1:0]  w_in;
  fp16_t                w_scale_in;
  logic [GS-1:0]        sign_plane, plane;
  logic [EXP_W-1:0]     exp_in;
  logic [MLEN_W-1:0]    m_len;
  logic                 out_valid;
  fp16_t                out_half;

  apu dut (.*);

  int checks = 0, failures = 0;

  // one dot product
  int            M, K;
  logic [15:0]   mant [KMAX][GS];
  logic          sgn  [KMAX][GS];
  logic [4:0]    ex   [KMAX];
  logic signed [3:0] w [KMAX][GS];
  fp16_t         sc   [KMAX];
  real           ref_v, ref_abs;
  int            last_plane_cycle, cycle;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic make_case(input int m, input int k);
    M = m; K = k;
    for (int g = 0; g < K; g++) begin
      ex[g] = 5'(8 + $urandom_range(12));
      sc[g] = rand_half(12, 16);
      for (int j = 0; j < GS; j++) begin
        mant[g][j] = 16'($urandom) & 16'((1 << M) - 1);
        sgn[g][j]  = 1'($urandom);
        w[g][j]    = 4'($urandom);
      end
    end
    ref_v = 0.0; ref_abs = 0.0;
    for (int g = 0; g < K; g++) begin
      real d, da;
      d = 0.0; da = 0.0;
      for (int j = 0; j < GS; j++) begin
        real t;
        t  = real'(mant[g][j]) * real'(w[g][j]) * pow2(int'(ex[g]) - 15 - (M - 1));
        d  = sgn[g][j] ? d - t : d + t;
        da = da + fabs(t);
      end
      ref_v   = ref_v + d * half_to_real(sc[g]);
      ref_abs = ref_abs + da * fabs(half_to_real(sc[g]));
    end
  endtask

  task automatic load_w(input int g);
    w_load = 1'b1;
    for (int j = 0; j < GS; j++) w_in[4*j +: 4] = w[g][j];
    w_scale_in = sc[g];
  endtask

  // stream the current case; weights of group g+1 load during group g
  task automatic run_case();
    @(negedge clk);
    load_w(0);
    @(negedge clk);
    w_load = 1'b0;
    for (int g = 0; g < K; g++) begin
      sign_valid = 1'b1; group_first = (g == 0); group_last = (g == K - 1);
      exp_in = ex[g];
      for (int j = 0; j < GS; j++) sign_plane[j] = sgn[g][j];
      m_len = MLEN_W'(M);
      @(negedge clk);
      sign_valid = 1'b0;
      for (int b = M - 1; b >= 0; b--) begin
        plane_valid = 1'b1;
        plane_last  = (b == 0);
        for (int j = 0; j < GS; j++) plane[j] = mant[g][j][b];
        if (b == M - 1 && g + 1 < K) load_w(g + 1);
        if (b == 0) last_plane_cycle = cycle;
        @(negedge clk);
        w_load = 1'b0;
      end
      plane_valid = 1'b0; plane_last = 1'b0;
    end
  endtask

  task automatic wait_check();
    int n;
    n = 0;
    while (!out_valid && n < 40) begin @(posedge clk); #1; n++; end
    checks++;
    if (!out_valid) begin
      failures++; $display("FAIL: no output");
    end else begin
      real got, err;
      got = half_to_real(out_half);
      err = fabs(got - ref_v);
      if (err > 4.0e-3 * ref_abs + 1.0e-4 * fabs(ref_v)) begin
        failures++;
        $display("FAIL M=%0d K=%0d got %g ref %g (abs sum %g)", M, K, got, ref_v, ref_abs);
      end
      checks++;
      if (cycle - last_plane_cycle != 3) begin
        failures++;
        $display("FAIL latency %0d cycles, expected 3", cycle - last_plane_cycle);
      end
    end
  endtask

  initial begin
    cycle = 0;
    w_load = 0; sign_valid = 0; group_first = 0; group_last = 0; plane_valid = 0; plane_last = 0;
    w_in = '0; w_scale_in = '0; sign_plane = '0; plane = '0; exp_in = '0; m_len = 5'd4;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed: one group, all elements value 1.0 (M=4: mantissa 8, exp 15), weights 1, scale 1
    M = 4; K = 1;
    for (int j = 0; j < GS; j++) begin mant[0][j] = 16'd8; sgn[0][j] = 1'b0; w[0][j] = 4'sd1; end
    ex[0] = 5'd15; sc[0] = 16'h3c00; ref_v = 64.0; ref_abs = 64.0;
    run_case(); wait_check();
    checks++;
    if (out_half != 16'h5400) begin failures++; $display("FAIL directed: %h", out_half); end
    // random
    for (int t = 0; t < 60; t++) begin
      make_case(1 + int'($urandom_range(15)), 1 + int'($urandom_range(KMAX - 1)));
      run_case(); wait_check();
    end
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
