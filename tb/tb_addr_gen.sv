// tb_addr_gen: self-checking testbench of the address generator.
//
// Runs GeMM instructions with different tile counts, group counts and mantissa
// lengths and compares every issued activation, exponent and weight read (and
// its tags) with a list built here from the loop nest
//   for n in tiles: for k in groups: sign word, then planes 1..M
// (weights: word w_base + i for the i-th group, the first one before the first
// sign word, later ones at the previous group's first plane). quad_done is
// held back for a while to check that a new set of four tiles stalls until
// the set before the previous one is done, and that issue takes
// 1 + tiles*groups*(1+M) cycles when nothing stalls. The write counters are
// checked too.
module tb_addr_gen;
  import anda_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, quad_done, busy, done, stall, wr_init, wr_word, wr_is_sign;
  instr_t      instr;
  logic        a_rd_en, e_rd_en, w_rd_en, tag_is_sign, tag_is_last, tag_g_first, tag_g_last;
  logic [12:0] a_rd_addr, e_rd_addr, wr_addr, wr_exp_addr;
  logic [10:0] w_rd_addr;

  addr_gen dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // expected read stream
  typedef struct { int a; int e; bit sign; bit last; bit gf; bit gl; } aread_t;
  aread_t exp_a [$];
  int     exp_w [$];
  int     stalls;

  always @(posedge clk) if (rst_n) begin
    if (stall) stalls++;
    if (a_rd_en) begin
      aread_t x;
      checks++;
      if (exp_a.size() == 0) begin failures++; $display("FAIL: unexpected read %0d", a_rd_addr); end
      else begin
        x = exp_a.pop_front();
        if (int'(a_rd_addr) != x.a || tag_is_sign != x.sign || tag_is_last != x.last ||
            tag_g_first != x.gf || tag_g_last != x.gl || e_rd_en != x.sign ||
            (x.sign && int'(e_rd_addr) != x.e)) begin
          failures++;
          $display("FAIL read: addr %0d exp %0d sign %b last %b gf %b gl %b; want %0d %0d %b %b %b %b",
                   a_rd_addr, e_rd_addr, tag_is_sign, tag_is_last, tag_g_first, tag_g_last,
                   x.a, x.e, x.sign, x.last, x.gf, x.gl);
        end
      end
    end
    if (w_rd_en) begin
      checks++;
      if (exp_w.size() == 0 || int'(w_rd_addr) != exp_w.pop_front()) begin
        failures++; $display("FAIL weight read %0d", w_rd_addr);
      end
    end
  end

  task automatic run(input int nt, input int kg, input int m, input bit hold_quads);
    int t0, t1;
    instr = '0;
    instr.op = OP_GEMM; instr.m_in = 5'(m); instr.k_groups = 10'(kg); instr.n_tiles = 8'(nt);
    instr.act_base = 13'd100; instr.act_exp_base = 13'd20; instr.w_base = 11'd7;
    instr.out_base = 13'd3000; instr.out_exp_base = 13'd500;
    for (int n = 0; n < nt; n++)
      for (int k = 0; k < kg; k++) begin
        exp_a.push_back('{100 + k*(m+1), 20 + k, 1, 0, k == 0, k == kg-1});
        for (int p = 1; p <= m; p++) exp_a.push_back('{100 + k*(m+1) + p, 0, 0, p == m, k == 0, k == kg-1});
        exp_w.push_back(7 + n*kg + k);
      end
    stalls = 0;
    @(negedge clk);
    start = 1; wr_init = 1;
    t0 = cycle;
    @(negedge clk);
    start = 0; wr_init = 0;
    fork
      begin
        // release quads: immediately, or late when hold_quads
        for (int q = 0; q < nt / 4; q++) begin
          if (hold_quads) repeat (40) @(negedge clk);
          else @(negedge clk);
          quad_done = 1; @(negedge clk); quad_done = 0;
        end
      end
      begin
        while (!done) @(posedge clk);
        t1 = cycle;
      end
    join
    checks += 3;
    if (exp_a.size() != 0 || exp_w.size() != 0) begin
      failures++; $display("FAIL: %0d reads / %0d weight reads missing", exp_a.size(), exp_w.size());
    end
    if (!hold_quads && t1 - t0 != 1 + 1 + nt*kg*(1+m)) begin
      failures++; $display("FAIL: issue took %0d cycles, expected %0d", t1 - t0, 2 + nt*kg*(1+m));
    end
    if (hold_quads && nt > 8 && stalls == 0) begin failures++; $display("FAIL: no stall seen"); end
    if (!hold_quads && stalls != 0) begin failures++; $display("FAIL: unexpected stall"); end
    // write counters
    @(negedge clk);
    wr_word = 1; wr_is_sign = 1; @(negedge clk);
    wr_is_sign = 0; repeat (3) @(negedge clk);
    wr_word = 0; #1;
    checks++;
    if (wr_addr != 13'd3004 || wr_exp_addr != 13'd501) begin
      failures++; $display("FAIL write counters %0d %0d", wr_addr, wr_exp_addr);
    end
  endtask

  initial begin
    start = 0; quad_done = 0; wr_init = 0; wr_word = 0; wr_is_sign = 0; instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(4, 2, 3, 0);
    run(8, 1, 1, 0);
    run(12, 3, 16, 0);
    run(16, 1, 2, 1);
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
