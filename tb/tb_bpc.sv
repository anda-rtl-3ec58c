// tb_bpc: self-checking testbench of the bit-plane compressor (ser2par FIFO,
// FP field extractors, max exponent catchers, mantissa aligners, data
// packager).
//
// Sends lane-sets of 16 words of 64 random FP16 values (random exponent spread
// within a group, some zeros, some groups with a single value) with random
// mantissa lengths 1..16, back to back, and checks every output word: the sign
// word, the 16 shared exponents, and each of the M mantissa bit-planes against
// floor(mantissa * 2^(M-1) / 2^(10 + exponent difference)) computed here with
// integers. Also checks that the first output word follows the 16th input word
// by 3 cycles and that exactly M+1 words come out.
module tb_bpc;
  import anda_pkg::*;

  localparam int SETS = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [MLEN_W-1:0]    m_len;
  logic                 in_valid, in_ready, out_valid, out_is_sign, out_last, busy;
  logic [WORD_W-1:0]    in_data;
  logic [PLANE_W-1:0]   out_m;
  logic [EWORD_W-1:0]   out_e;

  bpc dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [15:0] vals [SETS][LANES][GS];
  int          mset [SETS];
  int          last_in_cycle [SETS];

  task automatic make_set(input int s);
    mset[s] = 1 + int'($urandom_range(15));
    for (int l = 0; l < LANES; l++) begin
      int base, spread;
      base   = 3 + int'($urandom_range(20));
      spread = int'($urandom_range(8));
      for (int j = 0; j < GS; j++) begin
        int e;
        e = base + int'($urandom_range(spread));
        vals[s][l][j] = {1'($urandom), 5'(e), 10'($urandom)};
        if ($urandom_range(9) == 0) vals[s][l][j] = 16'h0000;
        if (l == 3 && j != 5) vals[s][l][j] = 16'h0000;   // a lane with one value
      end
    end
  endtask

  // producer: sends all sets back to back
  initial begin
    in_valid = 1'b0; in_data = '0; m_len = 5'd1;
    wait (rst_n);
    for (int s = 0; s < SETS; s++) begin
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk);
        in_valid = 1'b1;
        for (int j = 0; j < GS; j++) in_data[16*j +: 16] = vals[s][l][j];
        m_len = MLEN_W'(mset[s]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (l == LANES - 1) last_in_cycle[s] = cycle;
      end
      @(negedge clk);
      in_valid = 1'b0;
    end
  end

  // consumer: checks every output word
  initial begin
    for (int s = 0; s < SETS; s++) make_set(s);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < SETS; s++) begin
      int M;
      M = mset[s];
      @(posedge clk); #1;
      while (!out_valid) begin @(posedge clk); #1; end
      checks++;
      if (cycle - last_in_cycle[s] != 3 && s == 0) begin
        failures++; $display("FAIL: first word %0d cycles after last input", cycle - last_in_cycle[s]);
      end
      for (int wd = 0; wd <= M; wd++) begin
        checks++;
        if (!out_valid || out_is_sign != (wd == 0) || out_last != (wd == M)) begin
          failures++; $display("FAIL set %0d word %0d: valid %b sign %b last %b", s, wd, out_valid, out_is_sign, out_last);
        end
        for (int l = 0; l < LANES; l++) begin
          int emax;
          emax = 0;
          for (int j = 0; j < GS; j++) if (int'(vals[s][l][j][14:10]) > emax) emax = int'(vals[s][l][j][14:10]);
          if (wd == 0) begin
            checks++;
            if (out_e[5*l +: 5] != 5'(emax)) begin
              failures++; $display("FAIL set %0d lane %0d exp %0d expected %0d", s, l, out_e[5*l +: 5], emax);
            end
          end
          for (int j = 0; j < GS; j++) begin
            logic exp_bit;
            if (wd == 0) exp_bit = vals[s][l][j][15];
            else begin
              longint mant, t;
              int e;
              e    = int'(vals[s][l][j][14:10]);
              mant = (e == 0) ? 0 : longint'({1'b1, vals[s][l][j][9:0]});
              t    = (mant << (M - 1)) >> (10 + emax - e);
              exp_bit = t[M - wd];
            end
            checks++;
            if (out_m[l*GS + j] !== exp_bit) begin
              failures++;
              if (failures < 10) $display("FAIL set %0d M=%0d word %0d lane %0d elem %0d", s, M, wd, l, j);
            end
          end
        end
        @(posedge clk); #1;
      end
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
