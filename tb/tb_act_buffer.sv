// tb_act_buffer: self-checking testbench of the activation buffer at its full
// size. Writes a random pattern to a spread of mantissa and exponent addresses
// (first, last and random ones), reads them back with one-cycle latency and
// compares, then checks that a write does not disturb a neighbouring word.
module tb_act_buffer;
  import anda_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               m_rd_en, m_wr_en, e_rd_en, e_wr_en;
  logic [12:0]        m_rd_addr, m_wr_addr, e_rd_addr, e_wr_addr;
  logic [PLANE_W-1:0] m_rd_data, m_wr_data;
  logic [EWORD_W-1:0] e_rd_data, e_wr_data;

  act_buffer dut (.*);

  int checks = 0, failures = 0;
  localparam int N = 64;
  logic [12:0]        addr [N];
  logic [PLANE_W-1:0] mdat [N];
  logic [EWORD_W-1:0] edat [N];

  initial begin
    m_rd_en = 0; m_wr_en = 0; e_rd_en = 0; e_wr_en = 0;
    m_rd_addr = 0; m_wr_addr = 0; e_rd_addr = 0; e_wr_addr = 0; m_wr_data = '0; e_wr_data = '0;
    for (int i = 0; i < N; i++) begin
      addr[i] = (i == 0) ? 13'd0 : (i == 1) ? 13'h1fff : 13'(i * 127 + 3);
      for (int b = 0; b < PLANE_W / 32; b++) mdat[i][32*b +: 32] = $urandom;
      edat[i] = {16'($urandom), $urandom, $urandom};
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      m_wr_en = 1; m_wr_addr = addr[i]; m_wr_data = mdat[i];
      e_wr_en = 1; e_wr_addr = addr[i]; e_wr_data = edat[i];
    end
    @(negedge clk); m_wr_en = 0; e_wr_en = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      m_rd_en = 1; m_rd_addr = addr[i]; e_rd_en = 1; e_rd_addr = addr[i];
      @(negedge clk);
      m_rd_en = 0; e_rd_en = 0;
      checks += 2;
      if (m_rd_data != mdat[i]) begin failures++; $display("FAIL mant addr %0d", addr[i]); end
      if (e_rd_data != edat[i]) begin failures++; $display("FAIL exp addr %0d", addr[i]); end
    end
    // neighbour untouched
    @(negedge clk); m_wr_en = 1; m_wr_addr = addr[5] + 1; m_wr_data = ~mdat[5];
    @(negedge clk); m_wr_en = 0; m_rd_en = 1; m_rd_addr = addr[5];
    @(negedge clk); m_rd_en = 0;
    checks++;
    if (m_rd_data != mdat[5]) begin failures++; $display("FAIL neighbour overwritten"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
