// tb_weight_buffer: self-checking testbench of the weight buffer at its full
// size. Writes random 4352-bit words to a spread of addresses (first, last,
// random), reads them back with one-cycle latency and compares, and checks that
// reads while writing another address return the old contents.
module tb_weight_buffer;
  import anda_pkg::*;

  localparam int W = COLS * (GS * WBITS + 16);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rd_en, wr_en;
  logic [10:0]   rd_addr, wr_addr;
  logic [W-1:0]  rd_data, wr_data;

  weight_buffer dut (.*);

  int checks = 0, failures = 0;
  localparam int N = 40;
  logic [10:0]  addr [N];
  logic [W-1:0] dat  [N];

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = '0;
    for (int i = 0; i < N; i++) begin
      addr[i] = (i == 0) ? 11'd0 : (i == 1) ? 11'h7ff : 11'(i * 37 + 5);
      for (int b = 0; b < W / 32; b++) dat[i][32*b +: 32] = $urandom;
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = addr[i]; wr_data = dat[i];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = addr[i];
      wr_en = 1; wr_addr = addr[(i + 1) % N] + 11'd1; wr_data = ~dat[i];
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data != dat[i]) begin failures++; $display("FAIL addr %0d", addr[i]); end
    end
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
