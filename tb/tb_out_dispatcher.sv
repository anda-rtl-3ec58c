// tb_out_dispatcher: self-checking testbench of the output dispatcher.
//
// Feeds sets of four random 16x16 FP16 tiles and checks that 16 words come out,
// word r holding token r's 64 channels in tile-major order (channel 16t + c),
// that a random ready pattern is obeyed, and that quad_done pulses once per
// set after its last word.
module tb_out_dispatcher;
  import anda_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  tile_valid, out_valid, out_ready, quad_done;
  fp16_t [ROWS-1:0][COLS-1:0] tile;
  logic [WORD_W-1:0] out_data;

  out_dispatcher dut (.*);

  int checks = 0, failures = 0;
  fp16_t tiles [3][4][ROWS][COLS];
  int quads = 0;
  always @(posedge clk) if (quad_done) quads <= quads + 1;

  initial begin
    tile_valid = 1'b0; tile = '0; out_ready = 1'b0;
    for (int s = 0; s < 3; s++)
      for (int t = 0; t < 4; t++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) tiles[s][t][r][c] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 3; s++) begin
      for (int t = 0; t < 4; t++) begin
        @(negedge clk);
        tile_valid = 1'b1;
        for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) tile[r][c] = tiles[s][t][r][c];
        @(negedge clk);
        tile_valid = 1'b0;
        repeat (2) @(negedge clk);
      end
      // drain with a random ready pattern
      for (int r = 0; r < ROWS; ) begin
        @(negedge clk);
        out_ready = 1'($urandom);
        #1;
        if (out_ready) begin
          checks++;
          if (!out_valid) begin failures++; $display("FAIL: word %0d not valid", r); end
          for (int ch = 0; ch < 64; ch++) begin
            checks++;
            if (out_data[16*ch +: 16] != tiles[s][ch / 16][r][ch % 16]) begin
              failures++;
              if (failures < 10) $display("FAIL set %0d word %0d ch %0d", s, r, ch);
            end
          end
          r++;
        end
      end
      @(negedge clk);
      out_ready = 1'b0;
      @(negedge clk);
      checks++;
      if (out_valid || quads != s + 1) begin
        failures++; $display("FAIL: set %0d not finished (valid %b, quads %0d)", s, out_valid, quads);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
