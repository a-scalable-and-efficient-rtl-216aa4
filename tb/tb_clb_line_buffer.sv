// tb_clb_line_buffer: writes rows of 5 words into a 3-row line buffer and
// checks that each incoming word is returned together with the words at the
// same position of the two previous rows, oldest first, across rotations.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_clb_line_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, row_end = 0; logic [2:0] addr = 0; logic [15:0] din = 0;
  logic [2:0][15:0] col;
  int checks = 0, failures = 0;
  logic [15:0] img [8][5];

  clb_line_buffer #(.W(16), .WORDS(8), .ROWS(3)) dut (.clk, .rst_n, .clear(1'b0), .we, .addr,
    .din, .row_end, .column(col));
  `WATCHDOG(clk, 2000)

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int y = 0; y < 8; y++) for (int x = 0; x < 5; x++) begin
      @(negedge clk);
      img[y][x] = 16'($urandom);
      we = 1; addr = 3'(x); din = img[y][x]; row_end = (x == 4);
      #1;
      `CHECK(col[2] == img[y][x], "current word")
      if (y >= 1) `CHECK(col[1] == img[y-1][x], $sformatf("row y-1 at %0d,%0d", y, x))
      if (y >= 2) `CHECK(col[0] == img[y-2][x], $sformatf("row y-2 at %0d,%0d", y, x))
      @(posedge clk); #1 we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
