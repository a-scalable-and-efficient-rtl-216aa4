// tb_clb_shift_buffer: writes a long sequence into a shift buffer of active
// size 6 (depth 12) and, at random points, rewinds and reads the last six
// samples twice (a window and its replay), oldest first.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_clb_shift_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0, rewind = 0, adv = 0; logic [31:0] din = 0, dout;
  logic [3:0] size = 6;
  int checks = 0, failures = 0;
  logic [31:0] hist[$];

  clb_shift_buffer #(.W(32), .DEPTH(12)) dut (.clk, .rst_n, .clear(1'b0), .size, .we, .din,
    .rewind, .rd_adv(adv), .dout);
  `WATCHDOG(clk, 5000)

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      din = $urandom; we = 1; hist.push_back(din);
      rewind = (i >= 5) && ($urandom_range(0, 2) == 0);
      @(posedge clk); #1 we = 0;
      if (rewind) begin
        rewind = 0;
        for (int rep = 0; rep < 2; rep++) for (int j = 0; j < 6; j++) begin
          @(negedge clk); adv = 1;
          `CHECK(dout == hist[hist.size() - 6 + j], $sformatf("sample %0d rep %0d after write %0d", j, rep, i))
          @(posedge clk); #1 adv = 0;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
