// tb_wb_stream_buffer: convolution mode (3 kernels of 4 words, replayed
// over many windows, checking word, slot order and bias) and fully connected
// mode (FIFO order under random back-pressure, refusal when full).
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_wb_stream_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, fc = 0, loaded = 0; logic [15:0] kw = 4, replay = 3;
  logic [31:0] in_d; logic in_b = 0, in_v = 0, in_r; logic [31:0] out_d; logic [7:0] out_bias;
  logic out_v, out_r = 0;
  int checks = 0, failures = 0;

  wb_stream_buffer #(.PKG_W(32), .DATA_W(8), .DEPTH(16), .BIAS_SLOTS(4)) dut (.clk, .rst_n, .start,
    .fc_mode(fc), .kw, .replay, .loaded, .in_data(in_d), .in_is_bias(in_b), .in_valid(in_v),
    .in_ready(in_r), .out_data(out_d), .out_bias(out_bias), .out_valid(out_v), .out_ready(out_r));
  `WATCHDOG(clk, 20000)

  task automatic put(logic [31:0] v, logic b);
    @(negedge clk);
    in_d = v; in_b = b; in_v = 1;
    while (!in_r) @(negedge clk);
    @(posedge clk);
    #1 in_v = 0;
  endtask

  initial begin
    int got[$];
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    // convolution
    start <= 1; @(posedge clk); start <= 0;
    for (int s = 0; s < 3; s++) put(32'(8'h10 + s), 1);
    for (int s = 0; s < 3; s++) for (int w = 0; w < 4; w++) put(32'(s * 100 + w), 0);
    @(posedge clk); #1;
    `CHECK(!out_v, "not valid before loaded")
    loaded <= 1;
    for (int win = 0; win < 4; win++) begin
      out_r <= 1;
      for (int s = 0; s < 3; s++) for (int w = 0; w < 4; w++) begin
        @(negedge clk);
        `CHECK(out_v, "valid once loaded")
        `CHECK(out_d == 32'(s * 100 + w) && out_bias == 8'(8'h10 + s), $sformatf("conv w%0d s%0d got %0d bias %h", w, s, out_d, out_bias))
        @(posedge clk);
      end
      out_r <= 0; @(posedge clk);
    end
    out_r <= 0; loaded <= 0;
    // fully connected: FIFO
    fc <= 1; start <= 1; @(posedge clk); start <= 0; @(posedge clk); #1;
    `CHECK(!out_v, "fc empty")
    put(32'h55, 1);
    fork
      for (int i = 0; i < 40; i++) put(32'(1000 + i), 0);
      begin
        while (got.size() < 40) begin
          out_r <= $urandom_range(0, 3) == 0;
          @(posedge clk);
          if (out_v && out_r) begin
            `CHECK(out_bias == 8'h55, "fc bias")
            got.push_back(int'(out_d));
          end
        end
      end
    join
    foreach (got[i]) `CHECK(got[i] == 1000 + i, $sformatf("fc order %0d", i))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
