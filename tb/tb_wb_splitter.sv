// tb_wb_splitter: 5 bias packages then 3-package chunks over 4 targets, with
// random target back-pressure; checks the target and bias flag of every
// package against the distribution rule, then repeats with chunk 1.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_wb_splitter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; logic [15:0] n_bias = 5, chunk = 3;
  logic [15:0] in_d; logic in_v = 0, in_r; logic [15:0] out_d; logic out_b;
  logic [3:0] out_v, out_r;
  int sent = 0, checks = 0, failures = 0;

  wb_splitter #(.PKG_W(16), .N(4)) dut (.clk, .rst_n, .start, .n_bias, .chunk, .in_data(in_d),
    .in_valid(in_v), .in_ready(in_r), .out_data(out_d), .out_is_bias(out_b), .out_valid(out_v),
    .out_ready(out_r));
  `WATCHDOG(clk, 5000)

  function automatic int exp_tgt(int p, int nb, int ch);
    if (p < nb) return p % 4;
    return ((p - nb) / ch) % 4;
  endfunction

  always @(posedge clk) out_r <= 4'($urandom);

  task automatic run(int nb, int ch, int total);
    n_bias <= 16'(nb); chunk <= 16'(ch); start <= 1; @(posedge clk); start <= 0;
    for (int p = 0; p < total; p++) begin
      in_d <= 16'(p); in_v <= 1;
      do @(posedge clk); while (!in_r);
      `CHECK(out_v == 4'(1 << exp_tgt(p, nb, ch)) && out_d == 16'(p) && out_b == (p < nb),
             $sformatf("package %0d to %b bias %0d", p, out_v, out_b))
    end
    in_v <= 0; @(posedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    run(5, 3, 5 + 24);
    run(4, 1, 4 + 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
