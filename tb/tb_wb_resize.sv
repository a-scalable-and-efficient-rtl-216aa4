// tb_wb_resize: random beats with random valid/ready gaps; every package
// must be the concatenation of three beats in order (first beat lowest),
// and with no gaps a package must leave every three cycles.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_wb_resize;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] in_d; logic in_v = 0, in_r; logic [95:0] out_d; logic out_v, out_r = 0;
  logic [31:0] beats[$]; int bi = 0, pk = 0, checks = 0, failures = 0; bit gaps = 1;
  int first_out = -1, last_out = -1, cyc = 0;

  wb_resize #(.IN_W(32), .FACTOR(3)) dut (.clk, .rst_n, .clear(1'b0), .in_data(in_d), .in_valid(in_v),
    .in_ready(in_r), .out_data(out_d), .out_valid(out_v), .out_ready(out_r));
  `WATCHDOG(clk, 5000)

  always @(posedge clk) begin
    cyc++;
    if (in_v && in_r) bi++;
    if (!in_v || in_r) begin
      in_v <= bi < beats.size() && (!gaps || $urandom_range(0, 2) != 0);
      in_d <= bi < beats.size() ? beats[bi] : '0;
    end
    if (out_v && out_r) begin
      `CHECK(out_d == {beats[3*pk+2], beats[3*pk+1], beats[3*pk]}, $sformatf("package %0d", pk))
      if (!gaps) begin if (first_out < 0) first_out = cyc; last_out = cyc; end
      pk++;
    end
    out_r <= !gaps || $urandom_range(0, 2) != 0;
  end

  initial begin
    for (int i = 0; i < 60; i++) beats.push_back($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    wait (pk == 20); repeat (3) @(posedge clk);
    gaps = 0;
    for (int i = 0; i < 60; i++) beats.push_back($urandom);
    wait (pk == 40); @(posedge clk);
    `CHECK(last_out - first_out == 3 * 19, $sformatf("II of 3 beats per package (%0d)", last_out - first_out))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
