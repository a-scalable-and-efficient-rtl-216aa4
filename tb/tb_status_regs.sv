// tb_status_regs: reads every status register over AXI4-lite, checks the
// template numbers, the busy bit, the layer counter and the cycle count of
// the last layer, and that a write is answered with SLVERR.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_status_regs;
  import cnna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic busy = 0, done = 0; op_e op = OP_CONV;
  logic [5:0] araddr = 0, awaddr = 0; logic arvalid = 0, arready, rvalid, rready = 1;
  logic [31:0] rdata; logic [1:0] rresp, bresp; logic awvalid = 0, awready, wvalid = 0, wready, bvalid;
  int checks = 0, failures = 0;

  status_regs dut (.clk, .rst_n, .busy, .layer_done(done), .cur_op(op),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready), .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready),
    .s_wdata(32'h1234), .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid),
    .s_bready(1'b1));
  `WATCHDOG(clk, 2000)

  task automatic rd(logic [5:0] a, output logic [31:0] d, output logic [1:0] r);
    araddr <= a; arvalid <= 1;
    do @(posedge clk); while (!(arvalid && arready));
    arvalid <= 0;
    #1 d = rdata; r = rresp;
    `CHECK(rvalid, "read data valid one cycle after address")
  endtask

  initial begin
    logic [31:0] d; logic [1:0] r;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    rd(6'h00, d, r); `CHECK(d == {8'd8, 8'd3, 8'd16, 8'd14} && r == 0, $sformatf("reg0 %h", d))
    rd(6'h04, d, r); `CHECK(d == 128, "PE_BW")
    rd(6'h08, d, r); `CHECK(d == 32, "KERNELS_N")
    rd(6'h0C, d, r); `CHECK(d == 0, "idle")
    for (int l = 0; l < 3; l++) begin
      busy <= 1; op <= OP_POOL; repeat (10 + l) @(posedge clk);
      if (l == 1) begin
        rd(6'h0C, d, r); `CHECK(d == 3, $sformatf("busy pooling flags %h", d))
      end
      done <= 1; @(posedge clk); done <= 0; busy <= 0; @(posedge clk);
    end
    rd(6'h10, d, r); `CHECK(d == 3, $sformatf("layers %0d", d))
    rd(6'h14, d, r); `CHECK(d == 13, $sformatf("last layer cycles %0d", d))
    rd(6'h3C, d, r); `CHECK(r == 2'b10, "unmapped read -> SLVERR")
    awaddr <= 6'h4; awvalid <= 1; wvalid <= 1;
    do @(posedge clk); while (!bvalid);
    awvalid <= 0; wvalid <= 0;
    `CHECK(bresp == 2'b10, "write -> SLVERR")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
