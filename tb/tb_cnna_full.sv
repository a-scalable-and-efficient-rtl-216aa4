// tb_cnna_full: the accelerator at its default sizes (16-bit Q2.14 data,
// 128-bit internal bandwidth, 8 PEs, 3 window rows, 32 kernels of 3x3x512).
// One small layer of each kind: a padded 3x3 convolution with 16 kernels
// (two replays), a 2x2/2 max pooling and a fully connected split of 8
// neurons, each checked beat by beat against an independent model.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_cnna_full;
  localparam int T_DATA_W = cnna_pkg::DATA_W, T_FRAC = cnna_pkg::FRAC_W, T_PE_BW = cnna_pkg::PE_BW,
                 T_PE_N = cnna_pkg::PE_N, T_ROWS = cnna_pkg::DB_OUT_BW, T_KERNELS = cnna_pkg::KERNELS_N;
  `include "cnna_tb_body.svh"

  cnna_top dut (
    .clk, .rst_n, .ctrl_tdata, .ctrl_tvalid, .ctrl_tready, .w_tdata, .w_tvalid, .w_tready,
    .x_tdata, .x_tvalid, .x_tready, .xbuf_tdata, .xbuf_tvalid, .xbuf_tready,
    .y_tdata, .y_tvalid, .y_tlast, .y_tready,
    .s_araddr, .s_arvalid, .s_arready, .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .s_awaddr(6'd0), .s_awvalid(1'b0), .s_awready, .s_wdata(32'd0), .s_wvalid(1'b0), .s_wready,
    .s_bresp, .s_bvalid, .s_bready(1'b1));

  `WATCHDOG(clk, 400000)

  initial begin
    logic [31:0] r;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    axil_read(6'h00, r);
    `CHECK(r == {8'd8, 8'd3, 8'd16, 8'd14}, $sformatf("status word 0 = %h", r))
    conv_layer("full conv3x3 pad1", 6, 16, 3, 1, 1, 16, 0, 1, 16384, 3000);
    pool_layer("full maxpool 2x2/2", 6, 16, 2, 2, 0);
    fc_layer("full fc 8 neurons", 10, 0, 16384, 3000);
    axil_read(6'h10, r);
    `CHECK(r == 32'd3, $sformatf("layers completed = %0d", r))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
