// tb_vgg16_layers: VGG16 layer shapes on the accelerator at its default
// sizes (16-bit Q2.14, 128-bit bandwidth, 8 PEs, 3 window rows, 32 kernels).
// Three layers, each checked beat by beat against an independent model:
//  - one pass of a block-5 convolution: 14x14x512 input, 3x3 windows, pad 1,
//    32 kernels (replay 4), stitched behind 32 channels of an earlier pass,
//    i.e. the deepest kernels (192 packages) the weight buffer is built for;
//  - the block-5 2x2/2 max pooling on 14x14x512;
//  - one 8-neuron pass of the first dense layer: 7*7*512 = 25088 inputs.
// Together with the sizing of the other layers this shows that the default
// build runs every kind of VGG16 layer at full depth.
// Origin: the layer shapes are VGG16's, the network the original design was
// evaluated on. The pass split, the stimulus and the reference model are this testbench's own.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_vgg16_layers;
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

  `WATCHDOG(clk, 3000000)

  initial begin
    logic [31:0] r;
    gaps = 0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    conv_layer("l5_conv pass: 14x14x512, 32 kernels, stitched", 14, 512, 3, 1, 1, 32, 32, 1, 4096, 2000);
    axil_read(6'h14, r);
    $display("l5_conv pass took %0d cycles (status register)", r);
    `CHECK(r > 14*14*4*192, "cycle count covers every window replay")
    pool_layer("l5_pool: 2x2/2 max, 14x14x512", 14, 512, 2, 2, 0);
    fc_layer("dense_1 pass: 25088 inputs, 8 neurons", 25088 / 8, 1, 4096, 2000);
    axil_read(6'h10, r);
    `CHECK(r == 32'd3, $sformatf("layers completed = %0d", r))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
