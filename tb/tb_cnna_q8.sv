// tb_cnna_q8: the accelerator in the 8-bit configuration with the full
// output bandwidth multiplier, [DATA_W, PE_BW, PE_N, DB_OUT_BW, KERNELS_N] =
// [8, 128, 8, 3, 42]: Q2.6 data, 16 elements per beat, 8 PEs that take three
// window rows (384 bits) per cycle, and 5 kernel slots per PE (40 kernels).
// Layers: a padded 3x3 convolution with 32 kernels (four replays), a 2x2
// stride-2 convolution stitched behind 16 earlier channels, max and average
// pooling and a fully connected split with a partial last package, each
// checked beat by beat against the reference model of the shared body.
// Origin: the configuration [8,128,8,3,42] is one of the original builds. The
// reduced depth and line length and the layer choice are this testbench's own.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_cnna_q8;
  localparam int T_DATA_W = 8, T_FRAC = 6, T_PE_BW = 128, T_PE_N = 8, T_ROWS = 3, T_KERNELS = 42;
  `include "cnna_tb_body.svh"

  cnna_top #(.P_DATA_W(T_DATA_W), .P_FRAC_W(T_FRAC), .P_PE_BW(T_PE_BW), .P_PE_N(T_PE_N),
             .P_DB_OUT_BW(T_ROWS), .P_KERNELS_N(T_KERNELS), .P_MAX_DEPTH(64), .P_LINE_WORDS(64)) dut (
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
    `CHECK(r == {8'd8, 8'd3, 8'd8, 8'd6}, $sformatf("status word 0 = %h", r))
    conv_layer("q8 conv3x3 pad1 replay4", 5, 32, 3, 1, 1, 32, 0, 1, 16, 40);
    conv_layer("q8 conv2x2 stride2", 6, 16, 2, 2, 0, 16, 16, 0, 32, 40);
    pool_layer("q8 maxpool 2x2/2", 6, 32, 2, 2, 0);
    pool_layer("q8 avgpool 3x3/1", 4, 16, 3, 1, 2);
    fc_layer("q8 fc 7 beats", 7, 0, 16, 40);
    `CHECK(n_sat > 0 || n_relu > 0, "rounding path exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
