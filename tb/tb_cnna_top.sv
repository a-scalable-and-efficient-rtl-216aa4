// tb_cnna_top: end-to-end test of the accelerator at reduced sizes.
//
// Sizes: 16-bit Q2.14 data, 64-bit internal bandwidth (4 elements per beat),
// 4 PEs, 3 window rows, 8 kernels in the weight buffer, depth up to 32.
// It runs convolutions (padding, stride 2, replay, window sizes 3/2/1,
// stitching with XBUF, ReLU and saturation), max/min/average pooling and
// fully connected splits (with a partial last package), compares every Y
// beat with an independent model and reads the status registers. Each
// mechanism must occur at least once.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_cnna_top;
  localparam int T_DATA_W = 16, T_FRAC = 14, T_PE_BW = 64, T_PE_N = 4, T_ROWS = 3, T_KERNELS = 8;
  `include "cnna_tb_body.svh"

  cnna_top #(.P_DATA_W(T_DATA_W), .P_FRAC_W(T_FRAC), .P_PE_BW(T_PE_BW), .P_PE_N(T_PE_N),
             .P_DB_OUT_BW(T_ROWS), .P_KERNELS_N(T_KERNELS), .P_MAX_DEPTH(32),
             .P_LINE_WORDS(128)) dut (
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
    `CHECK(r == {8'd4, 8'd3, 8'd16, 8'd14}, $sformatf("status word 0 = %h", r))
    conv_layer("conv3x3 pad1 replay2 relu", 6, 8, 3, 1, 1, 8, 0, 1, 16384, 3000);
    conv_layer("conv3x3 stride2 stitch", 7, 4, 3, 2, 0, 4, 8, 0, 8192, 2000);
    conv_layer("conv2x2", 5, 8, 2, 1, 0, 4, 0, 0, 16384, 4000);
    conv_layer("conv1x1 replay2", 4, 12, 1, 1, 0, 8, 4, 1, 20000, 4000);
    conv_layer("conv3x3 deep saturating", 5, 32, 3, 1, 1, 8, 0, 0, 16384, 12000);
    pool_layer("maxpool 2x2/2", 6, 8, 2, 2, 0);
    pool_layer("minpool 3x3/1", 5, 4, 3, 1, 1);
    pool_layer("avgpool 2x2/2", 4, 8, 2, 2, 2);
    fc_layer("fc 7 beats", 7, 1, 16384, 8000);
    fc_layer("fc 9 beats", 9, 0, 6000, 8000);
    gaps = 0;
    conv_layer("conv no gaps", 6, 8, 3, 1, 1, 8, 0, 1, 16384, 3000);
    axil_read(6'h10, r);
    `CHECK(r == 32'd11, $sformatf("layers completed = %0d", r))
    axil_read(6'h14, r);
    `CHECK(r > 0, "cycles of last layer recorded")
    axil_read(6'h0C, r);
    `CHECK(r[0] == 1'b0, "idle after the last layer")
    $display("mechanisms: xstall=%0d ystall=%0d replay=%0d pad=%0d stride=%0d stitch=%0d pmax=%0d pmin=%0d pavg=%0d fc=%0d fc_partial=%0d relu=%0d sat=%0d",
             n_xstall, n_ystall, n_replay, n_pad, n_stride, n_stitch, n_pool_max, n_pool_min,
             n_pool_avg, n_fc, n_fc_partial, n_relu, n_sat);
    `CHECK(n_xstall > 0, "X stalled by window emission")
    `CHECK(n_ystall > 0, "Y back-pressure")
    `CHECK(n_replay > 0, "window replay")
    `CHECK(n_pad > 0, "zero padding")
    `CHECK(n_stride > 0, "stride > 1")
    `CHECK(n_stitch > 0, "stitching")
    `CHECK(n_pool_max > 0 && n_pool_min > 0 && n_pool_avg > 0, "all pooling types")
    `CHECK(n_fc > 0 && n_fc_partial > 0, "fully connected with partial package")
    `CHECK(n_relu > 0, "ReLU clipped")
    `CHECK(n_sat > 0, "saturation")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
