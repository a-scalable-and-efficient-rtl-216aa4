// tb_weight_buffer: reduced sizes (8-bit data, 32-bit beats, 2 PEs, room for
// 4 kernels of 3x3x8). Convolution: 4 biases and 4 kernels are streamed in;
// each PE must then replay its two kernels (kernel 2*slot + PE) word by
// word with the matching bias, window after window. Fully connected: biases
// and interleaved weights must come out of each PE's stream in order.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_weight_buffer;
  import cnna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; layer_cfg_t cfg;
  logic [31:0] w_d; logic w_v = 0, w_r;
  logic [1:0][95:0] o_d; logic [1:0][7:0] o_b; logic [1:0] o_v; logic o_r = 0;
  int checks = 0, failures = 0;
  logic [95:0] pk [4][6];

  weight_buffer #(.P_DATA_W(8), .P_PE_BW(32), .P_DB_OUT_BW(3), .P_PE_N(2), .P_KERNELS_N(4),
                  .P_MAX_DEPTH(8), .P_MAX_WIN(3)) dut (
    .clk, .rst_n, .start, .cfg, .w_tdata(w_d), .w_tvalid(w_v), .w_tready(w_r),
    .out_data(o_d), .out_bias(o_b), .out_valid(o_v), .out_ready(o_r));
  `WATCHDOG(clk, 20000)

  task automatic put_pkg(logic [95:0] p);
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); w_d = p[i*32 +: 32]; w_v = 1;
      while (!w_r) @(negedge clk);
      @(posedge clk); #1 w_v = 0;
      if ($urandom_range(0, 3) == 0) @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    cfg = '0; cfg.op = OP_CONV; cfg.win = 3; cfg.depth = 8; cfg.n_kernels = 4; cfg.replay = 2;
    start = 1; @(posedge clk); #1 start = 0;
    for (int k = 0; k < 4; k++) put_pkg(96'(8'(k + 1)));
    for (int k = 0; k < 4; k++) for (int j = 0; j < 6; j++) begin
      pk[k][j] = {$urandom, $urandom, $urandom};
      if (k == 3 && j == 5) begin @(negedge clk); `CHECK(o_v == 2'b00, "not valid before loaded") end
      put_pkg(pk[k][j]);
    end
    for (int win = 0; win < 3; win++) for (int r = 0; r < 2; r++) for (int j = 0; j < 6; j++) begin
      @(negedge clk); o_r = $urandom_range(0, 3) != 0;
      while (!o_r) begin @(negedge clk); o_r = $urandom_range(0, 1); end
      `CHECK(o_v == 2'b11, "both streams valid")
      for (int n = 0; n < 2; n++)
        `CHECK(o_d[n] == pk[2*r + n][j] && o_b[n] == 8'(2*r + n + 1),
               $sformatf("conv win %0d PE %0d slot %0d word %0d", win, n, r, j))
      @(posedge clk); #1 o_r = 0;
    end
    // fully connected: 2 biases then 5 packages per neuron, interleaved
    cfg.op = OP_FC; start = 1; @(posedge clk); #1 start = 0;
    fork
      begin
        put_pkg(96'(8'h21)); put_pkg(96'(8'h22));
        for (int j = 0; j < 5; j++) for (int n = 0; n < 2; n++) begin
          pk[n][j] = {$urandom, $urandom, $urandom}; put_pkg(pk[n][j]);
        end
      end
      begin
        for (int j = 0; j < 5; j++) begin
          @(negedge clk);
          while (o_v != 2'b11) @(negedge clk);
          `CHECK(o_d[0] == pk[0][j] && o_d[1] == pk[1][j] && o_b[0] == 8'h21 && o_b[1] == 8'h22,
                 $sformatf("fc package %0d", j))
          o_r = 1; @(posedge clk); #1 o_r = 0;
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
