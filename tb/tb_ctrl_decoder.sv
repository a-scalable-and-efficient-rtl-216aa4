// tb_ctrl_decoder: sends two layer configurations over CTRL and checks the
// decoded fields, the single-cycle start pulse, that CTRL is refused while
// a layer runs and that layer_done re-opens it.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_ctrl_decoder;
  import cnna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] d; logic v = 0, rdy, done = 0, start, busy;
  layer_cfg_t cfg, exp_c;
  int checks = 0, failures = 0, starts = 0;

  ctrl_decoder dut (.clk, .rst_n, .ctrl_tdata(d), .ctrl_tvalid(v), .ctrl_tready(rdy),
                    .layer_done(done), .cfg, .start, .busy);
  `WATCHDOG(clk, 2000)
  always @(posedge clk) if (start) starts++;

  task automatic send(layer_cfg_t c);
    logic [CTRL_WORDS*32-1:0] w = pack_cfg(c);
    for (int i = 0; i < CTRL_WORDS; i++) begin
      d <= w[i*32 +: 32]; v <= 1;
      do @(posedge clk); while (!rdy);
      if ($urandom_range(0, 1)) begin v <= 0; @(posedge clk); end
    end
    v <= 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int t = 0; t < 4; t++) begin
      exp_c = '0;
      exp_c.op = op_e'(t % 3); exp_c.act = act_e'(t[0]); exp_c.pool = pool_e'((t + 1) % 3);
      exp_c.win = 8'($urandom_range(1, 3)); exp_c.stride = 8'($urandom_range(1, 2));
      exp_c.pad = 8'($urandom_range(0, 2)); exp_c.row_size = 16'($urandom);
      exp_c.depth = 16'($urandom); exp_c.replay = 16'($urandom); exp_c.n_kernels = 16'($urandom);
      exp_c.out_size = 16'($urandom); exp_c.pre_depth = 16'($urandom);
      exp_c.scale = $urandom; exp_c.fc_beats = $urandom;
      starts = 0;
      send(exp_c);
      @(posedge clk); #1;
      `CHECK(busy && !rdy, "busy and CTRL refused after a full packet")
      `CHECK(cfg == exp_c, $sformatf("config %0d decoded", t))
      `CHECK(starts == 1, "one start pulse")
      repeat (5) @(posedge clk);
      `CHECK(starts == 1 && busy, "no further start while running")
      done <= 1; @(posedge clk); done <= 0; @(posedge clk); #1;
      `CHECK(!busy && rdy, "layer_done releases CTRL")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
