// tb_pea: 2 PEs of 4 elements. Windows of 3 frames are offered with random
// gaps on the data and weight sides while the result side stalls for long
// stretches; every result entry must hold both PEs' outputs for the window,
// in order (the reference is computed from the frames actually accepted),
// and the array must stop firing instead of losing results.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_pea;
  localparam int N = 4, PN = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N*16-1:0] xd; logic xf, xl, xv = 0, xr;
  logic [PN-1:0][N*16-1:0] wd; logic [PN-1:0][15:0] wb; logic [PN-1:0] wv = 0; logic wr;
  logic [PN-1:0][15:0] rd; logic rv, rr = 0;
  int checks = 0, failures = 0, held = 0, got = 0;
  logic [PN-1:0][15:0] expq[$];

  pea #(.PE_N(PN), .N(N), .DATA_W(16), .FRAC(14), .ACC_W(48), .FIFO_D(8)) dut (.clk, .rst_n,
    .start(1'b0), .relu(1'b0), .scale(16'd16384), .x_data(xd), .x_first(xf), .x_last(xl),
    .x_valid(xv), .x_ready(xr), .w_data(wd), .w_bias(wb), .w_valid(wv), .w_ready(wr),
    .res_data(rd), .res_valid(rv), .res_ready(rr));
  `WATCHDOG(clk, 50000)

  longint macc [PN];
  always @(posedge clk) if (rst_n) begin
    if (xv && !xr && (&wv)) held++;
    if (xv && xr) begin
      automatic logic [PN-1:0][15:0] e;
      for (int p = 0; p < PN; p++) begin
        automatic longint a = xf ? (longint'($signed(wb[p])) <<< 14) : macc[p];
        for (int i = 0; i < N; i++)
          a += longint'($signed(xd[i*16 +: 16])) * longint'($signed(wd[p][i*16 +: 16]));
        macc[p] = a;
        begin
          automatic longint r = (a * 16384 + (longint'(1) <<< 27)) >>> 28;
          e[p] = (r > 32767) ? 16'h7fff : (r < -32768) ? 16'h8000 : 16'(r);
        end
      end
      if (xl) begin expq.push_back(e); end
    end
    if (rv && rr) begin
      `CHECK(expq.size() > 0 && rd == expq[0], $sformatf("result %0d: %h exp %h", got, rd, expq[0]))
      if (expq.size() > 0) void'(expq.pop_front());
      got++;
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      forever begin
        @(negedge clk); rr = 0;
        repeat ($urandom_range(0, 30)) @(negedge clk);
        rr = 1;
        repeat ($urandom_range(0, 30)) @(negedge clk);
      end
      for (int win = 0; win < 60; win++) begin
        for (int p = 0; p < PN; p++) wb[p] = 16'($urandom_range(0, 2000));
        for (int f = 0; f < 3; f++) begin
          @(negedge clk);
          while ($urandom_range(0, 2) == 0) begin xv = 0; wv = 0; @(negedge clk); end
          for (int i = 0; i < N; i++) begin
            xd[i*16 +: 16] = 16'($urandom_range(0, 8000) - 4000);
            for (int p = 0; p < PN; p++) wd[p][i*16 +: 16] = 16'($urandom_range(0, 8000) - 4000);
          end
          xf = (f == 0); xl = (f == 2); xv = 1; wv = '1; #1;
          while (!xr) @(negedge clk);
          @(posedge clk); #1 xv = 0; wv = 0;
        end
      end
    join_any
    rr = 1;
    repeat (20) @(posedge clk);
    `CHECK(got == 60 && expq.size() == 0, $sformatf("%0d results, %0d left", got, expq.size()))
    `CHECK(held > 0, "array held back while the result FIFO was full")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
