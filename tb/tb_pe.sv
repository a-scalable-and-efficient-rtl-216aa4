// tb_pe: random dot products of 24 Q2.14 pairs over windows of 1..6
// frames, fed back to back (II = 1) and with gaps; scale and activation
// are layer settings and change only between groups of windows; the result must equal
// f(round(scale * (bias*2^14 + sum x*w) / 2^28)) saturated to 16 bits,
// computed here with 64-bit integers, and appear 4 cycles after the last
// frame. Linear and ReLU, positive and negative scales, saturation.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_pe;
  localparam int N = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic v = 0, first = 0, last = 0, relu = 0;
  logic [N-1:0][15:0] x, w; logic [15:0] bias, scale, res; logic res_v;
  int checks = 0, failures = 0, cyc = 0, n_sat = 0;
  int exp_q[$], due_q[$];

  pe #(.N(N), .DATA_W(16), .FRAC(14), .ACC_W(48)) dut (.clk, .rst_n, .in_valid(v), .x, .w, .bias,
    .first, .last, .relu, .scale, .res, .res_valid(res_v));
  `WATCHDOG(clk, 20000)

  always @(posedge clk) begin
    cyc++;
    if (res_v && rst_n) begin
      `CHECK(exp_q.size() > 0, "unexpected result")
      if (exp_q.size() > 0) begin
        int e, due;
        e = exp_q.pop_front(); due = due_q.pop_front();
        `CHECK($signed(res) == e, $sformatf("result %0d expected %0d", $signed(res), e))
        `CHECK(cyc == due, $sformatf("latency: cycle %0d expected %0d", cyc, due))
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int frames = $urandom_range(1, 6);
      automatic int mag = (t % 5 == 0) ? 32767 : 6000;
      automatic int b = $urandom_range(0, 2*mag) - mag;
      automatic int sc = ((t / 10) % 3 == 2) ? -8000 : 12000 + 3000 * (t / 10);
      automatic bit rl = (t / 10) % 2;
      automatic longint acc = longint'(b) <<< 14, p, r;
      automatic int e;
      for (int f = 0; f < frames; f++) begin
        @(negedge clk);
        v = 1; first = (f == 0); last = (f == frames - 1); relu = rl;
        bias = 16'(b); scale = 16'(sc);
        for (int i = 0; i < N; i++) begin
          automatic int xv = $urandom_range(0, 2*mag) - mag, wv = $urandom_range(0, 2*mag) - mag;
          x[i] = 16'(xv); w[i] = 16'(wv);
          acc += longint'(xv) * longint'(wv);
        end
        if (last) begin
          p = acc * longint'(sc);
          r = (p + (longint'(1) <<< 27)) >>> 28;
          if (r > 32767) begin r = 32767; n_sat++; end
          if (r < -32768) begin r = -32768; n_sat++; end
          if (rl && r < 0) r = 0;
          e = int'(r);
          exp_q.push_back(e); due_q.push_back(cyc + 1 + 4);
        end
        if (t % 3 == 0) begin @(negedge clk); v = 0; end
      end
      @(negedge clk); v = 0;
      if ($urandom_range(0, 1)) @(negedge clk);
      // scale and activation are layer settings: change them only when idle
      if (t % 10 == 9) repeat (6) @(negedge clk);
    end
    repeat (8) @(posedge clk);
    `CHECK(exp_q.size() == 0, "all results produced")
    `CHECK(n_sat > 0, "saturation exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
