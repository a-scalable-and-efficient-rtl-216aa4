// tb_pooling: windows of 2x2 and 3x3 over 8 channels (two 4-element
// channel groups) are fed in the order the data buffer sends them (column by
// column, channel group inside a column) with random gaps, while the output
// side stalls at random. Each output word is compared with a reference max,
// min or average (sum / K^2 rounded toward zero) over the valid window rows
// and columns; rows above a smaller window carry random junk that must be
// ignored.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_pooling;
  import cnna_pkg::*;
  localparam int E = 4, R = 3, DEPTH = 8, DCH = DEPTH / E;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic [R-1:0][E-1:0][15:0] in_data;
  logic in_first = 0, in_valid = 0, in_ready;
  logic [E-1:0][15:0] out_data;
  logic out_valid, out_ready = 0;
  int checks = 0, failures = 0, got = 0, n_max = 0, n_min = 0, n_avg = 0;
  logic [E-1:0][15:0] expq[$];

  pooling #(.P_DATA_W(16), .P_PE_BW(E*16), .P_ROWS(R), .P_MAX_DEPTH(32)) dut (.clk, .rst_n,
    .start, .cfg, .in_data, .in_first, .in_valid, .in_ready, .out_data, .out_valid, .out_ready);
  `WATCHDOG(clk, 100000)

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    `CHECK(expq.size() > 0 && out_data == expq[0],
           $sformatf("output %0d: %h exp %h", got, out_data, expq.size() ? expq[0] : '0))
    if (expq.size() > 0) void'(expq.pop_front());
    got++;
    case (cfg.pool) POOL_MAX: n_max++; POOL_MIN: n_min++; default: n_avg++; endcase
  end

  always begin
    @(negedge clk);
    out_ready = $urandom_range(0, 3) != 0;
  end

  task automatic window(input int k, input pool_e p);
    logic [R-1:0][E-1:0][15:0] w [8][DCH];
    for (int c = 0; c < k; c++)
      for (int d = 0; d < DCH; d++)
        for (int r = 0; r < R; r++)
          for (int e = 0; e < E; e++) w[c][d][r][e] = 16'($urandom_range(0, 65535));
    for (int d = 0; d < DCH; d++) begin
      logic [E-1:0][15:0] o;
      for (int e = 0; e < E; e++) begin
        int acc;
        acc = (p == POOL_AVG) ? 0 : int'($signed(w[0][d][R-1][e]));
        for (int c = 0; c < k; c++)
          for (int r = R - k; r < R; r++) begin
            int v;
            v = int'($signed(w[c][d][r][e]));
            case (p)
              POOL_MAX: if (v > acc) acc = v;
              POOL_MIN: if (v < acc) acc = v;
              default:  acc += v;
            endcase
          end
        if (p == POOL_AVG) acc = acc / (k * k);
        o[e] = 16'(acc);
      end
      expq.push_back(o);
    end
    for (int c = 0; c < k; c++)
      for (int d = 0; d < DCH; d++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_data = w[c][d]; in_first = (c == 0 && d == 0); in_valid = 1; #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 in_valid = 0;
      end
  endtask

  initial begin
    cfg = '0; cfg.op = OP_POOL; cfg.depth = 16'(DEPTH);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 18; t++) begin
      automatic pool_e p = pool_e'(t % 3);
      automatic int k = (t / 3) % 2 ? 3 : 2;
      @(negedge clk); cfg.pool = p; cfg.win = 8'(k);
      start = 1; @(negedge clk); start = 0;
      repeat (4) window(k, p);
      while (expq.size() != 0) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    `CHECK(got == 18 * 4 * DCH, $sformatf("%0d outputs", got))
    `CHECK(n_max > 0 && n_min > 0 && n_avg > 0, "all three pooling types produced output")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
