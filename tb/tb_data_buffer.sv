// tb_data_buffer: reduced sizes (4 elements per 32-bit beat, 3 window rows).
// For several geometries (3x3 with zero padding and two replays, 2x2 with
// stride 2, 3x3 with stride 2 and padding) the expected window words are
// built here from the image and the window definition: for every output
// pixel, replay, window column and channel group, the three rows side by
// side (rows above a smaller window zero), with first/last flags. A fully
// connected vector of 7 beats must come out as 3 packages, the last one
// zero-filled. X gaps and output back-pressure are random.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_data_buffer;
  import cnna_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0; layer_cfg_t cfg;
  logic [31:0] x_d; logic x_v = 0, x_r;
  logic [95:0] o_d; logic o_f, o_l, o_v, o_r = 0, done;
  int checks = 0, failures = 0;
  logic [31:0] xq[$]; int xi;
  logic [97:0] expq[$], gotq[$];
  int stalls = 0;

  data_buffer #(.P_DATA_W(8), .P_PE_BW(32), .P_ROWS(3), .P_MAX_DEPTH(16), .P_LINE_WORDS(64)) dut (
    .clk, .rst_n, .start, .cfg, .x_tdata(x_d), .x_tvalid(x_v), .x_tready(x_r),
    .out_data(o_d), .out_first(o_f), .out_last(o_l), .out_valid(o_v), .out_ready(o_r), .done);
  `WATCHDOG(clk, 50000)

  always @(posedge clk) begin
    if (x_v && x_r) xi++;
    if (x_v && !x_r) stalls++;
    if (!x_v || x_r) begin
      x_v <= xi < xq.size() && $urandom_range(0, 3) != 0;
      x_d <= xi < xq.size() ? xq[xi] : '0;
    end
    if (o_v && o_r) gotq.push_back({o_f, o_l, o_d});
    o_r <= $urandom_range(0, 3) != 0;
  end

  task automatic run(string name);
    int n = 0;
    gotq.delete(); xi = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done && n < 20000) begin @(posedge clk); n++; end
    `CHECK(done, $sformatf("%s done", name))
    `CHECK(xi == xq.size(), $sformatf("%s consumed all X", name))
    `CHECK(gotq.size() == expq.size(), $sformatf("%s: %0d words, expected %0d", name, gotq.size(), expq.size()))
    foreach (expq[i]) if (i < gotq.size())
      `CHECK(gotq[i] == expq[i], $sformatf("%s word %0d: %h vs %h", name, i, gotq[i], expq[i]))
  endtask

  task automatic conv(string name, int rs, int depth, int win, int stride, int pad, int rep);
    int dch = depth / 4, ps = rs + 2*pad, os = (ps - win) / stride + 1;
    logic [31:0] img [][][];
    img = new[rs]; foreach (img[y]) begin img[y] = new[rs]; foreach (img[y][x]) begin
      img[y][x] = new[dch]; foreach (img[y][x][d]) img[y][x][d] = $urandom; end end
    xq.delete(); expq.delete();
    for (int y = 0; y < rs; y++) for (int x = 0; x < rs; x++) for (int d = 0; d < dch; d++)
      xq.push_back(img[y][x][d]);
    for (int oy = 0; oy < os; oy++) for (int ox = 0; ox < os; ox++)
      for (int r = 0; r < rep; r++) for (int kx = 0; kx < win; kx++) for (int d = 0; d < dch; d++) begin
        logic [95:0] w = '0;
        for (int i = 0; i < 3; i++) begin
          int ky = i - (3 - win);
          int py = oy*stride + ky - pad, px = ox*stride + kx - pad;
          if (ky >= 0 && py >= 0 && py < rs && px >= 0 && px < rs) w[i*32 +: 32] = img[py][px][d];
        end
        expq.push_back({kx == 0 && d == 0, kx == win-1 && d == dch-1, w});
      end
    cfg = '0; cfg.op = OP_CONV; cfg.win = 8'(win); cfg.stride = 8'(stride); cfg.pad = 8'(pad);
    cfg.row_size = 16'(rs); cfg.depth = 16'(depth); cfg.replay = 16'(rep);
    run(name);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    conv("3x3 pad1 replay2", 5, 8, 3, 1, 1, 2);
    conv("2x2 stride2", 6, 4, 2, 2, 0, 1);
    conv("3x3 stride2 pad1 depth16", 7, 16, 3, 2, 1, 1);
    conv("1x1", 3, 8, 1, 1, 0, 3);
    `CHECK(stalls > 0, "X stalled while windows were sent")
    // fully connected
    xq.delete(); expq.delete();
    for (int b = 0; b < 7; b++) xq.push_back($urandom);
    expq.push_back({1'b1, 1'b0, xq[2], xq[1], xq[0]});
    expq.push_back({1'b0, 1'b0, xq[5], xq[4], xq[3]});
    expq.push_back({1'b0, 1'b1, 32'd0, 32'd0, xq[6]});
    cfg = '0; cfg.op = OP_FC; cfg.fc_beats = 7;
    run("fc");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
