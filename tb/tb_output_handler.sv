// tb_output_handler: 6 PEs feeding 4-element Y beats, so PE entries and Y
// beats do not line up and the gearbox has to split entries across beats.
// Three layers are run: a convolution pass with a stitched prefix (every
// output pixel = 2 XBUF beats followed by the pass's 12 channels), a pooling
// layer (words forwarded) and a fully connected layer (one entry, last beat
// zero-filled). All sources have random gaps and Y is back-pressured. Every
// Y beat, TLAST (only on the last beat) and one `done` per layer are checked.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.
`timescale 1ns/1ps
`include "tb_macros.svh"
module tb_output_handler;
  import cnna_pkg::*;
  localparam int E = 4, PN = 6, BW = E * 16;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic [PN-1:0][15:0] pe_data; logic pe_valid = 0, pe_ready;
  logic [BW-1:0] pool_data, xbuf_tdata, y_tdata;
  logic pool_valid = 0, pool_ready, xbuf_tvalid = 0, xbuf_tready;
  logic y_tvalid, y_tlast, y_tready = 0, done;
  int checks = 0, failures = 0, beats = 0, dones = 0, n_last = 0, y_stall = 0;
  logic [PN-1:0][15:0] pq[$];
  logic [BW-1:0] xq[$], plq[$], yq[$];

  output_handler #(.P_DATA_W(16), .P_PE_BW(BW), .P_PE_N(PN)) dut (.clk, .rst_n, .start, .cfg,
    .pe_data, .pe_valid, .pe_ready, .pool_data, .pool_valid, .pool_ready,
    .xbuf_tdata, .xbuf_tvalid, .xbuf_tready, .y_tdata, .y_tvalid, .y_tlast, .y_tready, .done);
  `WATCHDOG(clk, 100000)

  always @(posedge clk) if (rst_n) begin
    if (y_tvalid && !y_tready) y_stall++;
    if (y_tvalid && y_tready) begin
      `CHECK(yq.size() > 0 && y_tdata == yq[0],
             $sformatf("beat %0d: %h exp %h", beats, y_tdata, yq.size() ? yq[0] : '0))
      `CHECK(y_tlast == (yq.size() == 1), $sformatf("beat %0d: tlast %b", beats, y_tlast))
      if (yq.size() > 0) void'(yq.pop_front());
      beats++;
      n_last += y_tlast;
    end
    dones += done;
  end

  always begin @(negedge clk); y_tready = $urandom_range(0, 2) != 0; end
  always begin
    @(negedge clk);
    if (pq.size() > 0 && $urandom_range(0, 2) != 0) begin
      pe_data = pq[0]; pe_valid = 1; #1;
      while (!pe_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 pe_valid = 0; void'(pq.pop_front());
    end
  end
  always begin
    @(negedge clk);
    if (xq.size() > 0 && $urandom_range(0, 2) != 0) begin
      xbuf_tdata = xq[0]; xbuf_tvalid = 1; #1;
      while (!xbuf_tready) begin @(negedge clk); #1; end
      @(posedge clk); #1 xbuf_tvalid = 0; void'(xq.pop_front());
    end
  end
  always begin
    @(negedge clk);
    if (plq.size() > 0 && $urandom_range(0, 2) != 0) begin
      pool_data = plq[0]; pool_valid = 1; #1;
      while (!pool_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 pool_valid = 0; void'(plq.pop_front());
    end
  end

  function automatic logic [BW-1:0] rnd_beat();
    logic [BW-1:0] b;
    for (int i = 0; i < E; i++) b[i*16 +: 16] = 16'($urandom_range(0, 65535));
    return b;
  endfunction

  task automatic run(input layer_cfg_t c);
    @(negedge clk); cfg = c; start = 1; @(negedge clk); start = 0;
    while (yq.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    layer_cfg_t c;
    repeat (2) @(posedge clk); rst_n = 1;
    // convolution pass: 3x3 output pixels, 8 stitched + 12 new channels
    c = '0; c.op = OP_CONV; c.out_size = 3; c.pre_depth = 8; c.n_kernels = 12; c.replay = 2;
    for (int p = 0; p < 9; p++) begin
      logic [15:0] ch [12];
      for (int b = 0; b < 2; b++) begin
        automatic logic [BW-1:0] x = rnd_beat();
        xq.push_back(x); yq.push_back(x);
      end
      for (int r = 0; r < 2; r++) begin
        logic [PN-1:0][15:0] ent;
        for (int i = 0; i < PN; i++) begin ent[i] = 16'($urandom_range(0, 65535)); ch[r*PN+i] = ent[i]; end
        pq.push_back(ent);
      end
      for (int b = 0; b < 3; b++) begin
        logic [BW-1:0] y;
        for (int i = 0; i < E; i++) y[i*16 +: 16] = ch[b*E+i];
        yq.push_back(y);
      end
    end
    run(c);
    `CHECK(xq.size() == 0 && pq.size() == 0, "conv: all XBUF beats and PE entries used")
    // pooling: 2x2 output pixels, 8 channels
    c = '0; c.op = OP_POOL; c.out_size = 2; c.depth = 8;
    for (int b = 0; b < 8; b++) begin
      automatic logic [BW-1:0] x = rnd_beat();
      plq.push_back(x); yq.push_back(x);
    end
    run(c);
    // fully connected: one entry of 6 neurons -> 2 beats, 2 zero elements
    c = '0; c.op = OP_FC; c.replay = 1; c.n_kernels = 16'(PN);
    begin
      logic [PN-1:0][15:0] ent;
      logic [2*BW-1:0] y;
      for (int i = 0; i < PN; i++) ent[i] = 16'($urandom_range(0, 65535));
      y = '0; y[PN*16-1:0] = ent;
      pq.push_back(ent); yq.push_back(y[BW-1:0]); yq.push_back(y[2*BW-1:BW]);
    end
    run(c);
    `CHECK(beats == 45 + 8 + 2, $sformatf("%0d Y beats", beats))
    `CHECK(n_last == 3 && dones == 3, $sformatf("tlast %0d done %0d", n_last, dones))
    `CHECK(y_stall > 0, "Y back-pressure exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
