// ctrl_decoder: receives the layer configuration from the CTRL stream.
//
// The accelerator is reconfigured for every layer through its CTRL stream.
// This block accepts CTRL_WORDS words of CTRL_W bits (the layout is listed in
// cnna_pkg), unpacks them into a layer_cfg_t and then pulses `start` for one
// cycle. It holds the configuration and keeps `busy` high, refusing further
// CTRL words, until `layer_done` reports that the last output word of the
// layer has left the accelerator; then it takes the next configuration.
//
// Timing: one word per cycle while loading; `start` rises the cycle after the
// last word is accepted. The CTRL stream and its role follow the paper; the
// word count, layout and the busy/done handshake are this design's own.
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
module ctrl_decoder
  import cnna_pkg::*;
#(
  parameter int W = CTRL_W,
  parameter int N = CTRL_WORDS
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] ctrl_tdata,
  input  logic         ctrl_tvalid,
  output logic         ctrl_tready,
  input  logic         layer_done,
  output layer_cfg_t   cfg,
  output logic         start,
  output logic         busy
);
  logic [N*W-1:0]         words;
  logic [$clog2(N+1)-1:0] cnt;

  assign ctrl_tready = !busy;

  // the complete block: stored words plus the word arriving now
  logic [N*W-1:0] all;
  always_comb begin
    all = words;
    all[cnt*W +: W] = ctrl_tdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      words <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
      start <= 1'b0;
      cfg   <= '0;
    end else begin
      start <= 1'b0;
      if (!busy && ctrl_tvalid) begin
        words[cnt*W +: W] <= ctrl_tdata;
        if (int'(cnt) == N-1) begin
          cnt   <= '0;
          busy  <= 1'b1;
          start <= 1'b1;
          cfg   <= unpack_cfg(all);
        end else begin
          cnt <= cnt + 1'b1;
        end
      end else if (busy && layer_done) begin
        busy <= 1'b0;
      end
    end
  end

  // A layer can only finish while one is running.
  a_done_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    layer_done |-> busy);
endmodule
