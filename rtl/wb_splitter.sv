// wb_splitter: distributes weight packages over the PE_N stream buffers.
//
// A layer's weight stream starts with its bias packages, one per kernel, and
// then carries the kernels themselves. During the bias phase package p goes
// to stream buffer p mod N. During the weight phase CHUNK consecutive packages
// go to one stream buffer before the splitter moves to the next one (round
// robin). For a convolution CHUNK is the kernel length, so kernel k lands
// whole in stream buffer k mod N; for a fully connected layer CHUNK is 1, so
// the neurons' weights arrive interleaved and each PE gets its own stream.
// The splitter itself holds no data: the target's ready is the input ready.
// Origin: handing kernels to the PEs in turn follows the original weight buffer.
// The per-kernel package counter is this design's own choice.
// Lint: the data output is the input passed through, so it is wired straight from it.
module wb_splitter #(
  parameter int PKG_W = 384,
  parameter int N     = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,     // restart the bias phase
  input  logic [15:0]      n_bias,    // bias packages at the start
  input  logic [15:0]      chunk,     // packages per target in weight phase
  input  logic [PKG_W-1:0] in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output logic [PKG_W-1:0] out_data,
  output logic             out_is_bias,
  output logic [N-1:0]     out_valid,
  input  logic [N-1:0]     out_ready
);
  logic [15:0]            bias_cnt, chunk_cnt;
  logic [$clog2(N)-1:0]   tgt;
  logic                   bias_phase;

  assign bias_phase  = bias_cnt < n_bias;
  assign out_data    = in_data;
  assign out_is_bias = bias_phase;
  always_comb begin
    out_valid      = '0;
    out_valid[tgt] = in_valid;
  end
  assign in_ready = out_ready[tgt];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias_cnt <= '0; chunk_cnt <= '0; tgt <= '0;
    end else if (start) begin
      bias_cnt <= '0; chunk_cnt <= '0; tgt <= '0;
    end else if (in_valid && in_ready) begin
      if (bias_phase) begin
        bias_cnt <= bias_cnt + 1'b1;
        if (bias_cnt + 1'b1 == n_bias) tgt <= '0;
        else tgt <= (int'(tgt) == N-1) ? '0 : tgt + 1'b1;
      end else if (chunk_cnt + 1'b1 >= chunk) begin
        chunk_cnt <= '0;
        tgt <= (int'(tgt) == N-1) ? '0 : tgt + 1'b1;
      end else begin
        chunk_cnt <= chunk_cnt + 1'b1;
      end
    end
  end
endmodule
