// wb_stream_buffer: the weight cache of one processing element.
//
// Convolution: the kernels assigned to this PE are written one after the
// other into a RAM (write pointer counting up), their biases into a small
// bias table. Once the whole weight stream of the layer is in (`loaded`),
// the buffer sends its kernels to the PE over and over: kernel slot 0 word
// 0..kw-1, slot 1, ... slot replay-1, then slot 0 again, one word each time
// the PE array consumes one (`out_ready`). Each window of the data buffer is
// replayed the same number of times, so kernel slot r meets replay r.
// Fully connected: the weights are used once, so the RAM works as a FIFO
// (read and write pointers chase each other) and bias slot 0 holds the bias.
// Timing: combinational read of the RAM; one word per cycle in both modes.
// Origin: one per-PE buffer that caches its kernels once per layer and streams
// them again for every window follows the original design. KERNELS_N/PE_N slots
// (integer division) and the separate bias table are this design's own choices.
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
module wb_stream_buffer #(
  parameter int PKG_W      = 384,
  parameter int DATA_W     = 16,
  parameter int DEPTH      = 768,  // words: kernels per PE x words per kernel
  parameter int BIAS_SLOTS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              fc_mode,
  input  logic [15:0]       kw,       // words per kernel (convolution)
  input  logic [15:0]       replay,   // kernel slots cycled per window
  input  logic              loaded,   // convolution: all weights received
  input  logic [PKG_W-1:0]  in_data,
  input  logic              in_is_bias,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [PKG_W-1:0]  out_data,
  output logic [DATA_W-1:0] out_bias,
  output logic              out_valid,
  input  logic              out_ready
);
  localparam int AW = $clog2(DEPTH);
  localparam int BW = $clog2(BIAS_SLOTS) > 0 ? $clog2(BIAS_SLOTS) : 1;

  logic [PKG_W-1:0]  mem  [DEPTH];
  logic [DATA_W-1:0] bias [BIAS_SLOTS];
  logic [AW-1:0]     wp, rp, base;
  logic [AW:0]       count;
  logic [BW:0]       bias_wp;
  logic [15:0]       word;
  logic [BW-1:0]     slot;
  logic              wr, rd;

  assign in_ready  = in_is_bias || !fc_mode || (int'(count) < DEPTH);
  assign wr        = in_valid && in_ready && !in_is_bias;
  assign out_valid = fc_mode ? (count != 0 && bias_wp != 0) : loaded;
  assign rd        = out_valid && out_ready;
  assign out_data  = mem[rp];
  assign out_bias  = bias[fc_mode ? '0 : slot];

  always_ff @(posedge clk) begin
    if (wr) mem[wp] <= in_data;
    if (in_valid && in_ready && in_is_bias) bias[bias_wp[BW-1:0]] <= in_data[DATA_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; base <= '0; count <= '0; bias_wp <= '0; word <= '0; slot <= '0;
    end else if (start) begin
      wp <= '0; rp <= '0; base <= '0; count <= '0; bias_wp <= '0; word <= '0; slot <= '0;
    end else begin
      if (in_valid && in_ready && in_is_bias) bias_wp <= bias_wp + 1'b1;
      if (wr) wp <= (int'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      count <= count + (AW+1)'(wr) - (AW+1)'(rd && fc_mode);
      if (rd) begin
        if (fc_mode) begin
          rp <= (int'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
        end else if (word + 1'b1 == kw) begin
          word <= '0;
          if (16'(slot) + 1'b1 == replay) begin
            slot <= '0; base <= '0; rp <= '0;
          end else begin
            slot <= slot + 1'b1; base <= base + AW'(kw); rp <= base + AW'(kw);
          end
        end else begin
          word <= word + 1'b1; rp <= rp + 1'b1;
        end
      end
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    wr |-> int'(count) < DEPTH);
endmodule
