// weight_buffer: caches the kernels of a layer and feeds one stream per PE.
//
// Chain: W stream (PE_BW bits) -> wb_resize (gathers DB_OUT_BW beats into a
// package of DB_OUT_BW*PE_BW bits) -> wb_splitter -> PE_N wb_stream_buffer.
// Convolution: the stream holds n_kernels bias packages (bias in element 0)
// and then the kernels, each kw = win * depth/ELEMS packages long, already
// ordered by the host like the windows the data buffer produces. Kernel k is
// kept by stream buffer k mod PE_N in slot k / PE_N and is re-sent once for
// every output pixel, so the weights cross the memory bus only once.
// Fully connected: PE_N bias packages, then the neurons' weights interleaved
// package by package; the stream buffers only forward them (FIFO).
// The PE array consumes all PE_N streams in lockstep: `out_ready` is shared.
// Capacity: PE_N * (KERNELS_N/PE_N) kernels of up to KW_MAX packages,
// KW_MAX = 3*3*MAX_DEPTH / (DB_OUT_BW*PE_BW/DATA_W) = 192 by default, plus
// one bias per kernel.
// Origin: the resize -> split -> per-PE stream buffer chain follows the original
// weight buffer. The package count per kernel for DB_OUT_BW < MAX_WIN (one row per
// package) is this design's own choice.
// Fields of the shared layer-configuration struct that this block does not need are left unread.
module weight_buffer
  import cnna_pkg::*;
#(
  parameter int P_DATA_W    = DATA_W,
  parameter int P_PE_BW     = PE_BW,
  parameter int P_DB_OUT_BW = DB_OUT_BW,
  parameter int P_PE_N      = PE_N,
  parameter int P_KERNELS_N = KERNELS_N,
  parameter int P_MAX_DEPTH = MAX_DEPTH,
  parameter int P_MAX_WIN   = MAX_WIN,
  localparam int ELEMS  = P_PE_BW / P_DATA_W,
  localparam int PKG_W  = P_DB_OUT_BW * P_PE_BW,
  localparam int KW_MAX = P_MAX_WIN * P_MAX_WIN * P_MAX_DEPTH / (P_DB_OUT_BW * ELEMS),
  localparam int SLOTS  = P_KERNELS_N / P_PE_N
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  layer_cfg_t                  cfg,
  input  logic [P_PE_BW-1:0]          w_tdata,
  input  logic                        w_tvalid,
  output logic                        w_tready,
  output logic [P_PE_N-1:0][PKG_W-1:0]  out_data,
  output logic [P_PE_N-1:0][P_DATA_W-1:0] out_bias,
  output logic [P_PE_N-1:0]           out_valid,
  input  logic                        out_ready
);
  localparam int LOG_ELEMS = $clog2(ELEMS);

  logic             fc_mode;
  logic [15:0]      kw, n_bias, chunk;
  logic [31:0]      total, received;
  logic             loaded;
  logic [PKG_W-1:0] rs_data, sp_data;
  logic             rs_valid, rs_ready, sp_bias;
  logic [P_PE_N-1:0] sp_valid, sp_ready;

  assign fc_mode = (cfg.op == OP_FC);
  // packages per kernel: one per window word, or one per window row when
  // the PEs take one row at a time (DB_OUT_BW < window rows)
  assign kw      = 16'(32'(cfg.win) * 32'(cfg.depth >> LOG_ELEMS) *
                       ((P_DB_OUT_BW >= P_MAX_WIN) ? 32'd1 : 32'(cfg.win)));
  assign n_bias  = fc_mode ? 16'(P_PE_N) : cfg.n_kernels;
  assign chunk   = fc_mode ? 16'd1 : kw;
  assign total   = 32'(n_bias) + 32'(cfg.n_kernels) * 32'(kw);
  assign loaded  = received >= total;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  received <= '0;
    else if (start)              received <= '0;
    else if (rs_valid && rs_ready) received <= received + 1;
  end

  wb_resize #(.IN_W(P_PE_BW), .FACTOR(P_DB_OUT_BW)) u_resize (
    .clk, .rst_n, .clear(start),
    .in_data(w_tdata), .in_valid(w_tvalid), .in_ready(w_tready),
    .out_data(rs_data), .out_valid(rs_valid), .out_ready(rs_ready));

  wb_splitter #(.PKG_W(PKG_W), .N(P_PE_N)) u_split (
    .clk, .rst_n, .start, .n_bias, .chunk,
    .in_data(rs_data), .in_valid(rs_valid), .in_ready(rs_ready),
    .out_data(sp_data), .out_is_bias(sp_bias), .out_valid(sp_valid), .out_ready(sp_ready));

  for (genvar i = 0; i < P_PE_N; i++) begin : g_sb
    wb_stream_buffer #(.PKG_W(PKG_W), .DATA_W(P_DATA_W), .DEPTH(SLOTS * KW_MAX),
                       .BIAS_SLOTS(SLOTS)) u_sb (
      .clk, .rst_n, .start, .fc_mode, .kw, .replay(cfg.replay), .loaded,
      .in_data(sp_data), .in_is_bias(sp_bias), .in_valid(sp_valid[i]), .in_ready(sp_ready[i]),
      .out_data(out_data[i]), .out_bias(out_bias[i]), .out_valid(out_valid[i]),
      .out_ready(out_ready));
  end
endmodule
