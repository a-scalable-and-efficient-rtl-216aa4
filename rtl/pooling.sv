// pooling: max-, min- or average-pooling on the windows of the CLB.
//
// The pooling block reuses the data buffer: it takes the same window words
// the PEs would get (each word = ROWS window rows x ELEMS channels, rows
// above a smaller window being unused) and bypasses the PE array. A word is
// first reduced across the valid rows of the window (the bottom `win` rows);
// the result is combined with a one-pixel RAM that holds the running value
// of every channel group: the first window column stores it, the following
// columns compare (max/min) or add (average) and store the result. On the
// last column the combined value leaves as the output pixel, one word per
// channel group. Average divides the sum by win*win (rounding toward zero,
// this design's choice).
// Timing: one word per cycle; a window of win*depth/ELEMS words gives
// depth/ELEMS output words, produced in its last column.
// Fields of the shared layer-configuration struct that this block does not need are left unread.
module pooling
  import cnna_pkg::*;
#(
  parameter int P_DATA_W    = DATA_W,
  parameter int P_PE_BW     = PE_BW,
  parameter int P_ROWS      = DB_OUT_BW,
  parameter int P_MAX_DEPTH = MAX_DEPTH,
  localparam int ELEMS   = P_PE_BW / P_DATA_W,
  localparam int MAX_DCH = P_MAX_DEPTH / ELEMS
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   start,
  input  layer_cfg_t                             cfg,
  input  logic [P_ROWS-1:0][ELEMS-1:0][P_DATA_W-1:0] in_data,
  input  logic                                   in_first,
  input  logic                                   in_valid,
  output logic                                   in_ready,
  output logic [ELEMS-1:0][P_DATA_W-1:0]          out_data,
  output logic                                   out_valid,
  input  logic                                   out_ready
);
  localparam int SW = P_DATA_W + 5;
  localparam int LOG_ELEMS = $clog2(ELEMS);

  logic signed [SW-1:0] ram [MAX_DCH][ELEMS];
  localparam int DW = $clog2(MAX_DCH) > 0 ? $clog2(MAX_DCH) : 1;
  logic [DW-1:0] d;
  logic [15:0] c, dch, k;
  logic        last_col;
  logic signed [SW-1:0] row_red [ELEMS];
  logic signed [SW-1:0] comb_v  [ELEMS];

  assign dch      = cfg.depth >> LOG_ELEMS;
  assign k        = 16'(cfg.win);
  // in_first restarts the column count at each window
  assign last_col = (in_first ? 16'd0 : c) == k - 1;
  assign in_ready = !last_col || out_ready;
  assign out_valid = in_valid && last_col;

  function automatic logic signed [SW-1:0] op2(input pool_e t, input logic signed [SW-1:0] a,
                                                 input logic signed [SW-1:0] b);
    case (t)
      POOL_MIN: return (b < a) ? b : a;
      POOL_AVG: return a + b;
      default:  return (b > a) ? b : a;
    endcase
  endfunction

  always_comb begin
    for (int e = 0; e < ELEMS; e++) begin
      row_red[e] = SW'($signed(in_data[P_ROWS-1][e]));
      for (int rr = P_ROWS - 2; rr >= 0; rr--)
        if (rr >= P_ROWS - int'(k))
          row_red[e] = op2(cfg.pool, row_red[e], SW'($signed(in_data[rr][e])));
      comb_v[e] = (in_first || c == 0) ? row_red[e] : op2(cfg.pool, ram[d][e], row_red[e]);
      if (cfg.pool == POOL_AVG)
        out_data[e] = P_DATA_W'(comb_v[e] / $signed(SW'(32'(k) * 32'(k))));
      else
        out_data[e] = comb_v[e][P_DATA_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && !last_col)
      for (int e = 0; e < ELEMS; e++) ram[d][e] <= comb_v[e];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d <= '0; c <= '0;
    end else if (start) begin
      d <= '0; c <= '0;
    end else if (in_valid && in_ready) begin
      if (16'(d) == dch - 1) begin
        d <= '0;
        c <= last_col ? '0 : (in_first ? 16'd1 : c + 1'b1);
      end else begin
        d <= d + 1'b1;
        if (in_first) c <= '0;
      end
    end
  end
endmodule
