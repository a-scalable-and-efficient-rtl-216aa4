// data_buffer: turns the raster-ordered X stream into convolution windows.
//
// The image arrives in raster order, channels first: pixel (0,0) channels
// 0..depth-1 (ELEMS per PE_BW-bit beat), then the next pixel of the row, and
// so on, one row after the other. The controller walks the zero-padded image
// ((row_size + 2*pad)^2 pixels): in_img the image it takes a beat from X,
// in the padding it inserts a zero word without reading X. Every word goes
// through the line buffer, which adds the same position of the ROWS-1
// previous lines, and the resulting column of ROWS words is written into the
// shift buffer. When a pixel completes the bottom-right corner of a window
// (row and column >= win-1 and on the stride grid) the controller stops
// taking input and reads the window out of the shift buffer: win columns
// times depth/ELEMS words, each word carrying ROWS rows side by side (rows
// above a smaller window are zero). The window is sent `replay` times, once
// per group of PE_N kernels. `first`/`last` mark the ends of each window.
// Fully connected layers bypass the CLB: ROWS consecutive X beats form one
// package (the final one zero-filled), with `first`/`last` marking the
// ends of the input vector.
// Timing: one word per cycle in every phase; a window costs
// replay*win*depth/ELEMS cycles, during which X is stalled.
// Origin: the data buffer is the original CLB plus shift buffer. Always building
// words of MAX_WIN rows, and leaving narrower outputs to db_narrow, is this design's
// own choice.
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
// Fields of the shared layer-configuration struct that this block does not need are left unread.
module data_buffer
  import cnna_pkg::*;
#(
  parameter int P_DATA_W     = DATA_W,
  parameter int P_PE_BW      = PE_BW,
  parameter int P_ROWS       = DB_OUT_BW,
  parameter int P_MAX_DEPTH  = MAX_DEPTH,
  parameter int P_LINE_WORDS = LINE_WORDS,
  localparam int ELEMS   = P_PE_BW / P_DATA_W,
  localparam int MAX_DCH = P_MAX_DEPTH / ELEMS,
  localparam int SB_D    = P_ROWS * MAX_DCH,
  localparam int PKG_W   = P_ROWS * P_PE_BW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  layer_cfg_t          cfg,
  input  logic [P_PE_BW-1:0]  x_tdata,
  input  logic                x_tvalid,
  output logic                x_tready,
  output logic [PKG_W-1:0]    out_data,
  output logic                out_first,
  output logic                out_last,
  output logic                out_valid,
  input  logic                out_ready,
  output logic                done
);
  localparam int LOG_ELEMS = $clog2(ELEMS);
  localparam int LAW       = $clog2(P_LINE_WORDS);

  typedef enum logic [2:0] {S_IDLE, S_ACCEPT, S_EMIT, S_FC_GATHER, S_FC_EMIT, S_DONE} state_e;
  state_e state;

  // layer geometry
  logic [15:0] dch, ps, k, s, r_max;
  logic [15:0] win_words;
  assign dch       = cfg.depth >> LOG_ELEMS;
  assign ps        = cfg.row_size + 16'(2 * cfg.pad);
  assign k         = 16'(cfg.win);
  assign s         = 16'(cfg.stride);
  assign r_max     = (cfg.replay == 0) ? 16'd1 : cfg.replay;
  assign win_words = 16'(32'(k) * 32'(dch));

  // walk counters over the padded image
  logic [15:0]    py, px, d, sx, sy;
  logic [LAW-1:0] la;
  logic           in_img, step, pix_end, row_end, img_end, fire;
  logic [P_PE_BW-1:0] word;

  assign in_img = (py >= 16'(cfg.pad)) && (py < 16'(cfg.pad) + cfg.row_size) &&
                  (px >= 16'(cfg.pad)) && (px < 16'(cfg.pad) + cfg.row_size);
  assign x_tready = !start && ((state == S_ACCEPT && in_img) || (state == S_FC_GATHER));
  assign step     = !start && (state == S_ACCEPT) && (!in_img || x_tvalid);
  assign word     = in_img ? x_tdata : '0;
  assign pix_end  = (d == dch - 1);
  assign row_end  = pix_end && (px == ps - 1);
  assign img_end  = row_end && (py == ps - 1);
  assign fire     = step && pix_end && (py >= k - 1) && (px >= k - 1) && (sx == 0) && (sy == 0);

  // CLB storage
  logic [P_ROWS-1:0][P_PE_BW-1:0] column, sb_out;
  logic rd_adv;

  clb_line_buffer #(.W(P_PE_BW), .WORDS(P_LINE_WORDS), .ROWS(P_ROWS)) u_lb (
    .clk, .rst_n, .clear(start), .we(step), .addr(la), .din(word), .row_end,
    .column);

  clb_shift_buffer #(.W(PKG_W), .DEPTH(SB_D)) u_sb (
    .clk, .rst_n, .clear(start), .size($clog2(SB_D+1)'(win_words)), .we(step),
    .din(column), .rewind(fire), .rd_adv, .dout(sb_out));

  // emit counters
  logic [15:0] e, r;
  logic [P_ROWS-1:0][P_PE_BW-1:0] fc_pkg;
  logic [15:0] fc_slot;
  logic [31:0] fc_cnt;
  logic        last_pixel;

  always_comb begin
    for (int i = 0; i < P_ROWS; i++) begin
      out_data[i*P_PE_BW +: P_PE_BW] = (state == S_FC_EMIT) ? fc_pkg[i] :
                                       (i >= P_ROWS - int'(k)) ? sb_out[i] : '0;
    end
  end
  assign out_valid = (state == S_EMIT) || (state == S_FC_EMIT);
  assign out_first = (state == S_FC_EMIT) ? (fc_cnt <= 32'(P_ROWS))
                                          : (e == 0);
  assign out_last  = (state == S_FC_EMIT) ? (fc_cnt == cfg.fc_beats) : (e == win_words - 1);
  assign rd_adv    = (state == S_EMIT) && out_ready;
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      py <= '0; px <= '0; d <= '0; sx <= '0; sy <= '0; la <= '0;
      e <= '0; r <= '0; fc_pkg <= '0; fc_slot <= '0; fc_cnt <= '0; last_pixel <= 1'b0;
    end else if (start) begin
      state <= (cfg.op == OP_FC) ? S_FC_GATHER : S_ACCEPT;
      py <= '0; px <= '0; d <= '0; sx <= '0; sy <= '0; la <= '0;
      e <= '0; r <= '0; fc_pkg <= '0; fc_slot <= '0; fc_cnt <= '0; last_pixel <= 1'b0;
    end else begin
      case (state)
        S_ACCEPT: if (step) begin
          la <= row_end ? '0 : la + 1'b1;
          if (!pix_end) begin
            d <= d + 1'b1;
          end else begin
            d <= '0;
            if (px >= k - 1) sx <= (sx == s - 1) ? '0 : sx + 1'b1;
            if (row_end) begin
              px <= '0; sx <= '0;
              if (py >= k - 1) sy <= (sy == s - 1) ? '0 : sy + 1'b1;
              py <= py + 1'b1;
            end else begin
              px <= px + 1'b1;
            end
            if (fire) begin
              state <= S_EMIT; e <= '0; r <= '0; last_pixel <= img_end;
            end else if (img_end) begin
              state <= S_DONE;
            end
          end
        end
        S_EMIT: if (out_ready) begin
          if (e == win_words - 1) begin
            e <= '0;
            if (r == r_max - 1) begin
              r <= '0;
              state <= last_pixel ? S_DONE : S_ACCEPT;
            end else begin
              r <= r + 1'b1;
            end
          end else begin
            e <= e + 1'b1;
          end
        end
        S_FC_GATHER: if (x_tvalid) begin
          fc_pkg[fc_slot] <= x_tdata;
          fc_cnt <= fc_cnt + 1;
          if (int'(fc_slot) == P_ROWS - 1 || fc_cnt + 1 == cfg.fc_beats) begin
            state <= S_FC_EMIT; fc_slot <= '0;
          end else begin
            fc_slot <= fc_slot + 1'b1;
          end
        end
        S_FC_EMIT: if (out_ready) begin
          fc_pkg <= '0;
          state  <= (fc_cnt == cfg.fc_beats) ? S_DONE : S_FC_GATHER;
        end
        default: ;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || start)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
