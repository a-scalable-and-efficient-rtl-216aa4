// output_handler: shapes the results into the Y stream.
//
// Convolution: the PE array delivers PE_N results per window replay, i.e.
// n_kernels output channels per pixel over `replay` entries. A gearbox turns
// the PE_N-element entries into Y beats of ELEMS elements (PE_BW bits). When
// a layer was split into several passes (too many kernels for the weight
// buffer), each pass must interleave its channels after those of the earlier
// passes: for every output pixel the handler first copies pre_depth channels
// (pre_depth/ELEMS beats) from the XBUF stream, the previous pass's output,
// and then appends this pass's n_kernels channels. With pre_depth = 0 no
// XBUF data is read.
// Pooling: the pooling words are forwarded unchanged.
// Fully connected: the single entry of PE_N neuron outputs is sent, the last
// beat zero-filled if PE_N is not a multiple of ELEMS.
// Y carries TLAST on the final beat of the layer; `done` pulses with it.
// Timing: one beat per cycle whenever its source has data and Y is ready.
// Origin: stitching an earlier pass's channels from XBUF in front of this pass's
// results follows the original design. The width gearbox and the TLAST placement are
// this design's own choices.
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
// Fields of the shared layer-configuration struct that this block does not need are left unread.
module output_handler
  import cnna_pkg::*;
#(
  parameter int P_DATA_W = DATA_W,
  parameter int P_PE_BW  = PE_BW,
  parameter int P_PE_N   = PE_N,
  localparam int ELEMS   = P_PE_BW / P_DATA_W
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  layer_cfg_t                         cfg,
  // PE array results
  input  logic [P_PE_N-1:0][P_DATA_W-1:0]    pe_data,
  input  logic                               pe_valid,
  output logic                               pe_ready,
  // pooling output
  input  logic [P_PE_BW-1:0]                 pool_data,
  input  logic                               pool_valid,
  output logic                               pool_ready,
  // stitch input
  input  logic [P_PE_BW-1:0]                 xbuf_tdata,
  input  logic                               xbuf_tvalid,
  output logic                               xbuf_tready,
  // output stream
  output logic [P_PE_BW-1:0]                 y_tdata,
  output logic                               y_tvalid,
  output logic                               y_tlast,
  input  logic                               y_tready,
  output logic                               done
);
  localparam int LOG_ELEMS = $clog2(ELEMS);
  localparam int CAP = P_PE_N + ELEMS;
  localparam int GW  = $clog2(CAP + 1);

  // gearbox PE_N -> ELEMS elements
  logic [P_DATA_W-1:0] gb [CAP];
  logic [GW-1:0]       gcnt;
  logic                g_push, g_pop, g_has;
  logic [P_PE_BW-1:0]  g_beat;

  always_comb begin
    for (int i = 0; i < ELEMS; i++)
      g_beat[i*P_DATA_W +: P_DATA_W] = (i < int'(gcnt)) ? gb[i] : '0;
  end
  assign g_has = (int'(gcnt) >= ELEMS) || (cfg.op == OP_FC && gcnt != 0);

  // next gearbox state: pop ELEMS from the front, then append PE_N
  logic [P_DATA_W-1:0] nb [CAP];
  int                  nc;
  always_comb begin
    nb = gb; nc = int'(gcnt);
    if (g_pop) begin
      for (int i = 0; i < CAP; i++) nb[i] = (i + ELEMS < CAP) ? nb[i + ELEMS] : '0;
      nc = (nc > ELEMS) ? nc - ELEMS : 0;
    end
    if (g_push)
      for (int j = 0; j < P_PE_N; j++)
        if (nc + j < CAP) nb[nc + j] = pe_data[j];
    if (g_push) nc = nc + P_PE_N;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcnt <= '0;
      for (int i = 0; i < CAP; i++) gb[i] <= '0;
    end else if (start) begin
      gcnt <= '0;
    end else begin
      gb   <= nb;
      gcnt <= GW'(nc);
    end
  end

  // beat sequencing
  logic [15:0] pre_beats, new_beats, pix_beat, dch;
  logic [31:0] total_pix, beat_cnt, total_beats;
  logic        in_pre, last_beat, active, fire;

  assign pre_beats = cfg.pre_depth >> LOG_ELEMS;
  assign new_beats = cfg.n_kernels >> LOG_ELEMS;
  assign dch       = cfg.depth >> LOG_ELEMS;
  assign total_pix = 32'(cfg.out_size) * 32'(cfg.out_size);
  always_comb begin
    case (cfg.op)
      OP_POOL: total_beats = total_pix * 32'(dch);
      OP_FC:   total_beats = 32'((P_PE_N + ELEMS - 1) / ELEMS);
      default: total_beats = total_pix * (32'(pre_beats) + 32'(new_beats));
    endcase
  end
  assign in_pre    = (cfg.op == OP_CONV) && (pix_beat < pre_beats);
  assign last_beat = (beat_cnt == total_beats - 1);

  always_comb begin
    y_tdata     = g_beat;
    y_tvalid    = 1'b0;
    xbuf_tready = 1'b0;
    pool_ready  = 1'b0;
    g_pop       = 1'b0;
    if (active) begin
      if (cfg.op == OP_POOL) begin
        y_tdata = pool_data; y_tvalid = pool_valid; pool_ready = y_tready;
      end else if (in_pre) begin
        y_tdata = xbuf_tdata; y_tvalid = xbuf_tvalid; xbuf_tready = y_tready;
      end else begin
        y_tvalid = g_has; g_pop = g_has && y_tready;
      end
    end
  end
  assign y_tlast  = last_beat;
  assign fire     = y_tvalid && y_tready;
  assign g_push   = pe_valid && pe_ready;
  // accept an entry when it fits after this cycle's pop
  assign pe_ready = (int'(gcnt) - (g_pop ? ELEMS : 0) + P_PE_N) <= CAP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; beat_cnt <= '0; pix_beat <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        active <= 1'b1; beat_cnt <= '0; pix_beat <= '0;
      end else if (fire) begin
        beat_cnt <= beat_cnt + 1;
        if (pix_beat == pre_beats + new_beats - 1) begin
          pix_beat <= '0;
        end else begin
          pix_beat <= pix_beat + 1'b1;
        end
        if (last_beat) begin
          active <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  a_y_hold: assert property (@(posedge clk) disable iff (!rst_n || start)
    y_tvalid && !y_tready |=> y_tvalid && $stable(y_tdata));
endmodule
