// cnna_top: the convolutional neural network accelerator (CNNA) IP core.
//
// One engine runs one layer at a time; the host sequences the layers. Five
// streams connect it to the memory through DMA engines: CTRL (layer
// configuration), W (weights and biases), X (input image or previous layer
// output), XBUF (earlier pass of a split convolution, for stitching) and Y
// (results). An AXI4-lite port exposes read-only status registers.
// Inside, the data buffer (circular line buffer) builds the windows of X;
// for a convolution the weight buffer caches the kernels and the PE array
// computes one output channel per PE and window replay; for pooling the
// pooling block takes the windows instead and the PE array idles; for a
// fully connected layer both buffers simply forward X and W to the PE array.
// The output handler assembles Y, stitching in XBUF where needed.
// A layer starts when its CTRL words have been received and ends with the
// TLAST beat on Y; the next CTRL packet is accepted after that.
// Defaults are the 16-bit configuration [16, 128, 8, 3, 32] (word length,
// internal bandwidth in bits, PEs, output bandwidth multiplier, kernels).
// Origin: the stream interfaces (CTRL, W, X, XBUF in; Y out), the AXI-lite status
// registers and the block split follow the original design. The single clock domain,
// the pooling/PE window router and the db_narrow stage are this design's own choices.
// Lint: the AXI-lite response codes are constant outputs by design.
module cnna_top
  import cnna_pkg::*;
#(
  parameter int P_DATA_W     = DATA_W,
  parameter int P_FRAC_W     = FRAC_W,
  parameter int P_PE_BW      = PE_BW,
  parameter int P_PE_N       = PE_N,
  parameter int P_DB_OUT_BW  = DB_OUT_BW,
  parameter int P_KERNELS_N  = KERNELS_N,
  parameter int P_MAX_DEPTH  = MAX_DEPTH,
  parameter int P_LINE_WORDS = LINE_WORDS,
  parameter int P_ACC_W      = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CTRL stream
  input  logic [CTRL_W-1:0]    ctrl_tdata,
  input  logic                 ctrl_tvalid,
  output logic                 ctrl_tready,
  // W stream
  input  logic [P_PE_BW-1:0]   w_tdata,
  input  logic                 w_tvalid,
  output logic                 w_tready,
  // X stream
  input  logic [P_PE_BW-1:0]   x_tdata,
  input  logic                 x_tvalid,
  output logic                 x_tready,
  // XBUF stream
  input  logic [P_PE_BW-1:0]   xbuf_tdata,
  input  logic                 xbuf_tvalid,
  output logic                 xbuf_tready,
  // Y stream
  output logic [P_PE_BW-1:0]   y_tdata,
  output logic                 y_tvalid,
  output logic                 y_tlast,
  input  logic                 y_tready,
  // AXI4-lite status
  input  logic [5:0]           s_araddr,
  input  logic                 s_arvalid,
  output logic                 s_arready,
  output logic [31:0]          s_rdata,
  output logic [1:0]           s_rresp,
  output logic                 s_rvalid,
  input  logic                 s_rready,
  input  logic [5:0]           s_awaddr,
  input  logic                 s_awvalid,
  output logic                 s_awready,
  input  logic [31:0]          s_wdata,
  input  logic                 s_wvalid,
  output logic                 s_wready,
  output logic [1:0]           s_bresp,
  output logic                 s_bvalid,
  input  logic                 s_bready
);
  localparam int ELEMS = P_PE_BW / P_DATA_W;
  localparam int N     = P_DB_OUT_BW * ELEMS;
  localparam int PKG_W = P_DB_OUT_BW * P_PE_BW;
  localparam int ROWS  = MAX_WIN;               // window rows built by the CLB

  layer_cfg_t cfg;
  logic       start, busy, layer_done, run;
  logic       wb_w_tready;

  // W is only taken while a layer runs, so the next layer's weights cannot
  // slip into the current one.
  assign run      = busy && !start;
  assign w_tready = wb_w_tready && run;

  ctrl_decoder u_ctrl (
    .clk, .rst_n, .ctrl_tdata, .ctrl_tvalid, .ctrl_tready,
    .layer_done, .cfg, .start, .busy);

  // weight buffer
  logic [P_PE_N-1:0][PKG_W-1:0]    wb_data;
  logic [P_PE_N-1:0][P_DATA_W-1:0] wb_bias;
  logic [P_PE_N-1:0]               wb_valid;
  logic                            wb_ready;

  weight_buffer #(
    .P_DATA_W(P_DATA_W), .P_PE_BW(P_PE_BW), .P_DB_OUT_BW(P_DB_OUT_BW), .P_PE_N(P_PE_N),
    .P_KERNELS_N(P_KERNELS_N), .P_MAX_DEPTH(P_MAX_DEPTH), .P_MAX_WIN(ROWS)
  ) u_wb (
    .clk, .rst_n, .start, .cfg, .w_tdata, .w_tvalid(w_tvalid && run), .w_tready(wb_w_tready),
    .out_data(wb_data), .out_bias(wb_bias), .out_valid(wb_valid), .out_ready(wb_ready));

  // data buffer
  logic [ROWS*P_PE_BW-1:0] db_data;
  logic                    db_first, db_last, db_valid, db_ready, db_done;

  data_buffer #(
    .P_DATA_W(P_DATA_W), .P_PE_BW(P_PE_BW), .P_ROWS(ROWS),
    .P_MAX_DEPTH(P_MAX_DEPTH), .P_LINE_WORDS(P_LINE_WORDS)
  ) u_db (
    .clk, .rst_n, .start, .cfg, .x_tdata, .x_tvalid, .x_tready,
    .out_data(db_data), .out_first(db_first), .out_last(db_last),
    .out_valid(db_valid), .out_ready(db_ready), .done(db_done));

  // route windows to the PE array or to the pooling block
  logic is_pool;
  logic pea_x_ready, pool_in_ready;
  assign is_pool  = (cfg.op == OP_POOL);

  // PE side: whole window words, or one row at a time for DB_OUT_BW = 1
  logic [PKG_W-1:0] pe_in_data;
  logic             pe_in_first, pe_in_last, pe_in_valid, pe_in_ready;
  assign db_ready = is_pool ? pool_in_ready : pe_in_ready;
  if (P_DB_OUT_BW == ROWS) begin : g_wide
    assign pe_in_data  = db_data;
    assign pe_in_first = db_first;
    assign pe_in_last  = db_last;
    assign pe_in_valid = db_valid && !is_pool;
    assign pe_in_ready = pea_x_ready;
  end else begin : g_narrow
    db_narrow #(.W(P_PE_BW), .ROWS(ROWS)) u_narrow (
      .clk, .rst_n, .start, .cfg,
      .in_data(db_data), .in_first(db_first), .in_last(db_last),
      .in_valid(db_valid && !is_pool), .in_ready(pe_in_ready),
      .out_data(pe_in_data), .out_first(pe_in_first), .out_last(pe_in_last),
      .out_valid(pe_in_valid), .out_ready(pea_x_ready));
  end

  logic [P_PE_N-1:0][P_DATA_W-1:0] pe_data;
  logic                            pe_valid, pe_ready;

  pea #(.PE_N(P_PE_N), .N(N), .DATA_W(P_DATA_W), .FRAC(P_FRAC_W), .ACC_W(P_ACC_W)) u_pea (
    .clk, .rst_n, .start, .relu(cfg.act == ACT_RELU), .scale(cfg.scale[P_DATA_W-1:0]),
    .x_data(pe_in_data), .x_first(pe_in_first), .x_last(pe_in_last),
    .x_valid(pe_in_valid), .x_ready(pea_x_ready),
    .w_data(wb_data), .w_bias(wb_bias), .w_valid(wb_valid), .w_ready(wb_ready),
    .res_data(pe_data), .res_valid(pe_valid), .res_ready(pe_ready));

  logic [ELEMS-1:0][P_DATA_W-1:0] pool_data;
  logic                           pool_valid, pool_ready;

  pooling #(.P_DATA_W(P_DATA_W), .P_PE_BW(P_PE_BW), .P_ROWS(ROWS),
            .P_MAX_DEPTH(P_MAX_DEPTH)) u_pool (
    .clk, .rst_n, .start, .cfg, .in_data(db_data), .in_first(db_first),
    .in_valid(db_valid && is_pool), .in_ready(pool_in_ready),
    .out_data(pool_data), .out_valid(pool_valid), .out_ready(pool_ready));

  output_handler #(.P_DATA_W(P_DATA_W), .P_PE_BW(P_PE_BW), .P_PE_N(P_PE_N)) u_out (
    .clk, .rst_n, .start, .cfg,
    .pe_data, .pe_valid, .pe_ready,
    .pool_data(pool_data), .pool_valid, .pool_ready,
    .xbuf_tdata, .xbuf_tvalid, .xbuf_tready,
    .y_tdata, .y_tvalid, .y_tlast, .y_tready, .done(layer_done));

  status_regs #(.AW(6), .P_DATA_W(P_DATA_W), .P_FRAC_W(P_FRAC_W), .P_PE_BW(P_PE_BW),
                .P_PE_N(P_PE_N), .P_DB_OUT_BW(P_DB_OUT_BW), .P_KERNELS_N(P_KERNELS_N)) u_status (
    .clk, .rst_n, .busy, .layer_done, .cur_op(cfg.op),
    .s_araddr, .s_arvalid, .s_arready, .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready);

  wire unused_db_done = db_done;
endmodule
