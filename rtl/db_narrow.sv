// db_narrow: sends each window word of the data buffer one row at a time,
// for a build whose output bandwidth multiplier DB_OUT_BW is 1.
//
// The circular line buffer always builds words of ROWS window rows side by
// side (ROWS = largest window). With DB_OUT_BW = ROWS those words go to the
// PEs as they are. A build with DB_OUT_BW = 1 gives the PEs a third of the
// width, which leaves room for more PEs on the same fabric; this block then
// splits every word into its rows: for a convolution only the K valid rows
// of a K x K window (rows ROWS-K .. ROWS-1, top row first), for a fully
// connected layer all ROWS rows of the gathered package (the last one is
// zero-filled by the data buffer). `first` goes with the first row of the
// window's first word, `last` with the last row of its last word.
// Timing: one row per cycle; a word is released (in_ready) with its last row.
// The reduced multiplier follows the original design's tuning parameter; only
// the values 1 and ROWS are supported here (a design choice).
// Fields of the shared layer-configuration struct that this block does not need are left unread.
module db_narrow
  import cnna_pkg::*;
#(
  parameter int W    = PE_BW,
  parameter int ROWS = MAX_WIN
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  layer_cfg_t             cfg,
  input  logic [ROWS*W-1:0]      in_data,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic                   in_valid,
  output logic                   in_ready,
  output logic [W-1:0]           out_data,
  output logic                   out_first,
  output logic                   out_last,
  output logic                   out_valid,
  input  logic                   out_ready
);
  localparam int RW = $clog2(ROWS + 1);

  logic [RW-1:0] r, r0;
  logic          on_last_row;

  // first row sent from each word
  assign r0 = (cfg.op == OP_FC) ? '0 : RW'(ROWS - int'(cfg.win));
  assign on_last_row = int'(r) == ROWS - 1;

  assign out_data  = in_data[r*W +: W];
  assign out_valid = in_valid;
  assign out_first = in_first && r == r0;
  assign out_last  = in_last && on_last_row;
  assign in_ready  = out_ready && on_last_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        r <= '0;
    else if (start)                    r <= r0;
    else if (in_valid && out_ready)    r <= on_last_row ? r0 : r + 1'b1;
  end
endmodule
