// clb_line_buffer: the line-buffer half of the circular line buffer (CLB).
//
// Holds the ROWS-1 image lines that precede the current one, each line being
// a row of pixels with all their channels (WORDS words of W bits). For every
// incoming word at position `addr` of the current line it returns a column of
// ROWS words: slot 0 is the oldest line (y-ROWS+1), ..., slot ROWS-2 the line
// just before, and slot ROWS-1 the incoming word itself, so the bandwidth
// grows by ROWS. The incoming word overwrites the oldest line at the same
// address (read before write). When a line ends (`row_end`) the lines rotate:
// a pointer to the oldest line advances instead of moving data, which is the
// multiplexing the structure needs. Timing: combinational read, write on the
// clock edge; `clear` puts the rotation pointer back at line 0.
// Origin: the circular line buffer, with lines kept in separate memories and the
// oldest line overwritten by the next one, follows the original design. One memory per
// line in a generate loop, the write-side rotation index and LINE_WORDS = 2048 are this
// design's own choices. In this design, column[2] is the incoming word itself (din).
module clb_line_buffer #(
  parameter int W     = 128,
  parameter int WORDS = 2048,
  parameter int ROWS  = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      we,
  input  logic [$clog2(WORDS)-1:0]  addr,
  input  logic [W-1:0]              din,
  input  logic                      row_end,
  output logic [ROWS-1:0][W-1:0]    column
);
  localparam int L  = ROWS - 1;
  localparam int PW = (L > 1) ? $clog2(L) : 1;

  logic [PW-1:0]           oldest;
  logic [L-1:0][W-1:0]     rd;

  // One single-port-write memory per line, so each maps onto its own RAM.
  for (genvar i = 0; i < L; i++) begin : g_line
    logic [W-1:0] mem [WORDS];
    always_ff @(posedge clk) begin
      if (we && int'(oldest) == i) mem[addr] <= din;
    end
    assign rd[i] = mem[addr];
  end

  // Line of age a (1 = previous line) is held in memory (oldest + L - a) mod L.
  always_comb begin
    for (int a = L; a >= 1; a--) begin
      column[L - a] = rd[(int'(oldest) + L - a) % L];
    end
    column[ROWS-1] = din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                oldest <= '0;
    else if (clear)            oldest <= '0;
    else if (we && row_end)    oldest <= (int'(oldest) == L-1) ? '0 : oldest + 1'b1;
  end
endmodule
