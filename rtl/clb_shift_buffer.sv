// clb_shift_buffer: the shift-buffer half of the circular line buffer.
//
// A RAM-based shift buffer that keeps, for every window row, the last
// `size` words written (size = window columns * depth words, set per layer),
// i.e. the last K pixels of each row. The write pointer counts up on every
// write and returns to the start when it reaches `size`. The read pointer is
// moved by the controller: `rewind` places it `size` samples back, which in a
// buffer of exactly `size` words is the oldest sample (the write pointer after
// any write in the same cycle); each `rd_adv` steps it forward with the same
// wrap. Reading `size` words therefore yields the window column by column,
// and reading them again replays the window without new input.
// Timing: combinational read at the read pointer.
// Origin: turning line-buffer columns into windows that can be replayed once per
// kernel group follows the original CLB. The replay counters, and how padding and stride
// are generated, are this design's own choices.
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
module clb_shift_buffer #(
  parameter int W     = 384,
  parameter int DEPTH = 192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [$clog2(DEPTH+1)-1:0] size,
  input  logic                     we,
  input  logic [W-1:0]             din,
  input  logic                     rewind,
  input  logic                     rd_adv,
  output logic [W-1:0]             dout
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp, wp_next;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p, input logic [$clog2(DEPTH+1)-1:0] s);
    return (32'(p) + 1 >= 32'(s)) ? '0 : p + 1'b1;
  endfunction

  assign wp_next = we ? inc(wp, size) : wp;
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (we) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0;
    end else begin
      wp <= wp_next;
      if (rewind)      rp <= wp_next;
      else if (rd_adv) rp <= inc(rp, size);
    end
  end

  a_size: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (size != 0 && 32'(size) <= DEPTH));
endmodule
