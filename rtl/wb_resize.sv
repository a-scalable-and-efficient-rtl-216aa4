// wb_resize: widens the weight stream by the resize factor.
//
// Weights arrive from memory as IN_W-bit beats. The PEs take a package of
// FACTOR*IN_W bits per cycle (DB_OUT_BW x PE_BW, 384 bits by default), so
// this block gathers FACTOR consecutive beats into one package: the bandwidth
// grows by FACTOR and the initiation interval of the package stream becomes
// FACTOR input beats. Beat i of a group lands in bits [i*IN_W +: IN_W], i.e.
// in window row i of the package. A bias is sent as a whole package of its
// own, so every stream is a whole number of packages.
// Timing: a package is offered the cycle after its last beat is taken; with
// a ready consumer one beat is accepted every cycle.
// Origin: resizing the W stream to the PE package width follows the original
// weight buffer. The gathering register and its beat counter are this design's own choice.
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
module wb_resize #(
  parameter int IN_W   = 128,
  parameter int FACTOR = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic [IN_W-1:0]        in_data,
  input  logic                   in_valid,
  output logic                   in_ready,
  output logic [FACTOR*IN_W-1:0] out_data,
  output logic                   out_valid,
  input  logic                   out_ready
);
  logic [$clog2(FACTOR+1)-1:0] cnt;

  assign out_valid = (int'(cnt) == FACTOR);
  assign in_ready  = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; out_data <= '0;
    end else if (clear) begin
      cnt <= '0;
    end else begin
      if (in_valid && in_ready) begin
        out_data[(out_valid ? 0 : int'(cnt))*IN_W +: IN_W] <= in_data;
        cnt <= out_valid ? 1 : cnt + 1'b1;
      end else if (out_valid && out_ready) begin
        cnt <= '0;
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
