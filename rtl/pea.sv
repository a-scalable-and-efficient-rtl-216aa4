// pea: the processing element array.
//
// PE_N processing elements work in lockstep. Every fire hands the same
// data-buffer package (DB_OUT_BW*PE_BW bits, N elements) to all PEs, and each
// PE its own weight package and bias from its weight stream buffer. A fire
// needs the data package, all PE_N weight packages and room for the results.
// All PEs finish a window on the same cycle, so their PE_N results form one
// entry of a small result FIFO that the output handler drains. The array only
// fires while the FIFO has room for every result that may still be in the
// PE pipelines (FIFO_D - PE latency - 1 entries), so the PEs never stall.
// Timing: II = 1 while inputs are present and the FIFO drains.
// Origin: PE_N PEs that share each data package and have their own weight streams
// follow the original design. The result FIFO and the credit rule that stops a fire
// without room are this design's own choices.
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
module pea #(
  parameter int PE_N   = 8,
  parameter int N      = 24,
  parameter int DATA_W = 16,
  parameter int FRAC   = 14,
  parameter int ACC_W  = 48,
  parameter int FIFO_D = 8
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic                                 relu,
  input  logic [DATA_W-1:0]                    scale,
  // data buffer
  input  logic [N*DATA_W-1:0]                  x_data,
  input  logic                                 x_first,
  input  logic                                 x_last,
  input  logic                                 x_valid,
  output logic                                 x_ready,
  // weight buffer
  input  logic [PE_N-1:0][N*DATA_W-1:0]        w_data,
  input  logic [PE_N-1:0][DATA_W-1:0]          w_bias,
  input  logic [PE_N-1:0]                      w_valid,
  output logic                                 w_ready,
  // results
  output logic [PE_N-1:0][DATA_W-1:0]          res_data,
  output logic                                 res_valid,
  input  logic                                 res_ready
);
  localparam int LAT = 4;
  localparam int CW  = $clog2(FIFO_D + 1);

  logic [CW-1:0] count;
  logic          room, fire;
  logic [PE_N-1:0][DATA_W-1:0] pe_res;
  logic [PE_N-1:0]             pe_valid;

  assign room    = int'(count) < FIFO_D - LAT - 1;
  assign fire    = x_valid && (&w_valid) && room;
  assign x_ready = fire;
  assign w_ready = fire;

  for (genvar i = 0; i < PE_N; i++) begin : g_pe
    pe #(.N(N), .DATA_W(DATA_W), .FRAC(FRAC), .ACC_W(ACC_W)) u_pe (
      .clk, .rst_n, .in_valid(fire), .x(x_data), .w(w_data[i]), .bias(w_bias[i]),
      .first(x_first), .last(x_last), .relu, .scale,
      .res(pe_res[i]), .res_valid(pe_valid[i]));
  end

  // result FIFO
  logic [PE_N*DATA_W-1:0]    fifo [FIFO_D];
  logic [$clog2(FIFO_D)-1:0] wp, rp;
  logic                      push, pop;
  assign push      = pe_valid[0];
  assign pop       = res_valid && res_ready;
  assign res_valid = count != 0;
  assign res_data  = fifo[rp];

  always_ff @(posedge clk) if (push) fifo[wp] <= pe_res;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (start) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (int'(wp) == FIFO_D - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == FIFO_D - 1) ? '0 : rp + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (int'(count) < FIFO_D || pop));
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (&pe_valid) || !(|pe_valid));
endmodule
