// status_regs: AXI4-lite slave holding the accelerator's status registers.
//
// The host reads these registers only; all layer data and configuration use
// the streams. Software reads the template numbers of the loaded accelerator
// here before it sizes its buffers, and polls busy/progress during inference.
// Register map (32-bit, byte addresses), this design's own choice:
//   0x00  {PE_N[7:0], DB_OUT_BW[7:0], DATA_W[7:0], FRAC_W[7:0]}
//   0x04  PE_BW (bits)
//   0x08  KERNELS_N
//   0x0C  {30'b0, current op is pooling/fc (1 bit), busy}
//   0x10  number of layers completed since reset
//   0x14  clock cycles the last completed layer took
// Writes are refused with SLVERR. A read answers one cycle after the address
// is accepted and holds until RREADY.
// Origin: a read-only AXI-lite port for status registers follows the original
// design; the register map is this design's own choice.
// Address bits [1:0] are unread because registers are word-aligned
// (UNUSEDSIGNAL).
// Lint: Verilator reports rst_n as both synchronous and asynchronous (SYNCASYNCNET).
// The synchronous use is only the `disable iff (!rst_n)` of the handshake assertions;
// the circuit itself uses rst_n only as an asynchronous reset.
module status_regs
  import cnna_pkg::*;
#(
  parameter int AW          = 6,
  parameter int P_DATA_W    = DATA_W,
  parameter int P_FRAC_W    = FRAC_W,
  parameter int P_PE_BW     = PE_BW,
  parameter int P_PE_N      = PE_N,
  parameter int P_DB_OUT_BW = DB_OUT_BW,
  parameter int P_KERNELS_N = KERNELS_N
) (
  input  logic          clk,
  input  logic          rst_n,
  // status inputs
  input  logic          busy,
  input  logic          layer_done,
  input  op_e           cur_op,
  // AXI4-lite read channels
  input  logic [AW-1:0] s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // AXI4-lite write channels (refused)
  input  logic [AW-1:0] s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready
);
  logic [31:0] layers, cycles, last_cycles;
  logic        aw_got, w_got;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      layers <= '0; cycles <= '0; last_cycles <= '0;
    end else begin
      if (busy) cycles <= cycles + 1;
      if (layer_done) begin
        layers      <= layers + 1;
        last_cycles <= cycles + 1;
        cycles      <= '0;
      end
    end
  end

  function automatic logic [31:0] reg_read(input logic [AW-1:0] a);
    case (a[AW-1:2])
      0: return {8'(P_PE_N), 8'(P_DB_OUT_BW), 8'(P_DATA_W), 8'(P_FRAC_W)};
      1: return 32'(P_PE_BW);
      2: return 32'(P_KERNELS_N);
      3: return {30'b0, cur_op != OP_CONV, busy};
      4: return layers;
      5: return last_cycles;
      default: return 32'hDEAD_BEEF;
    endcase
  endfunction

  assign s_arready = !s_rvalid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0; s_rdata <= '0; s_rresp <= 2'b00;
    end else if (s_arvalid && s_arready) begin
      s_rvalid <= 1'b1;
      s_rdata  <= reg_read(s_araddr);
      s_rresp  <= (s_araddr[AW-1:2] <= 5) ? 2'b00 : 2'b10;
    end else if (s_rvalid && s_rready) begin
      s_rvalid <= 1'b0;
    end
  end

  // Write path: take address and data, answer SLVERR.
  assign s_awready = !aw_got && !s_bvalid;
  assign s_wready  = !w_got && !s_bvalid;
  assign s_bresp   = 2'b10;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_got <= 1'b0; w_got <= 1'b0; s_bvalid <= 1'b0;
    end else begin
      if (s_awvalid && s_awready) aw_got <= 1'b1;
      if (s_wvalid && s_wready)   w_got  <= 1'b1;
      if ((aw_got || (s_awvalid && s_awready)) && (w_got || (s_wvalid && s_wready)) && !s_bvalid) begin
        s_bvalid <= 1'b1; aw_got <= 1'b0; w_got <= 1'b0;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
    end
  end

  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
  wire unused_wdata = ^s_wdata ^ ^s_awaddr;
endmodule
