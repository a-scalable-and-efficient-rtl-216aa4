// pe: one processing element, computing f(scale * (bias + sum_i x_i*w_i)).
//
// Each fire delivers a pair of frames, N data elements x and N weights w
// (N = DB_OUT_BW*PE_BW/DATA_W = 24 by default), signed fixed point with FRAC
// fractional bits. Stage 1 multiplies all pairs in parallel, stage 2 adds the
// N products in a binary summing tree, stage 3 accumulates: the frame marked
// `first` starts the sum from the bias (shifted to the product's binary
// point), the following frames add to it. On the frame marked `last` stage 4
// multiplies the accumulated value by the layer's scale factor, rounds back
// to FRAC fractional bits, saturates to DATA_W bits and applies the
// activation (linear or ReLU); the result leaves on `res`/`res_valid`.
// Timing: initiation interval 1, no stall (the PE array only fires when the
// result can be stored); a result appears LATENCY = 4 cycles after the fire
// that carries `last`. The structure (multipliers, tree, accumulator, scale,
// activation) follows the paper; the stage split, the accumulator width and
// the round-half-up rounding are this design's choices.
module pe #(
  parameter int N      = 24,
  parameter int DATA_W = 16,
  parameter int FRAC   = 14,
  parameter int ACC_W  = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N-1:0][DATA_W-1:0] x,
  input  logic [N-1:0][DATA_W-1:0] w,
  input  logic [DATA_W-1:0]        bias,
  input  logic                     first,
  input  logic                     last,
  input  logic                     relu,
  input  logic [DATA_W-1:0]        scale,
  output logic [DATA_W-1:0]        res,
  output logic                     res_valid
);
  localparam int PW = 2 * DATA_W;
  localparam int NP = 1 << $clog2(N);
  localparam int SW = PW + $clog2(NP) + 1;

  // stage 1: parallel multipliers
  logic signed [PW-1:0]     prod [N];
  logic                     v1, f1, l1;
  logic signed [DATA_W-1:0] b1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; b1 <= '0;
      for (int i = 0; i < N; i++) prod[i] <= '0;
    end else begin
      v1 <= in_valid; f1 <= first; l1 <= last; b1 <= bias;
      for (int i = 0; i < N; i++)
        prod[i] <= $signed(x[i]) * $signed(w[i]);
    end
  end

  // stage 2: summing tree (heap layout, node i = node 2i + node 2i+1)
  logic signed [SW-1:0] tree [2*NP];
  always_comb begin
    tree[0] = '0;
    for (int i = 0; i < NP; i++) tree[NP + i] = (i < N) ? SW'(prod[i]) : '0;
    for (int i = NP - 1; i >= 1; i--) tree[i] = tree[2*i] + tree[2*i+1];
  end
  logic signed [SW-1:0]     sum2;
  logic                     v2, f2, l2;
  logic signed [DATA_W-1:0] b2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum2 <= '0; v2 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0; b2 <= '0;
    end else begin
      sum2 <= tree[1]; v2 <= v1; f2 <= f1; l2 <= l1; b2 <= b1;
    end
  end

  // stage 3: accumulator
  logic signed [ACC_W-1:0] acc, acc_in;
  logic                    v3;
  assign acc_in = f2 ? (ACC_W'(b2) <<< FRAC) : acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; v3 <= 1'b0;
    end else begin
      v3 <= v2 && l2;
      if (v2) acc <= acc_in + ACC_W'(sum2);
    end
  end

  // stage 4: scale, round, saturate, activation
  localparam int MW = ACC_W + DATA_W;
  logic signed [MW-1:0] scaled, rounded;
  logic signed [DATA_W-1:0] sat;
  localparam logic signed [MW-1:0] MAXV = MW'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [MW-1:0] MINV = -MW'(1 << (DATA_W - 1));
  always_comb begin
    scaled  = MW'(acc) * MW'($signed(scale));
    rounded = (scaled + (MW'(1) <<< (2*FRAC - 1))) >>> (2*FRAC);
    if (rounded > MAXV)      sat = MAXV[DATA_W-1:0];
    else if (rounded < MINV) sat = MINV[DATA_W-1:0];
    else                     sat = rounded[DATA_W-1:0];
    if (relu && sat < 0)     sat = '0;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res <= '0; res_valid <= 1'b0;
    end else begin
      res_valid <= v3;
      if (v3) res <= sat;
    end
  end
endmodule
