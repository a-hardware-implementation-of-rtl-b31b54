// neuron: one node of the feed-forward network,
//   y = g( trunc_PRE_W( ((sum_k w_k * x_k) >>> SHIFT) + theta ) ).
//
// The weights and the threshold are constants (parameters), fixed when the
// design is built, as the trained values are stored in the original design.
// All N products are formed in parallel and summed at full width, so the sum
// itself never overflows. The right shift by SHIFT is the 1/T rescaling
// (T = 1) together with the realignment of the binary point to that of the
// pre-activation; it rounds towards minus infinity. The threshold is then added
// and the result is cut to the PRE_W-bit internal network: a pre-activation
// outside [-2**(PRE_W-1), 2**(PRE_W-1)) wraps around, which is the out-of-range
// effect the original design reports for its 8-bit internal lines. PRE_W = 8
// is that design; a wider PRE_W (up to 11) is the remedy it names, more bits in
// the internal network, and still fits the same 1024-word table.
//
// Interface: x holds N signed inputs of X_W bits (the hidden layer gets the
// 8-bit samples; the output layer gets the unsigned hidden outputs with a zero
// sign bit, 9 bits). y is the unsigned DATA_W-bit activation.
// Timing: fully pipelined, one input set per clock, NEURON_LAT = 5 clocks from
// the edge that samples x to the edge that updates y:
//   1 products   2 sum   3 pre-activation   4 table read   5 symmetry + rounding
// The stage split and the binary-point choices are this implementation's own.
module neuron import nn_pkg::*; #(
  parameter int      N       = N_IN,
  parameter int      X_W     = DATA_W,
  parameter int      SHIFT   = HID_SHIFT,
  parameter logic [0:N-1][DATA_W-1:0] WEIGHTS = '0,
  parameter weight_t THETA   = '0,
  parameter int      PRE_W   = DATA_W
) (
  input  logic                  clk,
  input  logic signed [X_W-1:0] x [N],
  output act_t                  y
);

  localparam int PROD_W = X_W + DATA_W;
  localparam int SUM_W  = PROD_W + $clog2(N) + 1;

  logic signed [PROD_W-1:0] prod_q [N];
  logic signed [SUM_W-1:0]  sum_d, sum_q;
  logic signed [PRE_W-1:0]  pre_full, pre_q;

  // stage 1: multipliers
  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) prod_q[k] <= PROD_W'(x[k]) * PROD_W'($signed(WEIGHTS[k]));
  end

  // stage 2: adder tree
  always_comb begin
    sum_d = '0;
    for (int k = 0; k < N; k++) sum_d += SUM_W'(prod_q[k]);
  end

  always_ff @(posedge clk) sum_q <= sum_d;

  // stage 3: 1/T rescaling, threshold, cut to the PRE_W-bit internal network
  always_comb pre_full = PRE_W'((sum_q >>> SHIFT) + SUM_W'(THETA));  // keeps the low PRE_W bits

  always_ff @(posedge clk) pre_q <= pre_full;

  // stages 4 and 5: activation through the half table
  activation_unit #(.PRE_W(PRE_W), .OUT_W(DATA_W)) u_act (
    .clk(clk),
    .pre(pre_q),
    .y  (y)
  );

endmodule
