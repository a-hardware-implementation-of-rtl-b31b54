// nn_561_top: a 5-6-1 feed-forward neural network for a real-time trigger
// decision. Five signed 8-bit input samples feed six hidden neurons; their
// 8-bit outputs feed one output neuron whose 8-bit output, g scaled to
// [0, 255], is the network response (a larger value is more signal-like; a cut
// such as nn_out > 128 or > 179 makes the decision).
//
// Structure: an input register, the hidden layer (six neuron instances, each
// with its own 1024 x 16 activation block RAM) and the output neuron (a
// seventh block RAM): seven block RAMs in all. The 36 weights and 7 thresholds
// are parameters, fixed when the design is built.
//
// Interface: present x_in with in_valid high at a rising edge; the result is
// on nn_out with out_valid high after the 11th rising edge counted from, and
// including, that one (LATENCY = 11). A new pattern may be presented on every
// clock. rst (synchronous, active high) clears only the valid pipeline.
//
// The network shape, 8-bit buses, block RAM size, half-table symmetry and the
// 11-clock latency follow the original design; the number formats, stage split,
// rounding and the example weights are this implementation's own choices.
module nn_561_top import nn_pkg::*; #(
  parameter w_hid_t     W_HID  = DEF_W_HID,
  parameter w_hid_vec_t TH_HID = DEF_TH_HID,
  parameter w_hid_vec_t W_OUT  = DEF_W_OUT,
  parameter weight_t    TH_OUT = DEF_TH_OUT,
  parameter int         PRE_W  = DATA_W      // internal network width, 8..11
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    in_valid,
  input  sample_t x_in [N_IN],
  output logic    out_valid,
  output act_t    nn_out
);

  sample_t                   x_q   [N_IN];
  act_t                      h     [N_HID];
  logic signed [DATA_W:0]    h_ext [N_HID];
  logic        [LATENCY-1:0] valid_sr;

  // stage 1: input register
  always_ff @(posedge clk) x_q <= x_in;

  // stages 2..6: hidden layer
  for (genvar j = 0; j < N_HID; j++) begin : g_hidden
    neuron #(
      .N      (N_IN),
      .X_W    (DATA_W),
      .SHIFT  (HID_SHIFT),
      .WEIGHTS(W_HID[j]),
      .THETA  (weight_t'(TH_HID[j])),
      .PRE_W  (PRE_W)
    ) u_neuron (
      .clk(clk),
      .x  (x_q),
      .y  (h[j])
    );
    assign h_ext[j] = {1'b0, h[j]};   // unsigned hidden output as a positive signed value
  end

  // stages 7..11: output neuron
  neuron #(
    .N      (N_HID),
    .X_W    (DATA_W + 1),
    .SHIFT  (OUT_SHIFT),
    .WEIGHTS(W_OUT),
    .THETA  (TH_OUT),
    .PRE_W  (PRE_W)
  ) u_out (
    .clk(clk),
    .x  (h_ext),
    .y  (nn_out)
  );

  // valid pipeline, as long as the datapath
  always_ff @(posedge clk) begin
    if (rst) valid_sr <= '0;
    else     valid_sr <= {valid_sr[LATENCY-2:0], in_valid};
  end

  assign out_valid = valid_sr[LATENCY-1];

endmodule
