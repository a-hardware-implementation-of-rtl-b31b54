// activation_unit: neuron activation g(a) = 1/(1+exp(-2a)) through a half
// look-up table.
//
// The signed pre-activation is split into sign and magnitude. The magnitude
// (0..2**(PRE_W-1), clipped to the last word) addresses a sigmoid_bram that
// holds g only for a >= 0; the sign is delayed alongside the block RAM read. For a negative argument the
// symmetry g(-a) = 1 - g(a) is applied as 65536 - G16. The 16-bit result is
// rounded to the OUT_W-bit neuron output (value 2**OUT_W * g) and clipped to
// 2**OUT_W - 1, so the output range is [0, 255] for 8 bits.
//
// Timing: pre is sampled on a rising edge (the block RAM address); y is
// registered one edge later, i.e. a latency of 2 clocks, one result per clock.
// Using a half table to save block RAMs follows the original design; the
// rounding and clipping to 8 bits are this implementation's choice.
module activation_unit #(
  parameter int    PRE_W     = nn_pkg::DATA_W,
  parameter int    OUT_W     = nn_pkg::DATA_W,
  parameter int    LUT_DEPTH = nn_pkg::LUT_DEPTH,
  parameter int    LUT_W     = nn_pkg::LUT_W
) (
  input  logic                    clk,
  input  logic signed [PRE_W-1:0] pre,
  output logic        [OUT_W-1:0] y
);

  localparam int AW = $clog2(LUT_DEPTH);
  localparam int RS = LUT_W - OUT_W;   // bits dropped when rounding

  // magnitudes up to 2**(PRE_W-1) must be at most one past the last address
  if ((1 << (PRE_W - 1)) > LUT_DEPTH) begin : g_check_depth
    $error("activation_unit: PRE_W too wide for the table depth");
  end

  logic [PRE_W-1:0] mag;
  logic [AW-1:0]    addr;
  logic             neg_q;
  logic [LUT_W-1:0] g_half;
  logic [LUT_W:0]   g_full;     // one extra bit: 1 - g can be 65536 - G16
  logic [LUT_W:0]   rounded;
  logic [OUT_W-1:0] y_d;

  always_comb begin
    mag  = pre[PRE_W-1] ? PRE_W'(-pre) : PRE_W'(pre);  // -(-2**(PRE_W-1)) reads back as 2**(PRE_W-1)
    // only -2**(PRE_W-1) with PRE_W = 11 can exceed the table; g has long
    // saturated there, so it reads the last word
    addr = (32'(mag) > 32'(LUT_DEPTH - 1)) ? AW'(LUT_DEPTH - 1) : AW'(mag);
  end

  sigmoid_bram #(.DEPTH(LUT_DEPTH), .WIDTH(LUT_W)) u_lut (
    .clk (clk),
    .addr(addr),
    .dout(g_half)
  );

  always_ff @(posedge clk) neg_q <= pre[PRE_W-1];

  always_comb begin
    g_full  = neg_q ? ((LUT_W+1)'(1) << LUT_W) - (LUT_W+1)'(g_half) : (LUT_W+1)'(g_half);
    rounded = (g_full + ((LUT_W+1)'(1) << (RS - 1))) >> RS;
    y_d     = (rounded > (LUT_W+1)'((1 << OUT_W) - 1)) ? '1 : OUT_W'(rounded);
  end

  always_ff @(posedge clk) y <= y_d;

endmodule
