// nn_pkg: sizes, number formats and default network constants shared by the
// 5-6-1 feed-forward neural network datapath.
//
// Number formats (the bit widths are the 8-bit choice of the original design;
// the binary-point positions are this implementation's own choice):
//   sample_t  input pattern x_k, signed 8-bit, real value x = X / 2**FRAC_X
//   weight_t  weight w and threshold theta, signed 8-bit; weights are w*2**FRAC_W,
//             thresholds are in pre-activation units (theta*2**FRAC_A)
//   pre_t     pre-activation a = (1/T) sum w x + theta, signed 8-bit, a = A / 2**FRAC_A.
//             It is the narrow "internal network": larger sums wrap around.
//   act_t     neuron output g(a) scaled to [0, 2**8), unsigned 8-bit
// The activation g(a) = 1/(1+exp(-2a)) is held for a >= 0 only, in a
// 1024 x 16-bit table (Q0.16); g(-a) = 1 - g(a) gives the other half.
// With T = 1 the 1/T factor is a plain right shift that realigns the binary
// point of the product sum to that of the pre-activation.
package nn_pkg;

  localparam int N_IN     = 5;    // input nodes
  localparam int N_HID    = 6;    // hidden nodes
  localparam int DATA_W   = 8;    // width of every bus between nodes
  localparam int LUT_DEPTH = 1024; // block RAM depth of one activation table
  localparam int LUT_W    = 16;   // block RAM width of one activation table
  localparam int FRAC_X   = 4;    // fractional bits of an input sample
  localparam int FRAC_W   = 4;    // fractional bits of a weight
  localparam int FRAC_A   = 4;    // fractional bits of a pre-activation
  localparam int FRAC_H   = DATA_W; // a hidden output h stands for h / 2**8

  // right shifts that take a product sum to pre-activation units
  localparam int HID_SHIFT = FRAC_X + FRAC_W - FRAC_A;  // = 4
  localparam int OUT_SHIFT = FRAC_H + FRAC_W - FRAC_A;  // = 8

  // pipeline: 1 input register + 5 stages per neuron layer
  localparam int NEURON_LAT = 5;
  localparam int LATENCY    = 1 + 2 * NEURON_LAT;      // = 11 clocks

  typedef logic signed [DATA_W-1:0] sample_t;
  typedef logic signed [DATA_W-1:0] weight_t;
  typedef logic signed [DATA_W-1:0] pre_t;
  typedef logic        [DATA_W-1:0] act_t;
  typedef logic        [LUT_W-1:0]  lut_word_t;

  // weight sets, packed so that a row can be handed to a neuron as a constant;
  // index 0 is the first listed value (hence the ascending ranges). An element
  // is read back with $signed().
  typedef logic [0:N_IN-1][DATA_W-1:0]             w_in_vec_t;   // one hidden node
  typedef logic [0:N_HID-1][0:N_IN-1][DATA_W-1:0]  w_hid_t;      // hidden layer
  typedef logic [0:N_HID-1][DATA_W-1:0]            w_hid_vec_t;  // hidden thresholds, output node

  // Default network constants. The trained values are not published, so these
  // are an example set of the same shape (30 + 6 weights, 6 + 1 thresholds).
  localparam w_hid_t DEF_W_HID = '{
    '{ 8'sd22, -8'sd14,  8'sd10,  8'sd18, -8'sd8  },
    '{ -8'sd18, 8'sd21, -8'sd12,  8'sd6,   8'sd16 },
    '{ 8'sd12,  8'sd12, -8'sd20, -8'sd10,  8'sd14 },
    '{ -8'sd10, -8'sd16, 8'sd18,  8'sd24, -8'sd12 },
    '{ 8'sd20,  8'sd8,   8'sd14, -8'sd18, -8'sd22 },
    '{ -8'sd14, 8'sd20,  8'sd6,   8'sd12,  8'sd18 }
  };
  localparam w_hid_vec_t DEF_TH_HID = '{ 8'sd3, -8'sd5, 8'sd8, -8'sd2, 8'sd6, -8'sd9 };
  localparam w_hid_vec_t DEF_W_OUT  = '{ 8'sd55, -8'sd48, 8'sd44, -8'sd52, 8'sd62, -8'sd40 };
  localparam weight_t    DEF_TH_OUT = -8'sd10;

endpackage
