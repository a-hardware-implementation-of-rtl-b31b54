// sigmoid_bram: one activation look-up table, a 1024-deep, 16-bit wide
// single-port block RAM used as a ROM.
//
// Word m holds G16[m] = min(65535, floor(65536 / (1 + exp(-2*m/16)) + 0.5)),
// i.e. g(a) = 1/(1+exp(-2a)) in Q0.16 for the non-negative argument
// a = m / 2**STEP_LOG2 (a step of 1/16). Only the non-negative half is stored;
// activation_unit rebuilds the negative half from g(-a) = 1 - g(a). The table
// is computed by a constant function when the design is elaborated, which
// gives the block RAM its initial contents, as a configuration bitstream would.
//
// Interface: addr is sampled on the rising clock edge and the word appears on
// dout after that edge (one clock of read latency, like a synchronous block
// RAM read port). There is no write port and no reset: the table is constant.
// Depth, width and the single port follow the original design; the Q0.16
// format and the argument step of 1/16 are this implementation's choice.
module sigmoid_bram #(
  parameter int DEPTH     = nn_pkg::LUT_DEPTH,
  parameter int WIDTH     = nn_pkg::LUT_W,
  parameter int STEP_LOG2 = nn_pkg::FRAC_A
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [WIDTH-1:0]         dout
);

  typedef logic [WIDTH-1:0] table_t [DEPTH];

  function automatic table_t make_table();
    table_t t;
    real    v;
    for (int m = 0; m < DEPTH; m++) begin
      v = (2.0 ** WIDTH) / (1.0 + $exp(-2.0 * real'(m) / (2.0 ** STEP_LOG2)));
      v = $floor(v + 0.5);
      t[m] = (v > (2.0 ** WIDTH) - 1.0) ? '1 : WIDTH'($rtoi(v));
    end
    return t;
  endfunction

  localparam table_t TABLE = make_table();

  always_ff @(posedge clk) dout <= TABLE[addr];

endmodule
