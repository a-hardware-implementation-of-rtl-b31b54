// tb_neuron: two neuron instances, one shaped like a hidden node (5 signed
// 8-bit inputs, shift 4) and one like the output node (6 unsigned 8-bit inputs
// with a zero sign bit, shift 8), fed a new random input set every clock.
// Each output is compared with the reference model exactly NEURON_LAT = 5
// edges after its inputs were sampled. Counts pre-activations that stayed in
// the 8-bit range and ones that wrapped around, and fails if either kind was
// never seen.
module tb_neuron;
  import nn_ref_pkg::*;

  localparam int NCYC = 4000;
  localparam int LAT  = 5;
  localparam logic [0:4][7:0] WH = '{8'sd23, -8'sd17, 8'sd9, -8'sd31, 8'sd14};
  localparam logic signed [7:0] TH_H = -8'sd6;
  localparam logic [0:5][7:0] WO = '{8'sd60, -8'sd45, 8'sd33, -8'sd70, 8'sd52, -8'sd28};
  localparam logic signed [7:0] TH_O = 8'sd11;

  logic              clk = 1'b0;
  logic signed [7:0] xh [5];
  logic signed [8:0] xo [6];
  logic        [7:0] yh, yo;
  int checks = 0, failures = 0;
  int n_wrap = 0, n_inrange = 0;
  int exp_h [$], exp_o [$];

  neuron #(.N(5), .X_W(8), .SHIFT(4), .WEIGHTS(WH), .THETA(TH_H)) dut_h (
    .clk(clk), .x(xh), .y(yh));
  neuron #(.N(6), .X_W(9), .SHIFT(8), .WEIGHTS(WO), .THETA(TH_O)) dut_o (
    .clk(clk), .x(xo), .y(yo));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xi [8], wi [8], p;
    for (int k = 0; k < 5; k++) xh[k] = '0;
    for (int k = 0; k < 6; k++) xo[k] = '0;
    @(negedge clk);
    for (int c = 0; c < NCYC + LAT; c++) begin
      if (c < NCYC) begin
        // hidden-like node: narrow inputs most of the time, full range sometimes
        for (int k = 0; k < 5; k++) begin
          xh[k] = ($urandom_range(0, 3) == 0) ? 8'($urandom) : 8'($signed($urandom_range(0, 64)) - 32);
          xi[k] = int'(xh[k]);
          wi[k] = int'($signed(WH[k]));
        end
        p = pre_act(5, xi, wi, int'(TH_H), 4);
        if (p < -128 || p > 127) n_wrap++; else n_inrange++;
        exp_h.push_back(act8(wrap8(p)));
        // output-like node
        for (int k = 0; k < 6; k++) begin
          xo[k] = 9'($urandom_range(0, 255));
          xi[k] = int'(xo[k]);
          wi[k] = int'($signed(WO[k]));
        end
        p = pre_act(6, xi, wi, int'(TH_O), 8);
        if (p < -128 || p > 127) n_wrap++; else n_inrange++;
        exp_o.push_back(act8(wrap8(p)));
      end
      @(posedge clk);
      #1;
      if (c >= LAT - 1 && exp_h.size() > 0) begin
        int eh, eo;
        eh = exp_h.pop_front();
        eo = exp_o.pop_front();
        checks += 2;
        if (int'(yh) != eh) begin
          failures++;
          if (failures < 10) $display("cycle %0d hidden-like: got %0d expected %0d", c, yh, eh);
        end
        if (int'(yo) != eo) begin
          failures++;
          if (failures < 10) $display("cycle %0d output-like: got %0d expected %0d", c, yo, eo);
        end
      end
      @(negedge clk);
    end
    $display("pre-activations in range: %0d, wrapped: %0d", n_inrange, n_wrap);
    checks++;
    if (n_wrap == 0 || n_inrange == 0) failures++;
    checks++;
    if (exp_h.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
