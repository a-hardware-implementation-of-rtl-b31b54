// tb_activation_unit: applies every 8-bit pre-activation (-128..127), one per
// clock back to back, and checks that the output registered at the second
// edge (counting the one that samples the argument) equals
// round(256 * g(a)) built from the half table and the symmetry g(-a) = 1 - g(a).
// Also counts how many negative (mirrored) and non-negative arguments were
// exercised and that the extreme codes -128 and 127 give 0 and 255.
// A second instance with an 11-bit pre-activation is swept over all 2048 codes
// the same way; it uses the whole 1024-word table and the clipping of the one
// magnitude (1024) that lies past its end.
module tb_activation_unit;
  import nn_ref_pkg::*;

  logic              clk = 1'b0;
  logic signed [7:0] pre;
  logic        [7:0] y;
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0;
  int hist [$];

  activation_unit dut (.clk(clk), .pre(pre), .y(y));

  logic signed [10:0] pre_w;
  logic        [7:0]  y_w;
  int n_wide = 0;

  activation_unit #(.PRE_W(11)) dut_w (.clk(clk), .pre(pre_w), .y(y_w));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pre = '0;
    @(negedge clk);
    for (int i = 0; i < 256 + 1; i++) begin
      if (i < 256) begin
        pre = 8'(i - 128);
        hist.push_back(i - 128);
      end
      @(posedge clk);
      #1;
      // the argument sampled at the previous edge went through the table at
      // that edge and its result was registered at this one: 2 clocks
      if (i >= 1) begin
        int a, e;
        a = hist.pop_front();
        e = act8(a);
        checks++;
        if (int'(y) != e) begin
          failures++;
          if (failures < 10) $display("a=%0d: got %0d expected %0d", a, y, e);
        end
        if (a < 0) n_neg++; else n_pos++;
        if (a == -128) begin checks++; if (y != 8'd0)   failures++; end
        if (a == 127)  begin checks++; if (y != 8'd255) failures++; end
        if (a == 0)    begin checks++; if (y != 8'd128) failures++; end
      end
      @(negedge clk);
    end
    checks++;
    if (n_neg != 128 || n_pos != 128) failures++;

    // 11-bit pre-activation, all codes
    pre_w = '0;
    for (int i = 0; i < 2048 + 1; i++) begin
      if (i < 2048) begin
        pre_w = 11'(i - 1024);
        hist.push_back(i - 1024);
      end
      @(posedge clk);
      #1;
      if (i >= 1) begin
        int a, e;
        a = hist.pop_front();
        e = act8(a);
        checks++;
        n_wide++;
        if (int'(y_w) != e) begin
          failures++;
          if (failures < 10) $display("11-bit a=%0d: got %0d expected %0d", a, y_w, e);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_wide != 2048) failures++;
    $display("negative (mirrored) arguments: %0d, non-negative: %0d", n_neg, n_pos);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
