// tb_sigmoid_bram: reads every word of the activation table, one address per
// clock, and compares it with G16[m] computed from the sigmoid formula. The
// read latency of one clock is checked by comparing each word one edge after
// its address was applied.
module tb_sigmoid_bram;
  import nn_ref_pkg::*;

  logic        clk = 1'b0;
  logic [9:0]  addr;
  logic [15:0] dout;
  int checks = 0, failures = 0;

  sigmoid_bram dut (.clk(clk), .addr(addr), .dout(dout));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = '0;
    @(negedge clk);
    for (int m = 0; m < 1024; m++) begin
      addr = 10'(m);
      @(posedge clk);
      #1;
      checks++;
      if (int'(dout) != g16(m)) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h expected %h", m, dout, g16(m));
      end
      // the word must not change before the next edge
      addr = 10'(1023 - m);
      #2;
      checks++;
      if (int'(dout) != g16(m)) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
