// tb_nn_561_top: end-to-end test of the 5-6-1 network at its default
// parameters (no parameter is overridden), and the full-size run.
//
// 15,000 input patterns are generated: half "signal", half "background", each
// a set of five Gaussian variables (sum of twelve uniform numbers) with class
// dependent means, in the 8-bit input format (x * 16, clipped). They are fed
// through the network, mostly back to back with random idle gaps, and one
// burst is cut short by a reset. Every result is compared bit for bit with the
// integer reference model, and must appear exactly 11 clocks after its pattern
// (out_valid high after the 11th edge counting the sampling edge). The run
// counts, and fails on any that never happened: back-to-back inputs, idle
// gaps, the reset flush, negative (mirrored) and non-negative activation
// arguments, and pre-activations that overflowed the 8-bit internal network in
// the hidden and in the output layer. It also prints how many signal and
// background patterns pass the cuts nn_out > 128 and nn_out > 179.
module tb_nn_561_top;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int NPAT = 15000;

  logic    clk = 1'b0;
  logic    rst;
  logic    in_valid;
  sample_t x_in [N_IN];
  logic    out_valid;
  act_t    nn_out;

  int checks = 0, failures = 0;
  longint cycle = 0;
  int exp_q [$];           // expected outputs, in order
  longint due_q [$];       // cycle at which each is due
  int cls_q [$];           // class of each pattern (1 = signal)
  int n_b2b = 0, n_gap = 0, n_flush = 0, n_neg = 0, n_pos = 0, n_wrap_h = 0, n_wrap_o = 0;
  int n_out = 0, n_sig = 0, n_bkg = 0;
  int sig_pass [2], bkg_pass [2];
  logic prev_valid = 1'b0;

  nn_561_top dut (
    .clk(clk), .rst(rst), .in_valid(in_valid), .x_in(x_in),
    .out_valid(out_valid), .nn_out(nn_out)
  );

  always #5 clk = ~clk;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Gaussian variable, mean mu and unit width, in x*16 units, clipped to 8 bits
  function automatic int gauss16(input real mu);
    real s;
    int v;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom_range(0, 65535)) / 65536.0;
    v = $rtoi($floor((s - 6.0 + mu) * 16.0 + 0.5));
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  // reference network; also counts the mechanisms the pattern exercises
  function automatic int ref_net(input int xv [8]);
    int w [8], hv [8], p;
    for (int j = 0; j < N_HID; j++) begin
      for (int k = 0; k < N_IN; k++) w[k] = int'($signed(DEF_W_HID[j][k]));
      p = pre_act(N_IN, xv, w, int'($signed(DEF_TH_HID[j])), HID_SHIFT);
      if (p < -128 || p > 127) n_wrap_h++;
      p = wrap8(p);
      if (p < 0) n_neg++; else n_pos++;
      hv[j] = act8(p);
    end
    for (int j = 0; j < N_HID; j++) w[j] = int'($signed(DEF_W_OUT[j]));
    p = pre_act(N_HID, hv, w, int'(DEF_TH_OUT), OUT_SHIFT);
    if (p < -128 || p > 127) n_wrap_o++;
    p = wrap8(p);
    if (p < 0) n_neg++; else n_pos++;
    return act8(p);
  endfunction

  // drive one pattern (or an idle cycle) before the next rising edge
  task automatic drive(input bit valid, input int cls);
    int xv [8];
    real mu [5];
    @(negedge clk);
    in_valid = valid;
    if (valid) begin
      mu = (cls == 1) ? '{0.6, -0.5, 0.4, 0.7, -0.6} : '{-0.6, 0.5, -0.4, -0.7, 0.6};
      for (int k = 0; k < N_IN; k++) begin
        xv[k] = gauss16(mu[k]);
        x_in[k] = sample_t'(xv[k]);
      end
      // due after the 11th edge counting the one that samples it
      exp_q.push_back(ref_net(xv));
      due_q.push_back(cycle + longint'(LATENCY));
      cls_q.push_back(cls);
      if (prev_valid) n_b2b++;
    end else begin
      for (int k = 0; k < N_IN; k++) x_in[k] = sample_t'($urandom);
      n_gap++;
    end
    prev_valid = valid;
  endtask

  // output monitor
  always @(posedge clk) begin
    #1;
    if (!rst) begin
      if (out_valid) begin
        n_out++;
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          if (failures < 10) $display("cycle %0d: unexpected output", cycle);
        end else begin
          int e, cls;
          longint due;
          e = exp_q.pop_front();
          due = due_q.pop_front();
          cls = cls_q.pop_front();
          if (int'(nn_out) != e || cycle != due) begin
            failures++;
            if (failures < 10)
              $display("cycle %0d: got %0d expected %0d (due at cycle %0d)", cycle, nn_out, e, due);
          end
          if (cls == 1) begin
            n_sig++;
            if (nn_out > 128) sig_pass[0]++;
            if (nn_out > 179) sig_pass[1]++;
          end else begin
            n_bkg++;
            if (nn_out > 128) bkg_pass[0]++;
            if (nn_out > 179) bkg_pass[1]++;
          end
        end
      end else if (due_q.size() > 0 && due_q[0] <= cycle) begin
        checks++;
        failures++;
        if (failures < 10) $display("cycle %0d: output due at cycle %0d missing", cycle, due_q[0]);
        void'(exp_q.pop_front());
        void'(due_q.pop_front());
        void'(cls_q.pop_front());
      end
    end
  end

  initial begin
    rst = 1'b1;
    in_valid = 1'b0;
    for (int k = 0; k < N_IN; k++) x_in[k] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // a short burst flushed by a reset: none of it may come out
    for (int i = 0; i < 5; i++) drive(1'b1, i % 2);
    @(negedge clk);
    in_valid = 1'b0;
    rst = 1'b1;
    exp_q.delete();
    due_q.delete();
    cls_q.delete();
    n_flush++;
    prev_valid = 1'b0;
    @(negedge clk);
    rst = 1'b0;
    repeat (LATENCY + 2) begin
      @(posedge clk);
      #2;
      checks++;
      if (out_valid) failures++;
    end

    for (int i = 0; i < NPAT; i++) begin
      if ($urandom_range(0, 9) == 0) drive(1'b0, 0);
      drive(1'b1, i % 2);
    end
    drive(1'b0, 0);
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(posedge clk);
    #2;

    checks++;
    if (exp_q.size() != 0 || n_out != NPAT) begin
      failures++;
      $display("outputs received %0d of %0d", n_out, NPAT);
    end
    $display("back-to-back inputs %0d, idle gaps %0d, reset flushes %0d", n_b2b, n_gap, n_flush);
    $display("activation arguments: negative (mirrored) %0d, non-negative %0d", n_neg, n_pos);
    $display("8-bit pre-activation overflows: hidden %0d, output %0d", n_wrap_h, n_wrap_o);
    $display("signal %0d: nn_out>128 %0d, >179 %0d; background %0d: >128 %0d, >179 %0d",
             n_sig, sig_pass[0], sig_pass[1], n_bkg, bkg_pass[0], bkg_pass[1]);
    checks++;
    if (n_b2b == 0 || n_gap == 0 || n_flush == 0 || n_neg == 0 || n_pos == 0 ||
        n_wrap_h == 0 || n_wrap_o == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
