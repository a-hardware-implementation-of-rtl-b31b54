// tb_nn_561_wide: the 5-6-1 network with its internal pre-activation network
// widened from 8 to 11 bits (PRE_W = 11), the remedy for the out-of-range
// effect of the 8-bit design. Runs the same kind of 15,000-pattern stream as
// tb_nn_561_top, checks every output bit for bit and 11 clocks after its
// pattern against the reference model at 11 bits, and also evaluates the
// reference at 8 bits. It counts pre-activations that overflow 8 bits (present
// in the 8-bit design) and 11 bits (expected none), and the patterns whose
// output the wider network changes; it fails if the wide network overflowed or
// if no 8-bit overflow occurred to be removed. Cut efficiencies (nn_out > 128,
// > 179) are printed for both widths.
module tb_nn_561_wide;
  import nn_pkg::*;
  import nn_ref_pkg::*;

  localparam int NPAT = 15000;
  localparam int WIDE = 11;

  logic    clk = 1'b0;
  logic    rst;
  logic    in_valid;
  sample_t x_in [N_IN];
  logic    out_valid;
  act_t    nn_out;

  int checks = 0, failures = 0;
  longint cycle = 0;
  int exp_q [$];
  longint due_q [$];
  int n_out = 0, n_ovf8 = 0, n_ovf_wide = 0, n_changed = 0;
  int pass8 [2][2], passw [2][2];   // [class][cut]

  nn_561_top #(.PRE_W(WIDE)) dut (
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

  // reference network with a pre-activation of the given width
  function automatic int ref_net(input int xv [8], input int bits, output int ovf);
    int w [8], hv [8], p;
    ovf = 0;
    for (int j = 0; j < N_HID; j++) begin
      for (int k = 0; k < N_IN; k++) w[k] = int'($signed(DEF_W_HID[j][k]));
      p = pre_act(N_IN, xv, w, int'($signed(DEF_TH_HID[j])), HID_SHIFT);
      if (p != wrapn(p, bits)) ovf++;
      hv[j] = act8(wrapn(p, bits));
    end
    for (int j = 0; j < N_HID; j++) w[j] = int'($signed(DEF_W_OUT[j]));
    p = pre_act(N_HID, hv, w, int'(DEF_TH_OUT), OUT_SHIFT);
    if (p != wrapn(p, bits)) ovf++;
    return act8(wrapn(p, bits));
  endfunction

  always @(posedge clk) begin
    #1;
    if (!rst && out_valid) begin
      n_out++;
      checks++;
      if (exp_q.size() == 0) failures++;
      else begin
        int e;
        longint due;
        e = exp_q.pop_front();
        due = due_q.pop_front();
        if (int'(nn_out) != e || cycle != due) begin
          failures++;
          if (failures < 10)
            $display("cycle %0d: got %0d expected %0d (due at cycle %0d)", cycle, nn_out, e, due);
        end
      end
    end
  end

  initial begin
    int xv [8], o8, ow, v8, vw, cls;
    real mu [5];
    rst = 1'b1;
    in_valid = 1'b0;
    for (int k = 0; k < N_IN; k++) x_in[k] = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < NPAT; i++) begin
      @(negedge clk);
      cls = i % 2;
      mu = (cls == 1) ? '{0.6, -0.5, 0.4, 0.7, -0.6} : '{-0.6, 0.5, -0.4, -0.7, 0.6};
      for (int k = 0; k < N_IN; k++) begin
        xv[k] = gauss16(mu[k]);
        x_in[k] = sample_t'(xv[k]);
      end
      in_valid = 1'b1;
      v8 = ref_net(xv, 8, o8);
      vw = ref_net(xv, WIDE, ow);
      n_ovf8 += o8;
      n_ovf_wide += ow;
      if (v8 != vw) n_changed++;
      if (v8 > 128) pass8[cls][0]++;
      if (v8 > 179) pass8[cls][1]++;
      if (vw > 128) passw[cls][0]++;
      if (vw > 179) passw[cls][1]++;
      exp_q.push_back(vw);
      due_q.push_back(cycle + longint'(LATENCY));
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LATENCY + 2) @(posedge clk);
    #2;
    checks++;
    if (n_out != NPAT || exp_q.size() != 0) failures++;
    $display("pre-activation overflows: 8-bit network %0d, %0d-bit network %0d; outputs changed %0d",
             n_ovf8, WIDE, n_ovf_wide, n_changed);
    $display("8-bit  internal: signal >128 %0d >179 %0d, background >128 %0d >179 %0d",
             pass8[1][0], pass8[1][1], pass8[0][0], pass8[0][1]);
    $display("%0d-bit internal: signal >128 %0d >179 %0d, background >128 %0d >179 %0d",
             WIDE, passw[1][0], passw[1][1], passw[0][0], passw[0][1]);
    checks++;
    if (n_ovf_wide != 0 || n_ovf8 == 0 || n_changed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
