// tb_tcn_predictor: loads random weights and biases through the configuration port, feeds a
// random feature sequence (with idle gaps) and checks, for every access, the hidden vector of
// the first FC layer exactly and y_hat against sigmoid(z) (within 6/256), where the whole
// network (three dilated causal convolutions with dilation 1, 2, 4, kernel 3, ReLU; FC+ReLU;
// FC) is recomputed in the testbench from the full access history; the FC1 input vector
// and conv3's input taps brought out for learning are checked exactly too. Checks the
// 5-cycle latency and that y_hat is 0.5 with all-zero weights after reset.
module tb_tcn_predictor;
  import acpc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [15:0] cfg_wdata = '0;
  logic x_valid = 0;
  logic [C_IN-1:0][ACT_W-1:0] x = '0;
  logic y_valid;
  logic [PROB_W-1:0] y_hat;
  logic [FC_HID-1:0][ACT_W-1:0] y_hidden;
  logic [FC_HID-1:0][WGT_W-1:0] fc2_w_o;
  logic [ACT_W-1:0] fc2_b_o;
  logic [C_HID-1:0][ACT_W-1:0] y_conv;
  logic [FC_HID*C_HID-1:0][WGT_W-1:0] fc1_w_o;
  logic [FC_HID-1:0][ACT_W-1:0] fc1_b_o;
  logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] y_c3in;
  logic [C_HID*C_HID*KSIZE-1:0][WGT_W-1:0] c3_w_o;
  logic [C_HID-1:0][ACT_W-1:0] c3_b_o;
  int checks = 0, failures = 0;

  tcn_predictor dut (.*);
  always #5 clk = ~clk;

  // reference parameters
  int W1[C_HID][C_IN][KSIZE], W2[C_HID][C_HID][KSIZE], W3[C_HID][C_HID][KSIZE];
  int B1[C_HID], B2[C_HID], B3[C_HID];
  int WF1[FC_HID][C_HID], BF1[FC_HID], WF2[FC_HID], BF2;
  // per-layer input histories
  int hx[$][C_HID], h1[$][C_HID], h2[$][C_HID];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int sat(longint v, bit relu);
    v = v >>> 6;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    if (relu && v < 0) v = 0;
    return int'(v);
  endfunction

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = 16'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc_in, lat;
    int o3[C_HID], of1[FC_HID];
    longint acc;
    int z, t, n_hi, n_lo;
    real ref_y;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // zero weights: y_hat = sigmoid(0)
    @(negedge clk);
    x_valid = 1; x[0] = 16'd100;
    @(negedge clk);
    x_valid = 0;
    repeat (4) @(negedge clk);
    chk(y_valid && y_hat == 8'd128, "zero network gives 0.5 after 5 cycles");
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    // random weights
    foreach (W1[o, i, k]) begin W1[o][i][k] = $urandom_range(0, 80) - 40; wr(CONV1_W_BASE + (o*C_IN+i)*KSIZE+k, W1[o][i][k]); end
    foreach (B1[o]) begin B1[o] = $urandom_range(0, 200) - 60; wr(CONV1_B_BASE + o, B1[o]); end
    foreach (W2[o, i, k]) begin W2[o][i][k] = $urandom_range(0, 60) - 30; wr(CONV2_W_BASE + (o*C_HID+i)*KSIZE+k, W2[o][i][k]); end
    foreach (B2[o]) begin B2[o] = $urandom_range(0, 200) - 60; wr(CONV2_B_BASE + o, B2[o]); end
    foreach (W3[o, i, k]) begin W3[o][i][k] = $urandom_range(0, 60) - 30; wr(CONV3_W_BASE + (o*C_HID+i)*KSIZE+k, W3[o][i][k]); end
    foreach (B3[o]) begin B3[o] = $urandom_range(0, 200) - 60; wr(CONV3_B_BASE + o, B3[o]); end
    foreach (WF1[o, i]) begin WF1[o][i] = $urandom_range(0, 80) - 40; wr(FC1_W_BASE + o*C_HID+i, WF1[o][i]); end
    foreach (BF1[o]) begin BF1[o] = $urandom_range(0, 200) - 60; wr(FC1_B_BASE + o, BF1[o]); end
    foreach (WF2[i]) begin WF2[i] = $urandom_range(0, 254) - 127; wr(FC2_W_BASE + i, WF2[i]); end
    BF2 = 0; wr(FC2_B_BASE, BF2);
    chk($signed(fc2_w_o[3]) == WF2[3] && $signed(fc2_b_o) == BF2, "last-layer weights read back");
    chk($signed(fc1_w_o[2*C_HID+5]) == WF1[2][5] && $signed(fc1_b_o[6]) == BF1[6], "FC1 weights read back");
    chk($signed(c3_w_o[(4*C_HID+1)*KSIZE+2]) == W3[4][1][2] && $signed(c3_b_o[3]) == B3[3], "conv3 weights read back");
    n_hi = 0; n_lo = 0;
    for (int n = 0; n < 120; n++) begin
      int v[C_HID], a1[C_HID], a2[C_HID];
      v = '{default: 0};
      for (int i = 0; i < C_IN; i++) v[i] = $urandom_range(0, 256);
      hx.push_back(v);
      t = hx.size() - 1;
      // layer 1, dilation 1
      foreach (a1[o]) begin
        acc = longint'(B1[o]) * 64;
        for (int k = 0; k < KSIZE; k++) if (t - k >= 0)
          for (int i = 0; i < C_IN; i++) acc += longint'(hx[t-k][i]) * W1[o][i][k];
        a1[o] = sat(acc, 1);
      end
      h1.push_back(a1);
      foreach (a2[o]) begin
        acc = longint'(B2[o]) * 64;
        for (int k = 0; k < KSIZE; k++) if (t - 2*k >= 0)
          for (int i = 0; i < C_HID; i++) acc += longint'(h1[t-2*k][i]) * W2[o][i][k];
        a2[o] = sat(acc, 1);
      end
      h2.push_back(a2);
      foreach (o3[o]) begin
        acc = longint'(B3[o]) * 64;
        for (int k = 0; k < KSIZE; k++) if (t - 4*k >= 0)
          for (int i = 0; i < C_HID; i++) acc += longint'(h2[t-4*k][i]) * W3[o][i][k];
        o3[o] = sat(acc, 1);
      end
      foreach (of1[o]) begin
        acc = longint'(BF1[o]) * 64;
        for (int i = 0; i < C_HID; i++) acc += longint'(o3[i]) * WF1[o][i];
        of1[o] = sat(acc, 1);
      end
      acc = longint'(BF2) * 64;
      for (int i = 0; i < FC_HID; i++) acc += longint'(of1[i]) * WF2[i];
      z = sat(acc, 0);
      ref_y = 256.0 / (1.0 + $exp(-real'(z) / 256.0));
      // drive
      @(negedge clk);
      for (int i = 0; i < C_IN; i++) x[i] = ACT_W'(v[i]);
      x_valid = 1;
      cyc_in = 0;
      @(negedge clk);
      x_valid = 0;
      lat = 1;
      while (!y_valid && lat < 20) begin @(negedge clk); lat++; end
      chk(lat == 5, $sformatf("latency %0d", lat));
      for (int o = 0; o < C_HID; o++)
        chk(int'($signed(y_conv[o])) == o3[o], $sformatf("t=%0d conv3 out[%0d]", t, o));
      for (int k = 0; k < KSIZE; k++)
        for (int i = 0; i < C_HID; i++)
          chk(int'($signed(y_c3in[k][i])) == (t - 4*k >= 0 ? h2[t-4*k][i] : 0),
              $sformatf("t=%0d conv3 tap %0d in[%0d]", t, k, i));
      for (int o = 0; o < FC_HID; o++)
        chk(int'($signed(y_hidden[o])) == of1[o], $sformatf("t=%0d hidden[%0d] %0d vs %0d", t, o, $signed(y_hidden[o]), of1[o]));
      chk(real'(y_hat) - ref_y < 6.0 && ref_y - real'(y_hat) < 6.0,
          $sformatf("t=%0d y_hat %0d vs %f (z=%0d)", t, y_hat, ref_y, z));
      if (y_hat > 140) n_hi++;
      if (y_hat < 116) n_lo++;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("predictions above 0.55: %0d, below 0.45: %0d", n_hi, n_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
