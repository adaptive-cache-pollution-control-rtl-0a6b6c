// tb_online_trainer: a random stream of observations over a few line addresses. The testbench
// keeps its own record of all observations, labels each one (reused within the next WIN
// observations or not), back-propagates e = 256*y - y_hat through FC2, FC1 and conv3 itself
// (G2_j = sum e*h_j; d_j = e*w2_j for h_j > 0; G1_jo = sum d_j*c_o; q_o = sum_j d_j*w1_jo for
// c_o > 0; G3_oik = sum q_o*x3[k]_i; and the bias sums) and predicts all 281 weight writes of
// every update (address and value). It plays the
// predictor's weight registers and sometimes holds upd_ready low. Label and update counters
// are checked at the end.
module tb_online_trainer;
  import acpc_pkg::*;
  localparam int LW = 8, WIN = 4, BATCH = 8;
  logic clk = 0, rst_n = 0;
  logic enable = 1;
  logic [3:0] lr_shift = 4'd2;
  logic obs_valid = 0;
  logic [LW-1:0] obs_line = '0;
  logic [PROB_W-1:0] obs_yhat = '0;
  logic [FC_HID-1:0][ACT_W-1:0] obs_h = '0;
  logic [FC_HID-1:0][WGT_W-1:0] fc2_w;
  logic [ACT_W-1:0] fc2_b;
  logic [C_HID-1:0][ACT_W-1:0] obs_c = '0;
  logic [FC_HID*C_HID-1:0][WGT_W-1:0] fc1_w;
  logic [FC_HID-1:0][ACT_W-1:0] fc1_b;
  logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] obs_x3 = '0;
  logic [C_HID*C_HID*KSIZE-1:0][WGT_W-1:0] c3_w;
  logic [C_HID-1:0][ACT_W-1:0] c3_b;
  logic upd_ready = 1, upd_we;
  logic [CFG_AW-1:0] upd_addr;
  logic [15:0] upd_wdata;
  logic [31:0] labels_pos, labels_neg, updates;
  int checks = 0, failures = 0;

  online_trainer #(.LINE_W_ID(LW), .WIN(WIN), .BATCH(BATCH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // observation record
  int o_line[$], o_y[$];
  int o_h[$][FC_HID];
  int o_c[$][C_HID];
  int o_x3[$][KSIZE*C_HID];
  int exp_addr[$], exp_data[$];
  int npos = 0, nneg = 0, nbatch = 0, nwrites = 0;
  longint G[FC_HID], Gb, G1[FC_HID*C_HID], Gb1[FC_HID], G3[C_HID*C_HID*KSIZE], Gb3[C_HID];
  int retired = 0;
  int n3chg = 0, n3sat = 0;

  // testbench copy of the trained layers' parameters, written by the unit
  always @(posedge clk) begin
    if (upd_we && rst_n) begin
      nwrites++;
      if (exp_addr.size() == 0) begin
        chk(0, $sformatf("unexpected weight write %0d at %0t retired %0d", upd_addr, $time, retired));
      end else begin
        int ea, ed;
        ea = exp_addr.pop_front();
        ed = exp_data.pop_front();
        chk(int'(upd_addr) == ea, $sformatf("write address %0d vs %0d", upd_addr, ea));
        if (ea == FC2_B_BASE || ea >= FC1_B_BASE && ea < FC2_W_BASE || ea >= CONV3_B_BASE && ea < FC1_W_BASE)
          chk(int'($signed(upd_wdata)) == ed, $sformatf("bias %0d: %0d vs %0d", ea, $signed(upd_wdata), ed));
        else
          chk(int'($signed(upd_wdata[7:0])) == ed, $sformatf("weight %0d: %0d vs %0d", ea, $signed(upd_wdata[7:0]), ed));
      end
      if (int'(upd_addr) == FC2_B_BASE) fc2_b <= upd_wdata;
      else if (int'(upd_addr) >= FC2_W_BASE) fc2_w[int'(upd_addr) - FC2_W_BASE] <= upd_wdata[7:0];
      else if (int'(upd_addr) >= FC1_B_BASE) fc1_b[int'(upd_addr) - FC1_B_BASE] <= upd_wdata;
      else if (int'(upd_addr) >= FC1_W_BASE) fc1_w[int'(upd_addr) - FC1_W_BASE] <= upd_wdata[7:0];
      else if (int'(upd_addr) >= CONV3_B_BASE) c3_b[int'(upd_addr) - CONV3_B_BASE] <= upd_wdata;
      else begin
        if (upd_wdata[7:0] != c3_w[int'(upd_addr) - CONV3_W_BASE]) n3chg++;
        if (upd_wdata[7:0] == 8'h7f || upd_wdata[7:0] == 8'h80) n3sat++;
        c3_w[int'(upd_addr) - CONV3_W_BASE] <= upd_wdata[7:0];
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    forever begin
      @(negedge clk);
      upd_ready = ($urandom_range(0, 9) != 0);
    end
  end

  initial begin
    int t, lab, e;
    longint v;
    for (int i = 0; i < FC_HID; i++) fc2_w[i] = WGT_W'($urandom_range(0, 40) - 20);
    fc2_b = 16'sd10;
    for (int i = 0; i < FC_HID*C_HID; i++) fc1_w[i] = WGT_W'($urandom_range(0, 60) - 30);
    for (int i = 0; i < FC_HID; i++) fc1_b[i] = ACT_W'($urandom_range(0, 200) - 100);
    for (int i = 0; i < C_HID*C_HID*KSIZE; i++) c3_w[i] = WGT_W'($urandom_range(0, 60) - 30);
    for (int i = 0; i < C_HID; i++) c3_b[i] = ACT_W'($urandom_range(0, 200) - 100);
    G = '{default: 0}; Gb = 0; G1 = '{default: 0}; Gb1 = '{default: 0};
    G3 = '{default: 0}; Gb3 = '{default: 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int h[FC_HID];
      int c[C_HID];
      int x3[KSIZE*C_HID];
      int ln, yh;
      ln = $urandom_range(0, 11);
      yh = $urandom_range(0, 255);
      foreach (h[i]) h[i] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(0, 400);
      foreach (c[i]) c[i] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(0, 600);
      foreach (x3[i]) x3[i] = $urandom_range(0, 600);
      @(negedge clk);
      obs_valid = 1;
      obs_line = LW'(ln);
      obs_yhat = PROB_W'(yh);
      for (int i = 0; i < FC_HID; i++) obs_h[i] = ACT_W'(h[i]);
      for (int i = 0; i < C_HID; i++) obs_c[i] = ACT_W'(c[i]);
      for (int k = 0; k < KSIZE; k++)
        for (int i = 0; i < C_HID; i++) obs_x3[k][i] = ACT_W'(x3[k*C_HID + i]);
      // retire the observation WIN back, with the weights the trainer sees at this edge
      t = o_line.size();
      if (t >= WIN) begin
        int r;
        r = t - WIN;
        lab = 0;
        for (int s = r + 1; s < t; s++) if (o_line[s] == o_line[r]) lab = 1;
        if (ln == o_line[r]) lab = 1;
        if (lab) npos++; else nneg++;
        e = 256 * lab - o_y[r];
        for (int i = 0; i < FC_HID; i++) begin
          longint d;
          G[i] += longint'(e) * o_h[r][i];
          d = (o_h[r][i] > 0) ? longint'(e) * longint'($signed(fc2_w[i])) : 0;
          Gb1[i] += d;
          for (int k = 0; k < C_HID; k++) G1[i*C_HID + k] += d * o_c[r][k];
        end
        for (int o = 0; o < C_HID; o++) begin
          longint qo;
          qo = 0;
          if (o_c[r][o] > 0)
            for (int j = 0; j < FC_HID; j++)
              if (o_h[r][j] > 0)
                qo += longint'(e) * longint'($signed(fc2_w[j])) * longint'($signed(fc1_w[j*C_HID + o]));
          Gb3[o] += qo;
          for (int i = 0; i < C_HID; i++)
            for (int k = 0; k < KSIZE; k++)
              G3[(o*C_HID + i)*KSIZE + k] += qo * o_x3[r][k*C_HID + i];
        end
        Gb += e;
        retired++;
        if (retired % BATCH == 0) begin
          // expected writes, from the weights as they are now
          for (int i = 0; i < FC_HID; i++) begin
            v = longint'($signed(fc2_w[i])) + (G[i] >>> (10 + lr_shift));
            if (v > 127) v = 127;
            if (v < -128) v = -128;
            exp_addr.push_back(FC2_W_BASE + i);
            exp_data.push_back(int'(v));
          end
          v = longint'($signed(fc2_b)) + (Gb >>> lr_shift);
          if (v > 32767) v = 32767;
          if (v < -32768) v = -32768;
          exp_addr.push_back(FC2_B_BASE);
          exp_data.push_back(int'(v));
          for (int m = 0; m < FC_HID*C_HID; m++) begin
            v = longint'($signed(fc1_w[m])) + (G1[m] >>> (16 + lr_shift));
            if (v > 127) v = 127;
            if (v < -128) v = -128;
            exp_addr.push_back(FC1_W_BASE + m);
            exp_data.push_back(int'(v));
          end
          for (int j = 0; j < FC_HID; j++) begin
            v = longint'($signed(fc1_b[j])) + (Gb1[j] >>> (6 + lr_shift));
            if (v > 32767) v = 32767;
            if (v < -32768) v = -32768;
            exp_addr.push_back(FC1_B_BASE + j);
            exp_data.push_back(int'(v));
          end
          for (int m = 0; m < C_HID*C_HID*KSIZE; m++) begin
            v = longint'($signed(c3_w[m])) + (G3[m] >>> (22 + lr_shift));
            if (v > 127) v = 127;
            if (v < -128) v = -128;
            exp_addr.push_back(CONV3_W_BASE + m);
            exp_data.push_back(int'(v));
          end
          for (int o = 0; o < C_HID; o++) begin
            v = longint'($signed(c3_b[o])) + (Gb3[o] >>> (12 + lr_shift));
            if (v > 32767) v = 32767;
            if (v < -32768) v = -32768;
            exp_addr.push_back(CONV3_B_BASE + o);
            exp_data.push_back(int'(v));
          end
          nbatch++;
          G = '{default: 0}; Gb = 0; G1 = '{default: 0}; Gb1 = '{default: 0};
          G3 = '{default: 0}; Gb3 = '{default: 0};
        end
      end
      o_line.push_back(ln); o_y.push_back(yh); o_h.push_back(h); o_c.push_back(c); o_x3.push_back(x3);
      @(negedge clk);
      obs_valid = 0;
      // wait for any update to finish before the next batch can complete
      repeat ($urandom_range(2, 4)) @(negedge clk);
      while (exp_addr.size() > 0 && retired % BATCH == BATCH - 1) @(negedge clk);
    end
    repeat (600) @(negedge clk);
    chk(exp_addr.size() == 0, "all expected writes seen");
    chk(labels_pos == npos && labels_neg == nneg,
        $sformatf("labels %0d/%0d vs %0d/%0d", labels_pos, labels_neg, npos, nneg));
    chk(updates == nbatch && nbatch > 10, $sformatf("updates %0d vs %0d", updates, nbatch));
    chk(n3chg > 0 && n3sat < nbatch * C_HID*C_HID*KSIZE,
        $sformatf("conv3 weights changed %0d times, saturated %0d", n3chg, n3sat));
    $display("positive labels %0d, negative %0d, updates %0d, writes %0d", npos, nneg, nbatch, nwrites);
    $display("conv3 weight writes: %0d changed a weight, %0d saturated", n3chg, n3sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
