// tb_tcn_conv_layer: drives a random input sequence with gaps into a layer with dilation 2
// and kernel 3 and compares every output with a reference that keeps the whole input history
// in the testbench: y[o] = ReLU(b + sum_k sum_i W[o][i][k] x[t-2k][i]), zero before the first
// input. Also checks the input taps brought out with each output, and the one-cycle latency.
module tb_tcn_conv_layer;
  import acpc_pkg::*;
  localparam int CI = 4, CO = 8, K = 3, DIL = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [CI-1:0][ACT_W-1:0] x;
  logic [CO*CI*K-1:0][WGT_W-1:0] w;
  logic [CO-1:0][ACT_W-1:0] b;
  logic ov;
  logic [CO-1:0][ACT_W-1:0] y;
  logic [K-1:0][CI-1:0][ACT_W-1:0] taps;
  int checks = 0, failures = 0;
  int hist[$][CI];

  tcn_conv_layer #(.CI(CI), .CO(CO), .K(K), .DIL(DIL)) dut (
    .clk, .rst_n, .in_valid, .in_x(x), .w, .b, .out_valid(ov), .out_y(y), .out_taps(taps));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ex[CO];
    int t;
    longint acc;
    x = '0; b = '0;
    for (int i = 0; i < CO*CI*K; i++) w[i] = WGT_W'($urandom);
    for (int i = 0; i < CO; i++) b[i] = ACT_W'($urandom_range(0, 511) - 200);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      int v[CI];
      @(negedge clk);
      for (int i = 0; i < CI; i++) begin v[i] = $urandom_range(0, 511); x[i] = ACT_W'(v[i]); end
      hist.push_back(v);
      t = hist.size() - 1;
      for (int o = 0; o < CO; o++) begin
        acc = longint'($signed(b[o])) * 64;
        for (int k = 0; k < K; k++)
          if (t - k*DIL >= 0)
            for (int i = 0; i < CI; i++)
              acc += longint'(hist[t - k*DIL][i]) * longint'($signed(w[(o*CI+i)*K+k]));
        acc = acc >>> 6;
        if (acc > 32767) acc = 32767;
        if (acc < 0) acc = 0;
        ex[o] = int'(acc);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      chk(ov, "out_valid one cycle after in_valid");
      for (int o = 0; o < CO; o++)
        chk(int'(y[o]) == ex[o], $sformatf("t=%0d o=%0d %0d vs %0d", t, o, y[o], ex[o]));
      for (int k = 0; k < K; k++)
        for (int i = 0; i < CI; i++)
          chk(int'(taps[k][i]) == (t - k*DIL >= 0 ? hist[t - k*DIL][i] : 0),
              $sformatf("t=%0d tap %0d channel %0d", t, k, i));
      repeat ($urandom_range(0, 2)) @(negedge clk);   // idle cycles must not shift the history
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
