// tb_fc_layer: random weights, biases and inputs; the outputs are compared with a reference
// computed in the testbench (integer Q7.8 x Q1.6 arithmetic, saturation, ReLU), one cycle
// after in_valid. Both the ReLU and the linear variant are tested.
module tb_fc_layer;
  import acpc_pkg::*;
  localparam int NI = 8, NO = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [NI-1:0][ACT_W-1:0] x;
  logic [NO*NI-1:0][WGT_W-1:0] w;
  logic [NO-1:0][ACT_W-1:0] b;
  logic ov_r, ov_l;
  logic [NO-1:0][ACT_W-1:0] y_r, y_l;
  int checks = 0, failures = 0;

  fc_layer #(.NI(NI), .NO(NO), .RELU(1'b1)) dut_r (.clk, .rst_n, .in_valid, .in_x(x), .w, .b,
                                                  .out_valid(ov_r), .out_y(y_r));
  fc_layer #(.NI(NI), .NO(NO), .RELU(1'b0)) dut_l (.clk, .rst_n, .in_valid, .in_x(x), .w, .b,
                                                  .out_valid(ov_l), .out_y(y_l));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic int ref_out(int o, bit relu);
    longint acc;
    acc = longint'($signed(b[o])) * 64;
    for (int i = 0; i < NI; i++) acc += longint'($signed(x[i])) * longint'($signed(w[o*NI+i]));
    acc = acc >>> 6;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    if (relu && acc < 0) acc = 0;
    return int'(acc);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int er[NO], el[NO];
    x = '0; w = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      for (int i = 0; i < NI; i++) x[i] = ACT_W'($urandom_range(0, 2047) - 1024) * ((n % 10 == 0) ? 16'd30 : 16'd1);
      for (int i = 0; i < NO*NI; i++) w[i] = WGT_W'($urandom);
      for (int i = 0; i < NO; i++) b[i] = ACT_W'($urandom_range(0, 1023) - 512);
      for (int o = 0; o < NO; o++) begin er[o] = ref_out(o, 1); el[o] = ref_out(o, 0); end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      chk(ov_r && ov_l, "out_valid one cycle after in_valid");
      for (int o = 0; o < NO; o++) begin
        chk(int'($signed(y_r[o])) == er[o], $sformatf("relu o=%0d %0d vs %0d", o, $signed(y_r[o]), er[o]));
        chk(int'($signed(y_l[o])) == el[o], $sformatf("lin o=%0d %0d vs %0d", o, $signed(y_l[o]), el[o]));
      end
      @(negedge clk);
      chk(!ov_r, "out_valid is a single pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
