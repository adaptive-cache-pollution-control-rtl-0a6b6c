// tcn_predictor: the Temporal Prediction Module (TPM). For every cache access it turns the
// access's feature vector into a reuse probability y_hat.
//
// Structure (following the source): three dilated causal convolution layers with kernel 3 and
// dilations 1, 2, 4 (ReLU), then two fully connected layers, the first with ReLU, and a
// sigmoid. The receptive field is 1 + 2*(1+2+4) = 15 accesses. Dropout is a training-only
// operation and has no hardware. Channel counts and number formats are this design's
// choice (see acpc_pkg).
//
// Weights and biases sit in registers written one word at a time through the configuration
// port (cfg_we, cfg_addr, cfg_wdata; address map in acpc_pkg). Weights take cfg_wdata[7:0],
// biases all 16 bits. After reset all weights and biases are zero, giving y_hat = 0.5.
// For the online learning unit, the parameters of the last three layers (conv3, FC1, FC2) are
// brought out, together with the vectors each prediction passed through them: conv3's three
// input taps, conv3's output (FC1's input) and FC1's output, all aligned with y_valid.
//
// Timing: one prediction per cycle may enter (x_valid); y_valid follows x_valid by 5 cycles
// (one register per layer, the sigmoid is combinational on the last register).
module tcn_predictor
  import acpc_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  // configuration
  input  logic                           cfg_we,
  input  logic [CFG_AW-1:0]              cfg_addr,
  input  logic [15:0]                    cfg_wdata,
  // feature in
  input  logic                           x_valid,
  input  logic [C_IN-1:0][ACT_W-1:0]     x,
  // prediction out
  output logic                           y_valid,
  output logic [PROB_W-1:0]              y_hat,
  output logic [FC_HID-1:0][ACT_W-1:0]   y_hidden,  // first FC layer output of this prediction
  output logic [C_HID-1:0][ACT_W-1:0]    y_conv,    // first FC layer input of this prediction
  output logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] y_c3in, // conv3 input taps of this prediction
  // parameters of the last three layers, for online learning
  output logic [FC_HID-1:0][WGT_W-1:0]   fc2_w_o,
  output logic [ACT_W-1:0]               fc2_b_o,
  output logic [FC_HID*C_HID-1:0][WGT_W-1:0] fc1_w_o,
  output logic [FC_HID-1:0][ACT_W-1:0]   fc1_b_o,
  output logic [C_HID*C_HID*KSIZE-1:0][WGT_W-1:0] c3_w_o,
  output logic [C_HID-1:0][ACT_W-1:0]    c3_b_o
);

  logic [C_HID*C_IN*KSIZE-1:0][WGT_W-1:0]  w1;
  logic [C_HID*C_HID*KSIZE-1:0][WGT_W-1:0] w2, w3;
  logic [FC_HID*C_HID-1:0][WGT_W-1:0]      wf1;
  logic [FC_HID-1:0][WGT_W-1:0]            wf2;
  logic [C_HID-1:0][ACT_W-1:0]             b1, b2, b3;
  logic [FC_HID-1:0][ACT_W-1:0]            bf1;
  logic [0:0][ACT_W-1:0]                   bf2;

  // configuration write decode
  int a;
  assign a = int'(cfg_addr);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1 <= '0; w2 <= '0; w3 <= '0; wf1 <= '0; wf2 <= '0;
      b1 <= '0; b2 <= '0; b3 <= '0; bf1 <= '0; bf2 <= '0;
    end else if (cfg_we) begin
      if (a < CONV1_B_BASE)      w1[a - CONV1_W_BASE]  <= cfg_wdata[WGT_W-1:0];
      else if (a < CONV2_W_BASE) b1[a - CONV1_B_BASE]  <= cfg_wdata;
      else if (a < CONV2_B_BASE) w2[a - CONV2_W_BASE]  <= cfg_wdata[WGT_W-1:0];
      else if (a < CONV3_W_BASE) b2[a - CONV2_B_BASE]  <= cfg_wdata;
      else if (a < CONV3_B_BASE) w3[a - CONV3_W_BASE]  <= cfg_wdata[WGT_W-1:0];
      else if (a < FC1_W_BASE)   b3[a - CONV3_B_BASE]  <= cfg_wdata;
      else if (a < FC1_B_BASE)   wf1[a - FC1_W_BASE]   <= cfg_wdata[WGT_W-1:0];
      else if (a < FC2_W_BASE)   bf1[a - FC1_B_BASE]   <= cfg_wdata;
      else if (a < FC2_B_BASE)   wf2[a - FC2_W_BASE]   <= cfg_wdata[WGT_W-1:0];
      else if (a == FC2_B_BASE)  bf2[0]                <= cfg_wdata;
    end
  end

  logic                          v1, v2, v3, vf1, vf2;
  logic [C_HID-1:0][ACT_W-1:0]   h1, h2, h3;
  // input taps of each layer; only conv3's are used (conv1 and conv2 are not trained online)
  logic [KSIZE-1:0][C_IN-1:0][ACT_W-1:0]  t1;
  logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] t2, t3;
  logic [FC_HID-1:0][ACT_W-1:0]  hf1;
  logic [0:0][ACT_W-1:0]         z;

  tcn_conv_layer #(.CI(C_IN),  .CO(C_HID), .K(KSIZE), .DIL(1)) u_conv1 (
    .clk, .rst_n, .in_valid(x_valid), .in_x(x),  .w(w1), .b(b1), .out_valid(v1), .out_y(h1),
    .out_taps(t1));
  tcn_conv_layer #(.CI(C_HID), .CO(C_HID), .K(KSIZE), .DIL(2)) u_conv2 (
    .clk, .rst_n, .in_valid(v1),      .in_x(h1), .w(w2), .b(b2), .out_valid(v2), .out_y(h2),
    .out_taps(t2));
  tcn_conv_layer #(.CI(C_HID), .CO(C_HID), .K(KSIZE), .DIL(4)) u_conv3 (
    .clk, .rst_n, .in_valid(v2),      .in_x(h2), .w(w3), .b(b3), .out_valid(v3), .out_y(h3),
    .out_taps(t3));
  fc_layer #(.NI(C_HID), .NO(FC_HID), .RELU(1'b1)) u_fc1 (
    .clk, .rst_n, .in_valid(v3),  .in_x(h3),  .w(wf1), .b(bf1), .out_valid(vf1), .out_y(hf1));
  fc_layer #(.NI(FC_HID), .NO(1), .RELU(1'b0)) u_fc2 (
    .clk, .rst_n, .in_valid(vf1), .in_x(hf1), .w(wf2), .b(bf2), .out_valid(vf2), .out_y(z));

  sigmoid_pwl u_sig (.z(z[0]), .y(y_hat));

  // keep the learning vectors aligned with the prediction they produced
  logic [C_HID-1:0][ACT_W-1:0] h3_d;
  logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] t3_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h3_d     <= '0;
      t3_d     <= '0;
      y_conv   <= '0;
      y_c3in   <= '0;
      y_hidden <= '0;
    end else begin
      if (v3) begin
        h3_d <= h3;
        t3_d <= t3;
      end
      if (vf1) begin
        y_conv   <= h3_d;
        y_c3in   <= t3_d;
        y_hidden <= hf1;
      end
    end
  end

  assign y_valid = vf2;
  assign fc2_w_o = wf2;
  assign fc2_b_o = bf2[0];
  assign fc1_w_o = wf1;
  assign fc1_b_o = bf1;
  assign c3_w_o  = w3;
  assign c3_b_o  = b3;

endmodule
