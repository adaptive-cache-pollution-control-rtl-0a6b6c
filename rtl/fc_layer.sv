// fc_layer: fully connected layer of the temporal predictor's classifier head.
//
// out[o] = act( b[o] + sum_i W[o][i] * x[i] ), act = ReLU when RELU = 1, identity otherwise.
// The source places two fully connected layers with ReLU after the convolution stack; the last
// one feeds the sigmoid, so it is instantiated with RELU = 0. Weight index is o*NI + i.
//
// Timing: out_y is registered; out_valid follows in_valid by one cycle.
// Arithmetic as in tcn_conv_layer: Q7.8 x Q1.6, 32-bit accumulation, saturation to 16 bits.
module fc_layer
  import acpc_pkg::*;
#(
  parameter int NI   = C_HID,
  parameter int NO   = FC_HID,
  parameter bit RELU = 1'b1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [NI-1:0][ACT_W-1:0]      in_x,
  input  logic [NO*NI-1:0][WGT_W-1:0]   w,
  input  logic [NO-1:0][ACT_W-1:0]      b,
  output logic                          out_valid,
  output logic [NO-1:0][ACT_W-1:0]      out_y
);

  logic [NO-1:0][ACT_W-1:0] y_d;

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      logic signed [ACC_W-1:0] acc;
      act_t v;
      acc = ACC_W'($signed(b[o])) <<< WGT_FRAC;
      for (int i = 0; i < NI; i++)
        acc += ACC_W'($signed(in_x[i])) * ACC_W'($signed(w[o*NI + i]));
      v = sat_act(acc >>> WGT_FRAC);
      y_d[o] = (RELU && v[ACT_W-1]) ? '0 : v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_y <= y_d;
    end
  end

endmodule
