// tcn_conv_layer: one dilated causal 1-D convolution layer of the temporal predictor, with ReLU.
//
// The layer sees one input vector per cache access (in_valid). For every output channel o it
// computes
//     y[o] = ReLU( b[o] + sum_k sum_i W[o][i][k] * x[t - k*DIL][i] )
// i.e. Eq. 1 of the method without the final sigmoid, with kernel size K and dilation DIL
// (the source uses K = 3 and dilations 1, 2, 4 in its three layers). The causal history of
// (K-1)*DIL past input vectors is kept in a shift register that advances on in_valid and is
// zero after reset (zero padding before the first access). Tap k = 0 is the newest input.
//
// Timing: out_y is registered; out_valid follows in_valid by one cycle. out_taps holds, with
// out_y, the K input vectors it was computed from (tap k in out_taps[k]); the online learning
// unit needs them for the weight gradient.
// Arithmetic: Q7.8 activations times Q1.6 weights, 32-bit accumulation, shifted back to Q7.8
// and saturated to 16 bits before the ReLU (this design's choice of fixed point).
module tcn_conv_layer
  import acpc_pkg::*;
#(
  parameter int CI  = C_IN,
  parameter int CO  = C_HID,
  parameter int K   = KSIZE,
  parameter int DIL = 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [CI-1:0][ACT_W-1:0]           in_x,
  input  logic [CO*CI*K-1:0][WGT_W-1:0]      w,
  input  logic [CO-1:0][ACT_W-1:0]           b,
  output logic                               out_valid,
  output logic [CO-1:0][ACT_W-1:0]           out_y,
  output logic [K-1:0][CI-1:0][ACT_W-1:0]    out_taps
);

  localparam int HD = (K - 1) * DIL;   // past vectors kept

  logic [CI-1:0][ACT_W-1:0] hist [HD];
  logic [CO-1:0][ACT_W-1:0] y_d;
  logic [K-1:0][CI-1:0][ACT_W-1:0] taps_d;

  // tap k of the causal window
  function automatic logic [CI-1:0][ACT_W-1:0] tap(input int k,
      input logic [CI-1:0][ACT_W-1:0] cur, input logic [CI-1:0][ACT_W-1:0] h [HD]);
    if (k == 0) return cur;
    else        return h[k*DIL-1];
  endfunction

  always_comb begin
    for (int k = 0; k < K; k++) taps_d[k] = tap(k, in_x, hist);
    for (int o = 0; o < CO; o++) begin
      logic signed [ACC_W-1:0] acc;
      logic [CI-1:0][ACT_W-1:0] xv;
      act_t v;
      acc = ACC_W'($signed(b[o])) <<< WGT_FRAC;
      for (int k = 0; k < K; k++) begin
        xv = taps_d[k];
        for (int i = 0; i < CI; i++)
          acc += ACC_W'($signed(xv[i])) * ACC_W'($signed(w[(o*CI + i)*K + k]));
      end
      v = sat_act(acc >>> WGT_FRAC);
      y_d[o] = v[ACT_W-1] ? '0 : v;   // ReLU
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y     <= '0;
      out_taps  <= '0;
      for (int j = 0; j < HD; j++) hist[j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_y    <= y_d;
        out_taps <= taps_d;
        hist[0] <= in_x;
        for (int j = 1; j < HD; j++) hist[j] <= hist[j-1];
      end
    end
  end

endmodule
