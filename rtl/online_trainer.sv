// online_trainer: the adaptive feedback loop. It labels every prediction with the reuse that
// actually followed and adjusts the predictor by gradient descent on the cross-entropy loss.
//
// Labelling follows the definition of the reuse label: a prediction made for a cache line at
// access t gets label y = 1 if the same line is accessed again within the next WIN accesses
// (the prediction window), else y = 0. Predictions wait in a WIN-deep shift register; every
// new observation marks the entries with the same line as reused, and the entry that falls out
// of the window retires with its label.
//
// For a sigmoid output and binary cross-entropy the loss gradient at the output is
// (y_hat - y). With e = 256*y - y_hat (Q0.8), and saved with each prediction h (FC1 output),
// c (FC1 input = conv3 output) and x3[k] (conv3's input taps, k = 0..2), the unit
// back-propagates through the last three layers and accumulates over a batch of BATCH retired
// predictions:
//     G2_j    = sum e*h_j             Gb2   = sum e                 (FC2)
//     d_j     = e*w2_j   if h_j > 0, else 0                         (back through FC1's ReLU)
//     G1_jo   = sum d_j*c_o           Gb1_j = sum d_j               (FC1)
//     q_o     = sum_j d_j*w1_jo  if c_o > 0, else 0                 (back through conv3's ReLU)
//     G3_oik  = sum q_o*x3[k]_i       Gb3_o = sum q_o               (conv3)
// using the weights as they are when the prediction retires. At the end of a batch it writes,
// through the predictor's configuration port, one word per cycle while upd_ready is high
// (8 + 1 + 64 + 8 + 192 + 8 = 281 words):
//     w2 += G2 >> (10+s),  b2 += Gb2 >> s,      w1 += G1 >> (16+s),  b1 += Gb1 >> (6+s),
//     w3 += G3 >> (22+s),  b3 += Gb3 >> (12+s)
// with s = lr_shift; the fixed shifts convert the products to the Q1.6 weight and Q7.8 bias
// formats, results saturate. The next batch accumulates while an update is being written.
// conv1 and conv2 keep their loaded weights: back-propagating into them would need the
// activations of up to 14 earlier accesses per prediction. WIN, BATCH, the learning rate as a
// shift and the restriction to the last three layers are this design's choices.
module online_trainer
  import acpc_pkg::*;
#(
  parameter int LINE_W_ID = 42,   // bits of a line address
  parameter int WIN       = 16,   // prediction window, in accesses
  parameter int BATCH     = 64    // retired predictions per weight update
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                enable,
  input  logic [3:0]                          lr_shift,
  // one observation per completed prediction
  input  logic                                obs_valid,
  input  logic [LINE_W_ID-1:0]                obs_line,
  input  logic [PROB_W-1:0]                   obs_yhat,
  input  logic [FC_HID-1:0][ACT_W-1:0]        obs_h,    // FC1 output
  input  logic [C_HID-1:0][ACT_W-1:0]         obs_c,    // FC1 input (last convolution output)
  input  logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] obs_x3, // conv3 input taps
  // current parameters of the last three layers
  input  logic [FC_HID-1:0][WGT_W-1:0]        fc2_w,
  input  logic [ACT_W-1:0]                    fc2_b,
  input  logic [FC_HID*C_HID-1:0][WGT_W-1:0]  fc1_w,
  input  logic [FC_HID-1:0][ACT_W-1:0]        fc1_b,
  input  logic [C_HID*C_HID*KSIZE-1:0][WGT_W-1:0] c3_w,
  input  logic [C_HID-1:0][ACT_W-1:0]         c3_b,
  // weight writes
  input  logic                                upd_ready,
  output logic                                upd_we,
  output logic [CFG_AW-1:0]                   upd_addr,
  output logic [15:0]                         upd_wdata,
  // monitoring
  output logic [31:0]                         labels_pos,   // retired predictions with y = 1
  output logic [31:0]                         labels_neg,   // retired predictions with y = 0
  output logic [31:0]                         updates       // weight updates applied
);

  typedef struct packed {
    logic                          valid;
    logic                          reused;
    logic [LINE_W_ID-1:0]          line;
    logic [PROB_W-1:0]             yhat;
    logic [FC_HID-1:0][ACT_W-1:0]  h;
    logic [C_HID-1:0][ACT_W-1:0]   c;
    logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] x3;
  } entry_t;

  localparam int NW1   = FC_HID * C_HID;
  localparam int NW3   = C_HID * C_HID * KSIZE;
  localparam int B1_0  = FC_HID + 1 + NW1;              // first FC1 bias word
  localparam int W3_0  = B1_0 + FC_HID;                 // first conv3 weight word
  localparam int B3_0  = W3_0 + NW3;                    // first conv3 bias word
  localparam int NUPD  = B3_0 + C_HID;                  // words per update
  localparam int CNT_W = $clog2(BATCH + 1);
  localparam int AI_W  = $clog2(NUPD + 1);

  entry_t              win [WIN];
  // running batch sums and the sums of the batch being written
  logic signed [39:0]  g2  [FC_HID], ga2  [FC_HID];
  logic signed [23:0]  gb2, gab2;
  logic signed [47:0]  g1  [NW1],    ga1  [NW1];
  logic signed [31:0]  gb1 [FC_HID], gab1 [FC_HID];
  logic signed [55:0]  g3  [NW3],    ga3  [NW3];
  logic signed [39:0]  gb3 [C_HID],  gab3 [C_HID];
  logic [CNT_W-1:0]    cnt;
  logic                applying;
  logic [AI_W-1:0]     aidx;

  // retiring entry, its error and the back-propagated terms
  entry_t              old_e;
  logic                old_reused;
  logic signed [9:0]   err;
  logic signed [19:0]  dlt [FC_HID];
  logic signed [31:0]  q   [C_HID];
  always_comb begin
    old_e      = win[WIN-1];
    old_reused = old_e.reused || (old_e.line == obs_line);
    err        = (old_reused ? 10'sd256 : 10'sd0) - 10'($unsigned(old_e.yhat));
    for (int j = 0; j < FC_HID; j++)
      dlt[j] = $signed(old_e.h[j]) > 0 ? 20'(err) * 20'($signed(fc2_w[j])) : '0;
    for (int o = 0; o < C_HID; o++) begin
      q[o] = '0;
      if ($signed(old_e.c[o]) > 0)
        for (int j = 0; j < FC_HID; j++)
          q[o] += 32'(dlt[j]) * 32'($signed(fc1_w[j*C_HID + o]));
    end
  end

  function automatic logic [WGT_W-1:0] sat_w(input logic signed [55:0] v);
    if (v > 56'sd127)       return 8'h7f;
    else if (v < -56'sd128) return 8'h80;
    else                    return v[WGT_W-1:0];
  endfunction

  function automatic logic [ACT_W-1:0] sat_b(input logic signed [55:0] v);
    if (v > 56'sd32767)       return 16'h7fff;
    else if (v < -56'sd32768) return 16'h8000;
    else                      return v[ACT_W-1:0];
  endfunction

  // word aidx of the update sequence: FC2 weights, FC2 bias, FC1 weights, FC1 biases,
  // conv3 weights, conv3 biases
  always_comb begin
    int a, s;
    a         = int'(aidx);
    s         = int'(lr_shift);
    upd_addr  = '0;
    upd_wdata = '0;
    if (a < FC_HID) begin
      upd_addr  = CFG_AW'(FC2_W_BASE + a);
      upd_wdata = {8'h00, sat_w(56'($signed(fc2_w[a])) + 56'(ga2[a] >>> (10 + s)))};
    end else if (a == FC_HID) begin
      upd_addr  = CFG_AW'(FC2_B_BASE);
      upd_wdata = sat_b(56'($signed(fc2_b)) + 56'(gab2 >>> s));
    end else if (a < B1_0) begin
      upd_addr  = CFG_AW'(FC1_W_BASE + a - FC_HID - 1);
      upd_wdata = {8'h00, sat_w(56'($signed(fc1_w[a - FC_HID - 1])) + 56'(ga1[a - FC_HID - 1] >>> (16 + s)))};
    end else if (a < W3_0) begin
      upd_addr  = CFG_AW'(FC1_B_BASE + a - B1_0);
      upd_wdata = sat_b(56'($signed(fc1_b[a - B1_0])) + 56'(gab1[a - B1_0] >>> (6 + s)));
    end else if (a < B3_0) begin
      upd_addr  = CFG_AW'(CONV3_W_BASE + a - W3_0);
      upd_wdata = {8'h00, sat_w(56'($signed(c3_w[a - W3_0])) + (ga3[a - W3_0] >>> (22 + s)))};
    end else if (a < NUPD) begin
      upd_addr  = CFG_AW'(CONV3_B_BASE + a - B3_0);
      upd_wdata = sat_b(56'($signed(c3_b[a - B3_0])) + 56'(gab3[a - B3_0] >>> (12 + s)));
    end
    upd_we = applying && upd_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < WIN; j++) win[j] <= '0;
      for (int j = 0; j < FC_HID; j++) begin
        g2[j] <= '0; ga2[j] <= '0; gb1[j] <= '0; gab1[j] <= '0;
      end
      for (int m = 0; m < NW1; m++) begin
        g1[m] <= '0; ga1[m] <= '0;
      end
      for (int m = 0; m < NW3; m++) begin
        g3[m] <= '0; ga3[m] <= '0;
      end
      for (int o = 0; o < C_HID; o++) begin
        gb3[o] <= '0; gab3[o] <= '0;
      end
      gb2        <= '0;
      gab2       <= '0;
      cnt        <= '0;
      applying   <= 1'b0;
      aidx       <= '0;
      labels_pos <= '0;
      labels_neg <= '0;
      updates    <= '0;
    end else begin
      if (obs_valid && enable) begin
        // mark reuse, shift the window
        for (int j = WIN - 1; j > 0; j--) begin
          win[j] <= win[j-1];
          if (win[j-1].valid && win[j-1].line == obs_line) win[j].reused <= 1'b1;
        end
        win[0] <= '{valid: 1'b1, reused: 1'b0, line: obs_line, yhat: obs_yhat, h: obs_h, c: obs_c,
                    x3: obs_x3};
        if (old_e.valid) begin
          if (old_reused) labels_pos <= labels_pos + 1;
          else            labels_neg <= labels_neg + 1;
          if (cnt == CNT_W'(BATCH - 1) && !applying) begin
            // hand the batch sums over to the update sequence and start a new batch
            for (int j = 0; j < FC_HID; j++) begin
              ga2[j]  <= g2[j] + 40'(err) * 40'($signed(old_e.h[j]));
              g2[j]   <= '0;
              gab1[j] <= gb1[j] + 32'(dlt[j]);
              gb1[j]  <= '0;
              for (int k = 0; k < C_HID; k++) begin
                ga1[j*C_HID + k] <= g1[j*C_HID + k] + 48'(dlt[j]) * 48'($signed(old_e.c[k]));
                g1[j*C_HID + k]  <= '0;
              end
            end
            for (int o = 0; o < C_HID; o++) begin
              gab3[o] <= gb3[o] + 40'(q[o]);
              gb3[o]  <= '0;
              for (int i = 0; i < C_HID; i++)
                for (int k = 0; k < KSIZE; k++) begin
                  ga3[(o*C_HID + i)*KSIZE + k] <= g3[(o*C_HID + i)*KSIZE + k]
                                                  + 56'(q[o]) * 56'($signed(old_e.x3[k][i]));
                  g3[(o*C_HID + i)*KSIZE + k]  <= '0;
                end
            end
            gab2     <= gb2 + 24'(err);
            gb2      <= '0;
            cnt      <= '0;
            applying <= 1'b1;
            aidx     <= '0;
          end else begin
            for (int j = 0; j < FC_HID; j++) begin
              g2[j]  <= g2[j] + 40'(err) * 40'($signed(old_e.h[j]));
              gb1[j] <= gb1[j] + 32'(dlt[j]);
              for (int k = 0; k < C_HID; k++)
                g1[j*C_HID + k] <= g1[j*C_HID + k] + 48'(dlt[j]) * 48'($signed(old_e.c[k]));
            end
            for (int o = 0; o < C_HID; o++) begin
              gb3[o] <= gb3[o] + 40'(q[o]);
              for (int i = 0; i < C_HID; i++)
                for (int k = 0; k < KSIZE; k++)
                  g3[(o*C_HID + i)*KSIZE + k] <= g3[(o*C_HID + i)*KSIZE + k]
                                                 + 56'(q[o]) * 56'($signed(old_e.x3[k][i]));
            end
            gb2 <= gb2 + 24'(err);
            if (cnt != CNT_W'(BATCH - 1)) cnt <= cnt + 1'b1;
          end
        end
      end
      if (applying && upd_ready) begin
        if (aidx == AI_W'(NUPD - 1)) begin
          applying <= 1'b0;
          updates  <= updates + 1;
        end
        aidx <= aidx + 1'b1;
      end
    end
  end

endmodule
