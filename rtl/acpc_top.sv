// acpc_top: adaptive cache pollution control (ACPC) for an L2 cache serving LLM inference.
//
// Every access of the stream (requests on req_*) is looked up in the L2 (acpc_cache). The
// access is then encoded as a feature vector (feature_encoder) and passed to the Temporal
// Prediction Module (tcn_predictor), a small temporal convolutional network whose output is
// the probability y_hat that the line is reused soon. The cache stores y_hat with the line;
// on a miss the Priority-Aware Replacement Module (parm, inside the cache) ranks the lines of
// the set by P = alpha*softmax(y_hat) + (1-alpha)*f and evicts the lowest. New lines, and
// in particular prefetched lines, enter with their own y_hat, so a prefetch the predictor
// does not trust is the first to go. The online learning unit (online_trainer) labels each
// prediction with the reuse that followed and tunes the predictor's last three layers.
//
// Configuration port (cfg_*): weights and biases of the predictor (address map in acpc_pkg),
// alpha at CFG_ALPHA (reset value 0.5) and the learning control at CFG_TRAIN ([0] enable,
// [7:4] learning-rate shift; reset value: enabled, shift 4). Host writes take precedence over
// the learning unit's writes, which wait.
//
// Timing: one access in flight. A hit answers 7 clock edges after the one that accepted the
// request (lookup 1, predictor 5, response 1); a miss adds the memory round trip and one
// cycle to issue the memory request.
module acpc_top
  import acpc_pkg::*;
#(
  parameter int ADDR_W     = 48,
  parameter int LINE_BYTES = 64,
  parameter int SETS       = 1024,
  parameter int WAYS       = 8,
  parameter int FREQ_W     = 4,
  parameter int TS_W       = 16,
  parameter int WIN        = 16,
  parameter int BATCH      = 64,
  localparam int LINE_W    = LINE_BYTES * 8,
  localparam int OFF_W     = $clog2(LINE_BYTES),
  localparam int IDX_W     = $clog2(SETS),
  localparam int TAG_W     = ADDR_W - OFF_W - IDX_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_we,
  input  logic [CFG_AW-1:0]   cfg_addr,
  input  logic [15:0]         cfg_wdata,
  // access stream
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [ADDR_W-1:0]   req_addr,
  input  itype_e              req_itype,
  input  logic                req_prefetch,
  output logic                resp_valid,
  output logic                resp_hit,
  output logic [LINE_W-1:0]   resp_data,
  // memory below the L2
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic [ADDR_W-1:0]   mem_req_addr,
  input  logic                mem_resp_valid,
  input  logic [LINE_W-1:0]   mem_resp_data,
  // monitoring
  output cache_stats_t        stats,
  output logic [31:0]         train_labels_pos,
  output logic [31:0]         train_labels_neg,
  output logic [31:0]         train_updates
);

  // control registers
  logic [15:0] alpha_q;
  logic        train_en;
  logic [3:0]  lr_shift;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alpha_q  <= 16'h8000;
      train_en <= 1'b1;
      lr_shift <= 4'd4;
    end else if (cfg_we) begin
      if (cfg_addr == CFG_AW'(CFG_ALPHA)) alpha_q <= cfg_wdata;
      if (cfg_addr == CFG_AW'(CFG_TRAIN)) begin
        train_en <= cfg_wdata[0];
        lr_shift <= cfg_wdata[7:4];
      end
    end
  end

  // cache <-> predictor
  logic                        pred_req, pred_prefetch, pred_hit, pred_valid;
  logic [TAG_W-1:0]            pred_tag;
  logic [IDX_W-1:0]            pred_set;
  itype_e                      pred_itype;
  logic [TS_W-1:0]             pred_reuse_dist;
  logic [PROB_W-1:0]           y_hat;
  logic [C_IN-1:0][ACT_W-1:0]  x;
  logic [FC_HID-1:0][ACT_W-1:0] y_hidden;
  logic [C_HID-1:0][ACT_W-1:0] y_conv;
  logic [FC_HID-1:0][WGT_W-1:0] fc2_w;
  logic [ACT_W-1:0]            fc2_b;
  logic [FC_HID*C_HID-1:0][WGT_W-1:0] fc1_w;
  logic [KSIZE-1:0][C_HID-1:0][ACT_W-1:0] y_c3in;
  logic [C_HID*C_HID*KSIZE-1:0][WGT_W-1:0] c3_w;
  logic [C_HID-1:0][ACT_W-1:0] c3_b;
  logic [FC_HID-1:0][ACT_W-1:0] fc1_b;

  acpc_cache #(.ADDR_W(ADDR_W), .LINE_BYTES(LINE_BYTES), .SETS(SETS), .WAYS(WAYS),
               .FREQ_W(FREQ_W), .TS_W(TS_W)) u_cache (
    .clk, .rst_n, .alpha_q,
    .req_valid, .req_ready, .req_addr, .req_itype, .req_prefetch,
    .resp_valid, .resp_hit, .resp_data,
    .pred_req, .pred_tag, .pred_set, .pred_itype, .pred_prefetch, .pred_hit, .pred_reuse_dist,
    .pred_valid, .pred_yhat(y_hat),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_resp_valid, .mem_resp_data,
    .stats);

  feature_encoder #(.TAG_W(TAG_W), .RD_W(TS_W)) u_feat (
    .tag(pred_tag), .itype(pred_itype), .is_prefetch(pred_prefetch), .hit(pred_hit),
    .reuse_dist(pred_reuse_dist), .x(x));

  // configuration writes: host first, learning unit when the host is silent
  logic               upd_we;
  logic [CFG_AW-1:0]  upd_addr;
  logic [15:0]        upd_wdata;
  logic               p_we;
  logic [CFG_AW-1:0]  p_addr;
  logic [15:0]        p_wdata;
  always_comb begin
    p_we    = cfg_we | upd_we;
    p_addr  = cfg_we ? cfg_addr  : upd_addr;
    p_wdata = cfg_we ? cfg_wdata : upd_wdata;
  end

  tcn_predictor u_tpm (
    .clk, .rst_n, .cfg_we(p_we), .cfg_addr(p_addr), .cfg_wdata(p_wdata),
    .x_valid(pred_req), .x(x),
    .y_valid(pred_valid), .y_hat(y_hat), .y_hidden(y_hidden), .y_conv(y_conv), .y_c3in(y_c3in),
    .fc2_w_o(fc2_w), .fc2_b_o(fc2_b), .fc1_w_o(fc1_w), .fc1_b_o(fc1_b),
    .c3_w_o(c3_w), .c3_b_o(c3_b));

  online_trainer #(.LINE_W_ID(TAG_W + IDX_W), .WIN(WIN), .BATCH(BATCH)) u_train (
    .clk, .rst_n, .enable(train_en), .lr_shift,
    .obs_valid(pred_valid), .obs_line({pred_tag, pred_set}), .obs_yhat(y_hat), .obs_h(y_hidden),
    .obs_c(y_conv), .obs_x3(y_c3in), .fc2_w, .fc2_b, .fc1_w, .fc1_b, .c3_w, .c3_b,
    .upd_ready(!cfg_we), .upd_we, .upd_addr, .upd_wdata,
    .labels_pos(train_labels_pos), .labels_neg(train_labels_neg), .updates(train_updates));

endmodule
