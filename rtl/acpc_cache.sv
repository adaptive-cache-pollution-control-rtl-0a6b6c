// acpc_cache: set-associative, read-allocate L2 cache whose replacement is steered by the
// temporal predictor (through the pred_* handshake) and the Priority-Aware Replacement Module.
//
// Default geometry: 512 KB (the per-core L2 size of the evaluated system), 64-byte lines and
// 8 ways, giving 1024 sets; 48-bit byte addresses. Line size, associativity and address width
// are this design's choices. Each line keeps, beside its tag and data, the metadata the policy
// needs: the last predicted reuse probability y_hat, a saturating demand-access counter (the
// frequency f of Eq. 3), a prefetch flag (set while a prefetched line has not been used by a
// demand access) and the time stamp of its last access (for the reuse-distance feature).
//
// Operation, one request at a time:
//   IDLE   accept a request (req_valid & req_ready), read the set's metadata
//   LOOKUP compare tags, read the hit way's data, send the access to the predictor
//          (pred_req pulse with tag, type, prefetch flag, hit and reuse distance)
//   PRED   wait for pred_valid / pred_yhat
//          hit : store y_hat, count a demand access, clear the prefetch flag, respond
//          miss: take the PARM victim of the set and go to memory
//   MEMREQ/MEMWAIT  fetch the line (mem_req_* then mem_resp_*), write data and metadata:
//          the new line is inserted with its predicted y_hat, count 0 and the prefetch flag of
//          the request, then respond
// Every request, demand or prefetch, gets one resp_valid pulse carrying the line. The cache
// holds no dirty data: writes are not handled (this design handles the read stream only)
// and evicted lines are dropped. After reset the controller clears the metadata of all sets,
// one set per cycle, with req_ready low.
//
// Event counters (stats) give hit rate and the prefetch pollution ratio
// (polluting_evicts / prefetch_fills).
module acpc_cache
  import acpc_pkg::*;
#(
  parameter int ADDR_W     = 48,
  parameter int LINE_BYTES = 64,
  parameter int SETS       = 1024,
  parameter int WAYS       = 8,
  parameter int FREQ_W     = 4,
  parameter int TS_W       = 16,
  localparam int LINE_W    = LINE_BYTES * 8,
  localparam int OFF_W     = $clog2(LINE_BYTES),
  localparam int IDX_W     = $clog2(SETS),
  localparam int TAG_W     = ADDR_W - OFF_W - IDX_W,
  localparam int WAY_W     = $clog2(WAYS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [15:0]         alpha_q,
  // access requests
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [ADDR_W-1:0]   req_addr,
  input  itype_e              req_itype,
  input  logic                req_prefetch,
  output logic                resp_valid,
  output logic                resp_hit,
  output logic [LINE_W-1:0]   resp_data,
  // predictor
  output logic                pred_req,
  output logic [TAG_W-1:0]    pred_tag,
  output logic [IDX_W-1:0]    pred_set,
  output itype_e              pred_itype,
  output logic                pred_prefetch,
  output logic                pred_hit,
  output logic [TS_W-1:0]     pred_reuse_dist,
  input  logic                pred_valid,
  input  logic [PROB_W-1:0]   pred_yhat,
  // memory below
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic [ADDR_W-1:0]   mem_req_addr,
  input  logic                mem_resp_valid,
  input  logic [LINE_W-1:0]   mem_resp_data,
  // statistics
  output cache_stats_t        stats
);

  typedef struct packed {
    logic              valid;
    logic [TAG_W-1:0]  tag;
    logic [PROB_W-1:0] yhat;
    logic [FREQ_W-1:0] freq;
    logic              pf;
    logic [TS_W-1:0]   ts;
  } line_meta_t;

  typedef line_meta_t [WAYS-1:0] set_meta_t;

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOKUP, S_PRED, S_MEMREQ, S_MEMWAIT} state_e;

  set_meta_t        meta_mem [SETS];
  logic [LINE_W-1:0] data_mem [SETS*WAYS];

  state_e            state;
  logic [IDX_W-1:0]  init_idx;
  set_meta_t         meta_q;
  logic [TAG_W-1:0]  tag_q;
  logic [IDX_W-1:0]  idx_q;
  itype_e            itype_q;
  logic              pf_q;
  logic              hit_q;
  logic [WAY_W-1:0]  way_q;
  logic [TS_W-1:0]   now_ts;
  logic [LINE_W-1:0] data_q;
  logic [PROB_W-1:0] yhat_q;

  // tag compare on the registered set metadata
  logic             hit_c;
  logic [WAY_W-1:0] hit_way_c;
  always_comb begin
    hit_c     = 1'b0;
    hit_way_c = '0;
    for (int w = 0; w < WAYS; w++)
      if (meta_q[w].valid && meta_q[w].tag == tag_q) begin
        hit_c     = 1'b1;
        hit_way_c = WAY_W'(w);
      end
  end

  // replacement choice for the set
  logic [WAYS-1:0]             v_vec;
  logic [WAYS-1:0][PROB_W-1:0] y_vec;
  logic [WAYS-1:0][FREQ_W-1:0] f_vec;
  logic [WAYS-1:0][Q_W-1:0]    prio;
  logic [WAY_W-1:0]            victim;
  logic                        victim_valid;
  always_comb
    for (int w = 0; w < WAYS; w++) begin
      v_vec[w] = meta_q[w].valid;
      y_vec[w] = meta_q[w].yhat;
      f_vec[w] = meta_q[w].freq;
    end

  parm #(.WAYS(WAYS), .FREQ_W(FREQ_W)) u_parm (
    .valid(v_vec), .y_hat(y_vec), .freq(f_vec), .alpha_q(alpha_q),
    .prio(prio), .victim(victim), .victim_valid(victim_valid));

  assign req_ready     = (state == S_IDLE);
  assign mem_req_valid = (state == S_MEMREQ);
  assign mem_req_addr  = {tag_q, idx_q, {OFF_W{1'b0}}};

  always_ff @(posedge clk) begin
    if (state == S_LOOKUP) data_q <= data_mem[{idx_q, hit_way_c}];
    if (state == S_MEMWAIT && mem_resp_valid) data_mem[{idx_q, way_q}] <= mem_resp_data;
  end

  // metadata memory: read on accept, written at the end of an access or by the reset sweep
  always_ff @(posedge clk) begin
    if (state == S_IDLE && req_valid)
      meta_q <= meta_mem[req_addr[OFF_W +: IDX_W]];
    if (state == S_INIT)
      meta_mem[init_idx] <= '0;
    else if (state == S_PRED && pred_valid && hit_q) begin
      set_meta_t m;
      m = meta_q;
      m[way_q].yhat = pred_yhat;
      m[way_q].ts   = now_ts;
      if (!pf_q) begin
        if (m[way_q].freq != '1) m[way_q].freq = m[way_q].freq + 1'b1;
        m[way_q].pf = 1'b0;
      end
      meta_mem[idx_q] <= m;
    end else if (state == S_MEMWAIT && mem_resp_valid) begin
      set_meta_t m;
      m = meta_q;
      m[way_q].valid = 1'b1;
      m[way_q].tag   = tag_q;
      m[way_q].yhat  = yhat_q;
      m[way_q].freq  = '0;
      m[way_q].pf    = pf_q;
      m[way_q].ts    = now_ts;
      meta_mem[idx_q] <= m;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      init_idx   <= '0;
      tag_q      <= '0;
      idx_q      <= '0;
      itype_q    <= ITYPE_WEIGHT;
      pf_q       <= 1'b0;
      hit_q      <= 1'b0;
      way_q      <= '0;
      now_ts     <= '0;
      yhat_q     <= '0;
      resp_valid <= 1'b0;
      resp_hit   <= 1'b0;
      resp_data  <= '0;
      pred_req   <= 1'b0;
      pred_hit   <= 1'b0;
      pred_reuse_dist <= '0;
      stats      <= '0;
    end else begin
      resp_valid <= 1'b0;
      pred_req   <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == IDX_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (req_valid) begin
          tag_q   <= req_addr[OFF_W + IDX_W +: TAG_W];
          idx_q   <= req_addr[OFF_W +: IDX_W];
          itype_q <= req_itype;
          pf_q    <= req_prefetch;
          now_ts  <= now_ts + 1'b1;
          stats.accesses <= stats.accesses + 1;
          state   <= S_LOOKUP;
        end
        S_LOOKUP: begin
          hit_q    <= hit_c;
          way_q    <= hit_c ? hit_way_c : victim;
          pred_req <= 1'b1;
          pred_hit <= hit_c;
          pred_reuse_dist <= hit_c ? now_ts - meta_q[hit_way_c].ts : '0;
          if (!pf_q) begin
            if (hit_c) stats.demand_hits   <= stats.demand_hits + 1;
            else       stats.demand_misses <= stats.demand_misses + 1;
            if (hit_c && meta_q[hit_way_c].pf)
              stats.prefetch_used <= stats.prefetch_used + 1;
          end
          if (!hit_c && victim_valid) begin
            stats.evictions <= stats.evictions + 1;
            if (meta_q[victim].pf) stats.polluting_evicts <= stats.polluting_evicts + 1;
          end
          if (!hit_c && pf_q) stats.prefetch_fills <= stats.prefetch_fills + 1;
          state <= S_PRED;
        end
        S_PRED: if (pred_valid) begin
          yhat_q <= pred_yhat;
          if (hit_q) begin
            resp_valid <= 1'b1;
            resp_hit   <= 1'b1;
            resp_data  <= data_q;
            state      <= S_IDLE;
          end else begin
            state <= S_MEMREQ;
          end
        end
        S_MEMREQ: if (mem_req_ready) state <= S_MEMWAIT;
        S_MEMWAIT: if (mem_resp_valid) begin
          resp_valid <= 1'b1;
          resp_hit   <= 1'b0;
          resp_data  <= mem_resp_data;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign pred_tag      = tag_q;
  assign pred_set      = idx_q;
  assign pred_itype    = itype_q;
  assign pred_prefetch = pf_q;

  // a response never overlaps an outstanding memory request
  a_resp_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                resp_valid |-> state == S_IDLE);

endmodule
