// tb_acpc_cache: a small cache (4 sets x 4 ways, 16-byte lines) against a reference model.
// The testbench plays the predictor (answers pred_req after a random delay with a y_hat that
// depends on the line and is low for prefetches) and the memory (random ready and latency,
// line data a function of the address). The model keeps every line's tag, y_hat, count,
// prefetch flag and time stamp and picks victims by Eq. 3 in real arithmetic (invalid way
// first, then lowest priority; on a near-tie within 1e-4 it follows the cache's choice).
// Checked: hit/miss and data of every response, the reuse distance and hit flag sent to the
// predictor, the victim, and all statistics counters. alpha changes between phases.
module tb_acpc_cache;
  import acpc_pkg::*;
  localparam int ADDR_W = 20, LB = 16, SETS = 4, WAYS = 4, FREQ_W = 4, TS_W = 16;
  localparam int LINE_W = LB * 8, OFF_W = 4, IDX_W = 2, TAG_W = ADDR_W - OFF_W - IDX_W;
  logic clk = 0, rst_n = 0;
  logic [15:0] alpha_q = 16'h8000;
  logic req_valid = 0, req_ready;
  logic [ADDR_W-1:0] req_addr = '0;
  itype_e req_itype = ITYPE_KV;
  logic req_prefetch = 0;
  logic resp_valid, resp_hit;
  logic [LINE_W-1:0] resp_data;
  logic pred_req, pred_prefetch, pred_hit;
  logic [TAG_W-1:0] pred_tag;
  logic [IDX_W-1:0] pred_set;
  itype_e pred_itype;
  logic [TS_W-1:0] pred_reuse_dist;
  logic pred_valid = 0;
  logic [PROB_W-1:0] pred_yhat = '0;
  logic mem_req_valid, mem_req_ready = 0;
  logic [ADDR_W-1:0] mem_req_addr;
  logic mem_resp_valid = 0;
  logic [LINE_W-1:0] mem_resp_data = '0;
  cache_stats_t stats;
  int checks = 0, failures = 0;

  acpc_cache #(.ADDR_W(ADDR_W), .LINE_BYTES(LB), .SETS(SETS), .WAYS(WAYS), .FREQ_W(FREQ_W),
               .TS_W(TS_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [LINE_W-1:0] line_data(input logic [ADDR_W-1:0] a);
    logic [LINE_W-1:0] d;
    for (int i = 0; i < LINE_W / 32; i++) d[i*32 +: 32] = 32'(a >> OFF_W) * 32'h9e3779b1 + 32'(i);
    return d;
  endfunction

  function automatic int yhat_of(int tag, int set, bit pf);
    return ((tag * 37 + set * 11) & 8'h7f) + (pf ? 0 : 128);
  endfunction

  // predictor model
  initial begin
    forever begin
      @(negedge clk);
      pred_valid = 0;
      if (pred_req) begin
        int tg, st;
        bit pf;
        tg = int'(pred_tag); st = int'(pred_set); pf = pred_prefetch;
        repeat ($urandom_range(0, 5)) @(negedge clk);
        pred_valid = 1;
        pred_yhat  = PROB_W'(yhat_of(tg, st, pf));
      end
    end
  end

  // memory model
  initial begin
    forever begin
      @(negedge clk);
      mem_resp_valid = 0;
      mem_req_ready  = ($urandom_range(0, 2) != 0);
      if (mem_req_valid && mem_req_ready) begin
        logic [ADDR_W-1:0] a;
        a = mem_req_addr;
        @(negedge clk);
        mem_req_ready = 0;
        repeat ($urandom_range(0, 6)) @(negedge clk);
        mem_resp_valid = 1;
        mem_resp_data  = line_data(a);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model state
  bit m_valid[SETS][WAYS], m_pf[SETS][WAYS];
  int m_tag[SETS][WAYS], m_y[SETS][WAYS], m_f[SETS][WAYS], m_ts[SETS][WAYS];
  int now = 0;
  int c_acc = 0, c_dh = 0, c_dm = 0, c_pff = 0, c_pfu = 0, c_pol = 0, c_ev = 0;

  initial begin
    int n_ambig = 0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) m_valid[s][w] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!req_ready, "not ready while the metadata is being cleared");
    while (!req_ready) @(negedge clk);
    for (int n = 0; n < 1500; n++) begin
      int tag, set, hw, vw, yh, cyc;
      bit pf, hit;
      logic [ADDR_W-1:0] a;
      if (n == 500) alpha_q = 16'hf000;
      if (n == 1000) alpha_q = 16'h1000;
      tag = $urandom_range(0, 6);
      set = $urandom_range(0, SETS - 1);
      pf  = ($urandom_range(0, 9) < 3);
      a   = {TAG_W'(tag), IDX_W'(set), OFF_W'($urandom)};
      req_addr = a; req_prefetch = pf; req_itype = itype_e'($urandom_range(0, 3));
      req_valid = 1;
      @(posedge clk);
      #1 req_valid = 0;
      // model lookup
      now++;
      c_acc++;
      hit = 0; hw = 0;
      for (int w = 0; w < WAYS; w++) if (m_valid[set][w] && m_tag[set][w] == tag) begin hit = 1; hw = w; end
      if (!pf) begin if (hit) c_dh++; else c_dm++; end
      if (!pf && hit && m_pf[set][hw]) c_pfu++;
      // predictor request
      while (!pred_req) @(negedge clk);
      chk(pred_hit == hit, $sformatf("n=%0d predictor hit flag", n));
      if (hit) chk(int'(pred_reuse_dist) == ((now - m_ts[set][hw]) & 16'hffff), "reuse distance");
      yh = yhat_of(tag, set, pf);
      if (hit) begin
        m_y[set][hw] = yh;
        m_ts[set][hw] = now;
        if (!pf) begin
          if (m_f[set][hw] < 15) m_f[set][hw]++;
          m_pf[set][hw] = 0;
        end
      end else begin
        // victim
        vw = -1;
        for (int w = WAYS - 1; w >= 0; w--) if (!m_valid[set][w]) vw = w;
        if (vw < 0) begin
          real al, s, p[WAYS], best, second;
          al = real'(alpha_q) / 65536.0;
          s = 0.0;
          for (int w = 0; w < WAYS; w++) s += $exp(real'(m_y[set][w]) / 256.0);
          best = 10.0; second = 10.0;
          for (int w = 0; w < WAYS; w++) begin
            p[w] = al * $exp(real'(m_y[set][w]) / 256.0) / s + (1.0 - al) * real'(m_f[set][w]) / 15.0;
            if (p[w] < best) begin second = best; best = p[w]; vw = w; end
            else if (p[w] < second) second = p[w];
          end
          if (second - best < 1e-4) begin
            n_ambig++;
            vw = int'(dut.way_q);
          end
          chk(int'(dut.way_q) == vw, $sformatf("n=%0d victim %0d vs %0d", n, dut.way_q, vw));
          c_ev++;
          if (m_pf[set][vw]) c_pol++;
        end else begin
          chk(int'(dut.way_q) == vw, $sformatf("n=%0d free way %0d vs %0d", n, dut.way_q, vw));
        end
        if (pf) c_pff++;
        m_valid[set][vw] = 1; m_tag[set][vw] = tag; m_y[set][vw] = yh;
        m_f[set][vw] = 0; m_pf[set][vw] = pf; m_ts[set][vw] = now;
      end
      // response
      cyc = 0;
      while (!resp_valid && cyc < 100) begin @(posedge clk); #1; cyc++; end
      chk(resp_valid && resp_hit == hit, $sformatf("n=%0d response hit=%0d expected %0d", n, resp_hit, hit));
      chk(resp_data == line_data(a), $sformatf("n=%0d response data", n));
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
    end
    repeat (5) @(posedge clk);
    chk(stats.accesses == c_acc, "accesses counter");
    chk(stats.demand_hits == c_dh && stats.demand_misses == c_dm,
        $sformatf("demand hits %0d/%0d misses %0d/%0d", stats.demand_hits, c_dh, stats.demand_misses, c_dm));
    chk(stats.prefetch_fills == c_pff && stats.prefetch_used == c_pfu, "prefetch counters");
    chk(stats.polluting_evicts == c_pol && stats.evictions == c_ev,
        $sformatf("evictions %0d/%0d polluting %0d/%0d", stats.evictions, c_ev, stats.polluting_evicts, c_pol));
    chk(c_pol > 0 && c_pfu > 0 && c_ev > 100, "stream exercised evictions and prefetch reuse");
    $display("hits %0d misses %0d evictions %0d polluting %0d prefetch used %0d near-ties %0d",
             c_dh, c_dm, c_ev, c_pol, c_pfu, n_ambig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
