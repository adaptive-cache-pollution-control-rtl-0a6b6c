// tb_acpc_workload: a decode-like LLM inference stream run twice through the full-size design,
// once with the predictor loaded (ACPC) and once with all weights zero and learning off
// (every y_hat = 0.5, so replacement falls back to the access counters alone). The stream per
// generated token:
//   * the key/value lines of all tokens so far, read once each (the newest one is new)
//   * 24 streamed weight lines, each followed by a prefetch that is never used (a
//     mispredicting prefetcher)
//   * 3 lookups in a 24-line embedding table
// The traffic is confined to 16 sets (128 lines) so that a short simulation reaches a full,
// contended cache. Each run's responses are checked for data; the run then reports demand hit
// rate and prefetch pollution. ACPC must reach a demand hit rate at least as high as the
// baseline's, and it must keep useless prefetches from evicting key/value lines.
module tb_acpc_workload;
  import acpc_pkg::*;
  localparam int ADDR_W = 48, LINE_W = 512, OFF_W = 6;
  localparam int TOKENS = 40, NSETS = 16;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [15:0] cfg_wdata = '0;
  logic req_valid = 0, req_ready;
  logic [ADDR_W-1:0] req_addr = '0;
  itype_e req_itype = ITYPE_KV;
  logic req_prefetch = 0;
  logic resp_valid, resp_hit;
  logic [LINE_W-1:0] resp_data;
  logic mem_req_valid, mem_req_ready;
  logic [ADDR_W-1:0] mem_req_addr;
  logic mem_resp_valid = 0;
  logic [LINE_W-1:0] mem_resp_data = '0;
  cache_stats_t stats;
  logic [31:0] train_labels_pos, train_labels_neg, train_updates;
  int checks = 0, failures = 0;

  acpc_top dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [LINE_W-1:0] line_data(input logic [ADDR_W-1:0] a);
    logic [LINE_W-1:0] d;
    for (int i = 0; i < LINE_W / 64; i++) d[i*64 +: 64] = 64'(a >> OFF_W) * 64'hc2b2ae3d27d4eb4f + 64'(i);
    return d;
  endfunction

  assign mem_req_ready = 1'b1;
  initial begin
    forever begin
      @(posedge clk);
      if (mem_req_valid && rst_n) begin
        logic [ADDR_W-1:0] a;
        a = mem_req_addr;
        repeat (20) @(posedge clk);
        #1 mem_resp_valid = 1; mem_resp_data = line_data(a);
        @(posedge clk);
        #1 mem_resp_valid = 0;
      end
    end
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = 16'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  int kv_hits, kv_reads;

  task automatic access(input int tag, input int set, input itype_e t, input bit pf);
    logic [ADDR_W-1:0] a;
    int lat;
    a = {32'(tag), 10'(set), 6'd0};
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_addr = a; req_itype = t; req_prefetch = pf;
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    while (!resp_valid && lat < 200) begin @(posedge clk); #1 lat++; end
    chk(resp_valid && resp_data == line_data(a), $sformatf("response data of %h", a));
    if (t == ITYPE_KV && !pf) begin kv_reads++; if (resp_hit) kv_hits++; end
  endtask

  task automatic run(input bit acpc, output real hit_rate, output real kv_rate,
                     output real ppr, output int kv_polluted);
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!req_ready) @(posedge clk);
    if (acpc) begin
      // channel 0 = prefetch flag, channel 1 = demand flag; z = 1.98*demand - 1.98*prefetch
      wr(CONV1_W_BASE + (0*C_IN + 2)*KSIZE, 64);
      wr(CONV1_W_BASE + (1*C_IN + 2)*KSIZE, -64);
      wr(CONV1_B_BASE + 1, 256);
      wr(CONV2_W_BASE + (0*C_HID + 0)*KSIZE, 64);
      wr(CONV2_W_BASE + (1*C_HID + 1)*KSIZE, 64);
      wr(CONV3_W_BASE + (0*C_HID + 0)*KSIZE, 64);
      wr(CONV3_W_BASE + (1*C_HID + 1)*KSIZE, 64);
      wr(FC1_W_BASE + 0*C_HID + 0, 64);
      wr(FC1_W_BASE + 1*C_HID + 1, 64);
      wr(FC2_W_BASE + 0, -127);
      wr(FC2_W_BASE + 1, 127);
    end else begin
      wr(CFG_TRAIN, 0);
    end
    kv_hits = 0; kv_reads = 0;
    for (int tok = 0; tok < TOKENS; tok++) begin
      for (int j = 0; j <= tok; j++)
        access(9000, j % NSETS + 0, ITYPE_KV, 0);   // KV line j
      for (int i = 0; i < 24; i++) begin
        access(100000 + tok * 8 + i / NSETS, i % NSETS, ITYPE_WEIGHT, 0);
        access(200000 + tok * 8 + i / NSETS, (i + 5) % NSETS, ITYPE_WEIGHT, 1);
      end
      for (int i = 0; i < 3; i++) begin
        int row;
        row = $urandom_range(0, 23);
        access(7000 + row / NSETS, row % NSETS, ITYPE_EMBED, 0);
      end
    end
    hit_rate = real'(stats.demand_hits) / real'(stats.demand_hits + stats.demand_misses);
    kv_rate  = real'(kv_hits) / real'(kv_reads);
    ppr      = real'(stats.polluting_evicts) / real'(stats.prefetch_fills);
    kv_polluted = stats.evictions - stats.polluting_evicts;
  endtask

  initial begin
    real h_a, h_b, k_a, k_b, p_a, p_b;
    int e_a, e_b;
    repeat (2) @(posedge clk);
    run(1'b0, h_b, k_b, p_b, e_b);
    $display("baseline (no prediction): demand hit rate %5.3f, KV hit rate %5.3f, useless prefetches evicted %5.3f, non-prefetch evictions %0d",
             h_b, k_b, p_b, e_b);
    run(1'b1, h_a, k_a, p_a, e_a);
    $display("ACPC                    : demand hit rate %5.3f, KV hit rate %5.3f, useless prefetches evicted %5.3f, non-prefetch evictions %0d",
             h_a, k_a, p_a, e_a);
    $display("online learning: %0d updates", train_updates);
    chk(h_a >= h_b, "ACPC demand hit rate not below the baseline's");
    chk(k_a >= k_b, "ACPC key/value hit rate not below the baseline's");
    chk(e_a <= e_b, "ACPC evicts no more non-prefetched lines than the baseline");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
