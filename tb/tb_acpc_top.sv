// tb_acpc_top: the whole design at its default size (512 KB, 8 ways, 64-byte lines, 1024
// sets), end to end. The testbench loads a small hand-made network that scores demand
// accesses high (y_hat about 0.87) and prefetches low (about 0.13), and plays the memory
// (20-cycle latency, line data a function of the address). Every response is checked for
// data and, where the testbench knows it, hit or miss.
//   phase 1  occupancy: six hot lines fill free ways of one set (no eviction)
//   phase 2  pollution control: a scan of 40 prefetches into the same set, interleaved with
//            demand reads of the hot lines. The prefetched lines must evict each other and
//            every hot read must hit. The hit latency must be 7 cycles.
//   phase 3  alpha set to 0 (frequency only) and back (mode switch through configuration)
//   phase 4  online learning switched on: a decode-like stream (streamed weights with next-line
//            prefetch, lookups in a small embedding table, a growing key/value cache re-read
//            every token).
//            The learning unit must label predictions and rewrite the FC layers.
// Each mechanism is counted, and one that never happened counts as a failure.
module tb_acpc_top;
  import acpc_pkg::*;
  localparam int ADDR_W = 48, LINE_W = 512, OFF_W = 6, IDX_W = 10;
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
    for (int i = 0; i < LINE_W / 64; i++) d[i*64 +: 64] = 64'(a >> OFF_W) * 64'h9e3779b97f4a7c15 + 64'(i);
    return d;
  endfunction

  // memory: accepts when idle, answers 20 cycles later
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
    repeat (400000) @(posedge clk);
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

  // one access; exp_hit: 1 hit, 0 miss, -1 unknown. Returns the cycles to the response.
  task automatic access(input logic [ADDR_W-1:0] a, input itype_e t, input bit pf,
                        input int exp_hit, output bit hit, output int lat);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_addr = a; req_itype = t; req_prefetch = pf;
    @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    while (!resp_valid && lat < 200) begin @(posedge clk); #1 lat++; end
    hit = resp_hit;
    chk(resp_valid, "response arrives");
    chk(resp_data == line_data({a[ADDR_W-1:OFF_W], 6'b0}), $sformatf("data of %h", a));
    if (exp_hit >= 0) chk(int'(resp_hit) == exp_hit, $sformatf("hit of %h: %0d expected %0d", a, resp_hit, exp_hit));
  endtask

  function automatic logic [ADDR_W-1:0] mk(input int tag, input int set);
    return {32'(tag), 10'(set), 6'($urandom)};
  endfunction

  int n_free_fill, n_evict, n_pollute, n_hot_hits, n_pf_used, n_alpha_switch, n_updates;

  initial begin
    bit h;
    int lat, hot_lat_ok, init_cycles;
    cache_stats_t s0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    init_cycles = 0;
    while (!req_ready) begin @(posedge clk); init_cycles++; end
    chk(init_cycles >= 1023 && init_cycles <= 1026, $sformatf("reset sweep took %0d cycles", init_cycles));
    // network: channel 0 = prefetch flag, channel 1 = demand flag, passed through every
    // layer; output z = 1.98*demand - 1.98*prefetch
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
    wr(CFG_TRAIN, 16'h0040);   // learning off for phases 1-3
    chk(dut.alpha_q == 16'h8000, "alpha resets to 0.5");

    // phase 1: six hot lines, each read twice
    for (int i = 0; i < 6; i++) begin
      access(mk(100 + i, 5), ITYPE_KV, 0, 0, h, lat);
      access(mk(100 + i, 5), ITYPE_KV, 0, 1, h, lat);
    end
    n_free_fill = stats.demand_misses;
    chk(stats.evictions == 0, "filling free ways evicts nothing");
    chk(dut.u_cache.meta_mem[5][0].yhat > 8'd200, "demand line stored with high y_hat");

    // phase 2: prefetch scan into the same set
    hot_lat_ok = 0;
    for (int i = 0; i < 40; i++) begin
      access(mk(1000 + i, 5), ITYPE_WEIGHT, 1, 0, h, lat);
      access(mk(100 + (i % 6), 5), ITYPE_KV, 0, 1, h, lat);
      if (h) n_hot_hits++;
      if (lat == 7) hot_lat_ok++;
    end
    // a prefetched line that is then used by a demand read
    access(mk(2000, 7), ITYPE_EMBED, 1, 0, h, lat);
    access(mk(2000, 7), ITYPE_EMBED, 0, 1, h, lat);
    n_pf_used = stats.prefetch_used;
    n_evict   = stats.evictions;
    n_pollute = stats.polluting_evicts;
    chk(hot_lat_ok == 40, $sformatf("hit latency 7 cycles in %0d of 40", hot_lat_ok));
    chk(n_hot_hits == 40, "hot lines survive the prefetch scan");
    chk(n_pollute >= 38 && n_evict == n_pollute, $sformatf("only prefetched lines evicted: %0d of %0d", n_pollute, n_evict));

    // phase 3: alpha = 0, then back
    wr(CFG_ALPHA, 0);
    chk(dut.alpha_q == 16'h0000, "alpha written");
    n_alpha_switch++;
    access(mk(3000, 5), ITYPE_WEIGHT, 1, 0, h, lat);
    access(mk(100, 5), ITYPE_KV, 0, 1, h, lat);
    wr(CFG_ALPHA, 16'h8000);
    n_alpha_switch++;

    // phase 4: decode-like stream with online learning
    wr(CFG_TRAIN, 16'h0041);
    s0 = stats;
    for (int tok = 0; tok < 24; tok++) begin
      // streamed weights: 40 consecutive lines, each demand read followed by a prefetch of
      // the next line, which the next demand read then finds
      for (int i = 0; i < 40; i++) begin
        logic [ADDR_W-1:0] wa;
        wa = 48'(64'd5000000 + 64'(tok) * 64'd4096 + 64'(i)) << OFF_W;
        access(wa, ITYPE_WEIGHT, 0, -1, h, lat);
        access(wa + 48'd64, ITYPE_WEIGHT, 1, -1, h, lat);
      end
      // embedding lookups in a 16-line table
      for (int i = 0; i < 4; i++)
        access({32'(7000), 10'($urandom_range(200, 215)), 6'd0}, ITYPE_EMBED, 0, -1, h, lat);
      // key/value cache of all tokens so far
      for (int j = 0; j <= tok; j++)
        access({32'(9000), 10'(300 + j), 6'd0}, ITYPE_KV, 0, -1, h, lat);
    end
    n_updates = train_updates;
    $display("decode stream: %0d accesses, demand hits %0d, misses %0d, prefetch fills %0d, polluting evictions %0d",
             stats.accesses - s0.accesses, stats.demand_hits - s0.demand_hits,
             stats.demand_misses - s0.demand_misses, stats.prefetch_fills - s0.prefetch_fills,
             stats.polluting_evicts - s0.polluting_evicts);
    $display("learning: labels %0d positive %0d negative, %0d updates", train_labels_pos, train_labels_neg, train_updates);
    chk(train_labels_pos > 0 && train_labels_neg > 0, "predictions labelled both ways");
    $display("mechanisms: free-way fills %0d, priority evictions %0d, polluting evictions %0d, hot hits %0d, prefetch used %0d, alpha switches %0d, weight updates %0d",
             n_free_fill, n_evict, n_pollute, n_hot_hits, n_pf_used, n_alpha_switch, n_updates);
    chk(n_free_fill > 0, "free-way fill happened");
    chk(n_evict > 0, "priority eviction happened");
    chk(n_pollute > 0, "polluting prefetch eviction happened");
    chk(n_hot_hits > 0, "hits happened");
    chk(n_pf_used > 0, "prefetch use happened");
    chk(n_alpha_switch > 0, "alpha switch happened");
    chk(n_updates > 0, "online update happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
