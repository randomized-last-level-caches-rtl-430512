// tb_rand_llc: end-to-end test of the randomized LLC at a reduced size
// (16 sets, 4 ways, 16-bit line addresses, remap every 16 evictions per block,
// detector sample of 64 accesses).
//
// A shadow model tracks which line addresses must be in the cache, from the
// cache's own fill, flush and eviction reports: every response must say hit
// exactly when the address is in the shadow, every eviction must name a
// cached block and the shadow can never exceed the capacity. Because the
// shadow does not depend on the mapping, this checks that remapping,
// chained relocation and the retry lookup never lose or duplicate a block.
// Latency is checked too: 2 cycles from acceptance to response, 3 with a
// retry. The test runs random traffic with a hit pool and flushes, then a
// search-like attack that hammers 2*WAYS addresses of one set, which the
// detector must catch, then traffic until a period remap has completed. Each
// mechanism (period remap, detector remap, chained relocation, remap
// eviction, retry lookup, demand eviction, flush) must occur at least once.
module tb_rand_llc;
  import llc_pkg::*;

  localparam int unsigned S      = 16;
  localparam int unsigned W      = 4;
  localparam int unsigned LA     = 16;
  localparam int unsigned EVPB   = 16;
  localparam int unsigned SAMPLE = 64;
  localparam int unsigned IDX_W  = $clog2(S);
  localparam int unsigned AGE_W  = $clog2(W);
  localparam int unsigned WATCHDOG = 2_000_000;
  localparam int unsigned TRAFFIC  = 6000;
  localparam int unsigned PERIOD_REMAPS = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             ready, req_valid = 1'b0, req_ready;
  llc_op_e          req_op = OP_ACCESS;
  logic [LA-1:0]    req_addr = '0;
  logic             resp_valid, resp_hit, resp_retry;
  logic [IDX_W-1:0] resp_set, evict_set, reloc_src_set, reloc_dst_set, remap_ptr, detect_set;
  logic [AGE_W-1:0] resp_way, reloc_src_way, reloc_dst_way;
  logic             evict_valid, evict_by_remap, reloc_valid, remap_active, remap_start, detect;
  logic [LA-1:0]    evict_addr;
  logic [31:0]      remaps_by_period, remaps_by_detect, relocations, chained_relocations;
  logic [31:0]      remap_evictions, retries, detect_evaluations, detect_overruns;
  logic [$clog2(EVPB*S*W+1)-1:0] evict_count;

  rand_llc #(.SETS(S), .WAYS(W), .LINE_ADDR_W(LA), .EV_PER_BLOCK(EVPB), .SAMPLE(SAMPLE)) dut (
    .clk, .rst_n, .key_seed(64'h0123_4567_89AB_CDEF), .ready,
    .req_valid, .req_ready, .req_op, .req_addr,
    .resp_valid, .resp_hit, .resp_retry, .resp_set, .resp_way,
    .evict_valid, .evict_by_remap, .evict_addr, .evict_set,
    .reloc_valid, .reloc_src_set, .reloc_src_way, .reloc_dst_set, .reloc_dst_way,
    .remap_active, .remap_start, .remap_ptr, .detect,
    .remaps_by_period, .remaps_by_detect, .relocations, .chained_relocations,
    .remap_evictions, .retries, .evict_count, .detect_set, .detect_evaluations, .detect_overruns
  );

  int unsigned checks = 0, failures = 0;
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ------------------------------------------------------------ shadow model
  bit               shadow [logic [LA-1:0]];
  logic [LA-1:0]    cur_addr;
  llc_op_e          cur_op;
  int unsigned n_hits = 0, n_miss = 0, n_demand_ev = 0, n_remap_ev = 0, n_flush = 0;
  int unsigned n_retry_hits = 0, n_detect = 0, n_remap_done = 0;
  bit was_active = 1'b0;

  always @(posedge clk) if (rst_n) begin
    if (resp_valid) begin
      check(resp_hit == shadow.exists(cur_addr),
            $sformatf("addr %h: hit=%0b but shadow says %0b", cur_addr, resp_hit, shadow.exists(cur_addr)));
      if (resp_hit) n_hits++; else n_miss++;
      if (resp_hit && resp_retry) n_retry_hits++;
      if (cur_op == OP_FLUSH && resp_hit) begin shadow.delete(cur_addr); n_flush++; end
      if (cur_op == OP_ACCESS && !resp_hit) shadow[cur_addr] = 1'b1;
    end
    if (evict_valid) begin
      check(shadow.exists(evict_addr), $sformatf("evicted %h was not cached", evict_addr));
      shadow.delete(evict_addr);
      if (evict_by_remap) n_remap_ev++; else n_demand_ev++;
    end
    if (shadow.size() > S * W) begin
      check(1'b0, "more blocks cached than the capacity");
    end
    if (detect) n_detect++;
    if (was_active && !remap_active) n_remap_done++;
    was_active <= remap_active;
  end

  // ------------------------------------------------------------ driver
  task automatic do_req(input llc_op_e op, input logic [LA-1:0] addr,
                        output bit hit, output logic [IDX_W-1:0] set);
    longint unsigned t0;
    bit retry;
    @(negedge clk);
    req_valid = 1'b1; req_op = op; req_addr = addr;
    while (!req_ready) @(negedge clk);
    cur_addr = addr; cur_op = op;
    t0 = cycle;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    hit = resp_hit; set = resp_set; retry = resp_retry;
    check((cycle - t0) == (retry ? 3 : 2), $sformatf("latency %0d (retry %0b)", cycle - t0, retry));
  endtask

  logic [LA-1:0]    pool [64];
  logic [IDX_W-1:0] tgt;
  function automatic logic [LA-1:0] rnd_addr();
    return LA'($urandom);
  endfunction

  task automatic traffic(input int unsigned n);
    bit h; logic [IDX_W-1:0] s;
    for (int unsigned k = 0; k < n; k++) begin
      int unsigned r = $urandom_range(0, 99);
      if (r < 50)      do_req(OP_ACCESS, pool[$urandom_range(0, 63)], h, s);
      else if (r < 55) do_req(OP_FLUSH,  pool[$urandom_range(0, 63)], h, s);
      else begin
        logic [LA-1:0] a;
        a = rnd_addr();
        do_req(OP_ACCESS, a, h, s);
        pool[$urandom_range(0, 63)] = a;
      end
    end
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    bit h; logic [IDX_W-1:0] s;
    logic [LA-1:0] evset [2*W];
    int unsigned found, det_before, k, nremaps;
    foreach (pool[i]) pool[i] = rnd_addr();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!ready) @(posedge clk);

    // 1. random traffic
    traffic(TRAFFIC / 2);

    // 2. attack: collect 2W addresses congruent to one set, then hammer them
    wait (!remap_active);
    found = 0;
    nremaps = remaps_by_period + remaps_by_detect;
    while (found < 2 * W) begin
      logic [LA-1:0] a;
      a = rnd_addr();
      if (remap_active || nremaps != remaps_by_period + remaps_by_detect) begin
        // the mapping changed: start the search again
        found = 0;
        wait (!remap_active);
        nremaps = remaps_by_period + remaps_by_detect;
      end
      do_req(OP_ACCESS, a, h, s);
      if (!h) begin
        if (found == 0) begin evset[0] = a; found = 1; tgt = s; end
        else if (s == tgt) begin evset[found] = a; found++; end
      end
    end
    det_before = remaps_by_detect;
    k = 0;
    while (remaps_by_detect == det_before && k < 6 * SAMPLE) begin
      do_req(OP_ACCESS, evset[k % (2 * W)], h, s);
      k++;
    end
    check(remaps_by_detect > det_before, "attack on one set was not detected");
    $display("attack detected after %0d hammering accesses (set %0d)", k, detect_set);

    // 3. traffic until enough period remaps have completed
    while (remaps_by_period < PERIOD_REMAPS || remap_active) traffic(200);
    traffic(TRAFFIC / 2);
    wait (!remap_active);

    // 4. everything in the shadow must hit
    begin
      logic [LA-1:0] keys [$];
      foreach (shadow[a]) keys.push_back(a);
      foreach (keys[i]) begin
        // a remap started by the detector may evict blocks during the sweep
        int unsigned r0 = remaps_by_period + remaps_by_detect;
        bit expect_hit = shadow.exists(keys[i]);
        do_req(OP_ACCESS, keys[i], h, s);
        if (r0 == remaps_by_period + remaps_by_detect && !remap_active)
          check(h == expect_hit, $sformatf("final sweep: %h should hit", keys[i]));
      end
    end

    $display("hits=%0d misses=%0d demand_ev=%0d remap_ev=%0d flushes=%0d", n_hits, n_miss,
             n_demand_ev, n_remap_ev, n_flush);
    $display("remaps: period=%0d detect=%0d done=%0d relocations=%0d chained=%0d retries=%0d retry_hits=%0d overruns=%0d",
             remaps_by_period, remaps_by_detect, n_remap_done, relocations, chained_relocations,
             retries, n_retry_hits, detect_overruns);
    check(remaps_by_period > 0, "no remap by eviction period");
    check(remaps_by_detect > 0, "no remap by detection");
    check(n_remap_done >= remaps_by_period + remaps_by_detect - 1, "remaps did not complete");
    check(chained_relocations > 0, "no chained (multi-step) relocation");
    check(n_remap_ev > 0, "no remap eviction");
    check(retries > 0, "no retry lookup at the new index");
    check(n_demand_ev > 0, "no demand eviction");
    check(n_flush > 0, "no flush hit");
    check(detect_overruns == 0, "detector evaluation overran a sample period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
