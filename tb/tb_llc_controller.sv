// tb_llc_controller: checks the transaction controller with a metadata array
// (32 sets, 4 ways, 16-bit line addresses) against a reference model that
// keeps, for every set, its blocks in recency order.
//
// Part 1, no remap: random accesses and flushes over a pool of 3x the cache
// capacity. Every response must report hit/miss, set (the old-key index) and
// latency (2 cycles from acceptance) as the model says, a miss in a full set
// must evict exactly the least recently used block, a flush must invalidate,
// and a filled block must carry the current epoch mark.
// Part 2, remap active with the pointer moved at random: an address whose old
// index is below p is looked up only at i'; one at or above p is looked up at
// i and, on a miss with i != i', once more at i' (latency 3, resp_retry);
// a remaining miss fills at the set of the last lookup with the new epoch.
// Blocks are first placed at i' with p above their old index, then p is
// lowered so the retry lookup has to find them. The array grant is given after
// random waits and kept while the controller requests it.
module tb_llc_controller;
  import llc_pkg::*;
  import tb_enc_ref_pkg::*;

  localparam int S = 32, W = 4, LA = 16, R = 4;
  localparam int IDX_W = $clog2(S), AGE_W = $clog2(W), ENT_W = LA + 2;
  localparam int TW = W * ENT_W, AWD = W * AGE_W, KW = R * (LA / 2);
  localparam logic [KW-1:0] K0 = 32'hC0FF_EE11, K1 = 32'h5EED_1234;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             arr_ready, req_valid = 1'b0, req_ready;
  llc_op_e          req_op = OP_ACCESS;
  logic [LA-1:0]    req_addr = '0;
  logic             resp_valid, resp_hit, resp_retry;
  logic [IDX_W-1:0] resp_set, evict_set, ptr = '0;
  logic [AGE_W-1:0] resp_way;
  logic [KW-1:0]    key_new = K0;
  logic             remap_active = 1'b0, epoch = 1'b0;
  logic             access_pulse, evict_valid, bus_req, bus_gnt;
  logic [LA-1:0]    evict_addr;
  logic             rd_en, wr_en;
  logic [IDX_W-1:0] rd_set, wr_set;
  logic [TW-1:0]    rd_tags, wr_tags;
  logic [AWD-1:0]   rd_ages, wr_ages;
  logic [31:0]      retries;

  metadata_array #(.SETS(S), .WAYS(W), .LINE_ADDR_W(LA)) u_arr (
    .clk, .rst_n, .ready(arr_ready), .rd_en, .rd_set, .rd_tags, .rd_ages,
    .wr_en, .wr_set, .wr_tags, .wr_ages
  );
  llc_controller #(.SETS(S), .WAYS(W), .LINE_ADDR_W(LA), .ROUNDS(R)) dut (
    .clk, .rst_n, .array_ready(arr_ready), .req_valid, .req_ready, .req_op, .req_addr,
    .resp_valid, .resp_hit, .resp_retry, .resp_set, .resp_way,
    .key_old(K0), .key_new, .remap_active, .ptr, .epoch,
    .access_pulse, .evict_valid, .evict_addr, .evict_set,
    .bus_req, .bus_gnt, .rd_en, .rd_set, .rd_tags, .rd_ages,
    .wr_en, .wr_set, .wr_tags, .wr_ages, .retries
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bus_gnt <= 1'b0;
    else if (!(bus_gnt && bus_req)) bus_gnt <= bus_req && ($urandom_range(0, 2) == 0);
  end

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (500_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: per set, most recent first
  logic [LA-1:0] lru [S][$];
  int n_retry_hits = 0, n_retry_miss = 0, n_evict = 0, n_flush_hits = 0, n_evict_seen = 0;
  logic [LA-1:0] ev_addr_q [$];
  logic [IDX_W-1:0] ev_set_q [$];
  always @(posedge clk) if (rst_n && evict_valid) begin ev_addr_q.push_back(evict_addr); ev_set_q.push_back(evict_set); end

  function automatic int find(int s, logic [LA-1:0] a);
    foreach (lru[s][k]) if (lru[s][k] == a) return k;
    return -1;
  endfunction

  // Issue one request and compare everything with the model.
  task automatic do_req(input llc_op_e op, input logic [LA-1:0] a);
    int lat, io, in, exp_set, k;
    bit exp_hit, exp_retry;
    check(ev_addr_q.size() == 0, $sformatf("unexpected eviction of %h before request %h", ev_addr_q.size() ? ev_addr_q[0] : 0, a));
    ev_addr_q.delete(); ev_set_q.delete();
    io = int'(enc_ref(a, K0, LA, R, IDX_W));
    in = int'(enc_ref(a, key_new, LA, R, IDX_W));
    // expected lookup sequence
    exp_retry = 1'b0;
    if (remap_active && io < int'(ptr)) exp_set = in;
    else begin
      exp_set = io;
      if (remap_active && find(io, a) < 0 && io != in) begin exp_retry = 1'b1; exp_set = in; end
    end
    k = find(exp_set, a);
    exp_hit = (k >= 0);
    // handshake
    req_op = op; req_addr = a; req_valid = 1'b1;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 1'b0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    check(resp_hit == exp_hit, $sformatf("%h: hit=%0d expected %0d", a, resp_hit, exp_hit));
    check(resp_retry == exp_retry, $sformatf("%h: retry=%0d expected %0d", a, resp_retry, exp_retry));
    check(int'(resp_set) == exp_set, $sformatf("%h: set %0d expected %0d", a, resp_set, exp_set));
    check(lat == (exp_retry ? 3 : 2), $sformatf("%h: latency %0d", a, lat));
    if (exp_retry) begin if (exp_hit) n_retry_hits++; else n_retry_miss++; end
    // update the model
    if (op == OP_FLUSH) begin
      if (exp_hit) begin lru[exp_set].delete(k); n_flush_hits++; end
      check(u_arr.tag_mem[exp_set][int'(resp_way)*ENT_W + LA + 1] == 1'b0 || !exp_hit, "flushed way still valid");
    end else begin
      if (exp_hit) lru[exp_set].delete(k);
      else if (lru[exp_set].size() == W) begin
        logic [LA-1:0] v;
        v = lru[exp_set].pop_back();
        n_evict++;
        @(negedge clk);
        check(ev_addr_q.size() == 1 && ev_addr_q[0] == v && int'(ev_set_q[0]) == exp_set,
              $sformatf("%h: eviction of %h at set %0d not reported", a, v, exp_set));
      end
      lru[exp_set].push_front(a);
      if (!exp_hit) check(u_arr.tag_mem[exp_set][int'(resp_way)*ENT_W +: ENT_W] == {1'b1, epoch, a},
                          $sformatf("%h: filled entry wrong", a));
    end
    n_evict_seen += ev_addr_q.size();
    ev_addr_q.delete(); ev_set_q.delete();
    // idle gap sometimes
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  logic [LA-1:0] pool [S * W * 3];

  initial begin : main
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (pool[i]) pool[i] = LA'($urandom);
    // part 1
    for (int n = 0; n < 6000; n++)
      do_req(($urandom_range(0, 9) == 0) ? OP_FLUSH : OP_ACCESS, pool[$urandom_range(0, S * W * 3 - 1)]);
    check(retries == 0, "retry outside a remap");
    // part 2
    remap_active = 1'b1; epoch = 1'b1; key_new = K1;
    for (int n = 0; n < 3000; n++) begin
      logic [LA-1:0] a;
      a = pool[$urandom_range(0, S * W * 3 - 1)];
      if (n % 2 == 0) begin
        // place at i' with p above the old index, then lower p below it
        ptr = IDX_W'(S - 1);
        if (int'(enc_ref(a, K0, LA, R, IDX_W)) < S - 1) do_req(OP_ACCESS, a);
        ptr = IDX_W'($urandom_range(0, int'(enc_ref(a, K0, LA, R, IDX_W))));
        do_req(OP_ACCESS, a);
      end else begin
        ptr = IDX_W'($urandom_range(0, S - 1));
        do_req(($urandom_range(0, 9) == 0) ? OP_FLUSH : OP_ACCESS, a);
      end
    end
    check(n_evict_seen == n_evict, $sformatf("%0d evictions reported, %0d expected", n_evict_seen, n_evict));
    check(retries == 32'(n_retry_hits + n_retry_miss), "retry counter");
    check(n_retry_hits > 100 && n_retry_miss > 100 && n_evict > 100 && n_flush_hits > 50,
          $sformatf("coverage: retry hits %0d misses %0d evictions %0d flush hits %0d",
                    n_retry_hits, n_retry_miss, n_evict, n_flush_hits));
    $display("retry hits=%0d retry misses=%0d evictions=%0d flush hits=%0d",
             n_retry_hits, n_retry_miss, n_evict, n_flush_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
