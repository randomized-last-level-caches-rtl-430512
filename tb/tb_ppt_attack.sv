// tb_ppt_attack: a prime-prune-test eviction-set search against the cache at
// its default size and settings, with the attack detector active.
//
// Each round of the attack primes the cache with PRIME fresh random addresses,
// prunes them (re-accesses them and drops those that miss, until a pass has no
// miss), then accesses the target address and re-accesses the pruned set: the
// addresses that now miss were evicted by the target or by the blocks
// reloaded after it, and are added to the attacker's eviction set. The
// testbench knows the true set of every response and counts, for the current
// key, how many collected addresses really share the target's set; a remap
// makes all of them useless. The attack succeeds if WAYS true congruent
// addresses are ever held under one key.
//
// The published evaluation reports that with a sample period of 4K accesses
// and a threshold of 5 the chance of finding an eviction set is almost nil.
// This test requires that the detector starts at least DET_REMAPS remaps and
// that the attacker never holds a complete eviction set, over ROUNDS
// rounds. Each response is checked for the 2/3-cycle latency.
module tb_ppt_attack;
  import llc_pkg::*;

  localparam int unsigned S      = llc_pkg::SETS_DEFAULT;
  localparam int unsigned W      = llc_pkg::WAYS_DEFAULT;
  localparam int unsigned LA     = llc_pkg::LINE_ADDR_W_DEFAULT;
  localparam int unsigned EVPB   = llc_pkg::EV_PER_BLOCK_DEFAULT;
  localparam int unsigned IDX_W  = $clog2(S);
  localparam int unsigned AGE_W  = $clog2(W);
  localparam int unsigned PRIME  = S * W / 2;
  localparam int unsigned ROUNDS = 6;
  localparam int unsigned DET_REMAPS = 3;
  localparam int unsigned WATCHDOG = 40_000_000;

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

  rand_llc dut (
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

  task automatic do_req(input logic [LA-1:0] addr, output bit hit, output logic [IDX_W-1:0] set);
    longint unsigned t0;
    bit retry;
    @(negedge clk);
    req_valid = 1'b1; req_op = OP_ACCESS; req_addr = addr;
    while (!req_ready) @(negedge clk);
    t0 = cycle;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    hit = resp_hit; set = resp_set; retry = resp_retry;
    check((cycle - t0) == (retry ? 3 : 2), $sformatf("latency %0d (retry %0b)", cycle - t0, retry));
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned remaps();
    return remaps_by_period + remaps_by_detect;
  endfunction

  initial begin : main
    bit h;
    logic [IDX_W-1:0] s, tset;
    logic [LA-1:0] target;
    logic [LA-1:0] prime [$];
    logic [LA-1:0] keep [$];
    int unsigned congruent, best, key_id, round, passes, misses, found_round;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (!ready) @(posedge clk);
    target = LA'($urandom);
    congruent = 0; best = 0; key_id = remaps();
    for (round = 0; round < ROUNDS; round++) begin
      // prime
      prime.delete();
      for (int unsigned i = 0; i < PRIME; i++) begin
        logic [LA-1:0] a;
        a = LA'($urandom);
        if (a != target) prime.push_back(a);
      end
      foreach (prime[i]) do_req(prime[i], h, s);
      // prune
      passes = 0;
      do begin
        keep.delete(); misses = 0;
        foreach (prime[i]) begin
          do_req(prime[i], h, s);
          if (h) keep.push_back(prime[i]); else misses++;
        end
        prime = keep;
        passes++;
      end while (misses != 0 && passes < 8);
      // test
      do_req(target, h, tset);
      if (remaps() != key_id || remap_active) begin congruent = 0; key_id = remaps(); end
      found_round = 0;
      foreach (prime[i]) begin
        do_req(prime[i], h, s);
        if (!h) begin
          found_round++;
          if (remaps() != key_id || remap_active) begin congruent = 0; key_id = remaps(); end
          else if (s == tset) congruent++;
        end
      end
      if (remaps() != key_id) begin congruent = 0; key_id = remaps(); end
      if (congruent > best) best = congruent;
      check(congruent < W, $sformatf("round %0d: attacker holds %0d congruent addresses under one key", round, congruent));
      $display("round %0d: pruned set %0d, %0d misses in test, %0d congruent held, remaps %0d by period / %0d by detector",
               round, prime.size(), found_round, congruent, remaps_by_period, remaps_by_detect);
    end
    check(remaps_by_detect >= DET_REMAPS, $sformatf("detector started only %0d remaps", remaps_by_detect));
    check(detect_overruns == 0, "detector evaluation overran a sample period");
    $display("attack rounds %0d, most congruent addresses held under one key %0d of %0d needed, detector remaps %0d",
             round, best, W, remaps_by_detect);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
