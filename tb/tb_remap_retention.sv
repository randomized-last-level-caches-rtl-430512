// tb_remap_retention: the block-retention experiment of a remap at full size.
//
// A 1024-set, 16-way cache with 26-bit line addresses is filled completely
// (16384 distinct blocks, each in its set under the old key), then remapped
// once with unlimited multi-step relocation and once, on identical contents,
// with single-step relocation. The published averages for such a cache are
// about 90% of the blocks retained with unlimited relocation against about
// 63% with a single step; this test requires 85-95% and 58-68%. It also makes
// the same correctness checks as the small tracker test: every kept block is
// in its new set with the new mark, no block is held twice and the kept plus
// evicted blocks are exactly the original contents.
module tb_remap_retention;
  import tb_enc_ref_pkg::*;

  localparam int S = 1024, W = 16, LA = 26, R = 4;
  localparam int IDX_W = $clog2(S), AGE_W = $clog2(W), ENT_W = LA + 2;
  localparam int TW = W * ENT_W, AWD = W * AGE_W, KW = R * (LA / 2);
  localparam logic [KW-1:0] K_OLD = 52'h1_2345_6789_ABCD, K_NEW = 52'h9_E377_9B97_F4A7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // testbench side of the array ports (preload and final readout)
  logic pre = 1'b1, tb_rd = 1'b0, tb_wr = 1'b0, start = 1'b0;
  logic [IDX_W-1:0] tb_set = '0;
  logic [TW-1:0]    tb_tags = '0;
  logic [AWD-1:0]   tb_ages = '0;

  // per-instance signals; index 0: multi-step, 1: single-step
  logic             ready [2], active [2], done [2], req [2], gnt [2];
  logic             t_rd [2], t_wr [2], a_rd [2], a_wr [2];
  logic [IDX_W-1:0] ptr [2], t_rset [2], t_wset [2], a_rset [2], a_wset [2];
  logic [TW-1:0]    rtags [2], t_wtags [2], a_wtags [2];
  logic [AWD-1:0]   rages [2], t_wages [2], a_wages [2];
  logic             rv [2], ev [2];
  logic [IDX_W-1:0] rss [2], rds [2], es [2];
  logic [AGE_W-1:0] rsw [2], rdw [2];
  logic [LA-1:0]    ea [2];
  logic [31:0]      n_rel [2], n_ev [2], n_ch [2];

  for (genvar g = 0; g < 2; g++) begin : inst
    always_comb begin
      a_rd[g]    = pre ? tb_rd   : t_rd[g];
      a_rset[g]  = pre ? tb_set  : t_rset[g];
      a_wr[g]    = pre ? tb_wr   : t_wr[g];
      a_wset[g]  = pre ? tb_set  : t_wset[g];
      a_wtags[g] = pre ? tb_tags : t_wtags[g];
      a_wages[g] = pre ? tb_ages : t_wages[g];
    end
    metadata_array #(.SETS(S), .WAYS(W), .LINE_ADDR_W(LA)) u_arr (
      .clk, .rst_n, .ready(ready[g]), .rd_en(a_rd[g]), .rd_set(a_rset[g]),
      .rd_tags(rtags[g]), .rd_ages(rages[g]), .wr_en(a_wr[g]), .wr_set(a_wset[g]),
      .wr_tags(a_wtags[g]), .wr_ages(a_wages[g])
    );
    remap_tracker #(.SETS(S), .WAYS(W), .LINE_ADDR_W(LA), .ROUNDS(R), .MAX_RELOC(g)) u_trk (
      .clk, .rst_n, .start, .key_new(K_NEW), .epoch(1'b1), .active(active[g]), .ptr(ptr[g]),
      .done(done[g]), .bus_req(req[g]), .bus_gnt(gnt[g]), .rd_en(t_rd[g]), .rd_set(t_rset[g]),
      .rd_tags(rtags[g]), .rd_ages(rages[g]), .wr_en(t_wr[g]), .wr_set(t_wset[g]),
      .wr_tags(t_wtags[g]), .wr_ages(t_wages[g]), .reloc_valid(rv[g]), .reloc_src_set(rss[g]),
      .reloc_src_way(rsw[g]), .reloc_dst_set(rds[g]), .reloc_dst_way(rdw[g]),
      .evict_valid(ev[g]), .evict_addr(ea[g]), .evict_set(es[g]),
      .relocations(n_rel[g]), .evictions(n_ev[g]), .chained(n_ch[g])
    );
    // owner-style grant: given after a random wait, kept while requested
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) gnt[g] <= 1'b0;
      else if (!(gnt[g] && req[g])) gnt[g] <= req[g] && ($urandom_range(0, 2) == 0);
    end
  end

  // events seen
  int unsigned rel_seen [2] = '{0, 0}, ev_seen [2] = '{0, 0}, done_seen [2] = '{0, 0};
  bit evicted [2][logic [LA-1:0]];
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 2; g++) begin
      if (rv[g]) rel_seen[g]++;
      if (done[g]) done_seen[g]++;
      if (ev[g]) begin
        ev_seen[g]++;
        check(!evicted[g].exists(ea[g]), $sformatf("inst %0d: address %h evicted twice", g, ea[g]));
        evicted[g][ea[g]] = 1'b1;
      end
    end
  end

  bit original [logic [LA-1:0]];
  logic [LA-1:0] content [S][W];
  int fill [S];

  initial begin : main
    int placed, tries, kept [2];
    logic [AWD-1:0] ages;
    for (int j = 0; j < W; j++) ages[j*AGE_W +: AGE_W] = AGE_W'(W - 1 - j);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!ready[0] || !ready[1]) @(negedge clk);
    // fill every way with a distinct block at its old-key set
    foreach (fill[i]) fill[i] = 0;
    placed = 0; tries = 0;
    while (placed < S * W && tries < 50_000_000) begin
      logic [LA-1:0] a;
      int s;
      a = LA'($urandom);
      s = int'(enc_ref(a, K_OLD, LA, R, IDX_W));
      tries++;
      if (!original.exists(a) && fill[s] < W) begin
        original[a] = 1'b1;
        content[s][fill[s]] = a;
        fill[s]++;
        placed++;
      end
    end
    check(placed == S * W, "could not fill the cache");
    for (int s = 0; s < S; s++) begin
      tb_set = IDX_W'(s);
      for (int j = 0; j < W; j++) tb_tags[j*ENT_W +: ENT_W] = {1'b1, 1'b0, content[s][j]};
      tb_ages = ages;
      tb_wr = 1'b1;
      @(negedge clk);
    end
    tb_wr = 1'b0;
    // remap
    pre = 1'b0;
    start = 1'b1; @(negedge clk); start = 1'b0;
    check(active[0] && active[1], "tracker not active after start");
    while (done_seen[0] == 0 || done_seen[1] == 0) @(negedge clk);
    @(negedge clk);
    pre = 1'b1;
    for (int g = 0; g < 2; g++) begin
      bit seen [logic [LA-1:0]];
      seen.delete();
      check(!active[g] && ptr[g] == 0, $sformatf("inst %0d: not idle with p = 0 after done", g));
      check(done_seen[g] == 1, $sformatf("inst %0d: done pulsed %0d times", g, done_seen[g]));
      check(rel_seen[g] == n_rel[g] && ev_seen[g] == n_ev[g], $sformatf("inst %0d: counters disagree with events", g));
      kept[g] = 0;
      for (int s = 0; s < S; s++) begin
        tb_set = IDX_W'(s); tb_rd = 1'b1;
        @(negedge clk);
        tb_rd = 1'b0;
        for (int j = 0; j < W; j++) begin
          logic [ENT_W-1:0] e;
          e = rtags[g][j*ENT_W +: ENT_W];
          if (e[LA+1]) begin
            kept[g]++;
            check(e[LA] == 1'b1, $sformatf("inst %0d: block %h not marked remapped", g, e[LA-1:0]));
            check(int'(enc_ref(e[LA-1:0], K_NEW, LA, R, IDX_W)) == s,
                  $sformatf("inst %0d: block %h in set %0d, not its new set", g, e[LA-1:0], s));
            check(original.exists(e[LA-1:0]), $sformatf("inst %0d: block %h never cached", g, e[LA-1:0]));
            check(!seen.exists(e[LA-1:0]), $sformatf("inst %0d: block %h held twice", g, e[LA-1:0]));
            check(!evicted[g].exists(e[LA-1:0]), $sformatf("inst %0d: block %h kept and evicted", g, e[LA-1:0]));
            seen[e[LA-1:0]] = 1'b1;
          end
        end
      end
      check(kept[g] + ev_seen[g] == S * W, $sformatf("inst %0d: kept %0d + evicted %0d != %0d",
                                                     g, kept[g], ev_seen[g], S * W));
      foreach (evicted[g][a]) check(original.exists(a), "evicted an address that was never cached");
    end
    check(n_ch[1] == 0 && n_rel[1] + n_ev[1] >= S * W, "single-step relocation must never chain");
    check(n_rel[0] == S * W, "multi-step relocation must move each block exactly once");
    check(n_ch[0] > 0 && kept[0] > kept[1], "multi-step relocation did not keep more blocks");
    check(kept[0] * 100 >= 85 * S * W && kept[0] * 100 <= 95 * S * W,
          $sformatf("multi-step retention %0d of %0d outside 85-95%%", kept[0], S * W));
    check(kept[1] * 100 >= 58 * S * W && kept[1] * 100 <= 68 * S * W,
          $sformatf("single-step retention %0d of %0d outside 58-68%%", kept[1], S * W));
    $display("retained: multi-step %0d.%0d%%, single-step %0d.%0d%%", kept[0] * 100 / (S * W), (kept[0] * 1000 / (S * W)) % 10,
             kept[1] * 100 / (S * W), (kept[1] * 1000 / (S * W)) % 10);
    $display("multi-step: relocations=%0d chained=%0d evicted=%0d kept=%0d; single-step: evicted=%0d kept=%0d",
             n_rel[0], n_ch[0], n_ev[0], kept[0], n_ev[1], kept[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
