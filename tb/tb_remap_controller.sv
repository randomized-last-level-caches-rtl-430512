// tb_remap_controller: checks the remap trigger with a small period (4 sets,
// 2 ways, 2 evictions per block: 16 evictions). A remap must start exactly
// when the 16th demand eviction has been counted, toggle the epoch, load a
// new k' while k stays, and hand k' over to k when remap_done arrives. A
// detector request starts a remap at once when none is running and is
// dropped during one; evictions during a remap count toward the next period;
// nothing starts while enable is low.
module tb_remap_controller;
  localparam int S = 4, W = 2, EV = 2, KW = 52, PERIOD = EV * S * W;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          enable = 1'b1, demand_evict = 1'b0, detect_req = 1'b0, remap_done = 1'b0;
  logic          remap_start, remap_active, epoch;
  logic [KW-1:0] key_old, key_new;
  logic [$clog2(PERIOD+1)-1:0] evict_count;
  logic [31:0]   by_period, by_detect;

  remap_controller #(.SETS(S), .WAYS(W), .EV_PER_BLOCK(EV), .KEY_W(KW)) dut (
    .clk, .rst_n, .key_seed(64'hDEAD_BEEF_0000_0001), .enable, .demand_evict, .detect_req,
    .remap_done, .remap_start, .remap_active, .epoch, .key_old, .key_new, .evict_count,
    .remaps_by_period(by_period), .remaps_by_detect(by_detect)
  );

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (10_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic evict_n(input int n);
    for (int i = 0; i < n; i++) begin
      demand_evict = 1'b1; @(negedge clk); demand_evict = 1'b0;
      check(!remap_start, $sformatf("remap started after only %0d evictions", i + 1));
    end
  endtask

  task automatic finish_remap(input logic [KW-1:0] knew);
    remap_done = 1'b1; @(negedge clk); remap_done = 1'b0;
    check(!remap_active && key_old == knew, "k' not handed over to k at remap_done");
  endtask

  initial begin : main
    logic [KW-1:0] k0, k1;
    logic e0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    k0 = key_old; e0 = epoch;
    check(!remap_active && key_new == key_old, "reset state");
    // period: 15 evictions do nothing, the 16th starts a remap one cycle later
    evict_n(PERIOD - 1);
    demand_evict = 1'b1; @(negedge clk); demand_evict = 1'b0;
    check(!remap_start, "start too early");
    @(negedge clk);
    check(remap_start && remap_active, "remap did not start after the period");
    check(epoch != e0 && key_old == k0 && key_new != k0, "epoch/keys at remap start");
    check(by_period == 1, "period remap not counted");
    k1 = key_new;
    @(negedge clk);
    check(!remap_start, "remap_start longer than one cycle");
    // detector request during a remap is dropped; evictions keep counting
    detect_req = 1'b1; @(negedge clk); detect_req = 1'b0;
    evict_n(3);
    check(evict_count == 3, $sformatf("evict_count %0d during remap, expected 3", evict_count));
    repeat (3) @(negedge clk);
    check(!remap_start && by_detect == 0, "detector request started a second remap");
    finish_remap(k1);
    // detector request while idle starts a remap at once
    detect_req = 1'b1; @(negedge clk); detect_req = 1'b0;
    check(remap_start && by_detect == 1 && key_new != k1 && key_old == k1, "detector remap");
    check(evict_count == 0, "counter not restarted by the detector remap");
    @(negedge clk);
    finish_remap(key_new);
    // enable low blocks a start
    enable = 1'b0;
    evict_n(PERIOD);
    repeat (3) @(negedge clk);
    check(!remap_active, "remap started while disabled");
    enable = 1'b1;
    @(negedge clk);
    check(remap_start, "pending period remap did not start when enabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
