// remap_controller: decides when the LLC is remapped and holds the keys.
//
// The remap period is measured in LLC evictions, not accesses: a counter of
// demand evictions starts a remap when it reaches EV_PER_BLOCK * SETS * WAYS
// (10 evictions per cache block, 163,840 evictions, in the main
// configuration). The attack detector can also start a remap at any time. A
// remap draws a fresh key k' from a key source, toggles the epoch so that
// every cached block becomes "unremapped", and raises remap_active until the
// remap tracker reports remap_done; then k' becomes the current key k.
//
// Choices of this implementation: only demand evictions are counted (not the
// ones the remap itself causes) and the counter restarts at every remap,
// whatever started it; a detector request during an active remap is dropped,
// while a period expiring during a remap starts the next remap as soon as the
// current one ends. The key source is a xorshift64 generator seeded from
// key_seed at reset. It is a stand-in and not a secure random number
// generator.
//
// Timing: remap_start is a one-cycle pulse the cycle after the trigger;
// keys and epoch change on the same clock edge that raises remap_active.
module remap_controller #(
  parameter int unsigned SETS         = llc_pkg::SETS_DEFAULT,
  parameter int unsigned WAYS         = llc_pkg::WAYS_DEFAULT,
  parameter int unsigned EV_PER_BLOCK = llc_pkg::EV_PER_BLOCK_DEFAULT,
  parameter int unsigned KEY_W        = 52,
  localparam int unsigned PERIOD      = EV_PER_BLOCK * SETS * WAYS,
  localparam int unsigned CNT_W       = $clog2(PERIOD + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [63:0]      key_seed,      // sampled during reset
  input  logic             enable,        // remaps may start (metadata array initialised)
  input  logic             demand_evict,  // one LLC eviction caused by a miss
  input  logic             detect_req,    // attack detected
  input  logic             remap_done,    // remap tracker finished
  output logic             remap_start,
  output logic             remap_active,
  output logic             epoch,
  output logic [KEY_W-1:0] key_old,       // k
  output logic [KEY_W-1:0] key_new,       // k'
  output logic [CNT_W-1:0] evict_count,
  output logic [31:0]      remaps_by_period,
  output logic [31:0]      remaps_by_detect
);
  if (KEY_W > 64) begin : g_bad_key
    $error("remap_controller: KEY_W above 64 is not supported");
  end

  logic [63:0] rng;
  logic [63:0] rng_next;
  logic        period_hit;
  logic        start_now;

  always_comb begin
    rng_next = rng ^ (rng << 13);
    rng_next = rng_next ^ (rng_next >> 7);
    rng_next = rng_next ^ (rng_next << 17);
  end

  assign period_hit = (evict_count >= CNT_W'(PERIOD));
  assign start_now  = enable && !remap_active && !remap_start && (period_hit || detect_req);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng              <= (key_seed == '0) ? 64'h9E37_79B9_7F4A_7C15 : key_seed;
      key_old          <= KEY_W'(key_seed ^ 64'hA5A5_5A5A_C3C3_3C3C);
      key_new          <= KEY_W'(key_seed ^ 64'hA5A5_5A5A_C3C3_3C3C);
      epoch            <= 1'b0;
      remap_active     <= 1'b0;
      remap_start      <= 1'b0;
      evict_count      <= '0;
      remaps_by_period <= '0;
      remaps_by_detect <= '0;
    end else begin
      rng         <= rng_next;
      remap_start <= 1'b0;
      if (start_now) begin
        remap_start  <= 1'b1;
        remap_active <= 1'b1;
        epoch        <= ~epoch;
        key_new      <= rng[KEY_W-1:0];
        evict_count  <= demand_evict ? CNT_W'(1) : '0;
        if (period_hit) remaps_by_period <= remaps_by_period + 1;
        else            remaps_by_detect <= remaps_by_detect + 1;
      end else begin
        if (demand_evict && !period_hit) evict_count <= evict_count + 1'b1;
        if (remap_done) begin
          remap_active <= 1'b0;
          key_old      <= key_new;
        end
      end
    end
  end

  // A remap completes only while one is running.
  a_done_when_active: assert property (@(posedge clk) disable iff (!rst_n)
    remap_done |-> remap_active);

endmodule
