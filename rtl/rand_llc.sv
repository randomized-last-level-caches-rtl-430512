// rand_llc: a randomized set-associative last-level cache slice with
// eviction-counted remapping, multi-step relocation and attack detection.
//
// The set index of every block is an encryption of its line address under a
// hardware key, so attackers cannot compute which addresses conflict and must
// search for eviction sets at run time. Three mechanisms keep such a search
// from succeeding:
//   * the cache is remapped to a fresh key after EV_PER_BLOCK evictions per
//     cache block (remap_controller), counting evictions instead of accesses;
//   * the remap tracker relocates blocks in chains, so a block displaced by a
//     relocated block is itself relocated rather than evicted (remap_tracker);
//   * an attack detector watches the per-set distribution of evictions and
//     starts a remap early when one set stands out (attack_detector).
//
// Structure: a metadata array (tags, valid, epoch, LRU ages) shared by the
// transaction controller and the remap tracker. The array port belongs to one
// of them at a time; the owner keeps it while it raises its request, and when
// both wait the one that did not own it last gets it (round robin). Whole
// transactions, set scans and relocation chains are atomic.
//
// This slice models the tag path only. Fills, demand and remap evictions and
// relocations are reported on output ports so that a data array, a writeback
// unit and a memory interface can follow them. key_seed seeds the key
// generator at reset; the array clears itself after reset (SETS cycles, ready
// low) before requests are accepted.
module rand_llc #(
  parameter int unsigned SETS         = llc_pkg::SETS_DEFAULT,
  parameter int unsigned WAYS         = llc_pkg::WAYS_DEFAULT,
  parameter int unsigned LINE_ADDR_W  = llc_pkg::LINE_ADDR_W_DEFAULT,
  parameter int unsigned ROUNDS       = llc_pkg::ENC_ROUNDS_DEFAULT,
  parameter int unsigned EV_PER_BLOCK = llc_pkg::EV_PER_BLOCK_DEFAULT,
  parameter int unsigned MAX_RELOC    = llc_pkg::MAX_RELOC_DEFAULT,
  parameter int unsigned SAMPLE       = llc_pkg::SAMPLE_DEFAULT,
  parameter int unsigned THRESHOLD    = llc_pkg::THRESHOLD_DEFAULT,
  parameter int unsigned EMA_SHIFT    = llc_pkg::EMA_SHIFT_DEFAULT,
  parameter bit          DETECT_EN    = 1'b1,
  localparam int unsigned IDX_W       = $clog2(SETS),
  localparam int unsigned AGE_W       = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned ENT_W       = LINE_ADDR_W + 2,
  localparam int unsigned TAGS_W      = WAYS * ENT_W,
  localparam int unsigned AGES_W      = WAYS * AGE_W,
  localparam int unsigned KEY_W       = ROUNDS * (LINE_ADDR_W / 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [63:0]            key_seed,
  output logic                   ready,
  // requests from the private caches
  input  logic                   req_valid,
  output logic                   req_ready,
  input  llc_pkg::llc_op_e       req_op,
  input  logic [LINE_ADDR_W-1:0] req_addr,
  output logic                   resp_valid,
  output logic                   resp_hit,
  output logic                   resp_retry,
  output logic [IDX_W-1:0]       resp_set,
  output logic [AGE_W-1:0]       resp_way,
  // evictions (demand or remap) for back-invalidation and writeback
  output logic                   evict_valid,
  output logic                   evict_by_remap,
  output logic [LINE_ADDR_W-1:0] evict_addr,
  output logic [IDX_W-1:0]       evict_set,
  // relocations for a data array
  output logic                   reloc_valid,
  output logic [IDX_W-1:0]       reloc_src_set,
  output logic [AGE_W-1:0]       reloc_src_way,
  output logic [IDX_W-1:0]       reloc_dst_set,
  output logic [AGE_W-1:0]       reloc_dst_way,
  // status
  output logic                   remap_active,
  output logic                   remap_start,
  output logic [IDX_W-1:0]       remap_ptr,
  output logic                   detect,
  output logic [31:0]            remaps_by_period,
  output logic [31:0]            remaps_by_detect,
  output logic [31:0]            relocations,
  output logic [31:0]            chained_relocations,
  output logic [31:0]            remap_evictions,
  output logic [31:0]            retries,
  output logic [$clog2(EV_PER_BLOCK*SETS*WAYS+1)-1:0] evict_count,  // demand evictions since last remap
  output logic [IDX_W-1:0]       detect_set,
  output logic [31:0]            detect_evaluations,
  output logic [31:0]            detect_overruns
);
  import llc_pkg::*;

  // ---------------------------------------------------------------- array
  logic              arr_ready;
  logic              arr_rd_en, arr_wr_en;
  logic [IDX_W-1:0]  arr_rd_set, arr_wr_set;
  logic [TAGS_W-1:0] arr_rd_tags, arr_wr_tags;
  logic [AGES_W-1:0] arr_rd_ages, arr_wr_ages;

  metadata_array #(.SETS(SETS), .WAYS(WAYS), .LINE_ADDR_W(LINE_ADDR_W)) u_meta (
    .clk, .rst_n, .ready(arr_ready),
    .rd_en(arr_rd_en), .rd_set(arr_rd_set), .rd_tags(arr_rd_tags), .rd_ages(arr_rd_ages),
    .wr_en(arr_wr_en), .wr_set(arr_wr_set), .wr_tags(arr_wr_tags), .wr_ages(arr_wr_ages)
  );
  assign ready = arr_ready;

  // ---------------------------------------------------------------- mapping state
  logic             epoch, rc_done;
  logic [KEY_W-1:0] key_old, key_new;
  logic             ctl_evict, trk_evict, det_detect;
  logic [LINE_ADDR_W-1:0] ctl_evict_addr, trk_evict_addr;
  logic [IDX_W-1:0] ctl_evict_set, trk_evict_set;

  remap_controller #(.SETS(SETS), .WAYS(WAYS), .EV_PER_BLOCK(EV_PER_BLOCK), .KEY_W(KEY_W)) u_rc (
    .clk, .rst_n, .key_seed, .enable(arr_ready),
    .demand_evict(ctl_evict), .detect_req(det_detect), .remap_done(rc_done),
    .remap_start, .remap_active, .epoch, .key_old, .key_new, .evict_count,
    .remaps_by_period, .remaps_by_detect
  );

  // ---------------------------------------------------------------- arbitration
  array_owner_e owner, last_owner;
  logic ctl_req, trk_req;
  logic ctl_gnt, trk_gnt;
  assign ctl_gnt = (owner == OWN_CTRL);
  assign trk_gnt = (owner == OWN_TRACKER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owner      <= OWN_NONE;
      last_owner <= OWN_TRACKER;
    end else if (!((owner == OWN_CTRL && ctl_req) || (owner == OWN_TRACKER && trk_req))) begin
      if (owner != OWN_NONE) last_owner <= owner;
      if (ctl_req && trk_req)
        owner <= (((owner != OWN_NONE) ? owner : last_owner) == OWN_CTRL) ? OWN_TRACKER : OWN_CTRL;
      else if (trk_req) owner <= OWN_TRACKER;
      else if (ctl_req) owner <= OWN_CTRL;
      else              owner <= OWN_NONE;
    end
  end

  // ---------------------------------------------------------------- controller
  logic              ctl_rd_en, ctl_wr_en;
  logic [IDX_W-1:0]  ctl_rd_set, ctl_wr_set;
  logic [TAGS_W-1:0] ctl_wr_tags;
  logic [AGES_W-1:0] ctl_wr_ages;
  logic              access_pulse;

  llc_controller #(.SETS(SETS), .WAYS(WAYS), .LINE_ADDR_W(LINE_ADDR_W), .ROUNDS(ROUNDS)) u_ctl (
    .clk, .rst_n, .array_ready(arr_ready),
    .req_valid, .req_ready, .req_op, .req_addr,
    .resp_valid, .resp_hit, .resp_retry, .resp_set, .resp_way,
    .key_old, .key_new, .remap_active, .ptr(remap_ptr), .epoch,
    .access_pulse, .evict_valid(ctl_evict), .evict_addr(ctl_evict_addr), .evict_set(ctl_evict_set),
    .bus_req(ctl_req), .bus_gnt(ctl_gnt),
    .rd_en(ctl_rd_en), .rd_set(ctl_rd_set), .rd_tags(arr_rd_tags), .rd_ages(arr_rd_ages),
    .wr_en(ctl_wr_en), .wr_set(ctl_wr_set), .wr_tags(ctl_wr_tags), .wr_ages(ctl_wr_ages),
    .retries
  );

  // ---------------------------------------------------------------- remap tracker
  logic              trk_rd_en, trk_wr_en;
  logic [IDX_W-1:0]  trk_rd_set, trk_wr_set;
  logic [TAGS_W-1:0] trk_wr_tags;
  logic [AGES_W-1:0] trk_wr_ages;
  logic              trk_active;

  remap_tracker #(.SETS(SETS), .WAYS(WAYS), .LINE_ADDR_W(LINE_ADDR_W), .ROUNDS(ROUNDS),
                  .MAX_RELOC(MAX_RELOC)) u_trk (
    .clk, .rst_n, .start(remap_start), .key_new, .epoch,
    .active(trk_active), .ptr(remap_ptr), .done(rc_done),
    .bus_req(trk_req), .bus_gnt(trk_gnt),
    .rd_en(trk_rd_en), .rd_set(trk_rd_set), .rd_tags(arr_rd_tags), .rd_ages(arr_rd_ages),
    .wr_en(trk_wr_en), .wr_set(trk_wr_set), .wr_tags(trk_wr_tags), .wr_ages(trk_wr_ages),
    .reloc_valid, .reloc_src_set, .reloc_src_way, .reloc_dst_set, .reloc_dst_way,
    .evict_valid(trk_evict), .evict_addr(trk_evict_addr), .evict_set(trk_evict_set),
    .relocations, .evictions(remap_evictions), .chained(chained_relocations)
  );

  always_comb begin
    if (trk_gnt) begin
      arr_rd_en   = trk_rd_en;   arr_rd_set  = trk_rd_set;
      arr_wr_en   = trk_wr_en;   arr_wr_set  = trk_wr_set;
      arr_wr_tags = trk_wr_tags; arr_wr_ages = trk_wr_ages;
    end else begin
      arr_rd_en   = ctl_rd_en && ctl_gnt;   arr_rd_set  = ctl_rd_set;
      arr_wr_en   = ctl_wr_en && ctl_gnt;   arr_wr_set  = ctl_wr_set;
      arr_wr_tags = ctl_wr_tags;            arr_wr_ages = ctl_wr_ages;
    end
  end

  // ---------------------------------------------------------------- evictions
  assign evict_valid    = ctl_evict || trk_evict;
  assign evict_by_remap = trk_evict;
  assign evict_addr     = trk_evict ? trk_evict_addr : ctl_evict_addr;
  assign evict_set      = trk_evict ? trk_evict_set  : ctl_evict_set;

  // ---------------------------------------------------------------- detector
  logic det_detect_raw;
  attack_detector #(.SETS(SETS), .SAMPLE(SAMPLE), .THRESHOLD(THRESHOLD), .EMA_SHIFT(EMA_SHIFT)) u_det (
    .clk, .rst_n, .access(access_pulse), .evict(evict_valid), .evict_set,
    .remap_start, .detect(det_detect_raw), .detect_set, .busy(),
    .last_max_az(), .last_max_set(), .evaluations(detect_evaluations), .last_eval_cycles(),
    .overruns(detect_overruns)
  );
  assign det_detect = DETECT_EN && det_detect_raw;
  assign detect     = det_detect;

  // Demand and remap evictions never coincide: only the array owner evicts.
  a_one_evict: assert property (@(posedge clk) disable iff (!rst_n) !(ctl_evict && trk_evict));
  a_tracker_state: assert property (@(posedge clk) disable iff (!rst_n) trk_active |-> remap_active);

endmodule
