// llc_controller: serves LLC accesses and flushes, one at a time.
//
// This is the transaction tracker of the randomized LLC, reduced to its tag
// path. On a request it computes the set index with index_select (old index i
// outside a remap or for a set not yet relocated, new index i' otherwise),
// reads the set and compares the full line address with every valid way.
// A hit updates LRU (access) or invalidates the block (flush). A miss at the
// old index of a not-yet-relocated set is retried once at i', since
// multi-step relocation may already have moved the block. A miss that
// remains allocates the block, at the set of the last lookup and marked with
// the current epoch, in the LRU victim way; a valid victim is evicted and
// reported. Keys, epoch and the pointer are sampled when the request is
// accepted, so a remap starting mid-request cannot mix two mappings.
//
// Simplifications of this implementation: no data, no dirty state, no
// coherence; one request in service at a time (the real LLC runs several
// trackers in parallel); a flush is not counted as an eviction. A filled
// block during a remap goes to the set of the new key.
//
// Timing (array owned): accept at cycle 0 (set read issued), hit/miss known
// at cycle 1, with a retry at cycle 2; the response is valid for one cycle
// in the following cycle, during which the array is released. So a hit or
// first-lookup miss answers 2 cycles after acceptance and a retried lookup 3.
module llc_controller #(
  parameter int unsigned SETS        = llc_pkg::SETS_DEFAULT,
  parameter int unsigned WAYS        = llc_pkg::WAYS_DEFAULT,
  parameter int unsigned LINE_ADDR_W = llc_pkg::LINE_ADDR_W_DEFAULT,
  parameter int unsigned ROUNDS      = llc_pkg::ENC_ROUNDS_DEFAULT,
  localparam int unsigned IDX_W      = $clog2(SETS),
  localparam int unsigned AGE_W      = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned ENT_W      = LINE_ADDR_W + 2,
  localparam int unsigned TAGS_W     = WAYS * ENT_W,
  localparam int unsigned AGES_W     = WAYS * AGE_W,
  localparam int unsigned KEY_W      = ROUNDS * (LINE_ADDR_W / 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   array_ready,
  // request / response
  input  logic                   req_valid,
  output logic                   req_ready,
  input  llc_pkg::llc_op_e       req_op,
  input  logic [LINE_ADDR_W-1:0] req_addr,
  output logic                   resp_valid,
  output logic                   resp_hit,
  output logic                   resp_retry,     // answered by the second lookup at i'
  output logic [IDX_W-1:0]       resp_set,
  output logic [AGE_W-1:0]       resp_way,
  // mapping state
  input  logic [KEY_W-1:0]       key_old,
  input  logic [KEY_W-1:0]       key_new,
  input  logic                   remap_active,
  input  logic [IDX_W-1:0]       ptr,
  input  logic                   epoch,
  // events
  output logic                   access_pulse,   // one LLC access accepted
  output logic                   evict_valid,
  output logic [LINE_ADDR_W-1:0] evict_addr,
  output logic [IDX_W-1:0]       evict_set,
  // shared metadata array
  output logic                   bus_req,
  input  logic                   bus_gnt,
  output logic                   rd_en,
  output logic [IDX_W-1:0]       rd_set,
  input  logic [TAGS_W-1:0]      rd_tags,
  input  logic [AGES_W-1:0]      rd_ages,
  output logic                   wr_en,
  output logic [IDX_W-1:0]       wr_set,
  output logic [TAGS_W-1:0]      wr_tags,
  output logic [AGES_W-1:0]      wr_ages,
  output logic [31:0]            retries
);
  typedef enum logic [1:0] {C_IDLE, C_TAG, C_DONE} cstate_e;
  cstate_e state;

  logic [LINE_ADDR_W-1:0] addr_l;
  llc_pkg::llc_op_e       op_l;
  logic [IDX_W-1:0]       idx_new_l, cur_set;
  logic                   can_retry_l, retried, epoch_l;

  logic [IDX_W-1:0] sel_old, sel_new, sel_index;
  logic             sel_use_new, sel_can_retry;

  index_select #(.LINE_ADDR_W(LINE_ADDR_W), .IDX_W(IDX_W), .ROUNDS(ROUNDS)) u_isel (
    .line_addr(req_addr), .key_old, .key_new, .remap_active, .ptr, .retry(1'b0),
    .idx_old(sel_old), .idx_new(sel_new), .index(sel_index),
    .use_new(sel_use_new), .can_retry(sel_can_retry)
  );

  // Tag compare on the set that was read.
  logic [WAYS-1:0] v_valid, v_match;
  logic            hit;
  logic [AGE_W-1:0] hit_way;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int unsigned j = 0; j < WAYS; j++) begin
      v_valid[j] = rd_tags[j*ENT_W + LINE_ADDR_W + 1];
      v_match[j] = v_valid[j] && (rd_tags[j*ENT_W +: LINE_ADDR_W] == addr_l);
      if (v_match[j] && !hit) begin
        hit     = 1'b1;
        hit_way = AGE_W'(j);
      end
    end
  end

  logic [AGE_W-1:0]  vic_way, touch_way;
  logic              vic_valid;
  logic [AGES_W-1:0] ages_touched;
  assign touch_way = hit ? hit_way : vic_way;
  lru_replacer #(.WAYS(WAYS)) u_lru (
    .ages(rd_ages), .valid(v_valid), .touch_way(touch_way),
    .ages_touched(ages_touched), .victim_way(vic_way), .victim_valid(vic_valid)
  );

  logic do_retry;
  assign do_retry  = !hit && can_retry_l && !retried;

  assign req_ready = (state == C_IDLE) && bus_gnt && array_ready;
  assign bus_req   = ((state == C_IDLE) && req_valid) || (state == C_TAG);

  always_comb begin
    rd_en   = 1'b0;
    rd_set  = sel_index;
    wr_en   = 1'b0;
    wr_set  = cur_set;
    wr_tags = rd_tags;
    wr_ages = rd_ages;
    if (state == C_IDLE) begin
      rd_en = req_valid && req_ready;
    end else if (state == C_TAG) begin
      if (do_retry) begin
        rd_en  = 1'b1;
        rd_set = idx_new_l;
      end else if (hit) begin
        wr_en = 1'b1;
        if (op_l == llc_pkg::OP_FLUSH) wr_tags[hit_way*ENT_W + LINE_ADDR_W + 1] = 1'b0;
        else                           wr_ages = ages_touched;
      end else if (op_l == llc_pkg::OP_ACCESS) begin
        wr_en   = 1'b1;
        wr_tags[vic_way*ENT_W +: ENT_W] = {1'b1, epoch_l, addr_l};
        wr_ages = ages_touched;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      addr_l       <= '0;
      op_l         <= llc_pkg::OP_ACCESS;
      idx_new_l    <= '0;
      cur_set      <= '0;
      can_retry_l  <= 1'b0;
      retried      <= 1'b0;
      epoch_l      <= 1'b0;
      resp_valid   <= 1'b0;
      resp_hit     <= 1'b0;
      resp_retry   <= 1'b0;
      resp_set     <= '0;
      resp_way     <= '0;
      access_pulse <= 1'b0;
      evict_valid  <= 1'b0;
      evict_addr   <= '0;
      evict_set    <= '0;
      retries      <= '0;
    end else begin
      resp_valid   <= 1'b0;
      access_pulse <= 1'b0;
      evict_valid  <= 1'b0;
      unique case (state)
        C_IDLE: if (req_valid && req_ready) begin
          addr_l       <= req_addr;
          op_l         <= req_op;
          idx_new_l    <= sel_new;
          cur_set      <= sel_index;
          can_retry_l  <= sel_can_retry;
          retried      <= 1'b0;
          epoch_l      <= epoch;
          access_pulse <= (req_op == llc_pkg::OP_ACCESS);
          state        <= C_TAG;
        end
        C_TAG: begin
          if (do_retry) begin
            retried <= 1'b1;
            cur_set <= idx_new_l;
            retries <= retries + 1;
          end else begin
            resp_valid <= 1'b1;
            resp_hit   <= hit;
            resp_retry <= retried;
            resp_set   <= cur_set;
            resp_way   <= hit ? hit_way : vic_way;
            if (!hit && op_l == llc_pkg::OP_ACCESS && vic_valid) begin
              evict_valid <= 1'b1;
              evict_addr  <= rd_tags[vic_way*ENT_W +: LINE_ADDR_W];
              evict_set   <= cur_set;
            end
            state <= C_DONE;
          end
        end
        C_DONE: state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  a_rd_owned: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> bus_gnt);
  a_wr_owned: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> bus_gnt);
  // A request, once raised, is held until it is accepted.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && !req_ready |=> req_valid);

endmodule
