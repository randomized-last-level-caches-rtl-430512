// remap_tracker: relocates every block of the LLC to its new set during a
// remap, with multi-step (chained) relocation.
//
// A set-relocation pointer p walks the sets from 0 to SETS-1. For set p the
// tracker picks an unremapped block E, frees its way and places E in set i'
// (its index under the new key k'), in an invalid way if there is one and
// otherwise in the LRU victim way. If that way held an unremapped block G, G
// is not evicted but becomes the next block in flight and is relocated the
// same way, and so on, until a free way is found or a remapped block would be
// displaced, which is then evicted. Every placed block is marked remapped
// (epoch bit set to the current epoch), so the chain always ends. When set p
// has no unremapped block left, p advances; after the last set remap_done
// pulses. MAX_RELOC bounds the chain: 0 is unlimited (the main
// configuration), 1 reproduces single-step relocation, in which G is always
// evicted.
//
// The tracker shares the metadata array with the transaction controller: it
// raises bus_req and works only while bus_gnt is high, and holds the bus for a
// whole scan of set p or a whole chain, so no request ever sees a block that
// is in flight. The relocated block is inserted as most recently used (a
// choice of this implementation).
//
// Timing per step: one cycle to read a set, one cycle to write it. A set with
// no unremapped block takes 2 cycles plus arbitration; each relocation in a
// chain takes 2 cycles. Events: reloc_valid reports that the block at
// (reloc_src_set, reloc_src_way) now lives at (reloc_dst_set, reloc_dst_way),
// evict_valid reports a block leaving the cache (the data of a chained victim
// must be read before it is overwritten by a data array that follows these
// events).
module remap_tracker #(
  parameter int unsigned SETS        = llc_pkg::SETS_DEFAULT,
  parameter int unsigned WAYS        = llc_pkg::WAYS_DEFAULT,
  parameter int unsigned LINE_ADDR_W = llc_pkg::LINE_ADDR_W_DEFAULT,
  parameter int unsigned ROUNDS      = llc_pkg::ENC_ROUNDS_DEFAULT,
  parameter int unsigned MAX_RELOC   = llc_pkg::MAX_RELOC_DEFAULT,
  localparam int unsigned IDX_W      = $clog2(SETS),
  localparam int unsigned AGE_W      = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned ENT_W      = LINE_ADDR_W + 2,
  localparam int unsigned TAGS_W     = WAYS * ENT_W,
  localparam int unsigned AGES_W     = WAYS * AGE_W,
  localparam int unsigned KEY_W      = ROUNDS * (LINE_ADDR_W / 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [KEY_W-1:0]       key_new,
  input  logic                   epoch,
  output logic                   active,
  output logic [IDX_W-1:0]       ptr,
  output logic                   done,
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
  // events
  output logic                   reloc_valid,
  output logic [IDX_W-1:0]       reloc_src_set,
  output logic [AGE_W-1:0]       reloc_src_way,
  output logic [IDX_W-1:0]       reloc_dst_set,
  output logic [AGE_W-1:0]       reloc_dst_way,
  output logic                   evict_valid,
  output logic [LINE_ADDR_W-1:0] evict_addr,
  output logic [IDX_W-1:0]       evict_set,
  output logic [31:0]            relocations,
  output logic [31:0]            evictions,
  output logic [31:0]            chained            // relocations of displaced blocks
);
  typedef enum logic [2:0] {T_IDLE, T_REQ, T_SCAN, T_DRD, T_PLACE} tstate_e;
  tstate_e state;

  logic [LINE_ADDR_W-1:0] hold;       // block in flight
  logic [IDX_W-1:0]       src_set;
  logic [AGE_W-1:0]       src_way;
  logic [IDX_W-1:0]       dst_set;
  logic [31:0]            steps;
  logic [IDX_W-1:0]       hold_idx;

  index_encryptor #(.LINE_ADDR_W(LINE_ADDR_W), .IDX_W(IDX_W), .ROUNDS(ROUNDS)) u_enc (
    .line_addr(hold), .key(key_new), .index(hold_idx)
  );

  // Decode the set that was read.
  logic [WAYS-1:0]        v_valid, v_epoch;
  logic [LINE_ADDR_W-1:0] v_tag [WAYS];
  always_comb begin
    for (int unsigned j = 0; j < WAYS; j++) begin
      v_valid[j] = rd_tags[j*ENT_W + LINE_ADDR_W + 1];
      v_epoch[j] = rd_tags[j*ENT_W + LINE_ADDR_W];
      v_tag[j]   = rd_tags[j*ENT_W +: LINE_ADDR_W];
    end
  end

  // First unremapped block in the set.
  logic             scan_found;
  logic [AGE_W-1:0] scan_way;
  always_comb begin
    scan_found = 1'b0;
    scan_way   = '0;
    for (int unsigned j = 0; j < WAYS; j++) begin
      if (!scan_found && v_valid[j] && (v_epoch[j] != epoch)) begin
        scan_found = 1'b1;
        scan_way   = AGE_W'(j);
      end
    end
  end

  logic [AGE_W-1:0]  vic_way;
  logic              vic_valid;
  logic [AGES_W-1:0] ages_touched;
  lru_replacer #(.WAYS(WAYS)) u_lru (
    .ages(rd_ages), .valid(v_valid), .touch_way(vic_way),
    .ages_touched(ages_touched), .victim_way(vic_way), .victim_valid(vic_valid)
  );

  logic vic_unremapped, chain_on;
  assign vic_unremapped = vic_valid && (v_epoch[vic_way] != epoch);
  assign chain_on       = vic_unremapped && ((MAX_RELOC == 0) || (steps + 1 < MAX_RELOC));

  assign active  = (state != T_IDLE);
  assign bus_req = (state == T_REQ) || (state == T_SCAN && scan_found) ||
                   (state == T_DRD) || (state == T_PLACE && chain_on);

  always_comb begin
    rd_en   = 1'b0;
    rd_set  = ptr;
    wr_en   = 1'b0;
    wr_set  = ptr;
    wr_tags = rd_tags;
    wr_ages = rd_ages;
    unique case (state)
      T_REQ: rd_en = bus_gnt;
      T_SCAN: if (scan_found) begin
        wr_en = 1'b1;
        wr_tags[scan_way*ENT_W + LINE_ADDR_W + 1] = 1'b0;
      end
      T_DRD: begin
        rd_en  = 1'b1;
        rd_set = hold_idx;
      end
      T_PLACE: begin
        wr_en   = 1'b1;
        wr_set  = dst_set;
        wr_tags[vic_way*ENT_W +: ENT_W] = {1'b1, epoch, hold};
        wr_ages = ages_touched;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= T_IDLE;
      ptr           <= '0;
      done          <= 1'b0;
      hold          <= '0;
      src_set       <= '0;
      src_way       <= '0;
      dst_set       <= '0;
      steps         <= '0;
      reloc_valid   <= 1'b0;
      reloc_src_set <= '0;
      reloc_src_way <= '0;
      reloc_dst_set <= '0;
      reloc_dst_way <= '0;
      evict_valid   <= 1'b0;
      evict_addr    <= '0;
      evict_set     <= '0;
      relocations   <= '0;
      evictions     <= '0;
      chained       <= '0;
    end else begin
      done        <= 1'b0;
      reloc_valid <= 1'b0;
      evict_valid <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          ptr   <= '0;
          state <= T_REQ;
        end
        T_REQ: if (bus_gnt) state <= T_SCAN;
        T_SCAN: begin
          if (scan_found) begin
            hold    <= v_tag[scan_way];
            src_set <= ptr;
            src_way <= scan_way;
            steps   <= '0;
            state   <= T_DRD;
          end else if (ptr == IDX_W'(SETS - 1)) begin
            // p returns to 0 so that the next remap starts with every set
            // counted as not yet relocated, even in its very first cycle.
            done  <= 1'b1;
            ptr   <= '0;
            state <= T_IDLE;
          end else begin
            ptr   <= ptr + 1'b1;
            state <= T_REQ;
          end
        end
        T_DRD: begin
          dst_set <= hold_idx;
          state   <= T_PLACE;
        end
        T_PLACE: begin
          reloc_valid   <= 1'b1;
          reloc_src_set <= src_set;
          reloc_src_way <= src_way;
          reloc_dst_set <= dst_set;
          reloc_dst_way <= vic_way;
          relocations   <= relocations + 1;
          if (steps != 0) chained <= chained + 1;
          if (chain_on) begin
            hold    <= v_tag[vic_way];
            src_set <= dst_set;
            src_way <= vic_way;
            steps   <= steps + 1;
            state   <= T_DRD;
          end else begin
            if (vic_valid) begin
              evict_valid <= 1'b1;
              evict_addr  <= v_tag[vic_way];
              evict_set   <= dst_set;
              evictions   <= evictions + 1;
            end
            state <= T_REQ;   // rescan set p
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  // The tracker touches the array only while it owns it.
  a_rd_owned: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> bus_gnt);
  a_wr_owned: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> bus_gnt);

endmodule
