// metadata_array: tag, valid, remap mark and LRU state of every cache block.
//
// One entry per set holds, for each of the WAYS ways, {valid, epoch, line
// address} plus the LRU ages of the set. A block counts as "remapped" when its
// epoch bit equals the cache's current epoch; toggling the epoch at the start
// of a remap marks every block unremapped at once, which is how this
// implementation records "remapped" in the metadata without a sweep. Because
// the set index is an encrypted value, the tag is the full line address.
//
// The array has one synchronous read port (a whole set, data valid the cycle
// after rd_en) and one write port (a whole set). Reading and writing the same
// set in one cycle returns the old contents. After reset the array clears
// itself, one set per cycle, and holds ready low for SETS cycles; the LRU ages
// of each set start as the permutation 0..WAYS-1.
module metadata_array #(
  parameter int unsigned SETS        = llc_pkg::SETS_DEFAULT,
  parameter int unsigned WAYS        = llc_pkg::WAYS_DEFAULT,
  parameter int unsigned LINE_ADDR_W = llc_pkg::LINE_ADDR_W_DEFAULT,
  localparam int unsigned IDX_W      = $clog2(SETS),
  localparam int unsigned AGE_W      = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned ENT_W      = LINE_ADDR_W + 2,   // {valid, epoch, tag}
  localparam int unsigned TAGS_W     = WAYS * ENT_W,
  localparam int unsigned AGES_W     = WAYS * AGE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ready,
  input  logic              rd_en,
  input  logic [IDX_W-1:0]  rd_set,
  output logic [TAGS_W-1:0] rd_tags,
  output logic [AGES_W-1:0] rd_ages,
  input  logic              wr_en,
  input  logic [IDX_W-1:0]  wr_set,
  input  logic [TAGS_W-1:0] wr_tags,
  input  logic [AGES_W-1:0] wr_ages
);
  logic [TAGS_W-1:0] tag_mem [SETS];
  logic [AGES_W-1:0] age_mem [SETS];

  logic             init_busy;
  logic [IDX_W-1:0] init_set;
  logic [AGES_W-1:0] init_ages;

  always_comb begin
    for (int unsigned j = 0; j < WAYS; j++) init_ages[j*AGE_W +: AGE_W] = AGE_W'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_set  <= '0;
    end else if (init_busy) begin
      init_set <= init_set + 1'b1;
      if (init_set == IDX_W'(SETS - 1)) init_busy <= 1'b0;
    end
  end

  assign ready = !init_busy;

  always_ff @(posedge clk) begin
    if (init_busy) begin
      tag_mem[init_set] <= '0;
      age_mem[init_set] <= init_ages;
    end else if (wr_en) begin
      tag_mem[wr_set] <= wr_tags;
      age_mem[wr_set] <= wr_ages;
    end
    if (rd_en) begin
      rd_tags <= tag_mem[rd_set];
      rd_ages <= age_mem[rd_set];
    end
  end

endmodule
