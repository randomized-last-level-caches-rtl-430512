// index_select: chooses the cache set index of an incoming address during
// and outside a remap.
//
// Two encryptors run in parallel, one with the current key k (index i) and one
// with the next key k' (index i'). Outside a remap only i is used. During a
// remap the set-relocation pointer p splits the sets: a set below p has been
// relocated, so i' is used; when i >= p the old index i is tried first. With
// multi-step relocation a block may already have been moved out of an
// unrelocated set, so a miss at i is retried at i' (retry = 1). can_retry tells
// the controller that such a second lookup is meaningful (i >= p, i != i').
// The structure follows the set-index selection of the paper; the can_retry
// output is this implementation's way of exposing the retry condition.
//
// Interface: combinational.
module index_select #(
  parameter int unsigned LINE_ADDR_W = llc_pkg::LINE_ADDR_W_DEFAULT,
  parameter int unsigned IDX_W       = 10,
  parameter int unsigned ROUNDS      = llc_pkg::ENC_ROUNDS_DEFAULT,
  localparam int unsigned KEY_W      = ROUNDS * (LINE_ADDR_W / 2)
) (
  input  logic [LINE_ADDR_W-1:0] line_addr,
  input  logic [KEY_W-1:0]       key_old,      // k
  input  logic [KEY_W-1:0]       key_new,      // k'
  input  logic                   remap_active,
  input  logic [IDX_W-1:0]       ptr,          // p
  input  logic                   retry,        // second lookup after a miss at i
  output logic [IDX_W-1:0]       idx_old,      // i
  output logic [IDX_W-1:0]       idx_new,      // i'
  output logic [IDX_W-1:0]       index,        // selected cache set index
  output logic                   use_new,
  output logic                   can_retry
);
  index_encryptor #(.LINE_ADDR_W(LINE_ADDR_W), .IDX_W(IDX_W), .ROUNDS(ROUNDS)) u_enc_old (
    .line_addr(line_addr), .key(key_old), .index(idx_old)
  );
  index_encryptor #(.LINE_ADDR_W(LINE_ADDR_W), .IDX_W(IDX_W), .ROUNDS(ROUNDS)) u_enc_new (
    .line_addr(line_addr), .key(key_new), .index(idx_new)
  );

  logic not_relocated;
  assign not_relocated = (idx_old >= ptr);
  assign use_new   = remap_active && !(not_relocated && !retry);
  assign index     = use_new ? idx_new : idx_old;
  assign can_retry = remap_active && not_relocated && !retry && (idx_old != idx_new);

endmodule
