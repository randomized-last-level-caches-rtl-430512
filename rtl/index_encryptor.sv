// index_encryptor: keyed mapping of a line address to a cache set index.
//
// The randomized cache replaces the plain set-index bits of an address by the
// output of an encryptor that takes the whole line address and a hardware
// managed key. Which cipher to use is left open (the low-latency cipher of the
// original proposal has been shown to be weak), so this block uses the simplest
// structure that is a keyed permutation: a balanced Feistel network of ROUNDS
// rounds over the LINE_ADDR_W-bit line address. Each round function is
// F(r, k) = ((r ^ k) + rotl(r, 3)) ^ rotl(r, 7) on half-words. The set index
// is the low IDX_W bits of the permuted address. It is NOT a vetted cipher and
// only stands in for one.
//
// Interface: purely combinational. line_addr and key in, index out.
// key holds ROUNDS round keys of LINE_ADDR_W/2 bits, round 0 in the low bits.
module index_encryptor #(
  parameter int unsigned LINE_ADDR_W = llc_pkg::LINE_ADDR_W_DEFAULT,
  parameter int unsigned IDX_W       = 10,
  parameter int unsigned ROUNDS      = llc_pkg::ENC_ROUNDS_DEFAULT
) (
  input  logic [LINE_ADDR_W-1:0]            line_addr,
  input  logic [ROUNDS*(LINE_ADDR_W/2)-1:0] key,
  output logic [IDX_W-1:0]                  index
);
  localparam int unsigned H = LINE_ADDR_W / 2;

  if ((LINE_ADDR_W % 2) != 0 || IDX_W > LINE_ADDR_W || H < 8) begin : g_bad_param
    $error("index_encryptor: LINE_ADDR_W must be even, at least 16, and >= IDX_W");
  end

  function automatic logic [H-1:0] rotl(input logic [H-1:0] x, input int unsigned n);
    return (x << n) | (x >> (H - n));
  endfunction

  logic [LINE_ADDR_W-1:0] permuted;

  always_comb begin
    logic [H-1:0] l, r, f, t;
    l = line_addr[LINE_ADDR_W-1:H];
    r = line_addr[H-1:0];
    for (int unsigned k = 0; k < ROUNDS; k++) begin
      f = ((r ^ key[k*H +: H]) + rotl(r, 3)) ^ rotl(r, 7);
      t = r;
      r = l ^ f;
      l = t;
    end
    permuted = {l, r};
  end

  assign index = permuted[IDX_W-1:0];

endmodule
