// addr_randomizer -- per-way randomized address-to-cache mapping f_w.
//
// Every way of the cache places a given line at its own pseudorandom row. The
// mapping for way w is a keyed, invertible function of the line address:
//
//   c        = PRINCE_r( {addr[63:6], 6'b0} ^ way_secret, k0, k1 )   (r = 3)
//   idx      = IDX_W bits of c, taken one per nibble (clepsydra_pkg::idx_bit_pos)
//   tag      = the other 64-IDX_W bits of c, in their original order
//
// The line address with its offset bits zeroed is the cipher input, a
// way-specific 64-bit secret is XORed in before the cipher, and the index bits
// are sampled from across the whole ciphertext rather than its low bits; all
// three follow the cache proposal. The stored tag is therefore the ciphertext
// minus the index bits (six bits wider than a plain tag, because the zeroed
// offset bits become non-zero after encryption). Which ciphertext bits form the
// index, and the arrangement of the three rounds (clepsydra_pkg), are this
// design's choices. The keys are inputs, meant to be drawn at system start and
// then held.
//
// Interface: purely combinational, no clock. Timing: three PRINCE rounds of
// logic between addr and idx/tag.
module addr_randomizer
  import clepsydra_pkg::*;
#(
  parameter int unsigned IDX_W = 11                  // log2(rows per way): 1 MiB / 64 B / 8 ways = 2048
) (
  input  logic [ADDR_W-1:0]       addr,              // physical byte address; offset bits are ignored
  input  blk_t                    k0,                // PRINCE whitening key
  input  blk_t                    k1,                // PRINCE round key
  input  blk_t                    way_secret,        // secret of this way
  output logic [IDX_W-1:0]        idx,               // row in this way
  output logic [ADDR_W-IDX_W-1:0] tag                // stored (encrypted) tag
);

  blk_t c;

  always_comb begin
    int t;
    c   = prince_reduced_enc({addr[ADDR_W-1:OFFSET_W], {OFFSET_W{1'b0}}} ^ way_secret, k0, k1);
    idx = '0;
    tag = '0;
    for (int j = 0; j < int'(IDX_W); j++) idx[IDX_W-1-j] = c[idx_bit_pos(j)];
    t = ADDR_W - IDX_W - 1;
    for (int p = 63; p >= 0; p--)
      if (!is_idx_pos(p, IDX_W)) begin
        tag[t] = c[p];
        t--;
      end
  end

endmodule
