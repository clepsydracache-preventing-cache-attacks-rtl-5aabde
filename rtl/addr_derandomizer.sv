// addr_derandomizer -- inverse of addr_randomizer (f_w^-1).
//
// An entry whose TTL runs out, or that is replaced on a conflict, may hold
// modified data that has to be written back, but the cache keeps only the
// encrypted tag and the row it sits in. This block puts the row bits back into
// their ciphertext positions between the stored tag bits, runs the inverse of
// the three-round PRINCE transform and removes the way secret, which gives the
// line address (offset bits zero). The need for an easily computed inverse is
// the cache proposal's "invertibility" requirement; the bit layout mirrors
// addr_randomizer.
//
// Interface: purely combinational. Timing: three inverse PRINCE rounds.
module addr_derandomizer
  import clepsydra_pkg::*;
#(
  parameter int unsigned IDX_W = 11
) (
  input  logic [IDX_W-1:0]        idx,               // row the entry sits in
  input  logic [ADDR_W-IDX_W-1:0] tag,               // stored (encrypted) tag
  input  blk_t                    k0,
  input  blk_t                    k1,
  input  blk_t                    way_secret,        // secret of the entry's way
  output logic [ADDR_W-1:0]       addr               // line address, offset bits zero
);

  blk_t c;

  always_comb begin
    int t;
    c = '0;
    for (int j = 0; j < int'(IDX_W); j++) c[idx_bit_pos(j)] = idx[IDX_W-1-j];
    t = ADDR_W - IDX_W - 1;
    for (int p = 63; p >= 0; p--)
      if (!is_idx_pos(p, IDX_W)) begin
        c[p] = tag[t];
        t--;
      end
    addr = prince_reduced_dec(c, k0, k1) ^ way_secret;
  end

endmodule
