// clepsydra_pkg -- types, constants and combinational functions shared by the
// ClepsydraCache RTL.
//
// The index randomization uses a round-reduced PRINCE block cipher. This
// package holds the PRINCE building blocks (S-box layer, the M' diffusion
// layer, the ShiftRows nibble permutation, round constants and the k0'
// derivation) exactly as in the PRINCE specification, plus the round-reduced
// forward and inverse transforms used by the cache:
//
//   enc(x) = k0' ^ R_r( ... R_1( x ^ k0 ^ k1 ^ RC0 ) ... ),  R_i(s) = M(S(s)) ^ RC_i ^ k1
//
// with r = PRINCE_ROUNDS (3). This is the first half of PRINCE (its forward
// rounds) followed by PRINCE's output whitening; the number of rounds (three)
// follows the cache proposal, the exact arrangement of the rounds is this
// design's choice. dec() is the exact inverse.
//
// Nibble 0 is the most significant nibble of a 64-bit word; bit 0 of a 16-bit
// M-hat chunk is its most significant bit, as in the PRINCE paper.
package clepsydra_pkg;

  localparam int unsigned PRINCE_ROUNDS = 3;   // round-reduced PRINCE, three rounds
  localparam int unsigned ADDR_W        = 64;  // physical address width (PRINCE block size)
  localparam int unsigned OFFSET_W      = 6;   // 64-byte lines

  typedef logic [63:0] blk_t;

  localparam logic [3:0] SBOX [16] = '{4'hB, 4'hF, 4'h3, 4'h2, 4'hA, 4'hC, 4'h9, 4'h1,
                                       4'h6, 4'h7, 4'h8, 4'h0, 4'hE, 4'h5, 4'hD, 4'h4};
  localparam logic [3:0] SBOX_INV [16] = '{4'hB, 4'h7, 4'h3, 4'h2, 4'hF, 4'hD, 4'h8, 4'h9,
                                           4'hA, 4'h6, 4'h4, 4'h0, 4'h5, 4'hE, 4'hC, 4'h1};

  localparam blk_t RC [12] = '{64'h0000000000000000, 64'h13198a2e03707344,
                               64'ha4093822299f31d0, 64'h082efa98ec4e6c89,
                               64'h452821e638d01377, 64'hbe5466cf34e90c6c,
                               64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa,
                               64'hc882d32f25323c54, 64'h64a51195e0e3610d,
                               64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd};

  // Nibble permutation of ShiftRows: output nibble i takes input nibble SR_PERM[i].
  localparam int SR_PERM [16] = '{0, 5, 10, 15, 4, 9, 14, 3, 8, 13, 2, 7, 12, 1, 6, 11};

  function automatic logic [3:0] nib(blk_t s, int i);  // nibble i, 0 = MSB
    return s[63-4*i -: 4];
  endfunction

  function automatic blk_t s_layer(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*i -: 4] = SBOX[nib(s, i)];
    return r;
  endfunction

  function automatic blk_t s_inv_layer(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*i -: 4] = SBOX_INV[nib(s, i)];
    return r;
  endfunction

  // M-hat(sel) on one 16-bit chunk. Block (br,bc) of the 16x16 matrix is M_k
  // with k = (br+bc+sel) mod 4, and M_k is the 4x4 identity with row k zeroed.
  function automatic logic [15:0] m_hat(logic [15:0] x, int sel);
    logic [15:0] y;
    for (int r = 0; r < 16; r++) begin
      logic b;
      b = 1'b0;
      for (int bc = 0; bc < 4; bc++)
        if ((r % 4) != ((r / 4 + bc + sel) % 4)) b ^= x[15 - (bc * 4 + r % 4)];
      y[15 - r] = b;
    end
    return y;
  endfunction

  // M' = diag(M-hat0, M-hat1, M-hat1, M-hat0); it is an involution.
  function automatic blk_t m_prime(blk_t s);
    return {m_hat(s[63:48], 0), m_hat(s[47:32], 1), m_hat(s[31:16], 1), m_hat(s[15:0], 0)};
  endfunction

  function automatic blk_t shift_rows(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*i -: 4] = nib(s, SR_PERM[i]);
    return r;
  endfunction

  function automatic blk_t shift_rows_inv(blk_t s);
    blk_t r;
    for (int i = 0; i < 16; i++) r[63-4*SR_PERM[i] -: 4] = nib(s, i);
    return r;
  endfunction

  function automatic blk_t k0_prime(blk_t k0);
    return {k0[0], k0[63:1]} ^ {63'd0, k0[63]};
  endfunction

  // Round-reduced forward transform (see header).
  function automatic blk_t prince_reduced_enc(blk_t x, blk_t k0, blk_t k1);
    blk_t s;
    s = x ^ k0 ^ k1 ^ RC[0];
    for (int i = 1; i <= PRINCE_ROUNDS; i++)
      s = shift_rows(m_prime(s_layer(s))) ^ RC[i] ^ k1;
    return s ^ k0_prime(k0);
  endfunction

  function automatic blk_t prince_reduced_dec(blk_t y, blk_t k0, blk_t k1);
    blk_t s;
    s = y ^ k0_prime(k0);
    for (int i = PRINCE_ROUNDS; i >= 1; i--)
      s = s_inv_layer(m_prime(shift_rows_inv(s ^ RC[i] ^ k1)));
    return s ^ k0 ^ k1 ^ RC[0];
  endfunction

  // Position in the 64-bit ciphertext of cache-index bit j: one bit from each
  // of the first IDX_W nibbles, at a different bit position within successive
  // nibbles, so the index is spread over as many S-boxes as possible.
  function automatic int idx_bit_pos(int j);
    return 63 - (4 * j + (j % 4));
  endfunction

  function automatic bit is_idx_pos(int p, int idx_w);
    for (int j = 0; j < idx_w; j++) if (idx_bit_pos(j) == p) return 1'b1;
    return 1'b0;
  endfunction

  // Memory-side request issued by the cache.
  typedef enum logic [1:0] {MEM_READ = 2'd0, MEM_WRITEBACK = 2'd1} mem_op_e;

  // One-cycle event pulses the cache reports, for performance counters.
  typedef struct packed {
    logic hit;          // request found a live entry with matching tag
    logic miss;         // request missed
    logic fill_free;    // miss placed into an empty (TTL = 0) entry
    logic conflict;     // miss found no empty entry: random replacement
    logic victim_wb;    // a replaced entry (conflict or stale copy) was written back
    logic expiry_wb;    // an expired dirty entry was written back by the scanner
    logic tick;         // global TTL decrement event
  } cache_events_t;

endpackage
