// prince_pkg -- constants and layer functions of the PRINCE block cipher.
//
// PRINCE is a 64-bit block cipher with a 128-bit key k = k0 || k1. It is the
// keyed permutation f of the AEE-Light sponge. The layers follow the public
// PRINCE specification: a 4-bit S-box layer, the linear layer M' (a
// block-diagonal matrix diag(M0^, M1^, M1^, M0^) built from 4x4 identity
// matrices with one zero on the diagonal), a nibble ShiftRows, and twelve
// round constants RC0..RC11 with RCi ^ RC(11-i) = alpha.
//
// Bit order: nibble 0 is the most significant nibble of the 64-bit word
// (s[63:60]); within a nibble, "bit 0" of the matrix is its most significant
// bit. This matches the hexadecimal test vectors of the cipher's designers.
// The use of PRINCE follows the described design; the packaging of its
// layers as functions is this implementation's own.
package prince_pkg;

  localparam int unsigned BLOCK_W = 64;
  localparam int unsigned KEY_W   = 128;

  typedef logic [BLOCK_W-1:0] block_t;

  localparam block_t RC [12] = '{
    64'h0000000000000000, 64'h13198a2e03707344, 64'ha4093822299f31d0,
    64'h082efa98ec4e6c89, 64'h452821e638d01377, 64'hbe5466cf34e90c6c,
    64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa, 64'hc882d32f25323c54,
    64'h64a51195e0e3610d, 64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd
  };

  localparam logic [3:0] SBOX     [16] = '{4'hB, 4'hF, 4'h3, 4'h2, 4'hA, 4'hC, 4'h9, 4'h1,
                                           4'h6, 4'h7, 4'h8, 4'h0, 4'hE, 4'h5, 4'hD, 4'h4};
  localparam logic [3:0] SBOX_INV [16] = '{4'hB, 4'h7, 4'h3, 4'h2, 4'hF, 4'hD, 4'h8, 4'h9,
                                           4'hA, 4'h6, 4'h4, 4'h0, 4'h5, 4'hE, 4'hC, 4'h1};

  // Output nibble j of ShiftRows is input nibble SR_PERM[j].
  localparam int unsigned SR_PERM [16] = '{0, 5, 10, 15, 4, 9, 14, 3,
                                           8, 13, 2, 7, 12, 1, 6, 11};

  function automatic logic [3:0] get_nib(block_t s, int unsigned i);
    return s[BLOCK_W-1-4*i -: 4];
  endfunction

  function automatic block_t sbox_layer(block_t s);
    block_t r;
    for (int unsigned i = 0; i < 16; i++) r[BLOCK_W-1-4*i -: 4] = SBOX[get_nib(s, i)];
    return r;
  endfunction

  function automatic block_t sbox_inv_layer(block_t s);
    block_t r;
    for (int unsigned i = 0; i < 16; i++) r[BLOCK_W-1-4*i -: 4] = SBOX_INV[get_nib(s, i)];
    return r;
  endfunction

  // One 16-bit chunk of M'. Output bit b of nibble n is the XOR of bit b of
  // every input nibble c whose sub-matrix M_((n+c+off) mod 4) keeps bit b,
  // i.e. every c with (n + c + off) mod 4 != b. off = 0 gives M0^, 1 gives M1^.
  function automatic logic [15:0] mhat(logic [15:0] v, int unsigned off);
    logic [15:0] r;
    for (int unsigned n = 0; n < 4; n++) begin
      for (int unsigned b = 0; b < 4; b++) begin
        logic acc;
        acc = 1'b0;
        for (int unsigned c = 0; c < 4; c++)
          if (((n + c + off) % 4) != b) acc ^= v[15-4*c-b];
        r[15-4*n-b] = acc;
      end
    end
    return r;
  endfunction

  function automatic block_t mprime(block_t s);
    return {mhat(s[63:48], 0), mhat(s[47:32], 1), mhat(s[31:16], 1), mhat(s[15:0], 0)};
  endfunction

  function automatic block_t shift_rows(block_t s);
    block_t r;
    for (int unsigned j = 0; j < 16; j++) r[BLOCK_W-1-4*j -: 4] = get_nib(s, SR_PERM[j]);
    return r;
  endfunction

  function automatic block_t shift_rows_inv(block_t s);
    block_t r;
    for (int unsigned j = 0; j < 16; j++) r[BLOCK_W-1-4*SR_PERM[j] -: 4] = get_nib(s, j);
    return r;
  endfunction

endpackage
