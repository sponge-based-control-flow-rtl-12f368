// scfp_tb_pkg -- reference models shared by the SCFP testbenches.
//
// prince_enc / prince_dec are a second, independently structured PRINCE
// model: the linear layer is an explicit 64x64 bit matrix assembled from the
// four 4x4 matrices M0..M3, ShiftRows is a nibble-index permutation, and
// decryption uses the alpha-reflection property
//     D_(k0,k1)(c) = core_(k1 ^ alpha)(c ^ k0') ^ k0.
// The testbenches check this model against the published PRINCE test
// vectors before they use it. Decryption with f^-1 is what an encrypting
// toolchain needs for the APE-like mode, so the program images of the
// system tests are produced with prince_dec.
//
// The package also holds RV32 / custom-instruction encoders used to build
// test programs.
package scfp_tb_pkg;

  typedef logic [63:0] u64;

  localparam u64 TB_RC [12] = '{
    64'h0000000000000000, 64'h13198a2e03707344, 64'ha4093822299f31d0,
    64'h082efa98ec4e6c89, 64'h452821e638d01377, 64'hbe5466cf34e90c6c,
    64'h7ef84f78fd955cb1, 64'h85840851f1ac43aa, 64'hc882d32f25323c54,
    64'h64a51195e0e3610d, 64'hd3b5a399ca0c2399, 64'hc0ac29b7c97c50dd
  };
  localparam logic [3:0] TB_S [16] = '{4'hB, 4'hF, 4'h3, 4'h2, 4'hA, 4'hC, 4'h9, 4'h1,
                                       4'h6, 4'h7, 4'h8, 4'h0, 4'hE, 4'h5, 4'hD, 4'h4};

  // bit i of the vector = bit (63 - i) of the word (i = 0 is the MSB)
  function automatic logic vb(u64 s, int i); return s[63-i]; endfunction

  function automatic logic mat_m(int k, int r, int c);   // M_k: identity, zero at (k,k)
    return (r == c) && (r != k);
  endfunction

  function automatic logic mhat_elem(int off, int r, int c);
    return mat_m((r/4 + c/4 + off) % 4, r % 4, c % 4);
  endfunction

  function automatic u64 ref_mprime(u64 s);
    u64 o;
    o = '0;
    for (int blk = 0; blk < 4; blk++) begin
      int off;
      off = (blk == 0 || blk == 3) ? 0 : 1;
      for (int r = 0; r < 16; r++) begin
        logic acc;
        acc = 0;
        for (int c = 0; c < 16; c++) acc ^= mhat_elem(off, r, c) & vb(s, 16*blk + c);
        o[63 - (16*blk + r)] = acc;
      end
    end
    return o;
  endfunction

  function automatic logic [3:0] nib(u64 s, int i); return s[63-4*i -: 4]; endfunction

  function automatic u64 ref_sbox(u64 s, bit inv);
    u64 o;
    for (int i = 0; i < 16; i++) begin
      logic [3:0] v;
      v = nib(s, i);
      if (inv) begin
        for (int k = 0; k < 16; k++) if (TB_S[k] == v) o[63-4*i -: 4] = 4'(k);
      end else o[63-4*i -: 4] = TB_S[v];
    end
    return o;
  endfunction

  // ShiftRows on a 4x4 nibble matrix stored column by column:
  // nibble i sits in row i%4, column i/4; row r is rotated left by r.
  function automatic u64 ref_sr(u64 s, bit inv);
    u64 o;
    for (int col = 0; col < 4; col++)
      for (int row = 0; row < 4; row++) begin
        int src_col;
        src_col = inv ? (col + 4 - row) % 4 : (col + row) % 4;
        o[63 - 4*(4*col + row) -: 4] = nib(s, 4*src_col + row);
      end
    return o;
  endfunction

  function automatic u64 ref_core(u64 s, u64 k1);
    s ^= k1 ^ TB_RC[0];
    for (int i = 1; i <= 5; i++) s = ref_sr(ref_mprime(ref_sbox(s, 0)), 0) ^ TB_RC[i] ^ k1;
    s = ref_sbox(ref_mprime(ref_sbox(s, 0)), 1);
    for (int i = 6; i <= 10; i++) s = ref_sbox(ref_mprime(ref_sr(s ^ k1 ^ TB_RC[i], 1)), 1);
    return s ^ TB_RC[11] ^ k1;
  endfunction

  function automatic u64 k0_prime(u64 k0);
    return {k0[0], k0[63:1]} ^ (k0 >> 63);
  endfunction

  function automatic u64 prince_enc(u64 p, logic [127:0] key);
    return ref_core(p ^ key[127:64], key[63:0]) ^ k0_prime(key[127:64]);
  endfunction

  function automatic u64 prince_dec(u64 c, logic [127:0] key);
    return ref_core(c ^ k0_prime(key[127:64]), key[63:0] ^ TB_RC[11]) ^ key[127:64];
  endfunction

  // ---- instruction encoders -------------------------------------------
  function automatic logic [31:0] enc_addi(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b000, 5'(rd), 7'b0010011};
  endfunction

  function automatic logic [31:0] enc_b(logic [6:0] opc, logic [2:0] f3, int rs1, int rs2, int off);
    logic [12:0] o;
    o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), f3, o[4:1], o[11], opc};
  endfunction

  function automatic logic [31:0] enc_j(logic [6:0] opc, int rd, int off);
    logic [20:0] o;
    o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), opc};
  endfunction

  function automatic logic [31:0] enc_i(logic [6:0] opc, int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b000, 5'(rd), opc};
  endfunction

  function automatic int imm_b(logic [31:0] w);
    return int'($signed({w[31], w[7], w[30:25], w[11:8], 1'b0}));
  endfunction
  function automatic int imm_j(logic [31:0] w);
    return int'($signed({w[31], w[19:12], w[20], w[30:21], 1'b0}));
  endfunction
  function automatic int imm_i(logic [31:0] w);
    return int'($signed(w[31:20]));
  endfunction

endpackage
