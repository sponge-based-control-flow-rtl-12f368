// prince_core -- fully unrolled, single-cycle PRINCE encryption.
//
// This is the keyed permutation f of the sponge used by the decrypt stage.
// The datapath is purely combinational: data_o is valid in the same cycle as
// data_i and key_i, so one call of f costs one clock cycle of the enclosing
// stage. Structure (PRINCE specification):
//   s = data_i ^ k0 ^ k1 ^ RC0
//   rounds 1..5 : S, then M = SR o M', then ^ k1 ^ RCi
//   middle      : S, M', S^-1
//   rounds 6..10: ^ k1 ^ RCi, then M^-1 = M' o SR^-1, then S^-1
//   data_o = s ^ k1 ^ RC11 ^ k0',  k0' = (k0 >>> 1) ^ (k0 >> 63)
// key_i = {k0, k1}, k0 in the upper 64 bits.
//
// That the implementation is fully unrolled and single-cycle comes from the
// described chip; the cipher itself is the published PRINCE. Decryption is
// not needed in hardware, since the APE-like mode decrypts with f only.
module prince_core
  import prince_pkg::*;
(
  input  block_t             data_i,
  input  logic [KEY_W-1:0]   key_i,
  output block_t             data_o
);

  block_t k0, k1, k0p;

  assign k0  = key_i[KEY_W-1 -: BLOCK_W];
  assign k1  = key_i[BLOCK_W-1:0];
  assign k0p = {k0[0], k0[BLOCK_W-1:1]} ^ {63'd0, k0[BLOCK_W-1]};

  always_comb begin
    block_t s;
    s = data_i ^ k0 ^ k1 ^ RC[0];
    for (int unsigned i = 1; i <= 5; i++)
      s = shift_rows(mprime(sbox_layer(s))) ^ RC[i] ^ k1;
    s = sbox_inv_layer(mprime(sbox_layer(s)));
    for (int unsigned i = 6; i <= 10; i++)
      s = sbox_inv_layer(mprime(shift_rows_inv(s ^ k1 ^ RC[i])));
    data_o = s ^ k1 ^ RC[11] ^ k0p;
  end

endmodule
