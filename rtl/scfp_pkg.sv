// scfp_pkg -- shared sizes, types and instruction encodings of the SCFP
// (sponge-based control-flow protection) extension, AEE-Light instance.
//
// Sponge layout: the 64-bit PRINCE block is split into a 32-bit rate (upper
// half, carries ciphertext in and plaintext out) and a 32-bit capacity (lower
// half, the secret SCFP state x, also the width of a patch value). Which half
// is which is a choice of this design.
//
// Custom control-flow instructions. The protected branches BPEQ..BPGEU and
// jumps JALP, JALRP behave like BEQ..BGEU, JAL and JALR but also apply patch
// values. Their encodings are this design's choice: B-type in the custom-0
// major opcode with the funct3 of the matching RV32I branch (BPEQ=000,
// BPNE=001, BPLT=100, BPGE=101, BPLTU=110, BPGEU=111), JALP as J-type in
// custom-1, JALRP as I-type (funct3=000) in custom-2.
package scfp_pkg;

  localparam int unsigned XLEN    = 32;
  localparam int unsigned STATE_W = 64;   // permutation size b
  localparam int unsigned RATE_W  = 32;   // r = instruction size
  localparam int unsigned CAP_W   = 32;   // x = capacity = patch size
  localparam int unsigned KEY_W   = 128;  // PRINCE key

  typedef logic [XLEN-1:0]  word_t;
  typedef logic [CAP_W-1:0] cap_t;

  // RV32 major opcodes
  localparam logic [6:0] OPC_BRANCH  = 7'b1100011;
  localparam logic [6:0] OPC_JAL     = 7'b1101111;
  localparam logic [6:0] OPC_JALR    = 7'b1100111;
  localparam logic [6:0] OPC_BP      = 7'b0001011;  // custom-0: BPxx
  localparam logic [6:0] OPC_JALP    = 7'b0101011;  // custom-1: JALP
  localparam logic [6:0] OPC_JALRP   = 7'b1011011;  // custom-2: JALRP
  localparam word_t      INSN_MRET   = 32'h30200073;

  // Control-flow class of a decrypted instruction, as seen by the decrypt stage.
  typedef enum logic [2:0] {
    CF_NONE    = 3'd0,  // no control-flow transfer: continue decrypting
    CF_BRANCH  = 3'd1,  // unprotected conditional branch: wait for resolution
    CF_JUMP    = 3'd2,  // unprotected JAL / JALR: wait for resolution
    CF_PBRANCH = 3'd3,  // BPxx: patch word follows, applied when taken
    CF_PJUMP   = 3'd4,  // JALP / JALRP: patch word follows, always applied
    CF_MRET    = 3'd5   // interrupt return: z' = z ^ e ^ z_entry
  } cf_class_e;

  // Domains separating the state derivations f_k(N | addr).
  typedef enum logic [1:0] {
    DOM_START     = 2'd0,  // initial program state z_I
    DOM_PAD       = 2'd1,  // mask protecting the saved interrupt state
    DOM_IRQ_ENTRY = 2'd2,  // handler entry state
    DOM_IRQ_EXIT  = 2'd3   // handler's expected exit state e
  } dom_e;

  // Input block of a state derivation: nonce (domain in its two low bits)
  // in the rate, address in the capacity.
  function automatic logic [STATE_W-1:0] derive_block(word_t nonce, dom_e dom, word_t addr);
    return {nonce ^ {30'd0, dom}, addr};
  endfunction

endpackage
