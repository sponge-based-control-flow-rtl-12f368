// scfp_predecode -- control-flow classification of a plaintext instruction.
//
// The decrypt stage must know, right after decrypting an instruction, whether
// the next fetched word is a patch value (protected branch or jump), whether
// it has to hold further decryption until the core has resolved a
// control-flow transfer (any branch, jump or interrupt return), or whether it
// can simply continue. This combinational block looks only at the opcode,
// funct3 and, for MRET, the full word. Illegal branch funct3 values are
// classed CF_NONE: the core traps on them, which enters the trap path.
//
// The instruction names come from the described processor; their encodings
// (see scfp_pkg) are this design's choice.
module scfp_predecode
  import scfp_pkg::*;
(
  input  word_t     instr_i,
  output cf_class_e cls_o
);

  logic [6:0] opc;
  logic [2:0] f3;
  logic       br_f3_ok;

  assign opc      = instr_i[6:0];
  assign f3       = instr_i[14:12];
  assign br_f3_ok = (f3 != 3'b010) && (f3 != 3'b011);

  always_comb begin
    cls_o = CF_NONE;
    unique case (opc)
      OPC_BRANCH: if (br_f3_ok)     cls_o = CF_BRANCH;
      OPC_BP:     if (br_f3_ok)     cls_o = CF_PBRANCH;
      OPC_JAL:                      cls_o = CF_JUMP;
      OPC_JALR:   if (f3 == 3'b000) cls_o = CF_JUMP;
      OPC_JALP:                     cls_o = CF_PJUMP;
      OPC_JALRP:  if (f3 == 3'b000) cls_o = CF_PJUMP;
      default:    if (instr_i == INSN_MRET) cls_o = CF_MRET;
    endcase
  end

endmodule
