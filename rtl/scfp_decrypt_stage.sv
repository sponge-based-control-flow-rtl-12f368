// scfp_decrypt_stage -- authenticated-decryption pipeline stage between
// instruction fetch and decode (APE-like sponge, AEE-Light instance).
//
// Every fetched ciphertext word C_i is decrypted with the secret capacity
// state x_i by one call of the keyed permutation f (single-cycle PRINCE):
//     {P_i, x_i'} = f({C_i, x_i}),    x_(i+1) = x_i' ^ Patch_i
// P_i goes to decode, x_i' becomes the state for the next instruction. A
// wrong ciphertext, a skipped or repeated instruction or a control-flow
// transfer the program was not encrypted for leaves a wrong state, and all
// following instructions decrypt to pseudo-random words.
//
// Patching. A protected branch or jump (BPxx, JALP, JALRP) is followed in
// memory by a 32-bit patch word. The stage decrypts the instruction, then
// takes the next word as its patch, and only then hands the instruction to
// decode. It waits until the core reports the outcome (cf_resolve_i): taken
// XORs the patch into the state, not taken discards it. If the core flags the
// target (cf_target_patch_i, taken jumps whose target address has bit 1 set)
// the first word fetched at the target is a second patch, XORed in before
// decryption resumes. Unprotected branches and jumps are followed by the same
// wait, without a patch, so that no wrong-path word enters the state.
//
// State derivation. start_i derives the program's initial state
// z_I = cap(f({N, addr})) and the mask pad for the saved interrupt state;
// irq_enter_i saves the interrupted state and derives the handler's entry
// and exit states. Each derivation uses the same f and costs one cycle. The
// first word at the program entry or handler is an entry patch, so that the
// toolchain can fit the encrypted image to the derived state.
//
// Interrupt return. For MRET the stage waits for resolution and then sets
// x = x' ^ exit_mask_i, with exit_mask_i = e ^ z_entry from scfp_irq_state.
//
// Bypass. With scfp_en_i low the stage is combinational: fetch words pass to
// decode unchanged, as in the unprotected four-stage pipeline.
//
// Timing: with fetch and decode both ready, one instruction per cycle and one
// cycle from fetch acceptance to dec_valid_o. A control-flow instruction
// stalls the stage from its acceptance until cf_resolve_i (plus one cycle
// for its patch word, and one per target patch). Handshakes are valid/ready;
// a word is transferred in a cycle where both are high.
//
// Core obligations: cf_resolve_i exactly once per branch, jump or MRET after
// decode took it, with the fetch redirected on taken; interrupts only with
// the state tag of the instruction the core restarts at (irq_tag_valid_i),
// or without one while irq_safe_o is high (or while the stage still holds
// the next instruction for decode). In the cycle of start_i or irq_enter_i
// the stage offers nothing to decode and takes nothing from fetch.
//
// From the paper: the decrypt placement, the APE-like mode, the 64-bit
// PRINCE sponge with 32-bit capacity and patches, patches applied by taken
// protected branches and by jumps (one or two, depending on the target
// address), state derivation from key and nonce, and the interrupt exit rule.
// This design's own choices: the encodings, the patch-word protocol and
// stall, address bit 1 as the second-patch flag, the entry patch, the
// derivation block layout, and the state tag passed down the pipeline.
module scfp_decrypt_stage
  import scfp_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             scfp_en_i,
  input  logic [KEY_W-1:0] key_i,
  input  word_t            nonce_i,
  // program start
  input  logic             start_i,
  input  word_t            start_addr_i,
  // fetch side
  input  logic             fetch_valid_i,
  input  word_t            fetch_word_i,
  output logic             fetch_ready_o,
  // decode side
  output logic             dec_valid_o,
  output word_t            dec_instr_o,
  output cap_t             dec_state_o,
  input  logic             dec_ready_i,
  // control-flow resolution from the core
  input  logic             cf_resolve_i,
  input  logic             cf_taken_i,
  input  logic             cf_target_patch_i,
  // interrupt entry from the core
  input  logic             irq_enter_i,
  input  word_t            irq_handler_addr_i,
  input  logic             irq_tag_valid_i,
  input  cap_t             irq_tag_i,
  output logic             irq_safe_o,
  // to / from scfp_irq_state
  output logic             der_valid_o,
  output dom_e             der_dom_o,
  output cap_t             der_cap_o,
  output logic             irq_save_o,
  output cap_t             irq_save_state_o,
  output logic             mret_o,
  input  cap_t             exit_mask_i,
  // status
  output logic             stall_o
);

  typedef enum logic [2:0] {
    PH_IDLE, PH_DERIVE0, PH_DERIVE1, PH_PATCH_IN, PH_RUN, PH_WAIT_PATCH, PH_WAIT_RESOLVE
  } phase_e;

  phase_e    phase_q;
  cap_t      x_q, patch_q, out_tag_q;
  word_t     out_instr_q, der_addr_q;
  logic      out_valid_q, der_irq_q;
  cf_class_e cls_q;

  logic [STATE_W-1:0] f_in, f_out;
  word_t              plain;
  cap_t               xn;
  cf_class_e          cls;
  logic               ready_int, accept, deriving, out_free;
  dom_e               dom_now;

  assign deriving = (phase_q == PH_DERIVE0) || (phase_q == PH_DERIVE1);
  assign dom_now  = (phase_q == PH_DERIVE0) ? (der_irq_q ? DOM_IRQ_ENTRY : DOM_START)
                                            : (der_irq_q ? DOM_IRQ_EXIT  : DOM_PAD);
  assign f_in     = deriving ? derive_block(nonce_i, dom_now, der_addr_q) : {fetch_word_i, x_q};

  prince_core u_f (
    .data_i (f_in),
    .key_i  (key_i),
    .data_o (f_out)
  );

  assign plain = f_out[STATE_W-1 -: RATE_W];
  assign xn    = f_out[CAP_W-1:0];

  scfp_predecode u_pre (
    .instr_i (plain),
    .cls_o   (cls)
  );

  assign out_free = !out_valid_q || dec_ready_i;

  always_comb begin
    unique case (phase_q)
      PH_RUN:                     ready_int = out_free;
      PH_PATCH_IN, PH_WAIT_PATCH: ready_int = 1'b1;
      default:                    ready_int = 1'b0;
    endcase
  end

  assign accept = scfp_en_i && fetch_valid_i && ready_int && !irq_enter_i && !start_i;

  // Mode multiplexers: bypass is purely combinational.
  assign fetch_ready_o = scfp_en_i ? (ready_int && !irq_enter_i && !start_i) : dec_ready_i;
  assign dec_valid_o   = scfp_en_i ? (out_valid_q && !irq_enter_i && !start_i) : fetch_valid_i;
  assign dec_instr_o   = scfp_en_i ? out_instr_q : fetch_word_i;
  assign dec_state_o   = scfp_en_i ? out_tag_q   : '0;

  assign der_valid_o = scfp_en_i && deriving;
  assign der_dom_o   = dom_now;
  assign der_cap_o   = xn;

  assign irq_save_o       = scfp_en_i && irq_enter_i;
  assign irq_save_state_o = irq_tag_valid_i                           ? irq_tag_i :
                            (out_valid_q || phase_q == PH_WAIT_PATCH) ? out_tag_q : x_q;
  assign mret_o     = scfp_en_i && phase_q == PH_WAIT_RESOLVE && cf_resolve_i && cls_q == CF_MRET;
  assign irq_safe_o = scfp_en_i && phase_q == PH_RUN;
  assign stall_o    = scfp_en_i && (phase_q == PH_WAIT_PATCH || phase_q == PH_WAIT_RESOLVE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      phase_q     <= PH_IDLE;
      x_q         <= '0;
      patch_q     <= '0;
      out_tag_q   <= '0;
      out_instr_q <= '0;
      out_valid_q <= 1'b0;
      der_addr_q  <= '0;
      der_irq_q   <= 1'b0;
      cls_q       <= CF_NONE;
    end else if (!scfp_en_i) begin
      phase_q     <= PH_IDLE;
      out_valid_q <= 1'b0;
    end else begin
      if (out_valid_q && dec_ready_i) out_valid_q <= 1'b0;

      if (irq_enter_i) begin
        phase_q     <= PH_DERIVE0;
        der_irq_q   <= 1'b1;
        der_addr_q  <= irq_handler_addr_i;
        out_valid_q <= 1'b0;
      end else if (start_i) begin
        phase_q     <= PH_DERIVE0;
        der_irq_q   <= 1'b0;
        der_addr_q  <= start_addr_i;
        out_valid_q <= 1'b0;
      end else begin
        unique case (phase_q)
          PH_DERIVE0: begin
            x_q     <= xn;
            phase_q <= PH_DERIVE1;
          end
          PH_DERIVE1: phase_q <= PH_PATCH_IN;
          PH_PATCH_IN: if (accept) begin
            x_q     <= x_q ^ fetch_word_i;
            phase_q <= PH_RUN;
          end
          PH_RUN: if (accept) begin
            out_instr_q <= plain;
            out_tag_q   <= x_q;
            x_q         <= xn;
            cls_q       <= cls;
            unique case (cls)
              CF_PBRANCH, CF_PJUMP: begin
                out_valid_q <= 1'b0;
                phase_q     <= PH_WAIT_PATCH;
              end
              CF_BRANCH, CF_JUMP, CF_MRET: begin
                out_valid_q <= 1'b1;
                phase_q     <= PH_WAIT_RESOLVE;
              end
              default: out_valid_q <= 1'b1;
            endcase
          end
          PH_WAIT_PATCH: if (accept) begin
            patch_q     <= fetch_word_i;
            out_valid_q <= 1'b1;
            phase_q     <= PH_WAIT_RESOLVE;
          end
          PH_WAIT_RESOLVE: if (cf_resolve_i) begin
            phase_q <= PH_RUN;
            if (cls_q == CF_MRET) begin
              x_q <= x_q ^ exit_mask_i;
            end else if (cf_taken_i && (cls_q == CF_PBRANCH || cls_q == CF_PJUMP)) begin
              x_q <= x_q ^ patch_q;
              if (cf_target_patch_i) phase_q <= PH_PATCH_IN;
            end
          end
          default: ;
        endcase
      end
    end
  end

  // Protocol rules the core must keep.
  a_resolve_when_waiting: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (scfp_en_i && cf_resolve_i) |-> (phase_q == PH_WAIT_RESOLVE && !out_valid_q));
  a_irq_not_while_deriving: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (scfp_en_i && irq_enter_i) |-> !deriving);
  a_untagged_irq_safe: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (scfp_en_i && irq_enter_i && !irq_tag_valid_i)
      |-> (phase_q inside {PH_RUN, PH_WAIT_PATCH} || out_valid_q));
  a_out_held: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (scfp_en_i && out_valid_q && !dec_ready_i && !irq_enter_i && !start_i)
      |=> (out_valid_q && $stable(out_instr_q)));

endmodule
