// scfp_top -- SCFP hardware extension of an in-order RISC-V core.
//
// This is the AE decrypt stage inserted between the core's fetch and decode
// stages, together with the interrupt state register it needs. The core,
// its memories and the key store are outside: their signals are the ports.
//
//   fetch  --C_i, patches-->  scfp_decrypt_stage  --P_i, state tag-->  decode
//                                   |    ^
//                  derivations,     v    | e ^ z_entry
//                  save, MRET   scfp_irq_state  <-- CSR save/restore
//
// The core reports each branch, jump and MRET outcome on cf_resolve_i /
// cf_taken_i / cf_target_patch_i, enters traps and interrupts on irq_enter_i
// (with the state tag of the instruction it will restart at, when that
// instruction had already left the stage), and gives the operating system
// the masked saved state through the csr_* port. key_i is the device key,
// nonce_i the program nonce, both held stable while running.
//
// Timing: see scfp_decrypt_stage. One instruction per cycle in straight-line
// code, one cycle of latency, a stall from every control-flow instruction
// until its resolution, two cycles for each state derivation. With scfp_en_i
// low, fetch words pass straight to decode.
//
// The placement between fetch and decode, the bypass and the saved state as
// an OS-visible register follow the described processor; the port set, the
// resolution handshake and the state tag are this design's own choices.
module scfp_top
  import scfp_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             scfp_en_i,
  input  logic [KEY_W-1:0] key_i,
  input  word_t            nonce_i,
  input  logic             start_i,
  input  word_t            start_addr_i,
  // fetch stage
  input  logic             fetch_valid_i,
  input  word_t            fetch_word_i,
  output logic             fetch_ready_o,
  // decode stage
  output logic             dec_valid_o,
  output word_t            dec_instr_o,
  output cap_t             dec_state_o,
  input  logic             dec_ready_i,
  // control-flow resolution (execute stage)
  input  logic             cf_resolve_i,
  input  logic             cf_taken_i,
  input  logic             cf_target_patch_i,
  // traps and interrupts
  input  logic             irq_enter_i,
  input  word_t            irq_handler_addr_i,
  input  logic             irq_tag_valid_i,
  input  cap_t             irq_tag_i,
  output logic             irq_safe_o,
  output logic             in_handler_o,
  // saved-state register for context switches
  input  logic             csr_we_i,
  input  cap_t             csr_wdata_i,
  output cap_t             csr_rdata_o,
  // status
  output logic             stall_o
);

  logic der_valid, irq_save, mret;
  dom_e der_dom;
  cap_t der_cap, irq_save_state, exit_mask;

  scfp_decrypt_stage u_stage (
    .clk_i, .rst_ni, .scfp_en_i, .key_i, .nonce_i,
    .start_i, .start_addr_i,
    .fetch_valid_i, .fetch_word_i, .fetch_ready_o,
    .dec_valid_o, .dec_instr_o, .dec_state_o, .dec_ready_i,
    .cf_resolve_i, .cf_taken_i, .cf_target_patch_i,
    .irq_enter_i, .irq_handler_addr_i, .irq_tag_valid_i, .irq_tag_i, .irq_safe_o,
    .der_valid_o      (der_valid),
    .der_dom_o        (der_dom),
    .der_cap_o        (der_cap),
    .irq_save_o       (irq_save),
    .irq_save_state_o (irq_save_state),
    .mret_o           (mret),
    .exit_mask_i      (exit_mask),
    .stall_o
  );

  scfp_irq_state u_irq (
    .clk_i, .rst_ni,
    .der_valid_i  (der_valid),
    .der_dom_i    (der_dom),
    .der_cap_i    (der_cap),
    .save_i       (irq_save),
    .save_state_i (irq_save_state),
    .mret_i       (mret),
    .exit_mask_o  (exit_mask),
    .in_handler_o,
    .csr_we_i, .csr_wdata_i, .csr_rdata_o
  );

endmodule
