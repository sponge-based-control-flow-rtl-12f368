// scfp_irq_state -- interrupt state register of the SCFP extension.
//
// On interrupt entry the capacity state of the interrupted code, z_entry, is
// saved here (like the old program counter is saved in mepc) while the
// decrypt stage restarts from a freshly derived handler state. Each handler
// must finish in a secret exit state e, derived from key, nonce and handler
// address. On MRET the decrypt stage computes the next state as
// z' = z ^ e ^ z_entry, so z_entry is restored exactly when the handler ran
// genuinely (z == e); any error in the handler propagates into the
// interrupted code. This unit supplies the mask e ^ z_entry.
//
// The saved state is kept XOR-masked with a pad derived from the key at
// program start, so the value the operating system reads and writes for a
// context switch (csr_rdata_o / csr_wdata_i) is never the plain state.
//
// Interface: der_valid_i strobes one derivation result der_cap_i with its
// domain; save_i stores save_state_i (one-cycle pulse on interrupt entry);
// mret_i marks the interrupt return. All registers update on the rising
// clock edge; exit_mask_o and csr_rdata_o are register outputs. One saved
// state (no hardware nesting), the masking with a pad and the CSR-style
// access are choices of this design; the paper only asks that the saved state
// be "encrypted or similarly protected".
module scfp_irq_state
  import scfp_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  // derivation results from the decrypt stage
  input  logic  der_valid_i,
  input  dom_e  der_dom_i,
  input  cap_t  der_cap_i,
  // interrupt entry / exit
  input  logic  save_i,
  input  cap_t  save_state_i,
  input  logic  mret_i,
  output cap_t  exit_mask_o,
  output logic  in_handler_o,
  // software access to the (masked) saved state for context switches
  input  logic  csr_we_i,
  input  cap_t  csr_wdata_i,
  output cap_t  csr_rdata_o
);

  cap_t pad_q, exit_q, saved_q;  // saved_q holds z_entry ^ pad
  logic in_handler_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pad_q        <= '0;
      exit_q       <= '0;
      saved_q      <= '0;
      in_handler_q <= 1'b0;
    end else begin
      if (der_valid_i && der_dom_i == DOM_PAD)      pad_q  <= der_cap_i;
      if (der_valid_i && der_dom_i == DOM_IRQ_EXIT) exit_q <= der_cap_i;
      if (save_i)        saved_q <= save_state_i ^ pad_q;
      else if (csr_we_i) saved_q <= csr_wdata_i;
      if (save_i)        in_handler_q <= 1'b1;
      else if (mret_i)   in_handler_q <= 1'b0;
    end
  end

  assign exit_mask_o  = exit_q ^ saved_q ^ pad_q;
  assign in_handler_o = in_handler_q;
  assign csr_rdata_o  = saved_q;

endmodule
