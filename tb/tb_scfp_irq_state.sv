// tb_scfp_irq_state -- checks save, masking, exit mask and CSR access.
//
// Loads a pad and an exit state through the derivation strobe, saves a
// state, and checks that the CSR view is the masked value, that
// exit_mask = e ^ z_entry (so that z ^ exit_mask = z_entry exactly when
// z = e), that the in-handler flag follows save / MRET, that a CSR write
// (context switch) changes the restored state, and that other derivation
// domains leave pad and e alone. Values come from $urandom; expectations are
// computed in the testbench.
module tb_scfp_irq_state;
  import scfp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic der_valid = 0, save = 0, mret = 0, csr_we = 0;
  dom_e der_dom = DOM_START;
  cap_t der_cap = '0, save_state = '0, csr_wdata = '0;
  cap_t exit_mask, csr_rdata;
  logic in_handler;
  int checks = 0, failures = 0;

  scfp_irq_state dut (
    .clk_i(clk), .rst_ni(rst_n),
    .der_valid_i(der_valid), .der_dom_i(der_dom), .der_cap_i(der_cap),
    .save_i(save), .save_state_i(save_state), .mret_i(mret),
    .exit_mask_o(exit_mask), .in_handler_o(in_handler),
    .csr_we_i(csr_we), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata)
  );

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic derive(dom_e d, cap_t v);
    der_valid <= 1; der_dom <= d; der_cap <= v;
    @(posedge clk);
    der_valid <= 0;
  endtask

  initial begin
    cap_t pad, e, z, other;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check("reset in_handler", 32'(in_handler), 0);
    check("reset csr", csr_rdata, 0);
    for (int round = 0; round < 20; round++) begin
      pad = $urandom; e = $urandom; z = $urandom; other = $urandom;
      derive(DOM_PAD, pad);
      derive(DOM_IRQ_EXIT, e);
      derive(DOM_START, $urandom);       // must not touch pad or e
      derive(DOM_IRQ_ENTRY, $urandom);
      save <= 1; save_state <= z;
      @(posedge clk);
      save <= 0;
      #1;
      check("in handler", 32'(in_handler), 1);
      check("csr masked", csr_rdata, z ^ pad);
      check("exit mask", exit_mask, e ^ z);
      check("genuine exit restores", e ^ exit_mask, z);
      check("faulty exit differs", 32'(((e ^ 32'h1) ^ exit_mask) != z), 1);
      if (round % 2 == 1) begin
        // context switch: OS replaces the saved (masked) state
        csr_we <= 1; csr_wdata <= other ^ pad;
        @(posedge clk);
        csr_we <= 0;
        #1;
        check("csr write", csr_rdata, other ^ pad);
        check("switched exit mask", exit_mask, e ^ other);
      end
      mret <= 1;
      @(posedge clk);
      mret <= 0;
      #1;
      check("left handler", 32'(in_handler), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
