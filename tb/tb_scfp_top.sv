// tb_scfp_top -- end-to-end test of the SCFP extension at its default sizes.
//
// The testbench plays toolchain, memory, fetch stage and core.
//
// Toolchain: a small program (loop with a protected branch, two calls of one
// function through JALP, return through JALRP with two patches, an
// unprotected branch, and an interrupt handler ending in MRET) is encrypted
// for the APE-like mode with the reference PRINCE inverse:
//     {C_i, x_i} = f^-1({P_i, x_i'})
// walking the image from high to low addresses, because every sequential
// successor lies above its predecessor. Patch words are then filled in so
// that every taken edge lands on the entry state of its target, and the
// entry patches fit the derived program and handler states.
//
// Core model: a tiny RV32 executor (ADDI, branches, JAL(R), JALP, JALRP,
// MRET) consumes the decrypted words, checks each against the plaintext at
// the expected PC, and reports branch outcomes after a random delay.
//
// Runs:
//   0  deterministic fetch/decode, no interrupts: checks start latency
//      (5 cycles from start to the first instruction) and one instruction
//      per cycle in straight-line code.
//   1  random fetch bubbles and decode back-pressure, one untagged and one
//      tagged interrupt, saved-state CSR read in the handler.
//   2  a tampered ciphertext word: the words from there on must not decrypt
//      to any plaintext of the program.
//   3  the handler overwrites the saved state (a bad context switch): after
//      MRET the interrupted code must decrypt to noise.
//   4  bypass mode: words pass unchanged, in the same cycle.
// Each mechanism is counted; one that never happens is a failure.
module tb_scfp_top;
  import scfp_pkg::*;
  import scfp_tb_pkg::*;

  localparam int NW = 64;
  localparam logic [31:0] START = 32'h0, HANDLER = 32'h80;
  localparam logic [127:0] KEY = 128'h0f1e2d3c4b5a6978_8796a5b4c3d2e1f0;
  localparam logic [31:0] NONCE = 32'h5ca1ab1c;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT ports
  logic        scfp_en = 1, start = 0;
  logic        fetch_valid, fetch_ready, dec_valid, dec_ready;
  logic [31:0] fetch_word, dec_instr;
  cap_t        dec_state;
  logic        cf_resolve = 0, cf_taken = 0, cf_tpatch = 0;
  logic        irq_enter = 0, irq_tag_valid = 0;
  cap_t        irq_tag = '0;
  logic        irq_safe, in_handler, stall;
  logic        csr_we = 0;
  cap_t        csr_wdata = '0, csr_rdata;

  scfp_top dut (
    .clk_i(clk), .rst_ni(rst_n), .scfp_en_i(scfp_en), .key_i(KEY), .nonce_i(NONCE),
    .start_i(start), .start_addr_i(START),
    .fetch_valid_i(fetch_valid), .fetch_word_i(fetch_word), .fetch_ready_o(fetch_ready),
    .dec_valid_o(dec_valid), .dec_instr_o(dec_instr), .dec_state_o(dec_state),
    .dec_ready_i(dec_ready),
    .cf_resolve_i(cf_resolve), .cf_taken_i(cf_taken), .cf_target_patch_i(cf_tpatch),
    .irq_enter_i(irq_enter), .irq_handler_addr_i(HANDLER), .irq_tag_valid_i(irq_tag_valid),
    .irq_tag_i(irq_tag), .irq_safe_o(irq_safe), .in_handler_o(in_handler),
    .csr_we_i(csr_we), .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata),
    .stall_o(stall)
  );

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%0t] %s", $time, what); end
  endtask

  // ---------------- program and encryption ----------------
  typedef enum {K_EMPTY, K_INSTR, K_PATCH} kind_e;
  kind_e       kind [NW];
  logic [31:0] P [NW], C [NW];
  cap_t        S [NW], XO [NW];
  cap_t        z_i, z_h, e_exit, pad, inter;

  function automatic cap_t derive(dom_e d, logic [31:0] addr);
    u64 o;
    o = prince_enc({NONCE ^ {30'd0, d}, addr}, KEY);
    return o[31:0];
  endfunction

  task automatic put(int w, logic [31:0] insn);
    kind[w] = K_INSTR; P[w] = insn;
  endtask

  task automatic build_program();
    for (int w = 0; w < NW; w++) begin kind[w] = K_EMPTY; P[w] = 0; C[w] = 0; S[w] = 0; XO[w] = 0; end
    kind[0] = K_PATCH;                                          // program entry patch
    put(1,  enc_addi(1, 0, 3));
    put(2,  enc_addi(1, 1, -1));                                // loop head
    put(3,  enc_addi(2, 2, 1));
    put(4,  enc_b(OPC_BP, 3'b001, 1, 0, -8));                   // BPNE x1, x0, loop
    kind[5] = K_PATCH;
    put(6,  enc_j(OPC_JALP, 5, 16*4 - 6*4));                    // JALP x5, func
    kind[7] = K_PATCH;
    kind[8] = K_PATCH;                                          // return-site patch
    put(9,  enc_addi(3, 0, 7));
    put(10, enc_j(OPC_JALP, 5, 16*4 - 10*4));                   // second call site
    kind[11] = K_PATCH;
    kind[12] = K_PATCH;                                         // return-site patch
    put(13, enc_b(OPC_BRANCH, 3'b001, 0, 0, 8));                // BNE x0, x0 (never taken)
    put(14, enc_addi(4, 0, 1));
    put(15, enc_addi(7, 0, 9));                                 // last instruction
    put(16, enc_addi(6, 6, 1));                                 // func
    put(17, enc_i(OPC_JALRP, 0, 5, 2));                         // JALRP x0, 2(x5)
    kind[18] = K_PATCH;
    kind[32] = K_PATCH;                                         // handler entry patch
    put(33, enc_addi(10, 10, 1));
    put(34, enc_addi(11, 11, 1));
    put(35, INSN_MRET);

    z_i    = derive(DOM_START, START);
    pad    = derive(DOM_PAD, 32'h0);
    z_h    = derive(DOM_IRQ_ENTRY, HANDLER);
    e_exit = derive(DOM_IRQ_EXIT, HANDLER);
    inter  = $urandom;                                          // intermediate return state

    // x' of each instruction: the state its executed sequential successor starts with
    for (int w = NW - 1; w >= 0; w--) begin
      if (kind[w] != K_INSTR) continue;
      if (w == 35)                    XO[w] = e_exit;
      else if (w == 4)                XO[w] = S[6];
      else if (w inside {6, 10, 15, 17}) XO[w] = $urandom;
      else                            XO[w] = S[w+1];
      {C[w], S[w]} = prince_dec({P[w], XO[w]}, KEY);
    end
    C[0]  = z_i ^ S[1];
    C[5]  = XO[4] ^ S[2];
    C[7]  = XO[6] ^ S[16];
    C[11] = XO[10] ^ S[16];
    C[18] = XO[17] ^ inter;
    C[8]  = inter ^ S[9];
    C[12] = inter ^ S[13];
    C[32] = z_h ^ S[33];
  endtask

  // ---------------- fetch, core and interrupt model ----------------
  int          run, cyc;
  bit          rnd;                  // random bubbles / back-pressure
  logic [31:0] fetch_pc, exec_pc, mepc;
  logic [31:0] regs [32];
  bit          done, in_irq, fault_mode;
  int          pend_delay;           // >0: a resolution is pending
  bit          pend_taken, pend_tpatch, pend_mret;
  logic [31:0] pend_target, pend_next;
  int          irq_plan;             // 1: untagged, 2: tagged, at the given instruction count
  int          irq_at [2];
  int          n_exec, n_fault_words, n_noise;
  bit          csr_clobber;
  int          start_cyc, first_cyc, last_cyc;
  int          seq_ok;

  // mechanism counters
  int n_pb_taken, n_pb_nt, n_jalp, n_two_patch, n_unprot, n_mret, n_irq_untag, n_irq_tag;
  int n_start, n_backpressure, n_bubble, n_csr_read, n_csr_switch, n_fault, n_bypass, n_stall;

  assign fetch_word = (fetch_pc < NW * 4) ? C[fetch_pc[31:2]] : 32'h0;

  task automatic schedule(bit taken, logic [31:0] target, logic [31:0] nt_next);
    pend_delay  = rnd ? 1 + ($urandom % 3) : 1;
    pend_taken  = taken;
    pend_target = target;
    pend_tpatch = taken && target[1];
    pend_next   = taken ? (target[1] ? {target[31:2], 2'b00} + 4 : target) : nt_next;
    pend_mret   = 0;
  endtask

  // execute one decrypted instruction at exec_pc
  task automatic execute(logic [31:0] insn);
    logic [6:0] opc;
    int rd, rs1, rs2;
    logic [31:0] pc;
    pc = exec_pc; opc = insn[6:0];
    rd = insn[11:7]; rs1 = insn[19:15]; rs2 = insn[24:20];
    n_exec++;
    if (opc == 7'b0010011) begin
      if (rd != 0) regs[rd] = regs[rs1] + imm_i(insn);
      exec_pc = pc + 4;
      if (pc == 32'd15 * 4) done = 1;
    end else if (opc == OPC_BP || opc == OPC_BRANCH) begin
      bit t;
      t = (insn[14:12] == 3'b001) ? (regs[rs1] != regs[rs2]) : (regs[rs1] == regs[rs2]);
      if (opc == OPC_BP) begin if (t) n_pb_taken++; else n_pb_nt++; end
      else n_unprot++;
      schedule(t, pc + imm_b(insn), pc + ((opc == OPC_BP) ? 8 : 4));
    end else if (opc == OPC_JALP) begin
      n_jalp++;
      if (rd != 0) regs[rd] = pc + 8;
      schedule(1, pc + imm_j(insn), 0);
    end else if (opc == OPC_JALRP) begin
      logic [31:0] tgt;
      tgt = regs[rs1] + imm_i(insn);
      if (tgt[1]) n_two_patch++;
      schedule(1, tgt, 0);
    end else if (insn == INSN_MRET) begin
      n_mret++;
      schedule(1, mepc, 0);
      pend_mret = 1;
    end else begin
      check($sformatf("unexpected instruction %h at %h", insn, pc), 0);
      done = 1;
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && run inside {[0:3]}) begin
      if (start) begin n_start++; start_cyc = cyc; end
      if (dec_valid && !dec_ready) n_backpressure++;
      if (!fetch_valid) n_bubble++;
      if (stall) n_stall++;

      // fetch stage
      if (fetch_valid && fetch_ready) fetch_pc <= fetch_pc + 4;
      fetch_valid <= rnd ? ($urandom % 5 != 0) : 1'b1;

      irq_enter     <= 0;
      irq_tag_valid <= 0;
      cf_resolve    <= 0;
      csr_we        <= 0;
      dec_ready     <= rnd ? ($urandom % 4 != 0) : 1'b1;

      // decode / execute
      if (irq_enter) begin
        // interrupt taken in this cycle: flush fetch, enter the handler
        fetch_pc <= HANDLER;
        exec_pc  = HANDLER + 4;
      end else if (dec_valid && dec_ready && !done) begin
        if (run == 2 && exec_pc == 32'hc) fault_mode = 1;
        if (fault_mode) begin
          // only collect words; steer any control flow sequentially
          n_fault_words++;
          for (int w = 0; w < NW; w++) if (kind[w] == K_INSTR && P[w] == dec_instr) n_noise++;
          if (dec_instr[6:0] inside {OPC_BRANCH, OPC_BP, OPC_JAL, OPC_JALR, OPC_JALP, OPC_JALRP} ||
              dec_instr == INSN_MRET) begin
            pend_delay = 1; pend_taken = 0; pend_tpatch = 0; pend_next = 0; pend_mret = 0;
          end
          if (n_fault_words == 8) done = 1;
        end else begin
          check($sformatf("run %0d pc %h: got %h expected %h", run, exec_pc, dec_instr,
                          P[exec_pc[31:2]]),
                kind[exec_pc[31:2]] == K_INSTR && dec_instr == P[exec_pc[31:2]]);
          if (first_cyc < 0) first_cyc = cyc;
          if (run == 0 && exec_pc inside {32'h8, 32'hc} && cyc == last_cyc + 1) seq_ok++;
          last_cyc = cyc;
          // planned interrupts, at non-control-flow instructions with nothing pending
          if (irq_plan < 2 && n_exec >= irq_at[irq_plan] && pend_delay == 0 && !in_irq &&
              dec_instr[6:0] == 7'b0010011) begin
            if (irq_plan == 0) begin
              execute(dec_instr);              // executes, then untagged interrupt
              mepc = exec_pc;
              n_irq_untag++;
            end else begin
              mepc = exec_pc;                  // killed in decode: restart here, tagged
              irq_tag_valid <= 1;
              irq_tag       <= dec_state;
              n_irq_tag++;
            end
            irq_plan++;
            in_irq = 1;
            irq_enter <= 1;
            dec_ready <= 0;
          end else begin
            execute(dec_instr);
          end
        end
      end

      // handler: read the masked saved state, optionally clobber it
      if (in_irq && in_handler && exec_pc == HANDLER + 12 && !irq_enter) begin
        if (csr_clobber) begin
          csr_we <= 1; csr_wdata <= csr_rdata ^ 32'h0100_0000;
          csr_clobber = 0;
          n_csr_switch++;
        end else if (!fault_mode && run == 1) begin
          check("saved state is masked", csr_rdata == (S[mepc[31:2]] ^ pad));
          n_csr_read++;
        end
      end

      // branch resolution
      if (pend_delay > 0 && !irq_enter) begin
        pend_delay--;
        if (pend_delay == 0) begin
          cf_resolve <= 1;
          cf_taken   <= pend_taken;
          cf_tpatch  <= pend_tpatch;
          if (pend_taken) fetch_pc <= {pend_target[31:2], 2'b00};
          exec_pc = fault_mode ? exec_pc : pend_next;
          if (pend_mret && in_irq) begin
            in_irq = 0;
            if (run == 3) begin fault_mode = 1; n_fault_words = 0; n_noise = 0; end
          end
        end
      end
    end
  end

  task automatic do_run(int r, bit random_timing, int irq_cnt);
    run = -1;
    @(posedge clk);
    #1;
    rnd = random_timing;
    for (int i = 0; i < 32; i++) regs[i] = 0;
    exec_pc = START + 4; fetch_pc <= START; mepc = 0;
    done = 0; in_irq = 0; pend_delay = 0; n_exec = 0;
    irq_plan = 2 - irq_cnt;
    first_cyc = -1; last_cyc = -10;
    start <= 1;
    run = r;
    @(posedge clk);
    #1;
    start <= 0;
    fork
      wait (done);
      repeat (3000) @(posedge clk);
    join_any
    disable fork;
    check($sformatf("run %0d finished", r), done);
    repeat (4) @(posedge clk);
  endtask

  initial begin
    build_program();
    fetch_valid <= 0; dec_ready <= 1; cyc = 0; run = -1;
    n_fault_words = 0; n_noise = 0; csr_clobber = 0; fault_mode = 0; seq_ok = 0;
    irq_at = '{4, 14};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // run 0: deterministic timing
    do_run(0, 0, 0);
    check($sformatf("start latency %0d cycles", first_cyc - start_cyc), first_cyc - start_cyc == 5);
    check($sformatf("straight-line rate, %0d back-to-back", seq_ok), seq_ok >= 2);
    check("x registers", regs[1] == 0 && regs[2] == 3 && regs[3] == 7 && regs[6] == 2 &&
                         regs[4] == 1 && regs[7] == 9);

    // run 1: random timing and two interrupts
    do_run(1, 1, 2);
    check("run 1 results", regs[2] == 3 && regs[6] == 2 && regs[7] == 9);
    check("handler ran twice", regs[10] == 2 && regs[11] == 2);

    // run 2: tampered ciphertext of the loop body
    C[3] ^= 32'h0000_0400;
    begin
      n_fault_words = 0; n_noise = 0;
      fault_mode = 0;
      do_run(2, 0, 0);
      check("tampered code decrypts to noise", n_fault_words == 8 && n_noise == 0);
      if (n_fault_words == 8 && n_noise == 0) n_fault++;
      fault_mode = 0;
    end
    C[3] ^= 32'h0000_0400;

    // run 3: bad saved state from the handler, then noise after MRET
    irq_at = '{4, 99};
    csr_clobber = 1;
    begin
      n_fault_words = 0; n_noise = 0;
      do_run(3, 0, 2);
      check("bad saved state gives noise after MRET", n_fault_words == 8 && n_noise == 0);
      if (n_fault_words == 8 && n_noise == 0) n_fault++;
      fault_mode = 0;
    end

    // run 4: bypass
    run = -1;
    @(posedge clk);
    scfp_en = 0;
    fetch_pc <= 32'd60 * 4;
    for (int i = 0; i < 50; i++) begin
      logic [31:0] w;
      w = $urandom;
      C[60] = w;
      fetch_valid <= 1;
      dec_ready <= 1'($urandom % 2);
      #1;
      check("bypass word", dec_valid && dec_instr == w && fetch_ready == dec_ready);
      n_bypass++;
      @(posedge clk);
    end
    scfp_en = 1;

    check($sformatf("protected branch taken %0d", n_pb_taken), n_pb_taken > 0);
    check($sformatf("protected branch not taken %0d", n_pb_nt), n_pb_nt > 0);
    check($sformatf("JALP %0d", n_jalp), n_jalp > 0);
    check($sformatf("JALRP with two patches %0d", n_two_patch), n_two_patch > 0);
    check($sformatf("unprotected branch wait %0d", n_unprot), n_unprot > 0);
    check($sformatf("MRET %0d", n_mret), n_mret > 0);
    check($sformatf("untagged interrupt %0d", n_irq_untag), n_irq_untag > 0);
    check($sformatf("tagged interrupt %0d", n_irq_tag), n_irq_tag > 0);
    check($sformatf("starts %0d", n_start), n_start > 0);
    check($sformatf("decode back-pressure %0d", n_backpressure), n_backpressure > 0);
    check($sformatf("fetch bubbles %0d", n_bubble), n_bubble > 0);
    check($sformatf("stall cycles %0d", n_stall), n_stall > 0);
    check($sformatf("saved-state reads %0d", n_csr_read), n_csr_read > 0);
    check($sformatf("context switches %0d", n_csr_switch), n_csr_switch > 0);
    check($sformatf("fault detections %0d", n_fault), n_fault > 0);
    check($sformatf("bypass words %0d", n_bypass), n_bypass > 0);
    $display("mechanisms: pb_taken=%0d pb_nt=%0d jalp=%0d two_patch=%0d unprot=%0d mret=%0d irq_untag=%0d irq_tag=%0d start=%0d backpressure=%0d bubbles=%0d stalls=%0d csr_read=%0d csr_switch=%0d fault=%0d bypass=%0d",
             n_pb_taken, n_pb_nt, n_jalp, n_two_patch, n_unprot, n_mret, n_irq_untag, n_irq_tag,
             n_start, n_backpressure, n_bubble, n_stall, n_csr_read, n_csr_switch, n_fault, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
