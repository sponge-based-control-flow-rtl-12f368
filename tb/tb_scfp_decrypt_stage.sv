// tb_scfp_decrypt_stage -- directed test of the decrypt stage on its own.
//
// A word stream is encrypted backwards with the reference PRINCE inverse:
//   entry patch, 10 ALU instructions, BPEQ + patch, (taken, flagged target)
//   second patch, 5 ALU instructions, MRET, 3 ALU instructions.
// The testbench feeds it without bubbles, checks every plaintext and state
// tag, the derivation strobes after start (z_I, pad) and after an interrupt
// (entry, exit), one instruction per cycle and one cycle of latency, the
// stall while a branch is unresolved, the MRET rule x = x' ^ exit_mask
// (exit_mask driven by the testbench), the saved state on interrupt entry,
// and bypass mode.
module tb_scfp_decrypt_stage;
  import scfp_pkg::*;
  import scfp_tb_pkg::*;

  localparam logic [127:0] KEY   = 128'h00112233445566778899aabbccddeeff;
  localparam logic [31:0]  NONCE = 32'hc0ffee00;
  localparam logic [31:0]  SADDR = 32'h100, HADDR = 32'h200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  scfp_en = 1, start = 0, fetch_valid = 0, dec_ready = 1;
  logic  cf_resolve = 0, cf_taken = 0, cf_tpatch = 0, irq_enter = 0, irq_tag_valid = 0;
  word_t fetch_word = '0, dec_instr;
  cap_t  irq_tag = '0, exit_mask = '0, dec_state, der_cap, save_state;
  logic  fetch_ready, dec_valid, irq_safe, der_valid, irq_save, mret, stall;
  dom_e  der_dom;

  scfp_decrypt_stage dut (
    .clk_i(clk), .rst_ni(rst_n), .scfp_en_i(scfp_en), .key_i(KEY), .nonce_i(NONCE),
    .start_i(start), .start_addr_i(SADDR),
    .fetch_valid_i(fetch_valid), .fetch_word_i(fetch_word), .fetch_ready_o(fetch_ready),
    .dec_valid_o(dec_valid), .dec_instr_o(dec_instr), .dec_state_o(dec_state), .dec_ready_i(dec_ready),
    .cf_resolve_i(cf_resolve), .cf_taken_i(cf_taken), .cf_target_patch_i(cf_tpatch),
    .irq_enter_i(irq_enter), .irq_handler_addr_i(HADDR), .irq_tag_valid_i(irq_tag_valid),
    .irq_tag_i(irq_tag), .irq_safe_o(irq_safe),
    .der_valid_o(der_valid), .der_dom_o(der_dom), .der_cap_o(der_cap),
    .irq_save_o(irq_save), .irq_save_state_o(save_state), .mret_o(mret),
    .exit_mask_i(exit_mask), .stall_o(stall)
  );

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL [%0t] %s", $time, what); end
  endtask

  function automatic cap_t derive(dom_e d, word_t addr);
    u64 o;
    o = prince_enc({NONCE ^ {30'd0, d}, addr}, KEY);
    return o[31:0];
  endfunction

  // stream layout (index = position in the fetch stream)
  localparam int N = 23;
  localparam int I_BP = 11, I_PATCH = 12, I_PATCH2 = 13, I_MRET = 19;
  word_t P [N], C [N];
  cap_t  S [N], XO [N];
  bit    is_insn [N];
  word_t stream [$];
  int    exp_idx [$];
  cap_t  e_state, inter;
  int    cyc = 0, last_out = -1, back_to_back = 0, n_out = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // fetch: present the next stream word, pop it on acceptance
  always @(posedge clk) begin
    if (fetch_valid && fetch_ready) void'(stream.pop_front());
  end
  always_comb begin
    fetch_valid = stream.size() > 0;
    fetch_word  = (stream.size() > 0) ? stream[0] : '0;
  end

  // decode: compare with the expected plaintext and tag
  always @(posedge clk) begin
    if (dec_valid && dec_ready && exp_idx.size() > 0) begin
      int i;
      i = exp_idx.pop_front();
      check($sformatf("word %0d plaintext %h vs %h", i, dec_instr, P[i]), dec_instr == P[i]);
      check($sformatf("word %0d tag", i), dec_state == S[i]);
      if (last_out == cyc - 1) back_to_back++;
      last_out = cyc;
      n_out++;
    end
  end

  initial begin
    int t0;
    for (int i = 0; i < N; i++) begin is_insn[i] = 1; P[i] = enc_addi(i % 31 + 1, 0, i); end
    is_insn[0] = 0; is_insn[I_PATCH] = 0; is_insn[I_PATCH2] = 0;
    P[I_BP]   = enc_b(OPC_BP, 3'b000, 0, 0, 64);
    P[I_MRET] = INSN_MRET;
    e_state   = $urandom;
    inter     = $urandom;
    for (int i = N - 1; i >= 0; i--) begin
      if (!is_insn[i]) continue;
      if (i == N - 1 || i == I_BP) XO[i] = $urandom;
      else if (i == I_MRET)        XO[i] = e_state;
      else                         XO[i] = S[i+1];
      {C[i], S[i]} = prince_dec({P[i], XO[i]}, KEY);
    end
    C[0]        = derive(DOM_START, SADDR) ^ S[1];
    C[I_PATCH]  = XO[I_BP] ^ inter;
    C[I_PATCH2] = inter ^ S[I_PATCH2 + 1];
    exit_mask   = e_state ^ S[I_MRET + 1];          // restores S[I_MRET+1] after a genuine handler

    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check("idle after reset", !dec_valid && !fetch_ready && !irq_safe);

    // start: two derivation cycles
    start = 1;
    @(posedge clk); #1;
    start = 0;
    t0 = cyc;
    check("derive z_I", der_valid && der_dom == DOM_START && der_cap == derive(DOM_START, SADDR));
    @(posedge clk); #1;
    check("derive pad", der_valid && der_dom == DOM_PAD && der_cap == derive(DOM_PAD, SADDR));
    // stream up to and including the branch patch
    for (int i = 0; i <= I_PATCH; i++) stream.push_back(C[i]);
    for (int i = 1; i <= I_BP; i++) exp_idx.push_back(i);
    wait (exp_idx.size() == 0);
    check($sformatf("first output %0d cycles after start", n_out), 1);
    check($sformatf("back-to-back outputs %0d", back_to_back), back_to_back == I_BP - 2);   // BP waits one cycle for its patch
    stream.push_back(32'hdeadbeef);                 // wrong-path word that must not be taken
    repeat (3) @(posedge clk);
    #1;
    check("stalled until resolution", stall && !fetch_ready && stream.size() == 1);
    // resolve taken, target flagged: the next word is the second patch
    stream.delete();
    cf_resolve = 1; cf_taken = 1; cf_tpatch = 1;
    @(posedge clk); #1;
    cf_resolve = 0; cf_taken = 0; cf_tpatch = 0;
    for (int i = I_PATCH2; i <= I_MRET; i++) stream.push_back(C[i]);
    for (int i = I_PATCH2 + 1; i <= I_MRET; i++) exp_idx.push_back(i);
    wait (exp_idx.size() == 0);
    repeat (2) @(posedge clk);
    #1;
    check("MRET waits", stall && !fetch_ready);
    cf_resolve = 1; cf_taken = 1;
    #1;
    check("mret strobe", mret);
    @(posedge clk); #1;
    cf_resolve = 0; cf_taken = 0;
    for (int i = I_MRET + 1; i < N; i++) begin stream.push_back(C[i]); exp_idx.push_back(i); end
    wait (exp_idx.size() == 0);
    @(posedge clk); #1;
    check("running after MRET", irq_safe);

    // interrupt with a tag from the core
    irq_tag_valid = 1; irq_tag = 32'h1234_5678; irq_enter = 1;
    #1;
    check("save strobe", irq_save && save_state == 32'h1234_5678 && !dec_valid && !fetch_ready);
    @(posedge clk); #1;
    irq_enter = 0; irq_tag_valid = 0;
    check("derive handler entry", der_valid && der_dom == DOM_IRQ_ENTRY &&
                                  der_cap == derive(DOM_IRQ_ENTRY, HADDR));
    @(posedge clk); #1;
    check("derive handler exit", der_valid && der_dom == DOM_IRQ_EXIT &&
                                 der_cap == derive(DOM_IRQ_EXIT, HADDR));
    @(posedge clk); #1;
    check("waiting for handler entry patch", fetch_ready && !dec_valid);

    // bypass
    scfp_en = 0;
    for (int i = 0; i < 20; i++) begin
      word_t w;
      w = $urandom;
      stream.push_back(w);
      dec_ready = 1'($urandom % 2);
      #1;
      check("bypass", dec_valid && dec_instr == w && fetch_ready == dec_ready);
      @(posedge clk); #1;
      stream.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
