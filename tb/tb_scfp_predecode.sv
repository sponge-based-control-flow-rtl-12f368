// tb_scfp_predecode -- checks the control-flow classification.
//
// Every class is produced from encodings built independently with the
// scfp_tb_pkg encoders: all six protected and unprotected branch funct3
// values, the two illegal branch funct3 values, JAL, JALR, JALP, JALRP,
// MRET, and ordinary ALU / load / store words and random words. Random
// words are checked against a direct opcode table written in the testbench.
module tb_scfp_predecode;
  import scfp_pkg::*;
  import scfp_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [31:0] instr;
  cf_class_e   cls;
  int checks = 0, failures = 0;

  scfp_predecode dut (.instr_i(instr), .cls_o(cls));

  task automatic expect_cls(logic [31:0] w, cf_class_e exp);
    instr = w;
    @(posedge clk);
    checks++;
    if (cls !== exp) begin
      failures++;
      $display("FAIL %h: got %s expected %s", w, cls.name(), exp.name());
    end
  endtask

  function automatic cf_class_e model(logic [31:0] w);
    logic [2:0] f3;
    f3 = w[14:12];
    if (w == 32'h30200073) return CF_MRET;
    case (w[6:0])
      7'h63: return (f3 == 2 || f3 == 3) ? CF_NONE : CF_BRANCH;
      7'h0b: return (f3 == 2 || f3 == 3) ? CF_NONE : CF_PBRANCH;
      7'h6f: return CF_JUMP;
      7'h67: return (f3 == 0) ? CF_JUMP : CF_NONE;
      7'h2b: return CF_PJUMP;
      7'h5b: return (f3 == 0) ? CF_PJUMP : CF_NONE;
      default: return CF_NONE;
    endcase
  endfunction

  initial begin
    logic [2:0] good [6] = '{3'b000, 3'b001, 3'b100, 3'b101, 3'b110, 3'b111};
    foreach (good[i]) begin
      expect_cls(enc_b(7'b1100011, good[i], 1, 2, -8), CF_BRANCH);
      expect_cls(enc_b(7'b0001011, good[i], 3, 0, 16), CF_PBRANCH);
    end
    expect_cls(enc_b(7'b1100011, 3'b010, 1, 2, 8), CF_NONE);
    expect_cls(enc_b(7'b0001011, 3'b011, 1, 2, 8), CF_NONE);
    expect_cls(enc_j(7'b1101111, 1, 64), CF_JUMP);
    expect_cls(enc_i(7'b1100111, 0, 1, 0), CF_JUMP);
    expect_cls(enc_j(7'b0101011, 5, -128), CF_PJUMP);
    expect_cls(enc_i(7'b1011011, 0, 5, 2), CF_PJUMP);
    expect_cls(enc_i(7'b1011011, 0, 5, 2) | 32'h1000, CF_NONE);
    expect_cls(32'h30200073, CF_MRET);
    expect_cls(32'h00000073, CF_NONE);               // ECALL
    expect_cls(enc_addi(1, 2, 5), CF_NONE);
    expect_cls(32'h0000a083, CF_NONE);               // LW
    expect_cls(32'h00112023, CF_NONE);               // SW
    for (int i = 0; i < 500; i++) begin
      logic [31:0] w;
      w = $urandom;
      if (i % 4 == 0) w[6:0] = 7'h63;
      if (i % 4 == 1) w[6:0] = 7'h0b;
      if (i % 4 == 2) w[6:0] = 7'h5b;
      expect_cls(w, model(w));
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
