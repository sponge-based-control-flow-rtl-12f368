// tb_prince_core -- self-checking test of the combinational PRINCE core.
//
// 1. The five published PRINCE test vectors, on the RTL and on the
//    testbench's own reference model (scfp_tb_pkg).
// 2. 300 random plaintext/key pairs: RTL against the reference model, and
//    the reference decryption inverting the RTL output.
// The core is combinational, so results are sampled one clock after the
// inputs change; a watchdog ends the run after 5000 cycles.
module tb_prince_core;
  import scfp_tb_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [63:0]  din, dout;
  logic [127:0] key;
  int checks = 0, failures = 0;

  prince_core dut (.data_i(din), .key_i(key), .data_o(dout));

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  typedef struct { logic [63:0] p; logic [63:0] k0; logic [63:0] k1; logic [63:0] c; } tv_t;
  tv_t tv [5] = '{
    '{64'h0000000000000000, 64'h0000000000000000, 64'h0000000000000000, 64'h818665aa0d02dfda},
    '{64'hffffffffffffffff, 64'h0000000000000000, 64'h0000000000000000, 64'h604ae6ca03c20ada},
    '{64'h0000000000000000, 64'hffffffffffffffff, 64'h0000000000000000, 64'h9fb51935fc3df524},
    '{64'h0000000000000000, 64'h0000000000000000, 64'hffffffffffffffff, 64'h78a54cbe737bb7ef},
    '{64'h0123456789abcdef, 64'h0000000000000000, 64'hfedcba9876543210, 64'hae25ad3ca8fa9ccf}
  };

  initial begin
    for (int i = 0; i < 5; i++) begin
      din = tv[i].p; key = {tv[i].k0, tv[i].k1};
      @(posedge clk);
      check($sformatf("vector %0d rtl", i), dout, tv[i].c);
      check($sformatf("vector %0d model", i), prince_enc(tv[i].p, key), tv[i].c);
      check($sformatf("vector %0d model inverse", i), prince_dec(tv[i].c, key), tv[i].p);
    end
    for (int i = 0; i < 300; i++) begin
      din = {$urandom, $urandom};
      key = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      check($sformatf("random %0d", i), dout, prince_enc(din, key));
      check($sformatf("random %0d inverse", i), prince_dec(dout, key), din);
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
