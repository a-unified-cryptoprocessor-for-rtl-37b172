// Self-checking test of the unified modular reduction unit.
// Drives 4000 random products of two residues (and the extreme products
// 0, (q-1)^2) for the Dilithium prime and the Saber NTT prime and compares
// the registered result, one clock later, with c mod q computed here with
// 64-bit arithmetic.
module tb_mod_red;
  import cp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic sel_saber;
  logic [2*COEF_W-1:0] c;
  logic [COEF_W-1:0] r;
  int checks = 0, failures = 0;
  longint unsigned q, a, b, exp_r;

  mod_red dut (.clk, .sel_saber, .c, .r);

  initial begin : watchdog
    #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    sel_saber = 0; c = '0;
    for (int i = 0; i < 4002; i++) begin
      @(negedge clk);
      sel_saber = i[0];
      q = sel_saber ? 64'd16760833 : 64'd8380417;
      a = {$urandom, $urandom} % q; b = {$urandom, $urandom} % q;
      if (i < 2) begin a = 0; b = 0; end
      if (i >= 4000) begin a = q - 1; b = q - 1; end
      c = (2*COEF_W)'(a * b);
      exp_r = (a * b) % q;
      @(posedge clk); #1;
      checks++;
      if (64'(r) != exp_r) begin
        failures++;
        if (failures < 10) $display("mod_red q=%0d c=%0d got %0d exp %0d", q, a*b, r, exp_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
