// Self-checking test of the Dilithium signature-loop check.
// Runs 200 random vectors of 16 coefficients with a random bound; for each
// the sticky fail flag must equal "some |centred coefficient| >= bound",
// computed here. Also checks the hint-weight test against omega and clear.
module tb_dil_verify;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, valid, check_weight, fail;
  logic [COEF_W-1:0] c;
  logic [22:0] bound;
  logic [9:0] weight, omega;
  int checks = 0, failures = 0;
  localparam longint Q = 8380417;

  dil_verify dut (.*);

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; valid = 0; check_weight = 0; c = '0; bound = '0; weight = '0; omega = 10'd80;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 200; v++) begin
      bit ef;
      longint b;
      clear = 1; @(negedge clk); clear = 0;
      b = $urandom_range(1000, 600000);
      bound = 23'(b); ef = 0;
      for (int i = 0; i < 16; i++) begin
        longint m;
        m = (v % 2) ? $urandom_range(0, 620000) : $urandom_range(0, 1000);
        if (i == 7 && v % 7 == 3) m = b;       // exactly the bound fails
        if (i == 8 && v % 7 == 4) m = b - 1;   // just below passes
        if (m >= b) ef = 1;
        c = COEF_W'($urandom_range(0, 1) ? m : (m == 0 ? 0 : Q - m));
        valid = 1;
        @(negedge clk);
      end
      valid = 0;
      checks++;
      if (fail != ef) begin failures++; $display("vector %0d: fail %0d exp %0d", v, fail, ef); end
    end
    clear = 1; @(negedge clk); clear = 0;
    weight = 10'd80; check_weight = 1; @(negedge clk); check_weight = 0;
    checks++; if (fail) begin failures++; $display("weight = omega must pass"); end
    weight = 10'd81; check_weight = 1; @(negedge clk); check_weight = 0;
    checks++; if (!fail) begin failures++; $display("weight > omega must fail"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
