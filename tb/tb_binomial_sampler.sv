// Self-checking test of the centred binomial sampler.
// For mu = 6, 8 and 10 it applies every bit pattern of mu bits (upper bits
// random) and compares the signed value with HW(low mu/2 bits) - HW(next
// mu/2 bits), counted bit by bit here, and the coefficient with that value
// reduced into [0, q) for both primes.
module tb_binomial_sampler;
  import cp_pkg::*;
  logic [9:0] bits;
  logic [3:0] mu;
  logic [COEF_W-1:0] q, coef;
  logic signed [3:0] value;
  int checks = 0, failures = 0;

  binomial_sampler dut (.*);

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int m = 6; m <= 10; m += 2)
      for (int s = 0; s < 2; s++)
        for (int p = 0; p < (1 << m); p++) begin
          int ha, hb, v;
          longint qq;
          mu = 4'(m);
          qq = s ? 16760833 : 8380417;
          q = COEF_W'(qq);
          bits = 10'(p) | (10'($urandom) & ~10'((1 << m) - 1));
          ha = 0; hb = 0;
          for (int i = 0; i < m / 2; i++) begin ha += int'(bits[i]); hb += int'(bits[m/2 + i]); end
          v = ha - hb;
          #1;
          checks += 2;
          if (int'(value) != v) begin failures++; $display("mu %0d bits %b value %0d exp %0d", m, bits, value, v); end
          if (longint'(coef) != ((v < 0) ? qq + v : v)) begin failures++; $display("coef %0d", coef); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
