// Self-checking test of Dilithium UseHint.
// Random r is split here with the specification's Decompose; r1 and r0 (as a
// residue mod q) and a random hint go to the unit; the result is compared
// with UseHint of the specification: with h = 1, (r1 + 1) mod m if r0 > 0,
// else (r1 - 1) mod m, with m = 44 (gamma2 = (q-1)/88) or 16.
module tb_dil_usehint;
  import cp_pkg::*;
  logic g88, h;
  logic [9:0] r1, r1h;
  logic [COEF_W-1:0] r0;
  int checks = 0, failures = 0;
  localparam longint Q = 8380417;

  dil_usehint dut (.*);

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      longint rr, a, e0, e1, m, ex;
      g88 = i[0];
      a = g88 ? 190464 : 523776;
      m = g88 ? 44 : 16;
      rr = {$urandom} % Q;
      if (i < 8) rr = (i < 4) ? Q - 1 - i : i;
      e0 = rr % a; if (e0 > a / 2) e0 -= a;
      if (rr - e0 == Q - 1) begin e1 = 0; e0 = e0 - 1; end else e1 = (rr - e0) / a;
      h  = (i % 5) != 0;
      r1 = 10'(e1); r0 = COEF_W'((e0 < 0) ? e0 + Q : e0);
      ex = !h ? e1 : (e0 > 0) ? (e1 + 1) % m : (e1 - 1 + m) % m;
      #1;
      checks++;
      if (longint'(r1h) != ex) begin failures++; if (failures < 10) $display("r %0d h %0d: %0d exp %0d", rr, h, r1h, ex); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
