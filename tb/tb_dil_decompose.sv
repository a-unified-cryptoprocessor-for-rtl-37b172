// Self-checking test of Dilithium Decompose and Power2Round.
// Random r in [0, q) plus the edge values 0, q-1 and multiples of 2*gamma2
// around them. The reference follows the specification's definition (not the
// multiply-shift shortcut of the design): r0 = r mod+- 2*gamma2, and if
// r - r0 = q - 1 then r1 = 0, r0 = r0 - 1, else r1 = (r - r0) / (2*gamma2);
// Power2Round: r0 = r mod+- 2^13, r1 = (r - r0) / 2^13. r0 is compared as a
// residue mod q.
module tb_dil_decompose;
  import cp_pkg::*;
  logic p2r, g88;
  logic [22:0] r;
  logic [9:0] r1;
  logic [COEF_W-1:0] r0;
  int checks = 0, failures = 0;
  localparam longint Q = 8380417;

  dil_decompose dut (.*);

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint cmod(input longint a, input longint m);
    longint t;
    t = a % m;
    if (t > m / 2) t -= m;
    return t;
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      longint rr, a, e0, e1;
      p2r = (i % 3) == 0;
      g88 = (i % 3) == 1;
      rr = {$urandom} % Q;
      if (i < 30) rr = (i < 3) ? 0 : (i < 6) ? Q - 1 : (Q - 1 - i * 7 + 90) % Q;
      if (i >= 30 && i < 300) rr = ((g88 ? 190464 : 523776) * (i % 48) + ($urandom_range(0, 2) - 1) + Q) % Q;
      r = 23'(rr);
      if (p2r) begin
        e0 = cmod(rr, 8192); e1 = (rr - e0) / 8192;
      end else begin
        a = g88 ? 190464 : 523776;
        e0 = cmod(rr, a);
        if (rr - e0 == Q - 1) begin e1 = 0; e0 = e0 - 1; end
        else e1 = (rr - e0) / a;
      end
      #1;
      checks += 2;
      if (longint'(r1) != e1) begin failures++; if (failures < 10) $display("p2r %0d g88 %0d r %0d r1 %0d exp %0d", p2r, g88, rr, r1, e1); end
      if (longint'(r0) != ((e0 < 0) ? e0 + Q : e0)) begin failures++; if (failures < 10) $display("p2r %0d g88 %0d r %0d r0 %0d exp %0d", p2r, g88, rr, r0, e0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
