// Dilithium UseHint on one coefficient.
//
// Given the Decompose result (r1, r0) of a coefficient and its hint bit h,
// returns the corrected high part:
//   h = 0:            r1
//   h = 1, r0 > 0:    (r1 + 1) mod m
//   h = 1, r0 <= 0:   (r1 - 1) mod m
// with m = (q-1)/alpha = 44 (gamma2 = (q-1)/88) or 16 (gamma2 = (q-1)/32).
// r0 arrives as a residue mod q, so "r0 > 0" means 0 < r0 <= (q-1)/2. The
// paper reuses the Decompose datapath and implements only this correction
// in UseHint; so does this design. Purely combinational.
module dil_usehint
  import cp_pkg::*;
(
  input  logic              g88,
  input  logic              h,
  input  logic [9:0]        r1,
  input  logic [COEF_W-1:0] r0,
  output logic [9:0]        r1h
);
  logic [9:0] m;
  logic       pos;
  always_comb begin
    m   = g88 ? 10'd44 : 10'd16;
    pos = (r0 != '0) && (r0 <= COEF_W'(4190208));
    if (!h)       r1h = r1;
    else if (pos) r1h = (r1 == m - 10'd1) ? 10'd0 : r1 + 10'd1;
    else          r1h = (r1 == 10'd0) ? m - 10'd1 : r1 - 10'd1;
  end
endmodule
