// Saber rounding datapaths: AddRound, AddPack and UnPack on one coefficient.
//
// The polynomial multiplier returns each coefficient as a residue modulo the
// NTT prime q'. Because the true integer result is small (|c| < q'/2), it is
// first lifted to a signed value and reduced to the Saber moduli simply by
// keeping its low bits (q = 2^13, p = 2^10). Then, with eps_q = 13,
// eps_p = 10 and eps_T = 3, 4, 6 for LightSaber, Saber, FireSaber:
//   AddRound:  b  = ((x + h1) mod q) >> (eps_q - eps_p)           h1 = 4
//   AddPack:   cm = ((v + h1 - 2^(eps_p-1) m) mod p) >> (eps_p - eps_T)
//   UnPack:    m' = ((v + h2 - 2^(eps_p-eps_T) cm) mod p) >> (eps_p - 1)
//              h2 = 2^(eps_p-2) - 2^(eps_p-eps_T-1) + 2^(eps_q-eps_p-1)
// These are the formulas of the Saber specification; the paper lists the
// three operations. The centred lift of the multiplier output is this
// design's way of joining the prime-modulus NTT to Saber's power-of-two
// moduli. Purely combinational.
module saber_round
  import cp_pkg::*;
(
  input  logic [1:0]        op,       // 0 AddRound, 1 AddPack, 2 UnPack
  input  logic [COEF_W-1:0] x,        // multiplier output, residue mod qp
  input  logic [COEF_W-1:0] qp,       // NTT prime in use
  input  logic [2:0]        eps_t,    // 3, 4 or 6
  input  logic [9:0]        y,        // AddPack: message bit m; UnPack: cm
  output logic [12:0]       r
);
  logic [12:0] xl;   // x lifted and reduced mod 2^13 (low bits are mod 2^10)
  logic [9:0]  h2, t;
  always_comb begin
    xl = (x > (qp >> 1)) ? 13'(x - qp) : 13'(x);
    h2 = 10'(10'd256 - (10'd1 << (9 - eps_t)) + 10'd4);
    t  = '0;
    unique case (op)
      2'd0:    r = 13'((13'(xl + 13'd4)) >> 3);
      2'd1: begin
        t = 10'(xl) + 10'd4 - (y[0] ? 10'd512 : 10'd0);
        r = 13'(t >> (4'd10 - 4'(eps_t)));
      end
      default: begin
        t = 10'(xl) + h2 - 10'(y << (4'd10 - 4'(eps_t)));
        r = 13'(t >> 9);
      end
    endcase
  end
endmodule
