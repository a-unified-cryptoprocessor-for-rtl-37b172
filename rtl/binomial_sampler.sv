// Saber centred binomial sampler.
//
// Turns mu pseudo-random bits into one secret coefficient
//   s = HW(bits[mu/2-1:0]) - HW(bits[mu-1:mu/2]),
// with mu = 10, 8, 6 for LightSaber, Saber and FireSaber, the coefficient
// range [-mu/2, mu/2] the paper states. The result is returned as a residue
// modulo the NTT prime in use (q - |s| for negative s), ready for the
// polynomial multiplier. Bits are taken least-significant first, the order
// of the Saber reference code. Purely combinational: the SHA-SHAKE unit feeds
// it one mu-bit chunk of its output buffer per clock.
module binomial_sampler
  import cp_pkg::*;
(
  input  logic [9:0]        bits,
  input  logic [3:0]        mu,        // 6, 8 or 10
  input  logic [COEF_W-1:0] q,         // modulus of the result
  output logic [COEF_W-1:0] coef,
  output logic signed [3:0] value      // the signed sample, for inspection
);
  logic [2:0] hw_a, hw_b;
  always_comb begin
    hw_a = '0; hw_b = '0;
    for (int i = 0; i < 5; i++) begin
      if (i < (int'(mu) >> 1)) begin
        hw_a = hw_a + 3'(bits[i]);
        hw_b = hw_b + 3'(bits[i + (int'(mu) >> 1)]);
      end
    end
    value = 4'(signed'({1'b0, hw_a})) - 4'(signed'({1'b0, hw_b}));
    coef  = (value < 0) ? (q - COEF_W'(-value)) : COEF_W'(value);
  end
endmodule
