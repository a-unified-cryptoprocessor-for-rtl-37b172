// Dilithium Decompose and Power2Round on one coefficient.
//
// Power2Round (p2r = 1): r = r1*2^13 + r0 with r0 in (-2^12, 2^12].
// Decompose   (p2r = 0): r = r1*alpha + r0 with alpha = 2*gamma2,
//   r0 in (-gamma2, gamma2], and the corner case r - r0 = q - 1 mapped to
//   r1 = 0, r0 = r0 - 1; gamma2 = (q-1)/88 (Dilithium-2, g88 = 1) or
//   (q-1)/32 (Dilithium-3 and -5).
// r1 is found without a divider, by the multiply-and-shift of the Dilithium
// reference code; r0 = r - r1*alpha is returned as a residue mod q. The
// paper states these functions follow the specification and take 128 clocks
// per polynomial (two coefficients per clock) inside the streaming unit.
// Purely combinational.
module dil_decompose
  import cp_pkg::*;
(
  input  logic              p2r,
  input  logic              g88,
  input  logic [22:0]       r,
  output logic [9:0]        r1,       // 10 bits for Power2Round, 6 for Decompose
  output logic [COEF_W-1:0] r0       // residue mod q
);
  localparam logic [23:0] Q = 24'd8380417;
  always_comb begin
    logic [16:0] t;
    logic [40:0] m;
    logic signed [24:0] s0;
    logic [19:0] alpha;
    t = '0; m = '0; alpha = '0;
    if (p2r) begin
      r1 = 10'((24'(r) + 24'd4095) >> 13);
      s0 = 25'(signed'({2'b0, r})) - 25'(signed'({2'b0, r1, 13'd0}));
    end else begin
      t = 17'((24'(r) + 24'd127) >> 7);
      if (g88) begin
        m  = 41'(t) * 41'd11275 + 41'(1 << 23);
        r1 = 10'(m >> 24);
        if (r1 > 10'd43) r1 = 10'd0;
        alpha = 20'd190464;
      end else begin
        m  = 41'(t) * 41'd1025 + 41'(1 << 21);
        r1 = 10'(m >> 22) & 10'd15;
        alpha = 20'd523776;
      end
      s0 = 25'(signed'({2'b0, r})) - 25'(signed'({5'd0, 26'(r1) * 26'(alpha)}));
      if (s0 > 25'sd4190208) s0 = s0 - 25'(signed'({1'b0, Q}));   // centre: above (q-1)/2
    end
    r0 = (s0 < 0) ? COEF_W'(25'(signed'({1'b0, Q})) + s0) : COEF_W'(s0);
  end
endmodule
