// Unified modular reduction for primes of the form q = 2^X - 2^Y + 1.
//
// Reduces a product c < q^2 modulo either the Dilithium prime
// 2^23 - 2^13 + 1 (sel_saber = 0) or the Saber NTT prime 2^SAB_X - 2^SAB_Y + 1
// (sel_saber = 1). Following the add-shift method, the identity
// 2^X = 2^Y - 1 (mod q) is applied recursively. Writing c = H*2^X + L,
// H = H1*2^(X-Y) + H0 and H1 = H2*2^(X-Y) + H1lo gives six partial results
//     L,  H0*2^Y,  H1lo*2^Y,  H2*(2^Y - 1),  -H,  -H1
// whose sum S is congruent to c and lies in [-q, 3q) for all three primes the
// design supports (checked exhaustively over H). A bit-selection stage forms
// the partial results for both primes, six 2:1 multiplexers pick the set for
// the active prime, an adder tree sums them (synthesis turns it into a carry
// save tree), the sum is registered, and the output picks whichever of
// S+q, S, S-q, S-2q lies in [0, q).
//
// The structure (bit selection, six selected partial results, CSA tree,
// register, +q/-q/-2q correction) follows the paper's diagram; the exact
// choice of the six partial results is this design's own derivation.
// Timing: one register, so r is valid one clock after c.
module mod_red
  import cp_pkg::*;
#(
  parameter int unsigned SAB_X = 24,
  parameter int unsigned SAB_Y = 14
) (
  input  logic                  clk,
  input  logic                  sel_saber,
  input  logic [2*COEF_W-1:0]   c,      // product of two residues
  output logic [COEF_W-1:0]     r       // c mod q, one cycle later
);
  localparam int SW = COEF_W + 4;       // signed width of the partial sum

  typedef logic signed [SW-1:0] s_t;
  typedef s_t parts_t [6];

  // Partial results for one prime (the "bit-selection unit")
  function automatic parts_t partials(input logic [2*COEF_W-1:0] cc,
                                      input int unsigned x, input int unsigned y);
    logic [2*COEF_W-1:0] l, h, h0, h1, h1lo, h2, mk;
    parts_t p;
    mk   = (2*COEF_W)'((64'd1 << (x - y)) - 1);
    l    = cc & ((2*COEF_W)'((64'd1 << x) - 1));
    h    = cc >> x;
    h0   = h & mk;
    h1   = h >> (x - y);
    h1lo = h1 & mk;
    h2   = h1 >> (x - y);
    p[0] = s_t'(l);
    p[1] = s_t'(h0 << y);
    p[2] = s_t'(h1lo << y);
    p[3] = s_t'((h2 << y) - h2);
    p[4] = -s_t'(h);
    p[5] = -s_t'(h1);
    return p;
  endfunction

  parts_t p_dil, p_sab, p_sel;
  s_t     sum_c, sum_q;
  s_t     q_c,  q_q;

  always_comb begin
    p_dil = partials(c, DIL_X, DIL_Y);
    p_sab = partials(c, SAB_X, SAB_Y);
    for (int i = 0; i < 6; i++) p_sel[i] = sel_saber ? p_sab[i] : p_dil[i];
    sum_c = '0;
    for (int i = 0; i < 6; i++) sum_c = sum_c + p_sel[i];
    q_c = sel_saber ? s_t'((64'd1 << SAB_X) - (64'd1 << SAB_Y) + 1) : s_t'(Q_DIL);
  end

  always_ff @(posedge clk) begin
    sum_q <= sum_c;
    q_q   <= q_c;
  end

  // Final correction into [0, q)
  s_t c_pq, c_mq, c_m2q;
  always_comb begin
    c_pq  = sum_q + q_q;
    c_mq  = sum_q - q_q;
    c_m2q = sum_q - (q_q <<< 1);
    if (sum_q < 0)               r = COEF_W'(c_pq);
    else if (sum_q < q_q)        r = COEF_W'(sum_q);
    else if (c_mq < q_q)         r = COEF_W'(c_mq);
    else                         r = COEF_W'(c_m2q);
  end
endmodule
