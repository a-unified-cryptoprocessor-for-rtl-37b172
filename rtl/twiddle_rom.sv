// Twiddle-factor ROM of the polynomial arithmetic unit.
//
// Holds zeta[k] = r^brv8(k) mod q for k = 0..255 for both primes, where r is
// a primitive 512th root of unity and brv8 reverses the eight bits of k; this
// is the table order of the Dilithium reference NTT (r = 1753 for the
// Dilithium prime). For the Saber NTT prime the root r = 5^((q-1)/512) mod q
// is this design's choice (3091885 for 2^24-2^14+1). The table is computed at
// elaboration time by a constant function, so no data file is needed.
// Two read ports, because in the last NTT stage (and first INTT stage) the
// two butterflies need different twiddles in the same clock. Reads are
// registered: data appear one clock after the address, as from a block RAM.
module twiddle_rom
  import cp_pkg::*;
#(
  parameter int unsigned SAB_X    = 24,
  parameter int unsigned SAB_Y    = 14,
  parameter longint unsigned DIL_ROOT = 1753,
  parameter longint unsigned SAB_ROOT = 3091885
) (
  input  logic              clk,
  input  logic              sel_saber,
  input  logic [7:0]        addr0,
  input  logic [7:0]        addr1,
  output logic [COEF_W-1:0] data0,
  output logic [COEF_W-1:0] data1
);
  typedef logic [COEF_W-1:0] tab_t [512];

  function automatic longint unsigned powmod(input longint unsigned base, e, q);
    longint unsigned res, bb;
    res = 1; bb = base % q;
    for (int i = 0; i < 16; i++) begin
      if (e[i]) res = (res * bb) % q;
      bb = (bb * bb) % q;
    end
    return res;
  endfunction

  function automatic tab_t make_tab();
    tab_t t;
    longint unsigned qd, qs;
    logic [7:0] k, kr;
    qd = 64'(Q_DIL);
    qs = (64'd1 << SAB_X) - (64'd1 << SAB_Y) + 1;
    for (int i = 0; i < 256; i++) begin
      k = 8'(i);
      for (int j = 0; j < 8; j++) kr[j] = k[7-j];
      t[i]       = COEF_W'(powmod(DIL_ROOT, 64'(kr), qd));
      t[256 + i] = COEF_W'(powmod(SAB_ROOT, 64'(kr), qs));
    end
    return t;
  endfunction

  localparam tab_t TAB = make_tab();

  always_ff @(posedge clk) begin
    data0 <= TAB[{sel_saber, addr0}];
    data1 <= TAB[{sel_saber, addr1}];
  end
endmodule
