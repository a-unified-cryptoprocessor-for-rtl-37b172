// Keccak-f[1600] permutation core, one round per clock.
//
// The 1600-bit state is 25 lanes of 64 bits, lane (x, y) at bits
// [64*(x+5y) +: 64], bytes little-endian, as in FIPS 202. Load a state with
// load = 1 (state_in is copied), pulse start to run the 24 rounds; the state
// is updated once per clock (rounds in the 24 clocks after the start clock)
// and done is high after the last round, 25 clocks after start is sampled. The paper takes its core from
// the Keccak team's high-speed design and only names it; this is a plain
// round-per-clock implementation of the standard permutation.
module keccak_core (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [1599:0] state_in,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [1599:0] state
);
  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};
  // rotation offsets r[x][y], flattened as x + 5y
  localparam int ROT [25] = '{ 0,  1, 62, 28, 27,
                              36, 44,  6, 55, 20,
                               3, 10, 43, 25, 39,
                              41, 45, 15, 21,  8,
                              18,  2, 61, 56, 14};

  function automatic logic [63:0] rol(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic logic [1599:0] round_f(input logic [1599:0] s, input logic [63:0] rc);
    logic [63:0] a [25], b [25], c [5], d [5];
    logic [1599:0] o;
    for (int i = 0; i < 25; i++) a[i] = s[64*i +: 64];
    // theta
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rol(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    // rho and pi: B[y][2x+3y] = rot(A[x][y], r[x][y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rol(a[x + 5*y], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    a[0] = a[0] ^ rc;
    for (int i = 0; i < 25; i++) o[64*i +: 64] = a[i];
    return o;
  endfunction

  logic [4:0] rnd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0; rnd <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (load) state <= state_in;
      else if (busy) begin
        state <= round_f(state, RC[rnd]);
        rnd   <= rnd + 5'd1;
        if (rnd == 5'd23) begin busy <= 1'b0; done <= 1'b1; end
      end
      if (start && !busy) begin busy <= 1'b1; rnd <= '0; end
    end
  end
endmodule
