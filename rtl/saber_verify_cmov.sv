// Saber Verify and CMOV.
//
// Verify compares two byte strings word by word in constant time and keeps a
// sticky "differ" flag (the decapsulation re-encryption check). CMOV then
// selects, again in constant time, between the decrypted key candidate
// (a, kept when the ciphertexts matched) and the pseudo-random fallback (b):
// out = differ ? b : a, evaluated for every word whatever the flag. COPY is
// the same path with the selection forced to a. The paper names the three
// instructions and the flag register between them; the word-serial form is
// this design's; it handles LANES words per clock (one per memory set of a
// pair) and shares one flag between them. Interface: clear zeroes differ;
// valid[l] with cmp = 1 adds a comparison for lane l; out is combinational.
module saber_verify_cmov
  import cp_pkg::*;
#(
  parameter int unsigned LANES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              valid [LANES],
  input  logic              cmp,
  input  logic              copy,
  input  logic [WORD_W-1:0] a   [LANES],
  input  logic [WORD_W-1:0] b   [LANES],
  output logic [WORD_W-1:0] out [LANES],
  output logic              differ
);
  logic ne;
  always_comb begin
    ne = 1'b0;
    for (int l = 0; l < int'(LANES); l++) ne = ne | (valid[l] && (a[l] != b[l]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             differ <= 1'b0;
    else if (clear)         differ <= 1'b0;
    else if (cmp && ne)     differ <= 1'b1;
  end
  logic [WORD_W-1:0] m;
  assign m = {WORD_W{differ & ~copy}};
  always_comb for (int l = 0; l < int'(LANES); l++) out[l] = (a[l] & ~m) | (b[l] & m);
endmodule
