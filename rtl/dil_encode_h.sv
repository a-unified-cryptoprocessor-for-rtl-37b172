// Dilithium Encode_H: packs the high part w1 of a polynomial into the byte
// string that is hashed with SHAKE-256 to get the challenge seed.
//
// How it works: each input beat carries two consecutive coefficients
// (coefficient 2k and 2k+1). Each is 4 bits wide when gamma2 = (q-1)/32
// (w1 < 16) or 6 bits wide when gamma2 = (q-1)/88 (w1 < 44). The bits are
// appended least significant first to an accumulator. Each time 64 bits
// are collected they leave as one little-endian 64-bit word, the layout
// the Keccak wrapper absorbs. 256 coefficients give exactly 16 words
// (4-bit) or 24 words (6-bit), so nothing is left over at the end.
// Interface: start clears the accumulator and takes g88; in_valid/in_c
// feed coefficient pairs in order; out_valid/out_idx/out_word give each
// finished word, one clock after the beat that completed it.
// Timing: one coefficient pair per clock, no stalls.
// Paper: "Instruction 'Encode_H' provided in Set-2 is used to pack the
// polynomials which are then fed to SHAKE-256 for hashing." The bit order
// follows the Dilithium specification's w1 encoding. The accumulator
// structure and the interface are this design's.
module dil_encode_h
  import cp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              g88,
  input  logic              in_valid,
  input  logic [5:0]        in_c [2],
  output logic              out_valid,
  output logic [4:0]        out_idx,
  output logic [WORD_W-1:0] out_word
);
  logic        w6;
  logic [75:0] acc;          // < 64 bits held + up to 12 new ones
  logic [6:0]  nbits;
  logic [75:0] ext;
  logic [6:0]  nnew;

  always_comb begin
    logic [11:0] pair;
    pair = w6 ? {in_c[1], in_c[0]} : {4'b0000, in_c[1][3:0], in_c[0][3:0]};
    nnew = nbits + (w6 ? 7'd12 : 7'd8);
    ext  = acc | (76'(pair) << nbits);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w6 <= 1'b0; acc <= '0; nbits <= '0; out_valid <= 1'b0; out_idx <= '0; out_word <= '0;
    end else begin
      out_valid <= 1'b0;
      if (out_valid) out_idx <= out_idx + 5'd1;
      if (start) begin
        w6 <= g88; acc <= '0; nbits <= '0; out_idx <= '0;
      end else if (in_valid) begin
        if (nnew >= 7'd64) begin
          out_valid <= 1'b1; out_word <= ext[63:0];
          acc <= ext >> 64; nbits <= nnew - 7'd64;
        end else begin
          acc <= ext; nbits <= nnew;
        end
      end
    end
  end
endmodule
