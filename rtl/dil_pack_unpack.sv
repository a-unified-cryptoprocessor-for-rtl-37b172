// Unified bit packer / unpacker for polynomials (Dilithium pack/unpack,
// also used for Saber BS2POLVEC).
//
// What it does: converts between a polynomial and its byte string, in
// which coefficient i takes bits [W*i, W*i + W) (least significant bit
// first, 64-bit words little-endian). W can be 1..20. Optionally a field
// holds 2^S - c instead of c. That is the form Dilithium uses for s1/s2
// (eta - c), t0 (2^12 - c) and z (gamma1 - c); eta, 2^12 and gamma1 are
// all powers of two.
//   unpack: 64-bit words are requested one at a time (req, answered by
//           w_valid at a later clock) into a 128-bit bit buffer. Whenever
//           the buffer holds 2W bits, one output beat carries coefficients
//           2k and 2k+1 of word k, as values mod q (q = 8380417) when the
//           offset is on, or as the raw W-bit field when it is off. done
//           pulses after word 127.
//   pack:   each input beat carries word k (coefficients 2k, 2k+1, values
//           mod q). Both W-bit fields are appended to the buffer, and
//           every full 64 bits leave as the next output word. 256*W is a
//           multiple of 64, so no bits are left at the end; done pulses
//           with the last word.
// Interface: start takes pack, W, the offset enable and S; out_valid /
// out_idx / out_word give the polynomial word k (unpack) or the packed
// word index (pack).
// Timing: one output per clock while the buffer has data; unpacking waits
// for the memory latency when the buffer runs low.
// Paper: "we combine all the different packing and unpacking methods
// required by Dilithium to make a unified pack/unpack unit". The field
// formats are the Dilithium and Saber specifications'. The power-of-two
// offset, the bit buffer and the interface are this design's.
module dil_pack_unpack
  import cp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              pack,
  input  logic [4:0]        width,     // W, 1..20
  input  logic              off_en,
  input  logic [4:0]        off_sh,    // S
  // unpack input stream
  output logic              req,
  input  logic              w_valid,
  input  logic [WORD_W-1:0] w_data,
  // pack input beats
  input  logic              in_valid,
  input  logic [WORD_W-1:0] in_word,
  output logic              busy,
  output logic              done,
  output logic              out_valid,
  output logic [6:0]        out_idx,
  output logic [WORD_W-1:0] out_word
);
  logic         run, pk, oe, pend;
  logic [4:0]   w, sh;
  logic [127:0] acc;
  logic [7:0]   nb;            // valid bits in acc
  logic [7:0]   k;             // unpack: next polynomial word
  logic [6:0]   pidx;          // pack: next packed word

  logic [7:0]  w2;
  logic [19:0] mask;
  logic [24:0] off;
  assign w2   = {2'b00, w, 1'b0};
  assign mask = 20'((32'd1 << w) - 32'd1);
  assign off  = 25'(32'd1 << sh);

  // field -> coefficient mod q
  function automatic logic [HALF_W-1:0] to_coef(input logic [19:0] f);
    logic [25:0] v;
    if (!oe) return HALF_W'(f);
    v = {1'b0, off} - {6'd0, f};
    if (v[25]) v = v + 26'(Q_DIL);
    return HALF_W'(v);
  endfunction
  // coefficient mod q -> field
  function automatic logic [19:0] to_field(input logic [HALF_W-1:0] c);
    logic [25:0] v;
    if (!oe) return 20'(c) & mask;
    v = {1'b0, off} - 26'(c);
    if (c > HALF_W'(Q_DIL >> 1)) v = v + 26'(Q_DIL);   // c stands for c - q
    return 20'(v) & mask;
  endfunction

  // unpack datapath
  logic         emit;
  logic [127:0] a1;
  logic [7:0]   n1;
  always_comb begin
    emit = run && !pk && (nb >= w2) && (k < 8'd128);
    a1   = emit ? acc >> w2 : acc;
    n1   = emit ? nb - w2 : nb;
  end
  assign req  = run && !pk && !pend && (n1 < w2) && (k < 8'd128) && !(emit && k == 8'd127);
  assign busy = run;

  // pack datapath
  logic [127:0] pext;
  logic [7:0]   pn;
  always_comb begin
    logic [39:0] pair;
    pair = 40'(to_field(in_word[0 +: HALF_W])) | (40'(to_field(in_word[HALF_W +: HALF_W])) << w);
    pext = acc | (128'(pair) << nb);
    pn   = nb + w2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; pk <= 1'b0; oe <= 1'b0; pend <= 1'b0; w <= 5'd1; sh <= '0;
      acc <= '0; nb <= '0; k <= '0; pidx <= '0; done <= 1'b0;
      out_valid <= 1'b0; out_idx <= '0; out_word <= '0;
    end else begin
      done <= 1'b0; out_valid <= 1'b0;
      if (start) begin
        run <= 1'b1; pk <= pack; oe <= off_en; w <= width; sh <= off_sh;
        pend <= 1'b0; acc <= '0; nb <= '0; k <= '0; pidx <= '0;
      end else if (run && !pk) begin
        acc <= a1; nb <= n1;
        if (req) pend <= 1'b1;
        if (w_valid) begin
          acc  <= a1 | (128'(w_data) << n1);
          nb   <= n1 + 8'd64;
          pend <= 1'b0;
        end
        if (emit) begin
          out_valid <= 1'b1; out_idx <= k[6:0];
          out_word  <= {to_coef(20'(acc >> w) & mask), to_coef(20'(acc) & mask)};
          k <= k + 8'd1;
          if (k == 8'd127) begin run <= 1'b0; done <= 1'b1; end
        end
      end else if (run && pk && in_valid) begin
        if (pn >= 8'd64) begin
          out_valid <= 1'b1; out_idx <= pidx; out_word <= pext[63:0];
          acc <= pext >> 64; nb <= pn - 8'd64; pidx <= pidx + 7'd1;
          if (pidx == 7'(4 * w - 1)) begin run <= 1'b0; done <= 1'b1; end
        end else begin
          acc <= pext; nb <= pn;
        end
      end
    end
  end
endmodule
