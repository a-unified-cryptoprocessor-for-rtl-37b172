// Data memory: four independent sets of 64-bit words.
//
// Each set has its own read and write port, so up to four agents can move
// data at once; the NTT unit occupies the two sets of one pair while the
// SHA-SHAKE unit (or a scheme-specific unit) works on the other pair. A
// polynomial lives in one pair: word k (coefficients 2k and 2k+1) at set
// 2*pair + k[6], address base + k[5:0]. Byte strings (seeds, hashes, packed
// data) live as little-endian words in the even set of a pair.
// The split into four sets, 64-bit words and two coefficients per word are
// the paper's. DEPTH = 2560 words per set is this design's reading of "five
// 36-kbit block RAMs per set" (five 512 x 72 RAMs used 64 bits wide).
// Timing: read data one clock after the request.
module data_memory
  import cp_pkg::*;
#(
  parameter int unsigned DEPTH = 2560
) (
  input  logic              clk,
  input  set_req_t          req   [NSETS],
  output logic [WORD_W-1:0] rdata [NSETS]
);
  for (genvar s = 0; s < NSETS; s++) begin : g_set
    sdp_ram #(.WIDTH(WORD_W), .DEPTH(DEPTH), .AW(SET_AW)) u_set (
      .clk,
      .re(req[s].re), .raddr(req[s].raddr), .rdata(rdata[s]),
      .we(req[s].we), .waddr(req[s].waddr), .wdata(req[s].wdata)
    );
  end
endmodule
