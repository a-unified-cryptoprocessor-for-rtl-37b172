// Memory bus: routes the memory-set pairs to the units that own them.
//
// NM masters each present requests for the two sets of one pair (pair[m])
// and an own[m] flag. For every set the lowest-numbered owning master that
// addresses this pair wins; each master receives the read data of the pair it
// addresses. The instruction stream is responsible for giving two units that
// run in parallel different pairs; an assertion reports a violation. The
// paper draws a shared bus between the units and the memories; this
// pair-wise crossbar is this design's realisation of it.
module mem_bus
  import cp_pkg::*;
#(
  parameter int unsigned NM = 4
) (
  input  logic              clk,
  input  logic              own   [NM],
  input  logic              pair  [NM],
  input  set_req_t          mreq  [NM][2],
  output logic [WORD_W-1:0] mrdata[NM][2],
  output set_req_t          sreq  [NSETS],
  input  logic [WORD_W-1:0] srdata[NSETS]
);
  always_comb begin
    for (int s = 0; s < int'(NSETS); s++) begin
      sreq[s] = SET_REQ_IDLE;
      for (int m = NM - 1; m >= 0; m--)
        if (own[m] && (pair[m] == s[1])) sreq[s] = mreq[m][s % 2];
    end
    for (int m = 0; m < int'(NM); m++) begin
      mrdata[m][0] = srdata[{pair[m], 1'b0}];
      mrdata[m][1] = srdata[{pair[m], 1'b1}];
    end
  end

  // two owners of the same pair never access memory in the same clock
  always_ff @(posedge clk) begin
    for (int a = 0; a < int'(NM); a++)
      for (int b = a + 1; b < int'(NM); b++)
        assert (!(own[a] && own[b] && pair[a] == pair[b] &&
                  (mreq[a][0].re || mreq[a][0].we || mreq[a][1].re || mreq[a][1].we) &&
                  (mreq[b][0].re || mreq[b][0].we || mreq[b][1].re || mreq[b][1].we)))
          else $error("mem_bus: masters %0d and %0d use pair %0d together", a, b, pair[a]);
  end
endmodule
