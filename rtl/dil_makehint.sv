// Dilithium MakeHint equality checker with hint-weight counter and
// Counter_ref.
//
// MakeHint sets a hint bit where two high parts differ,
//   h = (HighBits(r) != HighBits(r + z)).
// As in the paper, the high parts come from the shared Decompose datapath;
// this block is only the comparison and the running count of ones (the
// hint's Hamming weight, which the signature check compares with omega).
// Counter_ref zeroes the count when the loop-exit conditions have failed
// (loop_fail = 1), so that a rejected iteration leaves no stale weight.
// Interface: on each clock with valid, compares r1a and r1b, returns h
// combinationally and adds it to count; clear zeroes count.
module dil_makehint (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       counter_ref,
  input  logic       loop_fail,
  input  logic       valid,
  input  logic [9:0] r1a,
  input  logic [9:0] r1b,
  output logic       h,
  output logic [9:0] count
);
  assign h = (r1a != r1b);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         count <= '0;
    else if (clear)                     count <= '0;
    else if (counter_ref && loop_fail)  count <= '0;
    else if (valid && h)                count <= count + 10'd1;
  end
endmodule
