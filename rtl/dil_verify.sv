// Dilithium signature-loop check (Verify (Dilithium)).
//
// Streams coefficients (residues mod q) and raises a sticky fail flag when
// any centred coefficient has |c| >= bound. The signing loop applies it with
// bound = gamma1 - beta to z and gamma2 - beta to r0, and compares the hint
// weight with omega through the weight port. The paper says the instruction
// checks the loop conditions and, on failure, sends the instruction pointer
// back to the start of the loop; the branch itself is taken by the program
// controller from fail. Interface: clear zeroes fail; each clock with valid
// checks c; check_weight compares weight > omega once.
module dil_verify
  import cp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              valid,
  input  logic [COEF_W-1:0] c,
  input  logic [22:0]       bound,
  input  logic              check_weight,
  input  logic [9:0]        weight,
  input  logic [9:0]        omega,
  output logic              fail
);
  logic [22:0] mag;
  always_comb mag = (c > COEF_W'(4190208)) ? 23'(COEF_W'(Q_DIL) - c) : 23'(c);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     fail <= 1'b0;
    else if (clear) fail <= 1'b0;
    else begin
      if (valid && mag >= bound)              fail <= 1'b1;
      if (check_weight && weight > omega)     fail <= 1'b1;
    end
  end
endmodule
