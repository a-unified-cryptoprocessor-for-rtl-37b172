// Unified butterfly unit (BFU) shared by Dilithium and Saber.
//
// One BFU accepts a coefficient pair (a = x[j], b = x[j+t]) and a twiddle
// factor w every clock and returns two results LAT = MUL_LAT + 3 clocks later.
// All arithmetic is unsigned modulo the active prime (sel_saber picks the
// Saber NTT prime instead of the Dilithium prime):
//   BF_CT  (NTT, Cooley-Tukey)      o0 = a + w*b        o1 = a - w*b
//   BF_GS  (INTT, Gentleman-Sande)  o0 = (a + b)/2      o1 = w*(a - b)/2
//   BF_MUL (coefficient multiply)   o0 = o1 = w*b
//   BF_ADD / BF_SUB                 o0 = o1 = a + b / a - b
// The halving of both GS outputs folds the final 1/n scaling of the inverse
// NTT into its eight stages, using x/2 = (x >> 1) + (x & 1)*(q+1)/2.
//
// Pipeline, as in the paper's diagram: the a-b subtractor and the operand
// multiplexer feed a register, w is registered once, the integer multiplier
// is followed by MUL_LAT registers, the reduction unit adds one register, so
// a and b travel through a 7-clock delay line (MUL_LAT = 5) to meet the
// reduced product; the output adders are registered and the halving is the
// last, combinational step. The multiplier depth of 5 is this design's
// choice made to match the printed 7-clock delay of a and b; the BF_MUL,
// BF_ADD and BF_SUB modes are how this design lets the same datapath serve
// the coefficient-wise instructions.
module butterfly
  import cp_pkg::*;
#(
  parameter int unsigned MUL_LAT = 5,
  parameter int unsigned SAB_X   = 24,
  parameter int unsigned SAB_Y   = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  bf_op_e            op,
  input  logic              sel_saber,
  input  logic [COEF_W-1:0] a,
  input  logic [COEF_W-1:0] b,
  input  logic [COEF_W-1:0] w,
  output logic              out_valid,
  output logic [COEF_W-1:0] o0,
  output logic [COEF_W-1:0] o1
);
  localparam int unsigned DLY = MUL_LAT + 2;   // a/b delay to the reduced product
  localparam int unsigned LAT = MUL_LAT + 3;

  function automatic logic [COEF_W-1:0] madd(input logic [COEF_W-1:0] x, y, q);
    logic [COEF_W:0] s;
    s = {1'b0, x} + {1'b0, y};
    return (s >= {1'b0, q}) ? COEF_W'(s - {1'b0, q}) : COEF_W'(s);
  endfunction
  function automatic logic [COEF_W-1:0] msub(input logic [COEF_W-1:0] x, y, q);
    return (x >= y) ? (x - y) : (x + q - y);
  endfunction
  function automatic logic [COEF_W-1:0] half(input logic [COEF_W-1:0] x, q);
    return (x >> 1) + (x[0] ? ((q + 1) >> 1) : '0);
  endfunction

  logic [COEF_W-1:0] q_in;
  assign q_in = sel_saber ? COEF_W'((64'd1 << SAB_X) - (64'd1 << SAB_Y) + 1) : Q_DIL;

  // ---- stage 1: operand select and twiddle register
  logic [COEF_W-1:0] mb_q, w_q;
  always_ff @(posedge clk) begin
    mb_q <= (op == BF_GS) ? msub(a, b, q_in) : b;
    w_q  <= w;
  end

  // ---- multiplier with MUL_LAT output registers
  logic [2*COEF_W-1:0] prod [MUL_LAT];
  always_ff @(posedge clk) begin
    prod[0] <= (2*COEF_W)'(mb_q) * (2*COEF_W)'(w_q);
    for (int i = 1; i < MUL_LAT; i++) prod[i] <= prod[i-1];
  end

  // ---- control and operand delay lines (DLY clocks to the reduced product)
  logic [COEF_W-1:0] a_d [DLY];
  logic [COEF_W-1:0] b_d [DLY];
  logic [COEF_W-1:0] q_d [DLY];
  bf_op_e            op_d [DLY];
  logic              sel_d [DLY];
  always_ff @(posedge clk) begin
    a_d[0] <= a;  b_d[0] <= b;  q_d[0] <= q_in;  op_d[0] <= op;  sel_d[0] <= sel_saber;
    for (int i = 1; i < DLY; i++) begin
      a_d[i] <= a_d[i-1]; b_d[i] <= b_d[i-1]; q_d[i] <= q_d[i-1];
      op_d[i] <= op_d[i-1]; sel_d[i] <= sel_d[i-1];
    end
  end

  logic [LAT-1:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];

  // ---- modular reduction (one register); its select travels with the product
  logic [COEF_W-1:0] m;
  mod_red #(.SAB_X(SAB_X), .SAB_Y(SAB_Y)) u_red (
    .clk(clk), .sel_saber(sel_d[DLY-2]), .c(prod[MUL_LAT-1]), .r(m)
  );

  // ---- output adders, register, halving
  logic [COEF_W-1:0] r0, r1, r0_q, r1_q, qo_q;
  bf_op_e            op_o;
  always_comb begin
    logic [COEF_W-1:0] aa, bb, qq;
    aa = a_d[DLY-1]; bb = b_d[DLY-1]; qq = q_d[DLY-1];
    unique case (op_d[DLY-1])
      BF_CT:   begin r0 = madd(aa, m, qq);  r1 = msub(aa, m, qq); end
      BF_GS:   begin r0 = madd(aa, bb, qq); r1 = m;               end
      BF_MUL:  begin r0 = m;                r1 = m;               end
      BF_ADD:  begin r0 = madd(aa, bb, qq); r1 = r0;              end
      default: begin r0 = msub(aa, bb, qq); r1 = r0;              end
    endcase
  end
  always_ff @(posedge clk) begin
    r0_q <= r0; r1_q <= r1; qo_q <= q_d[DLY-1]; op_o <= op_d[DLY-1];
  end
  assign o0 = (op_o == BF_GS) ? half(r0_q, qo_q) : r0_q;
  assign o1 = (op_o == BF_GS) ? half(r1_q, qo_q) : r1_q;
endmodule
