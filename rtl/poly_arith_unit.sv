// Polynomial arithmetic unit: NTT, inverse NTT and coefficient-wise
// multiply / add / subtract for both Dilithium and Saber.
//
// Two unified butterfly units share one twiddle ROM and are driven either by
// the NTT/INTT controller or by the coefficient-wise operation controller;
// a multiplexer in front of each butterfly picks the active controller and
// the active controller's write requests go to the two memory sets of the
// pair the instruction works on. This is the organisation of the paper's
// polynomial-arithmetic-unit diagram (two controllers, twiddle ROM, two
// BFUs, two RAMs). sel_saber selects the Saber NTT prime for the whole
// instruction.
// Interface: start (one clock) with op, sel_saber and the base addresses
// (src_base is operand A and the NTT input, b_base operand B, dst_base the
// result); done pulses when the result is written. An NTT/INTT takes
// 8*(64+LAT+3)+1 clocks from start to done, a coefficient-wise operation
// 128+LAT+3.
module poly_arith_unit
  import cp_pkg::*;
#(
  parameter int unsigned SAB_X   = 24,
  parameter int unsigned SAB_Y   = 14,
  parameter longint unsigned SAB_ROOT = 3091885,
  parameter int unsigned MUL_LAT = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pa_op_e            op,
  input  logic              sel_saber,
  input  logic [SET_AW-1:0] src_base,
  input  logic [SET_AW-1:0] b_base,
  input  logic [SET_AW-1:0] dst_base,
  output logic              busy,
  output logic              done,
  output logic              rd_en,
  output logic [SET_AW-1:0] rd_addr,
  input  logic [WORD_W-1:0] rdata [2],
  output logic              wr_en   [2],
  output logic [SET_AW-1:0] wr_addr [2],
  output logic [WORD_W-1:0] wr_data [2]
);
  localparam int unsigned LAT = MUL_LAT + 3;

  logic is_ntt, ntt_start, pop_start, sel_q;
  assign is_ntt    = (op == PA_NTT) || (op == PA_INTT);
  assign ntt_start = start && is_ntt;
  assign pop_start = start && !is_ntt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sel_q <= 1'b0;
    else if (start) sel_q <= sel_saber;
  end

  bf_op_e pop_op;
  always_comb begin
    unique case (op)
      PA_MUL:  pop_op = BF_MUL;
      PA_SUB:  pop_op = BF_SUB;
      default: pop_op = BF_ADD;
    endcase
  end

  // ---- NTT/INTT controller
  logic              n_busy, n_done, n_rd_en, n_bf_valid;
  logic [SET_AW-1:0] n_rd_addr;
  logic              n_wr_en [2];
  logic [SET_AW-1:0] n_wr_addr [2];
  logic [WORD_W-1:0] n_wr_data [2];
  logic [7:0]        rom_addr [2];
  logic [COEF_W-1:0] rom_data [2];
  bf_op_e            n_bf_op;
  logic [COEF_W-1:0] n_a [2], n_b [2], n_w [2];

  // ---- coefficient-wise controller
  logic              p_busy, p_done, p_rd_en, p_bf_valid;
  logic [SET_AW-1:0] p_rd_addr;
  logic              p_wr_en [2];
  logic [SET_AW-1:0] p_wr_addr [2];
  logic [WORD_W-1:0] p_wr_data [2];
  bf_op_e            p_bf_op;
  logic [COEF_W-1:0] p_a [2], p_b [2], p_w [2];

  // ---- butterflies
  logic              bf_v_out [2];
  logic [COEF_W-1:0] bf_o0 [2], bf_o1 [2];

  ntt_ctrl #(.LAT(LAT), .SAB_X(SAB_X), .SAB_Y(SAB_Y)) u_ntt (
    .clk, .rst_n, .start(ntt_start), .inverse(op == PA_INTT), .sel_saber,
    .src_base, .dst_base, .busy(n_busy), .done(n_done),
    .rd_en(n_rd_en), .rd_addr(n_rd_addr), .rdata,
    .wr_en(n_wr_en), .wr_addr(n_wr_addr), .wr_data(n_wr_data),
    .rom_addr, .rom_data,
    .bf_valid(n_bf_valid), .bf_op(n_bf_op), .bf_a(n_a), .bf_b(n_b), .bf_w(n_w),
    .bf_out_valid(bf_v_out[0]), .bf_o0, .bf_o1
  );

  polyop_ctrl u_pop (
    .clk, .rst_n, .start(pop_start), .op(pop_op),
    .a_base(src_base), .b_base, .d_base(dst_base), .busy(p_busy), .done(p_done),
    .rd_en(p_rd_en), .rd_addr(p_rd_addr), .rdata,
    .wr_en(p_wr_en), .wr_addr(p_wr_addr), .wr_data(p_wr_data),
    .bf_valid(p_bf_valid), .bf_op(p_bf_op), .bf_a(p_a), .bf_b(p_b), .bf_w(p_w),
    .bf_out_valid(bf_v_out[0]), .bf_o0
  );

  twiddle_rom #(.SAB_X(SAB_X), .SAB_Y(SAB_Y), .SAB_ROOT(SAB_ROOT)) u_rom (
    .clk, .sel_saber(sel_q), .addr0(rom_addr[0]), .addr1(rom_addr[1]),
    .data0(rom_data[0]), .data1(rom_data[1])
  );

  for (genvar u = 0; u < 2; u++) begin : g_bfu
    butterfly #(.MUL_LAT(MUL_LAT), .SAB_X(SAB_X), .SAB_Y(SAB_Y)) u_bfu (
      .clk, .rst_n,
      .in_valid (n_busy ? n_bf_valid : p_bf_valid),
      .op       (n_busy ? n_bf_op    : p_bf_op),
      .sel_saber(sel_q),
      .a        (n_busy ? n_a[u] : p_a[u]),
      .b        (n_busy ? n_b[u] : p_b[u]),
      .w        (n_busy ? n_w[u] : p_w[u]),
      .out_valid(bf_v_out[u]),
      .o0(bf_o0[u]), .o1(bf_o1[u])
    );
  end

  assign busy    = n_busy || p_busy;
  assign done    = n_done || p_done;
  assign rd_en   = n_busy ? n_rd_en   : p_rd_en;
  assign rd_addr = n_busy ? n_rd_addr : p_rd_addr;
  always_comb begin
    for (int k = 0; k < 2; k++) begin
      wr_en[k]   = n_busy ? n_wr_en[k]   : p_wr_en[k];
      wr_addr[k] = n_busy ? n_wr_addr[k] : p_wr_addr[k];
      wr_data[k] = n_busy ? n_wr_data[k] : p_wr_data[k];
    end
  end
endmodule
