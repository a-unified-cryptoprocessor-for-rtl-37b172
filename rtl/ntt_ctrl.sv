// NTT / inverse-NTT controller.
//
// Drives the two butterfly units over one polynomial held in a pair of memory
// sets ("bank 0" and "bank 1"), 64 words per bank, two coefficients per word.
// Each clock it reads the same address from both banks and feeds four
// coefficients to the two butterflies: BFU1 gets the two half-0 coefficients,
// BFU2 the two half-1 coefficients. For this to work in every stage, the
// pair (x[j], x[j+len]) must always sit at the same address and half in the
// two banks. The controller keeps this true by re-laying the coefficients out
// as it writes each stage back: the index bit that the next stage pairs on is
// swapped with the bank bit. When that bit is an address bit, both results of
// one clock belong in the same bank; the reads are therefore ordered so that
// consecutive clocks alternate between the two banks, and one result word is
// held for one clock, so that every bank takes exactly one write per clock.
// When the bit is the half bit (one stage of each transform) each BFU's two
// results form one word, and the last stage writes in place.
//   Forward (CT): natural order in, out in bank=i0, half=i1, addr=i[7:2].
//   Inverse (GS, halving): that order in, natural order out, scaled by 1/256.
// Twiddle indices follow the Dilithium reference code (zeta[2^s + group] for
// the forward stage s, -zeta[2^(8-b) - 1 - group] for the inverse stage with
// half-length 2^b).
//
// The two-set memory layout, two butterflies, two coefficients per word and
// re-laying during write-back follow the paper (its 16-point example is
// reproduced exactly). The general bit-swap rule, the read order and the
// one-word write delay are this design's reconstruction. Between stages the
// controller waits for the butterfly pipeline to drain, so a transform takes
// 8 * (64 + LAT + 3) clocks, against the paper's 512.
// Interface: pulse start with inverse/src_base/dst_base; done pulses once the
// last word is written. Stage 0 reads src_base, all writes go to dst_base.
module ntt_ctrl
  import cp_pkg::*;
#(
  parameter int unsigned LAT   = 8,     // butterfly latency
  parameter int unsigned SAB_X = 24,
  parameter int unsigned SAB_Y = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              inverse,
  input  logic              sel_saber,
  input  logic [SET_AW-1:0] src_base,
  input  logic [SET_AW-1:0] dst_base,
  output logic              busy,
  output logic              done,
  // memory pair
  output logic              rd_en,
  output logic [SET_AW-1:0] rd_addr,
  input  logic [WORD_W-1:0] rdata [2],
  output logic              wr_en   [2],
  output logic [SET_AW-1:0] wr_addr [2],
  output logic [WORD_W-1:0] wr_data [2],
  // twiddle ROM
  output logic [7:0]        rom_addr [2],
  input  logic [COEF_W-1:0] rom_data [2],
  // butterflies
  output logic              bf_valid,
  output bf_op_e            bf_op,
  output logic [COEF_W-1:0] bf_a [2],
  output logic [COEF_W-1:0] bf_b [2],
  output logic [COEF_W-1:0] bf_w [2],
  input  logic              bf_out_valid,
  input  logic [COEF_W-1:0] bf_o0 [2],
  input  logic [COEF_W-1:0] bf_o1 [2]
);
  localparam int unsigned SLOT_H = 6, SLOT_B = 7;
  localparam int unsigned DRAIN  = LAT + 3;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} st_e;
  typedef enum logic [1:0] {WB_ADDR, WB_HALF, WB_INPLACE} wb_e;

  st_e        st;
  logic       inv_q, sel_q;
  logic [2:0] stage;
  logic [6:0] cnt;
  logic [4:0] dcnt;
  logic [2:0] slot_bit [8];      // which index bit each slot holds
  logic [SET_AW-1:0] src_q, dst_q;

  // ---- per-stage decode
  logic [2:0] b_bit, c_bit;      // pairing bit of this stage and of the next one
  logic [2:0] c_slot;
  wb_e        wb_mode;
  always_comb begin
    b_bit = inv_q ? stage : 3'(7 - stage);
    c_bit = inv_q ? 3'(stage + 1) : 3'(6 - stage);
    c_slot = 3'd0;
    for (int s = 0; s < 7; s++) if (slot_bit[s] == c_bit) c_slot = 3'(s);
    if (stage == 3'd7)             wb_mode = WB_INPLACE;
    else if (c_slot == 3'(SLOT_H)) wb_mode = WB_HALF;
    else                           wb_mode = WB_ADDR;
  end

  // ---- read address order: alternate the c-slot address bit every clock
  logic [5:0] a_rd;
  always_comb begin
    a_rd = cnt[5:0];
    if (wb_mode == WB_ADDR) begin
      for (int i = 0; i < 6; i++) begin
        if (i < int'(c_slot))       a_rd[i] = cnt[i+1];
        else if (i == int'(c_slot)) a_rd[i] = cnt[0];
        else                        a_rd[i] = cnt[i];
      end
    end
  end

  // ---- twiddle addresses for the two butterflies
  logic [7:0] idx0, idx1, g0, g1;
  always_comb begin
    idx0 = '0;
    for (int s = 0; s < 6; s++) idx0[slot_bit[s]] = a_rd[s];
    idx1 = idx0;
    idx1[slot_bit[SLOT_H]] = 1'b1;
    g0 = idx0 >> (b_bit + 1);
    g1 = idx1 >> (b_bit + 1);
    if (!inv_q) begin
      rom_addr[0] = (8'd1 << stage) + g0;
      rom_addr[1] = (8'd1 << stage) + g1;
    end else begin
      rom_addr[0] = 8'((9'd1 << (8 - b_bit)) - 9'd1 - 9'(g0));
      rom_addr[1] = 8'((9'd1 << (8 - b_bit)) - 9'd1 - 9'(g1));
    end
  end

  assign rd_en   = (st == S_RUN);
  assign rd_addr = ((stage == 3'd0) ? src_q : dst_q) + SET_AW'(a_rd);
  assign busy    = (st != S_IDLE);

  // ---- butterfly feed, one clock after the read
  logic rd_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_v <= 1'b0;
    else        rd_v <= rd_en;
  end
  assign bf_valid = rd_v;
  assign bf_op    = inv_q ? BF_GS : BF_CT;
  always_comb begin
    for (int u = 0; u < 2; u++) begin
      bf_a[u] = COEF_W'(rdata[0][u*HALF_W +: HALF_W]);
      bf_b[u] = COEF_W'(rdata[1][u*HALF_W +: HALF_W]);
      bf_w[u] = inv_q ? neg_q(rom_data[u]) : rom_data[u];
    end
  end
  // inverse twiddles are -zeta mod q
  logic [COEF_W-1:0] q_act;
  assign q_act = sel_q ? COEF_W'((64'd1 << SAB_X) - (64'd1 << SAB_Y) + 1) : Q_DIL;
  function automatic logic [COEF_W-1:0] neg_q(input logic [COEF_W-1:0] z);
    return (z == '0) ? '0 : (q_act - z);
  endfunction

  // ---- address delay line to the butterfly outputs
  logic [5:0] a_dl [LAT+1];
  always_ff @(posedge clk) begin
    a_dl[0] <= a_rd;
    for (int i = 1; i <= LAT; i++) a_dl[i] <= a_dl[i-1];
  end

  // ---- write-back
  logic [5:0]  ao;
  logic        v_o;
  logic [WORD_W-1:0] w0, w1;
  logic        hold_v;
  logic        hold_bank;
  logic [5:0]  hold_a;
  logic [5:0]  a0;             // output address with the slot bit cleared
  logic [WORD_W-1:0] hold_w;
  always_comb begin
    ao  = a_dl[LAT];
    v_o = ao[c_slot];
    a0  = ao & ~(6'd1 << c_slot);
    w0 = {HALF_W'(bf_o0[1]), HALF_W'(bf_o0[0])};
    w1 = {HALF_W'(bf_o1[1]), HALF_W'(bf_o1[0])};
    for (int k = 0; k < 2; k++) begin wr_en[k] = 1'b0; wr_addr[k] = dst_q; wr_data[k] = '0; end
    unique case (wb_mode)
      WB_INPLACE: begin
        for (int k = 0; k < 2; k++) begin
          wr_en[k] = bf_out_valid; wr_addr[k] = dst_q + SET_AW'(ao);
        end
        wr_data[0] = w0; wr_data[1] = w1;
      end
      WB_HALF: begin
        for (int k = 0; k < 2; k++) begin
          wr_en[k] = bf_out_valid; wr_addr[k] = dst_q + SET_AW'(ao);
          wr_data[k] = {HALF_W'(bf_o1[k]), HALF_W'(bf_o0[k])};
        end
      end
      default: begin  // WB_ADDR
        for (int k = 0; k < 2; k++) begin
          if (bf_out_valid && v_o == k[0]) begin
            wr_en[k] = 1'b1; wr_addr[k] = dst_q + SET_AW'(a0); wr_data[k] = w0;
          end else if (hold_v && hold_bank == k[0]) begin
            wr_en[k] = 1'b1; wr_addr[k] = dst_q + SET_AW'(hold_a); wr_data[k] = hold_w;
          end
        end
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v <= 1'b0; hold_bank <= 1'b0; hold_a <= '0; hold_w <= '0;
    end else begin
      hold_v    <= bf_out_valid && (wb_mode == WB_ADDR);
      hold_bank <= v_o;
      hold_a    <= ao | (6'd1 << c_slot);
      hold_w    <= w1;
    end
  end

  // ---- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; stage <= '0; cnt <= '0; dcnt <= '0; done <= 1'b0;
      inv_q <= 1'b0; sel_q <= 1'b0; src_q <= '0; dst_q <= '0;
      for (int s = 0; s < 8; s++) slot_bit[s] <= 3'(s);
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_RUN; stage <= '0; cnt <= '0;
          inv_q <= inverse; sel_q <= sel_saber; src_q <= src_base; dst_q <= dst_base;
          for (int s = 0; s < 6; s++) slot_bit[s] <= inverse ? 3'(s + 2) : 3'(s + 1);
          slot_bit[SLOT_H] <= inverse ? 3'd1 : 3'd0;
          slot_bit[SLOT_B] <= inverse ? 3'd0 : 3'd7;
        end
        S_RUN: begin
          cnt <= cnt + 7'd1;
          if (cnt == 7'd63) begin st <= S_DRAIN; dcnt <= '0; end
        end
        default: begin // S_DRAIN
          dcnt <= dcnt + 5'd1;
          if (dcnt == 5'(DRAIN - 1)) begin
            if (stage != 3'd7) begin
              // swap the bank bit with the slot holding the next pairing bit
              slot_bit[SLOT_B] <= c_bit;
              slot_bit[c_slot] <= slot_bit[SLOT_B];
            end
            if (stage == 3'd7) begin st <= S_IDLE; done <= 1'b1; end
            else begin st <= S_RUN; stage <= stage + 3'd1; cnt <= '0; end
          end
        end
      endcase
    end
  end
endmodule
