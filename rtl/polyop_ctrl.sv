// Coefficient-wise polynomial operation controller (multiply, add, subtract).
//
// Computes D = A op B coefficient by coefficient, for two polynomials held at
// base addresses a_base and b_base of one memory-set pair, and writes D at
// d_base. Every address k (0..63) is read twice, A on one clock and B on the
// next, from both banks at once; butterfly u then processes the two halves of
// bank u's words on two consecutive clocks (BF_MUL: w*b with b from A and w
// from B; BF_ADD / BF_SUB: a op b), and the two result halves are joined and
// written back to bank u, both banks in the same clock. One polynomial takes
// 128 clocks plus the pipeline latency. The paper names this controller
// ("Poly. x/+/- controller") and its sharing of the two butterflies; the
// read schedule is this design's own.
// Interface: pulse start with op and the bases; done pulses after the last
// write. Operands may be in either transform domain, as long as both match.
module polyop_ctrl
  import cp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  bf_op_e            op,
  input  logic [SET_AW-1:0] a_base,
  input  logic [SET_AW-1:0] b_base,
  input  logic [SET_AW-1:0] d_base,
  output logic              busy,
  output logic              done,
  output logic              rd_en,
  output logic [SET_AW-1:0] rd_addr,
  input  logic [WORD_W-1:0] rdata [2],
  output logic              wr_en   [2],
  output logic [SET_AW-1:0] wr_addr [2],
  output logic [WORD_W-1:0] wr_data [2],
  output logic              bf_valid,
  output bf_op_e            bf_op,
  output logic [COEF_W-1:0] bf_a [2],
  output logic [COEF_W-1:0] bf_b [2],
  output logic [COEF_W-1:0] bf_w [2],
  input  logic              bf_out_valid,
  input  logic [COEF_W-1:0] bf_o0 [2]
);
  logic        run;
  logic [7:0]  cnt;        // bit 0: 0 = read A, 1 = read B
  bf_op_e      op_q;
  logic [SET_AW-1:0] a_q, b_q, d_q;
  logic [1:0]  ph;         // read phase one and two clocks ago
  logic [WORD_W-1:0] wa [2], wb [2];
  logic        feed_v;     // second half pending
  logic [5:0]  out_k;
  logic        out_h;
  logic [HALF_W-1:0] lo_keep [2];
  logic [6:0]  n_out;

  assign busy    = run;
  assign rd_en   = run && !cnt[7];
  assign rd_addr = (cnt[0] ? b_q : a_q) + SET_AW'(cnt[6:1]);
  assign bf_op   = op_q;

  // ph[0]: A word arrived; ph[1]: B word arrived (feed half 0 now)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; cnt <= '0; ph <= '0; feed_v <= 1'b0; done <= 1'b0;
      op_q <= BF_ADD; a_q <= '0; b_q <= '0; d_q <= '0; out_h <= 1'b0; out_k <= '0; n_out <= '0;
    end else begin
      done <= 1'b0;
      ph <= {1'b0, 1'b0};
      if (!run && start) begin
        run <= 1'b1; cnt <= '0; op_q <= op; a_q <= a_base; b_q <= b_base; d_q <= d_base;
        out_h <= 1'b0; out_k <= '0; n_out <= '0;
      end else if (run) begin
        if (!cnt[7]) cnt <= cnt + 8'd1;
        ph <= {rd_en && cnt[0], rd_en && !cnt[0]};
        if (bf_out_valid) begin
          out_h <= ~out_h;
          if (out_h) begin
            out_k <= out_k + 6'd1;
            n_out <= n_out + 7'd1;
            if (n_out == 7'd63) begin run <= 1'b0; done <= 1'b1; end
          end
        end
      end
      feed_v <= ph[1];
    end
  end

  always_ff @(posedge clk) begin
    if (ph[0]) begin wa[0] <= rdata[0]; wa[1] <= rdata[1]; end
    if (ph[1]) begin wb[0] <= rdata[0]; wb[1] <= rdata[1]; end
    if (bf_out_valid && !out_h) begin
      lo_keep[0] <= HALF_W'(bf_o0[0]); lo_keep[1] <= HALF_W'(bf_o0[1]);
    end
  end

  // butterfly feed: half 0 on the clock B arrives, half 1 on the next
  always_comb begin
    bf_valid = ph[1] || feed_v;
    for (int u = 0; u < 2; u++) begin
      logic [HALF_W-1:0] ca, cb;
      if (ph[1]) begin ca = wa[u][HALF_W-1:0];      cb = rdata[u][HALF_W-1:0]; end
      else       begin ca = wa[u][WORD_W-1:HALF_W]; cb = wb[u][WORD_W-1:HALF_W]; end
      if (op_q == BF_MUL) begin bf_a[u] = '0; bf_b[u] = COEF_W'(ca); bf_w[u] = COEF_W'(cb); end
      else                begin bf_a[u] = COEF_W'(ca); bf_b[u] = COEF_W'(cb); bf_w[u] = '0; end
    end
  end

  always_comb begin
    for (int u = 0; u < 2; u++) begin
      wr_en[u]   = bf_out_valid && out_h;
      wr_addr[u] = d_q + SET_AW'(out_k);
      wr_data[u] = {HALF_W'(bf_o0[u]), lo_keep[u]};
    end
  end
endmodule
