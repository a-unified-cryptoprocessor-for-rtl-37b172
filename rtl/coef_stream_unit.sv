// Streaming unit for the scheme-specific coefficient instructions.
//
// Runs one of the linear-time Saber or Dilithium operations over a
// polynomial (or a short run of words) stored in one memory-set pair:
//   Saber:     AddRound, AddPack, UnPack, Verify, CMOV, COPY
//   Dilithium: Power2Round, Decompose, MakeHint, UseHint, Verify (norm
//              check), Refresh (zero fill), Write (store a 64-bit word, e.g.
//              a nonce after a seed), Counter_ref, SampleInBall, Encode_H,
//              pack / unpack (also Saber BS2POLVEC)
// Schedule: for address j = 0..63 it reads operand A at a_base + j from both
// sets on one clock and operand B at b_base + j on the next, so four
// coefficient lanes (two sets x two halves) are processed every two clocks
// and a whole polynomial takes 128 clocks, the figure the paper gives for
// Decompose and Power2Round. The first result word of address j is written
// to d_base + j when B arrives, a second one (r0 of Power2Round and
// Decompose) to d2_base + j on the next clock, so each set takes at most one
// write per clock. Word k of the operands is word j = k[5:0] of set k[6];
// len limits the run to the first len words (keys and short strings).
// The Decompose datapath is shared: it decomposes A as it arrives and, for
// MakeHint, B as it arrives, as the paper describes for MakeHint/UseHint.
// SampleInBall (dil_sampleinball) reads the SHAKE-256 words stored one per
// address in the even set from a_base on, as the sampler asks for them, and
// writes the challenge polynomial to d_base. Encode_H (dil_encode_h) reads
// the w1 polynomial at a_base word by word, in coefficient order, and writes
// the packed byte string to consecutive addresses of the even set from
// d_base on, where the Keccak wrapper absorbs it. Unpack (dil_pack_unpack)
// reads a byte string the same way SampleInBall does and writes polynomial
// word k to set k[6] at d_base + k[5:0]; pack reads like Encode_H and
// writes like it. All four share op 15, selected by imm[1:0]: 0
// SampleInBall (tau = imm[8:2]), 1 Encode_H, 2 unpack, 3 pack; for the
// last two W = imm[13:9], offset 2^imm[19:15] used when imm[14] is set.
// Flags: differ (Saber Verify, used by CMOV), dil_fail (signature loop
// check, also set when the hint weight exceeds omega) and hint_count.
// The grouping of these instructions into one streaming unit and the
// two-clock schedule are this design's choices; the paper keeps the blocks
// separate but lets them run in parallel with Keccak and the NTT.
module coef_stream_unit
  import cp_pkg::*;
#(
  parameter int unsigned SAB_X = 24,   // Saber NTT prime 2^X - 2^Y + 1
  parameter int unsigned SAB_Y = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cs_op_e            op,
  input  logic [7:0]        len,       // words, 1..128
  input  logic [SET_AW-1:0] a_base,
  input  logic [SET_AW-1:0] b_base,
  input  logic [SET_AW-1:0] d_base,
  input  logic [SET_AW-1:0] d2_base,
  input  logic [WORD_W-1:0] imm,       // Write data; bound [22:0] for norm checks
  input  logic              sel_saber, // Saber NTT prime in the multiplier output
  input  logic [2:0]        eps_t,     // Saber eps_T
  input  logic              g88,       // Dilithium-2 gamma2
  input  logic [9:0]        omega,     // Dilithium hint weight bound
  output logic              busy,
  output logic              done,
  output logic              differ,
  output logic              dil_fail,
  output logic [9:0]        hint_count,
  output logic              rd_en,
  output logic [SET_AW-1:0] rd_addr,
  input  logic [WORD_W-1:0] rdata [2],
  output logic              wr_en   [2],
  output logic [SET_AW-1:0] wr_addr [2],
  output logic [WORD_W-1:0] wr_data [2]
);
  localparam logic [COEF_W-1:0] Q_SAB = COEF_W'((64'd1 << SAB_X) - (64'd1 << SAB_Y) + 1);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_FLUSH, S_SIB, S_ENC, S_UNP} st_e;
  st_e        st;
  cs_op_e     op_q;
  logic [7:0] len_q;
  logic [6:0] cnt;            // {j, phase}
  logic [2:0] fl;
  logic [SET_AW-1:0] a_q, b_q, d_q, d2_q;
  logic [22:0] imm_q;        // norm bound
  logic       sab_q, g88_q;
  logic [2:0] et_q;

  // arrival tracking: A of address ja arrives, B of address jb arrives
  logic       a_arr, b_arr, res2_v;
  logic [5:0] ja, jb, j2;
  logic [WORD_W-1:0] areg [2];
  logic [WORD_W-1:0] res2 [2];
  logic       lane_on [2];

  function automatic logic active(input logic [5:0] j, input int l, input logic [7:0] n);
    return (8'(j) + 8'(64 * l)) < n;
  endfunction

  logic [6:0] run_last;      // last {j, phase} of the run
  always_comb begin
    logic [6:0] n;
    n = (len_q > 8'd64) ? 7'd64 : len_q[6:0];
    run_last = 7'({n, 1'b0} - 8'd1);
  end

  // ---- SampleInBall: words are fetched from a_base on at the sampler's request
  logic              sib_req, sib_wv, sib_busy, sib_done, sib_ov;
  logic [5:0]        sib_oa;
  logic [WORD_W-1:0] sib_out [2];
  logic [SET_AW-1:0] sib_widx;
  dil_sampleinball u_sib (
    .clk, .rst_n, .start(st == S_IDLE && start && op == CS_SIB && imm[1:0] == 2'd0), .tau(imm[8:2]),
    .req(sib_req), .w_valid(sib_wv), .w_data(rdata[0]), .busy(sib_busy), .done(sib_done),
    .out_valid(sib_ov), .out_addr(sib_oa), .out_data(sib_out)
  );
  logic pu_req;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin sib_wv <= 1'b0; sib_widx <= '0; end
    else begin
      sib_wv <= sib_req || pu_req;
      if (st == S_IDLE) sib_widx <= '0;
      else if (sib_req || pu_req) sib_widx <= sib_widx + SET_AW'(1);
    end

  logic pk_q;     // the running op 15 is a pack

  // ---- Encode_H: word k of the polynomial is read at clock k (set k[6])
  logic              enc_v, enc_set, enc_ov;
  logic [5:0]        enc_c [2];
  logic [4:0]        enc_oi;
  logic [WORD_W-1:0] enc_ow;
  always_comb begin
    enc_c[0] = rdata[enc_set][5:0];
    enc_c[1] = rdata[enc_set][HALF_W +: 6];
  end
  dil_encode_h u_enc (
    .clk, .rst_n, .start(st == S_IDLE && start && op == CS_SIB && imm[1:0] == 2'd1), .g88,
    .in_valid(enc_v && !pk_q), .in_c(enc_c), .out_valid(enc_ov), .out_idx(enc_oi), .out_word(enc_ow)
  );
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin enc_v <= 1'b0; enc_set <= 1'b0; end
    else begin enc_v <= (st == S_ENC); enc_set <= cnt[6]; end

  // ---- pack / unpack
  logic              pu_busy, pu_done, pu_ov;
  logic [6:0]        pu_oi;
  logic [WORD_W-1:0] pu_ow;
  logic              pu_pack;
  assign pu_pack = imm[0];
  dil_pack_unpack u_pu (
    .clk, .rst_n, .start(st == S_IDLE && start && op == CS_SIB && imm[1]), .pack(pu_pack),
    .width(imm[13:9]), .off_en(imm[14]), .off_sh(imm[19:15]),
    .req(pu_req), .w_valid(sib_wv), .w_data(rdata[0]),
    .in_valid(enc_v && pk_q), .in_word(rdata[enc_set]),
    .busy(pu_busy), .done(pu_done), .out_valid(pu_ov), .out_idx(pu_oi), .out_word(pu_ow)
  );

  assign busy    = (st != S_IDLE) || sib_busy || pu_busy;
  assign rd_en   = (st == S_RUN) || (st == S_ENC) || sib_req || pu_req;
  always_comb
    unique case (st)
      S_SIB, S_UNP: rd_addr = a_q + sib_widx;
      S_ENC:   rd_addr = a_q + SET_AW'(cnt[5:0]);
      default: rd_addr = (cnt[0] ? b_q : a_q) + SET_AW'(cnt[6:1]);
    endcase

  // ---- datapaths: four coefficient lanes
  logic [COEF_W-1:0] ca [4], cb [4];
  logic [9:0]        dr1 [4];
  logic [COEF_W-1:0] dr0 [4];
  logic [9:0]        ar1 [4];     // A's high part, kept for MakeHint/UseHint
  logic [COEF_W-1:0] ar0 [4];
  logic [12:0]       sr  [4];
  logic [9:0]        uh  [4];
  logic              mh  [4];
  logic [9:0]        mcnt [4];
  logic              vfail [4];
  logic [COEF_W-1:0] din [4];

  always_comb
    for (int c = 0; c < 4; c++) begin
      ca[c]  = COEF_W'(areg[c/2][(c%2)*HALF_W +: HALF_W]);
      cb[c]  = COEF_W'(rdata[c/2][(c%2)*HALF_W +: HALF_W]);
      din[c] = cb[c];               // the word arriving this clock
    end

  for (genvar c = 0; c < 4; c++) begin : g_lane
    dil_decompose u_dec (
      .p2r(op_q == CS_P2R), .g88(g88_q), .r(din[c][22:0]), .r1(dr1[c]), .r0(dr0[c])
    );
    saber_round u_sr (
      .op(op_q == CS_ADDROUND ? 2'd0 : op_q == CS_ADDPACK ? 2'd1 : 2'd2),
      .x(ca[c]), .qp(sab_q ? Q_SAB : Q_DIL), .eps_t(et_q), .y(cb[c][9:0]), .r(sr[c])
    );
    dil_usehint u_uh (.g88(g88_q), .h(cb[c][0]), .r1(ar1[c]), .r0(ar0[c]), .r1h(uh[c]));
    dil_makehint u_mh (
      .clk, .rst_n, .clear(st == S_IDLE && start && op == CS_CLRFLAGS),
      .counter_ref(st == S_IDLE && start && op == CS_CNTREF), .loop_fail(dil_fail),
      .valid(b_arr && op_q == CS_MAKEHINT && lane_on[c/2]),
      .r1a(ar1[c]), .r1b(dr1[c]), .h(mh[c]), .count(mcnt[c])
    );
    dil_verify u_vf (
      .clk, .rst_n, .clear(st == S_IDLE && start && op == CS_CLRFLAGS),
      .valid(a_arr && op_q == CS_DVERIFY && active(ja, c/2, len_q)),
      .c(din[c]), .bound(imm_q[22:0]),
      .check_weight(c == 0 && st == S_IDLE && start && op == CS_DVERIFY),
      .weight(hint_count), .omega(omega), .fail(vfail[c])
    );
  end

  always_ff @(posedge clk)
    if (a_arr) for (int c = 0; c < 4; c++) begin ar1[c] <= dr1[c]; ar0[c] <= dr0[c]; end

  assign hint_count = mcnt[0] + mcnt[1] + mcnt[2] + mcnt[3];
  assign dil_fail   = vfail[0] | vfail[1] | vfail[2] | vfail[3];

  logic              sv_valid [2];
  logic [WORD_W-1:0] sv_out [2];
  saber_verify_cmov #(.LANES(2)) u_sv (
    .clk, .rst_n, .clear(st == S_IDLE && start && op == CS_CLRFLAGS),
    .valid(sv_valid), .cmp(op_q == CS_VERIFY), .copy(op_q == CS_COPY),
    .a(areg), .b(rdata), .out(sv_out), .differ(differ)
  );
  always_comb
    for (int l = 0; l < 2; l++) sv_valid[l] = b_arr && lane_on[l];

  // ---- result words
  logic [WORD_W-1:0] res1 [2], res2_c [2];
  logic has1, has2;
  always_comb begin
    has1 = !(op_q inside {CS_VERIFY, CS_DVERIFY, CS_MAKEHINT}) || (op_q == CS_MAKEHINT);
    has2 = (op_q == CS_P2R) || (op_q == CS_DECOMP);
    for (int l = 0; l < 2; l++) begin
      res1[l] = '0; res2_c[l] = '0;
      for (int h = 0; h < 2; h++) begin
        logic [1:0] c;
        c = 2'(2*l + h);
        unique case (op_q)
          CS_ADDROUND, CS_ADDPACK, CS_UNPACK: res1[l][h*HALF_W +: HALF_W] = HALF_W'(sr[c]);
          CS_P2R, CS_DECOMP: begin
            res1[l][h*HALF_W +: HALF_W]   = HALF_W'(ar1[c]);
            res2_c[l][h*HALF_W +: HALF_W] = HALF_W'(ar0[c]);
          end
          CS_MAKEHINT: res1[l][h*HALF_W +: HALF_W] = HALF_W'(mh[c]);
          CS_USEHINT:  res1[l][h*HALF_W +: HALF_W] = HALF_W'(uh[c]);
          default: ;
        endcase
      end
      if (op_q == CS_CMOV || op_q == CS_COPY) res1[l] = sv_out[l];
    end
  end

  always_comb begin
    for (int l = 0; l < 2; l++) begin
      wr_en[l] = 1'b0; wr_addr[l] = d_q + SET_AW'(jb); wr_data[l] = res1[l];
      if (b_arr && has1 && lane_on[l]) wr_en[l] = 1'b1;
      else if (res2_v && active(j2, l, len_q)) begin
        wr_en[l] = 1'b1; wr_addr[l] = d2_q + SET_AW'(j2); wr_data[l] = res2[l];
      end
      if (st == S_RUN && op_q == CS_REFRESH) begin
        wr_en[l] = !cnt[0] && active(cnt[6:1], l, len_q);
        wr_addr[l] = d_q + SET_AW'(cnt[6:1]); wr_data[l] = '0;
      end
    end
    if (sib_ov)
      for (int l = 0; l < 2; l++) begin
        wr_en[l] = 1'b1; wr_addr[l] = d_q + SET_AW'(sib_oa); wr_data[l] = sib_out[l];
      end
    if (enc_ov) begin
      wr_en[0] = 1'b1; wr_addr[0] = d_q + SET_AW'(enc_oi); wr_data[0] = enc_ow;
    end
    if (pu_ov && pk_q) begin
      wr_en[0] = 1'b1; wr_addr[0] = d_q + SET_AW'(pu_oi); wr_data[0] = pu_ow;
    end
    if (pu_ov && !pk_q) begin
      wr_en[pu_oi[6]] = 1'b1; wr_addr[pu_oi[6]] = d_q + SET_AW'(pu_oi[5:0]);
      wr_data[pu_oi[6]] = pu_ow;
    end
    if (st == S_IDLE && start && op == CS_WRITE) begin
      wr_en[0] = 1'b1; wr_addr[0] = d_base; wr_data[0] = imm;
    end
  end
  always_comb for (int l = 0; l < 2; l++) lane_on[l] = active(jb, l, len_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; op_q <= CS_COPY; len_q <= '0; cnt <= '0; fl <= '0;
      a_q <= '0; b_q <= '0; d_q <= '0; d2_q <= '0; imm_q <= '0; sab_q <= 1'b0; g88_q <= 1'b0;
      et_q <= 3'd4; pk_q <= 1'b0; a_arr <= 1'b0; b_arr <= 1'b0; res2_v <= 1'b0; ja <= '0; jb <= '0; j2 <= '0;
    end else begin
      done   <= 1'b0;
      a_arr  <= (st == S_RUN) && !cnt[0];
      b_arr  <= (st == S_RUN) &&  cnt[0];
      ja     <= cnt[6:1];
      jb     <= ja;
      res2_v <= b_arr && has2;
      j2     <= jb;
      unique case (st)
        S_IDLE: if (start) begin
          if (op inside {CS_WRITE, CS_CNTREF, CS_CLRFLAGS}) done <= 1'b1;
          else if (op == CS_SIB) begin
            unique case (imm[1:0])
              2'd0:    st <= S_SIB;
              2'd2:    st <= S_UNP;
              default: st <= S_ENC;
            endcase
            cnt <= '0; pk_q <= (imm[1:0] == 2'd3);
          end
          else begin
            st <= S_RUN; cnt <= '0;
          end
          op_q <= op; len_q <= len; a_q <= a_base; b_q <= b_base; d_q <= d_base; d2_q <= d2_base;
          imm_q <= imm[22:0]; sab_q <= sel_saber; g88_q <= g88; et_q <= eps_t;
        end
        S_RUN: begin
          cnt <= cnt + 7'd1;
          if (cnt == run_last) begin st <= S_FLUSH; fl <= '0; end
        end
        S_SIB: if (sib_done) begin st <= S_IDLE; done <= 1'b1; end
        S_UNP: if (pu_done) begin st <= S_IDLE; done <= 1'b1; end
        S_ENC: begin
          cnt <= cnt + 7'd1;
          if (cnt == 7'd127) begin st <= S_FLUSH; fl <= '0; end
        end
        default: begin
          fl <= fl + 3'd1;
          if (fl == 3'd3) begin st <= S_IDLE; done <= 1'b1; end
        end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (a_arr) begin areg[0] <= rdata[0]; areg[1] <= rdata[1]; end
    if (b_arr) begin res2[0] <= res2_c[0]; res2[1] <= res2_c[1]; end
  end
endmodule
