// SHA3-256/512 and SHAKE-128/256 unit with on-the-fly samplers.
//
// A wrapper around one Keccak-f[1600] core that absorbs a byte string from
// memory and squeezes pseudo-random data straight into the format the rest
// of the processor stores, so that no separate parsing pass over memory is
// needed. Three commands:
//   SH_RESET    clear the state and the output buffer;
//   SH_ABSORB   absorb len bytes read as little-endian 64-bit words from
//               bank 0 at in_base, apply the mode's padding (0x06 for SHA3,
//               0x1F for SHAKE, final 0x80) and permute after every block;
//   SH_SQUEEZE  stream the output in format fmt to memory at out_base:
//               SQ_RAW      len 64-bit words, consecutive addresses of bank 0
//               SQ_SABER13  one Saber public polynomial, a pair of 13-bit
//                           coefficients (26 bits) per clock
//               SQ_BINOM    one Saber secret polynomial via the binomial
//                           sampler (mu bits per coefficient)
//               SQ_UNIFORM  Dilithium uniform rejection sampling, 24 bits,
//                           top bit cleared, accepted when below q
//               SQ_ETA      Dilithium eta sampling on 4-bit nibbles
//               SQ_GAMMA    Dilithium mask sampling, gamma1 - (18|20 bits)
//             Polynomials are written two coefficients per word in the
//             processor's natural layout (word k at bank k[6], address
//             out_base + k[5:0]). A squeeze continues from wherever the
//             previous one stopped, which gives the "SHAKE resume" behaviour.
//
// Output buffer and left-over bits: after a permutation the rate part of the
// state is loaded into an output buffer of 1344 + 24 bits and chunks are
// taken from its low end. A chunk width does not always divide the rate, so
// up to 24 bits (always an even number) are left over when the buffer runs
// dry. Those bits are saved in a 24-bit left-over buffer, left-aligned there
// with fixed shifts by 4 and 2, placed below the new rate bits, and the whole
// buffer is then shifted down by the remaining gap in steps of 4 and 2 bits,
// one step per clock. This replaces a 13-way variable shifter by fixed
// 2- and 4-bit shifts, as the paper proposes; the exact step sequence is
// this design's own. The paper also keeps a 192-bit side buffer for the 4-,
// 24- and 64-bit outputs; here every width is taken from the one output
// buffer.
// Handshake: pulse start with the command fields; busy is high until done
// pulses. One Keccak permutation takes 24 rounds, 25 clocks from its start.
module sha_shake_unit
  import cp_pkg::*;
#(
  parameter int unsigned SAB_X = 24,
  parameter int unsigned SAB_Y = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  sh_cmd_e           cmd,
  input  keccak_mode_e      mode,
  input  sq_fmt_e           fmt,
  input  logic [11:0]       len,        // bytes (absorb) or words (raw squeeze)
  input  logic [3:0]        mu,         // binomial parameter 6/8/10
  input  logic [2:0]        eta,        // 2 or 4
  input  logic              gamma20,    // 1: gamma1 = 2^19, 0: gamma1 = 2^17
  input  logic              sel_saber,  // binomial output modulo the Saber NTT prime
  input  logic [SET_AW-1:0] in_base,
  input  logic [SET_AW-1:0] out_base,
  output logic              busy,
  output logic              done,
  output logic              rd_en,
  output logic [SET_AW-1:0] rd_addr,
  input  logic [WORD_W-1:0] rdata [2],
  output logic              wr_en   [2],
  output logic [SET_AW-1:0] wr_addr [2],
  output logic [WORD_W-1:0] wr_data [2]
);
  localparam int unsigned OB_W = 1344 + 24;

  typedef enum logic [3:0] {
    S_IDLE, S_ABS_RD, S_ABS_XOR, S_ABS_PERM, S_SQ_RUN, S_SQ_PERM,
    S_SQ_LOB, S_SQ_LOAD, S_SQ_GAP
  } st_e;

  st_e st;
  keccak_mode_e mode_q;
  sq_fmt_e      fmt_q;
  logic [11:0]  len_q;
  logic [3:0]   mu_q;
  logic [2:0]   eta_q;
  logic         g20_q, sab_q;
  logic [SET_AW-1:0] ib_q, ob_q;

  // ---- Keccak core
  logic          k_start_r, k_done_seen;
  logic          k_load, k_start, k_busy, k_done;
  logic [1599:0] k_in, k_state;
  keccak_core u_keccak (
    .clk, .rst_n, .load(k_load), .state_in(k_in), .start(k_start),
    .busy(k_busy), .done(k_done), .state(k_state)
  );

  // ---- rate of the current mode, in 64-bit words and bits
  function automatic logic [4:0] rate_words(input keccak_mode_e m);
    unique case (m)
      KM_SHA3_512: return 5'd9;
      KM_SHAKE128: return 5'd21;
      default:     return 5'd17;
    endcase
  endfunction
  logic [4:0]  rw;
  logic [10:0] rbits;
  assign rw    = rate_words(mode_q);
  assign rbits = {rw, 6'd0};

  // ---- absorb
  logic [4:0]  lane;        // word within the block
  logic [11:0] blk_byte;    // first byte of the current block
  logic [11:0] off;         // byte offset of the current word
  logic        final_blk;
  logic [63:0] aw;          // word to xor
  assign off       = blk_byte + {4'd0, lane, 3'd0};
  assign final_blk = (len_q < blk_byte + {4'd0, rw, 3'd0});

  always_comb begin
    logic [11:0] p;
    p  = len_q - blk_byte;
    aw = '0;
    if (off < len_q) begin
      aw = rdata[0];
      if (len_q - off < 12'd8)
        for (int i = 0; i < 8; i++) if (12'(i) >= len_q - off) aw[8*i +: 8] = 8'h00;
    end
    if (final_blk) begin
      if (p[11:3] == {4'd0, lane})
        aw[8*p[2:0] +: 8] = aw[8*p[2:0] +: 8] ^ ((mode_q == KM_SHA3_256 || mode_q == KM_SHA3_512) ? 8'h06 : 8'h1F);
      if (lane == rw - 5'd1) aw[63:56] = aw[63:56] ^ 8'h80;
    end
  end

  // ---- output buffer
  logic [OB_W-1:0] obuf;
  logic [10:0]     ocnt;      // valid bits in obuf
  logic            fresh;     // the state holds output not yet loaded
  logic [23:0]     lob;       // left-over bits buffer
  logic [4:0]      lob_sh;    // left shift still to apply to lob
  logic [4:0]      gap;       // right shift still to apply to obuf

  logic [6:0] cw;             // chunk width of the format
  always_comb begin
    unique case (fmt_q)
      SQ_RAW:     cw = 7'd64;
      SQ_SABER13: cw = 7'd26;
      SQ_BINOM:   cw = 7'(mu_q);
      SQ_UNIFORM: cw = 7'd24;
      SQ_ETA:     cw = 7'd4;
      default:    cw = g20_q ? 7'd20 : 7'd18;
    endcase
  end

  // ---- chunk decoding
  logic [COEF_W-1:0] q_sab, bin_coef;
  logic signed [3:0] bin_val;
  assign q_sab = COEF_W'((64'd1 << SAB_X) - (64'd1 << SAB_Y) + 1);
  binomial_sampler u_bin (
    .bits(obuf[9:0]), .mu(mu_q), .q(sab_q ? q_sab : Q_DIL), .coef(bin_coef), .value(bin_val)
  );

  logic              acc;      // chunk yields a coefficient
  logic [COEF_W-1:0] cval;
  always_comb begin
    logic [3:0]  nb, nm;
    logic [19:0] g;
    logic [20:0] g1;
    acc = 1'b1; cval = '0;
    nb = obuf[3:0];
    nm = (nb >= 4'd10) ? nb - 4'd10 : (nb >= 4'd5) ? nb - 4'd5 : nb;   // nb mod 5
    g  = g20_q ? obuf[19:0] : {2'b00, obuf[17:0]};
    g1 = g20_q ? 21'(1 << 19) : 21'(1 << 17);
    unique case (fmt_q)
      SQ_BINOM:   cval = bin_coef;
      SQ_UNIFORM: begin cval = COEF_W'(obuf[22:0]); acc = (cval < Q_DIL); end
      SQ_ETA: begin
        if (eta_q == 3'd2) begin
          acc  = (nb < 4'd15);
          cval = (nm <= 4'd2) ? COEF_W'(4'd2 - nm) : Q_DIL - COEF_W'(nm - 4'd2);
        end else begin
          acc  = (nb < 4'd9);
          cval = (nb <= 4'd4) ? COEF_W'(4'd4 - nb) : Q_DIL - COEF_W'(nb - 4'd4);
        end
      end
      SQ_GAMMA: cval = ({1'b0, g} <= g1) ? COEF_W'(g1 - {1'b0, g}) : Q_DIL - COEF_W'({1'b0, g} - g1);
      default: ;
    endcase
  end

  // ---- squeeze output side
  logic [7:0]  nout;          // words written
  logic        have_lo;
  logic [COEF_W-1:0] lo_c;
  logic        sq_take;       // a chunk is consumed this clock
  logic        sq_last;
  assign sq_take = (st == S_SQ_RUN) && (ocnt >= 11'(cw));

  always_comb begin
    for (int k = 0; k < 2; k++) begin wr_en[k] = 1'b0; wr_addr[k] = '0; wr_data[k] = '0; end
    sq_last = 1'b0;
    if (sq_take) begin
      if (fmt_q == SQ_RAW) begin
        wr_en[0] = 1'b1; wr_addr[0] = ob_q + SET_AW'(nout); wr_data[0] = obuf[63:0];
        sq_last = ({4'd0, nout} == len_q - 12'd1);
      end else if (fmt_q == SQ_SABER13) begin
        wr_en[nout[6]]   = 1'b1;
        wr_addr[nout[6]] = ob_q + SET_AW'(nout[5:0]);
        wr_data[nout[6]] = {19'd0, obuf[25:13], 19'd0, obuf[12:0]};
        sq_last = (nout == 8'd127);
      end else if (acc && have_lo) begin
        wr_en[nout[6]]   = 1'b1;
        wr_addr[nout[6]] = ob_q + SET_AW'(nout[5:0]);
        wr_data[nout[6]] = {HALF_W'(cval), HALF_W'(lo_c)};
        sq_last = (nout == 8'd127);
      end
    end
  end

  // ---- control
  assign busy    = (st != S_IDLE);
  assign rd_en   = (st == S_ABS_RD);
  assign rd_addr = ib_q + SET_AW'(off[11:3]);

  always_comb begin
    k_load = 1'b0; k_in = k_state;
    if (st == S_ABS_XOR) begin
      k_load = 1'b1;
      k_in   = k_state ^ (1600'(aw) << (64 * lane));
    end
    if (st == S_IDLE && start && cmd == SH_RESET) begin k_load = 1'b1; k_in = '0; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0; mode_q <= KM_SHAKE128; fmt_q <= SQ_RAW; len_q <= '0;
      mu_q <= 4'd8; eta_q <= 3'd2; g20_q <= 1'b0; sab_q <= 1'b0; ib_q <= '0; ob_q <= '0;
      lane <= '0; blk_byte <= '0; obuf <= '0; ocnt <= '0; fresh <= 1'b0; lob <= '0;
      lob_sh <= '0; gap <= '0; nout <= '0; have_lo <= 1'b0; lo_c <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          unique case (cmd)
            SH_RESET: begin obuf <= '0; ocnt <= '0; fresh <= 1'b0; done <= 1'b1; end
            SH_ABSORB: begin
              st <= S_ABS_RD; mode_q <= mode; len_q <= len; ib_q <= in_base;
              lane <= '0; blk_byte <= '0; ocnt <= '0; fresh <= 1'b0;
            end
            default: begin
              st <= S_SQ_RUN; fmt_q <= fmt; len_q <= len; mu_q <= mu; eta_q <= eta;
              g20_q <= gamma20; sab_q <= sel_saber; ob_q <= out_base;
              nout <= '0; have_lo <= 1'b0;
            end
          endcase
        end
        S_ABS_RD:  st <= S_ABS_XOR;
        S_ABS_XOR: begin
          if (lane == rw - 5'd1) st <= S_ABS_PERM;
          else begin lane <= lane + 5'd1; st <= S_ABS_RD; end
        end
        S_ABS_PERM: if (k_done) begin
          if (final_blk) begin st <= S_IDLE; done <= 1'b1; fresh <= 1'b1; end
          else begin blk_byte <= blk_byte + {4'd0, rw, 3'd0}; lane <= '0; st <= S_ABS_RD; end
        end
        S_SQ_RUN: begin
          if (sq_take) begin
            obuf <= obuf >> cw;
            ocnt <= ocnt - 11'(cw);
            if (fmt_q == SQ_RAW || fmt_q == SQ_SABER13) nout <= nout + 8'd1;
            else if (acc) begin
              if (have_lo) begin nout <= nout + 8'd1; have_lo <= 1'b0; end
              else begin lo_c <= cval; have_lo <= 1'b1; end
            end
            if (sq_last) begin st <= S_IDLE; done <= 1'b1; end
          end else begin
            // buffer dry: keep the left-over bits, refill
            lob    <= obuf[23:0];
            lob_sh <= 5'(5'd24 - 5'(ocnt));
            gap    <= 5'(5'd24 - 5'(ocnt));
            st     <= S_SQ_LOB;
          end
        end
        S_SQ_LOB: begin
          // left-align the left-over bits with fixed shifts of 4 and 2
          if (lob_sh >= 5'd4)      begin lob <= lob << 4; lob_sh <= lob_sh - 5'd4; end
          else if (lob_sh != 5'd0) begin lob <= lob << 2; lob_sh <= lob_sh - 5'd2; end
          else if (fresh || k_done_seen) st <= S_SQ_LOAD;
        end
        S_SQ_LOAD: begin
          obuf <= '0;
          for (int i = 0; i < 21; i++)
            if (5'(i) < rw) obuf[24 + 64*i +: 64] <= k_state[64*i +: 64];
          obuf[23:0] <= lob;
          ocnt  <= rbits + 11'd24;
          fresh <= 1'b0;
          st    <= S_SQ_GAP;
        end
        default: begin // S_SQ_GAP: close the gap below the left-over bits
          if (gap >= 5'd4)      begin obuf <= obuf >> 4; ocnt <= ocnt - 11'd4; gap <= gap - 5'd4; end
          else if (gap != 5'd0) begin obuf <= obuf >> 2; ocnt <= ocnt - 11'd2; gap <= gap - 5'd2; end
          else st <= S_SQ_RUN;
        end
      endcase
    end
  end

  // permutation start pulse and completion flag for the refill path
  assign k_start = k_start_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin k_start_r <= 1'b0; k_done_seen <= 1'b0; end
    else begin
      k_start_r <= 1'b0;
      if (st == S_SQ_RUN && !sq_take && !fresh) k_start_r <= 1'b1;
      if (st == S_ABS_XOR && lane == rw - 5'd1) k_start_r <= 1'b1;
      if (k_start_r || (st == S_SQ_RUN && !sq_take)) k_done_seen <= 1'b0;
      else if (k_done) k_done_seen <= 1'b1;
    end
  end
endmodule
