// Dilithium SampleInBall: builds the challenge polynomial c, which has tau
// coefficients equal to +1 or -1 and all others 0, from a SHAKE-256 stream.
//
// How it works: the first 64-bit word of the stream gives the sign bits
// (least significant bit first). Each later byte b is a candidate position
// for coefficient index i, which runs from 256 - tau to 255. If b <= i, the
// byte is accepted. Then c[i] takes the old value of c[b], and c[b] becomes
// +1 or -1 according to the next sign bit. Otherwise the byte is rejected.
// c is kept as 256 two-bit entries (00 = 0, 01 = +1, 11 = -1). They are
// cleared in the start clock, so the polynomial needs no zero-filled memory.
// Once tau coefficients have been placed, the entries are written out as
// 64 output beats in the memory layout used everywhere else: beat j carries
// word j of the even set (coefficients 2j, 2j+1) and word 64 + j of the odd
// set (coefficients 128 + 2j, 129 + 2j), with -1 stored as q - 1.
//
// Interface: a one-clock req asks for the next 64-bit word of the stream;
// the word must come back with w_valid, at any later clock. The tau value
// (39, 49 or 60) is taken at start. done pulses one clock after the last
// output beat.
// Timing: per stream word, one clock for the request, the memory latency,
// then one byte per clock (8 clocks, or fewer when the last coefficient is
// placed); then 64 output clocks.
// The algorithm is the scheme's own. The paper runs it in place in memory,
// after a Refresh instruction has zero-filled the target. The local two-bit
// array, the request handshake and the output order are this design's.
module dil_sampleinball
  import cp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [6:0]        tau,
  output logic              req,
  input  logic              w_valid,
  input  logic [WORD_W-1:0] w_data,
  output logic              busy,
  output logic              done,
  output logic              out_valid,
  output logic [5:0]        out_addr,
  output logic [WORD_W-1:0] out_data [2]
);
  typedef enum logic [2:0] {B_IDLE, B_REQ, B_WAIT, B_BYTE, B_OUT} st_e;
  st_e               st;
  logic [1:0]        c [N];
  logic [63:0]       signs;
  logic [63:0]       buf_w;
  logic [2:0]        bcnt;
  logic [8:0]        i;          // current index, 256 - tau .. 256
  logic              have_signs;
  logic [5:0]        oaddr;

  logic [7:0] b;
  logic       accept;
  assign b      = buf_w[{bcnt, 3'b000} +: 8];
  assign accept = (st == B_BYTE) && ({1'b0, b} <= i);

  assign busy      = (st != B_IDLE);
  assign req       = (st == B_REQ);
  assign out_valid = (st == B_OUT);
  assign out_addr  = oaddr;

  function automatic logic [HALF_W-1:0] val(input logic [1:0] e);
    unique case (e)
      2'b01:   return HALF_W'(1);
      2'b11:   return HALF_W'(Q_DIL - 1);
      default: return '0;
    endcase
  endfunction

  always_comb
    for (int s = 0; s < 2; s++)
      out_data[s] = {val(c[128*s + 2*oaddr + 1]), val(c[128*s + 2*oaddr])};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= B_IDLE; done <= 1'b0; signs <= '0; buf_w <= '0; bcnt <= '0;
      i <= '0; have_signs <= 1'b0; oaddr <= '0;
      for (int k = 0; k < N; k++) c[k] <= 2'b00;
    end else begin
      done <= 1'b0;
      unique case (st)
        B_IDLE: if (start) begin
          for (int k = 0; k < N; k++) c[k] <= 2'b00;
          i <= 9'd256 - 9'(tau); have_signs <= 1'b0; oaddr <= '0;
          st <= (tau == 7'd0) ? B_OUT : B_REQ;
        end
        B_REQ:  st <= B_WAIT;
        B_WAIT: if (w_valid) begin
          if (!have_signs) begin
            signs <= w_data; have_signs <= 1'b1; st <= B_REQ;
          end else begin
            buf_w <= w_data; bcnt <= '0; st <= B_BYTE;
          end
        end
        B_BYTE: begin
          if (accept) begin
            c[i[7:0]] <= c[b];
            c[b]      <= signs[0] ? 2'b11 : 2'b01;
            signs     <= signs >> 1;
            i         <= i + 9'd1;
          end
          bcnt <= bcnt + 3'd1;
          if (accept && i == 9'd255) st <= B_OUT;
          else if (bcnt == 3'd7) st <= B_REQ;
        end
        B_OUT: begin
          oaddr <= oaddr + 6'd1;
          if (oaddr == 6'd63) begin st <= B_IDLE; done <= 1'b1; end
        end
        default: st <= B_IDLE;
      endcase
    end
  end
endmodule
