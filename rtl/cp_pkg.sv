// Shared constants and types of the unified lattice cryptoprocessor.
//
// The processor works on polynomials of 256 coefficients, stored two per
// 64-bit memory word: coefficient 2k sits in bits [31:0] ("half 0") and
// coefficient 2k+1 in bits [63:32] ("half 1"); a coefficient is held in the
// low COEF_W bits of its half. A polynomial occupies 64 words in each of the
// two memory sets of a set pair. The primes are the Dilithium prime
// 2^23-2^13+1 (also used as the small-error choice for Saber) and the Saber
// NTT prime 2^24-2^14+1; the latter is the configuration whose area the
// design's total figure is quoted for. The instruction encoding, opcode values
// and memory address widths below are this design's own choices.
package cp_pkg;

  localparam int unsigned N        = 256;   // polynomial degree
  localparam int unsigned COEF_W   = 25;    // widest supported NTT prime
  localparam int unsigned WORD_W   = 64;    // memory word, two coefficients
  localparam int unsigned HALF_W   = 32;
  localparam int unsigned NSETS    = 4;     // BRAM sets of the data memory
  localparam int unsigned SET_AW   = 12;    // address bits of one set

  // Primes of the form 2^X - 2^Y + 1
  localparam int unsigned DIL_X = 23, DIL_Y = 13;
  localparam logic [COEF_W-1:0] Q_DIL = COEF_W'((1 << 23) - (1 << 13) + 1);

  // Butterfly / coefficient operations
  typedef enum logic [2:0] {
    BF_CT  = 3'd0,   // Cooley-Tukey: (a + w*b, a - w*b)
    BF_GS  = 3'd1,   // Gentleman-Sande with halving: ((a+b)/2, w*(a-b)/2)
    BF_MUL = 3'd2,   // w*b
    BF_ADD = 3'd3,   // a + b
    BF_SUB = 3'd4    // a - b
  } bf_op_e;

  // Polynomial arithmetic unit operations (instruction Set-2, common part)
  typedef enum logic [2:0] {
    PA_NTT  = 3'd0,
    PA_INTT = 3'd1,
    PA_MUL  = 3'd2,
    PA_ADD  = 3'd3,
    PA_SUB  = 3'd4
  } pa_op_e;

  // SHA-SHAKE unit
  typedef enum logic [1:0] {SH_RESET = 2'd0, SH_ABSORB = 2'd1, SH_SQUEEZE = 2'd2} sh_cmd_e;
  typedef enum logic [1:0] {
    KM_SHA3_256  = 2'd0,   // rate 1088, domain 0x06
    KM_SHA3_512  = 2'd1,   // rate  576, domain 0x06
    KM_SHAKE128  = 2'd2,   // rate 1344, domain 0x1F
    KM_SHAKE256  = 2'd3    // rate 1088, domain 0x1F
  } keccak_mode_e;
  typedef enum logic [2:0] {
    SQ_RAW     = 3'd0,     // 64-bit words to consecutive addresses of bank 0
    SQ_SABER13 = 3'd1,     // Saber public polynomial, two 13-bit coefficients per clock
    SQ_BINOM   = 3'd2,     // Saber secret, centred binomial with parameter mu
    SQ_UNIFORM = 3'd3,     // Dilithium ExpandA, 23-bit rejection sampling below q
    SQ_ETA     = 3'd4,     // Dilithium ExpandS, 4-bit rejection sampling in [-eta, eta]
    SQ_GAMMA   = 3'd5      // Dilithium ExpandMask, 18/20-bit coefficients
  } sq_fmt_e;

  // Streaming unit for the scheme-specific coefficient instructions
  typedef enum logic [3:0] {
    CS_ADDROUND = 4'd0,  CS_ADDPACK  = 4'd1,  CS_UNPACK   = 4'd2,
    CS_VERIFY   = 4'd3,  CS_CMOV     = 4'd4,  CS_COPY     = 4'd5,
    CS_P2R      = 4'd6,  CS_DECOMP   = 4'd7,  CS_MAKEHINT = 4'd8,
    CS_USEHINT  = 4'd9,  CS_DVERIFY  = 4'd10, CS_REFRESH  = 4'd11,
    CS_WRITE    = 4'd12, CS_CNTREF   = 4'd13, CS_CLRFLAGS = 4'd14,
    CS_SIB      = 4'd15   // imm[1:0]: 0 SampleInBall, 1 Encode_H, 2 unpack, 3 pack
  } cs_op_e;

  // One request to a memory set (simple dual port: one read, one write)
  typedef struct packed {
    logic              re;
    logic [SET_AW-1:0] raddr;
    logic              we;
    logic [SET_AW-1:0] waddr;
    logic [WORD_W-1:0] wdata;
  } set_req_t;

  localparam set_req_t SET_REQ_IDLE = '0;

endpackage
