// Self-checking test of the SHA-SHAKE unit.
//
// The message is the 34 bytes 0x00..0x21 (a 32-byte seed followed by a
// two-byte nonce). Expected values are SHA3-256 and SHA3-512 digests and,
// for the SHAKE sampling formats, a weighted checksum sum((i+1)*c_i) mod 2^32
// over the 256 coefficients, all computed with an independent FIPS 202
// implementation. SQ_SABER13 and SQ_GAMMA with 20 bits from SHAKE-256 leave
// left-over bits at block boundaries, so they exercise the left-over-bits
// buffer; the 40-word raw squeeze spans three permutations.
module tb_sha_shake_unit;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, rd_en, gamma20, sel_saber;
  sh_cmd_e cmd; keccak_mode_e mode; sq_fmt_e fmt;
  logic [11:0] len; logic [3:0] mu; logic [2:0] eta;
  logic [SET_AW-1:0] in_base, out_base, rd_addr;
  logic [WORD_W-1:0] rdata [2];
  logic wr_en [2]; logic [SET_AW-1:0] wr_addr [2]; logic [WORD_W-1:0] wr_data [2];
  logic [WORD_W-1:0] mem [2][512];

  sha_shake_unit dut (.*);

  always_ff @(posedge clk) begin
    if (rd_en) begin rdata[0] <= mem[0][rd_addr[8:0]]; rdata[1] <= mem[1][rd_addr[8:0]]; end
    for (int k = 0; k < 2; k++) if (wr_en[k]) mem[k][wr_addr[k][8:0]] <= wr_data[k];
  end

  int checks = 0, failures = 0, gap_shift_clocks = 0;
  always @(posedge clk) if (dut.st == dut.S_SQ_GAP && dut.gap != 0 && dut.gap != 24) gap_shift_clocks++;

  task automatic issue(input sh_cmd_e c);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask

  task automatic absorb(input keccak_mode_e m);
    issue(SH_RESET);
    mode = m; len = 12'd34; in_base = '0;
    issue(SH_ABSORB);
  endtask

  function automatic logic [31:0] poly_chk(int base);
    logic [31:0] s = 0;
    for (int i = 0; i < 256; i++) begin
      int w = i / 2;
      logic [63:0] d = mem[w / 64][base + w % 64];
      s += 32'(i + 1) * (i[0] ? d[63:32] : d[31:0]);
    end
    return s;
  endfunction

  task automatic check(input string what, input logic [63:0] got, exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h expected %h", what, got, exp); end
  endtask

  task automatic sample(input keccak_mode_e m, input sq_fmt_e f, input logic [31:0] exp, input string what);
    absorb(m);
    fmt = f; out_base = 64;
    issue(SH_SQUEEZE);
    check(what, 64'(poly_chk(64)), 64'(exp));
  endtask

  localparam logic [63:0] SHA256 [4] = '{64'he672201e0c456dbd, 64'hcfa044635e2d1514,
                                         64'h688d65c86ab1ff14, 64'ha3c937f7f03a6e17};
  localparam logic [63:0] SHA512 [8] = '{64'haae0c845b0bd48d4, 64'hc3ce8a2a2223f44d,
    64'hc4acce20f01ba87d, 64'h9851204f37ae939c, 64'h16e78d3836b70614, 64'h7851a08573d726f1,
    64'h3129ecc36ead3338, 64'h7a6cc4983149da37};

  initial begin
    int t0;
    start = 0; cmd = SH_RESET; mode = KM_SHAKE128; fmt = SQ_RAW; len = '0; mu = 4'd8; eta = 3'd2;
    gamma20 = 0; sel_saber = 1; in_base = '0; out_base = '0;
    for (int i = 0; i < 512; i++) begin mem[0][i] = '0; mem[1][i] = '0; end
    for (int i = 0; i < 5; i++)
      for (int b = 0; b < 8; b++) mem[0][i][8*b +: 8] = (8*i + b < 34) ? 8'(8*i + b) : 8'h00;
    repeat (3) @(negedge clk); rst_n = 1;

    // SHA3-256, with absorb timing: 17 words x 2 clocks + 24 rounds + 3 control clocks
    issue(SH_RESET);
    mode = KM_SHA3_256; len = 12'd34;
    @(negedge clk); cmd = SH_ABSORB; start = 1; @(negedge clk); start = 0; t0 = 1;
    while (busy) begin @(negedge clk); t0++; end
    check("absorb clocks", 64'(t0), 64'(2*17 + 24 + 3));
    fmt = SQ_RAW; len = 12'd4; out_base = 200; issue(SH_SQUEEZE);
    for (int i = 0; i < 4; i++) check("sha3-256", mem[0][200+i], SHA256[i]);
    absorb(KM_SHA3_512);
    fmt = SQ_RAW; len = 12'd8; out_base = 200; issue(SH_SQUEEZE);
    for (int i = 0; i < 8; i++) check("sha3-512", mem[0][200+i], SHA512[i]);
    // 40 raw words of SHAKE-256, three permutations
    absorb(KM_SHAKE256);
    fmt = SQ_RAW; len = 12'd40; out_base = 300; issue(SH_SQUEEZE);
    begin
      logic [63:0] acc = 0;
      for (int i = 0; i < 40; i++) acc += 64'(i + 1) * mem[0][300+i];
      check("shake256 raw", 64'(acc[31:0]), 64'h155476a8);
    end
    sample(KM_SHAKE128, SQ_SABER13, 32'h08a9ffd9, "saber13");
    sample(KM_SHAKE128, SQ_UNIFORM, 32'h2ea0ff2d, "uniform");
    eta = 3'd2; sample(KM_SHAKE256, SQ_ETA, 32'h6e62ef8e, "eta2");
    eta = 3'd4; sample(KM_SHAKE256, SQ_ETA, 32'h2f32ad04, "eta4");
    gamma20 = 0; sample(KM_SHAKE256, SQ_GAMMA, 32'hab3f80cd, "gamma18");
    gamma20 = 1; sample(KM_SHAKE256, SQ_GAMMA, 32'hc76cda07, "gamma20");
    mu = 4'd6;  sample(KM_SHAKE128, SQ_BINOM, 32'h7060e640, "binom6");
    mu = 4'd8;  sample(KM_SHAKE128, SQ_BINOM, 32'h29b32f1a, "binom8");
    mu = 4'd10; sample(KM_SHAKE128, SQ_BINOM, 32'h2eb1817c, "binom10");
    checks++;
    if (gap_shift_clocks == 0) begin failures++; $display("left-over bits path never used"); end
    $display("clocks spent closing left-over gaps: %0d", gap_shift_clocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
