// End-to-end test of the cryptoprocessor at its default (full) size.
// Through the host port it loads a secret polynomial S (coefficients in
// [-3, 3]), a 34-byte seed, a Dilithium-style test vector and a program of
// 18 instruction words and a stand-in SHAKE-256 stream, starts the program and reads the results back:
//   - SHA3-256(seed) squeezed raw, compared with the standard digest;
//   - the Saber public polynomial A from SHAKE-128(seed), squeezed in
//     parallel with an NTT; A must be 13-bit;
//   - binomial samples (mu = 8) squeezed in parallel with the NTT of A;
//     every one must lie in [-4, 4] mod the Saber NTT prime;
//   - round(S * A) by NTT, coefficient-wise multiply and INTT on the Saber
//     NTT prime followed by AddRound; compared with a schoolbook product of
//     the integers mod 2^13 computed here (the 24-bit prime makes it exact
//     for these operands);
//   - a signing-style loop: a polynomial is moved by a step each pass and
//     checked against a bound; the controller must jump back exactly twice;
//   - a Write instruction stores a nonce;
//   - SampleInBall (tau = 60) from the stand-in stream, compared with the
//     challenge polynomial rebuilt here from the same words;
//   - Encode_H of a 6-bit w1 polynomial, against the packed bit string.
// Mechanisms counted (each must occur at least once): words issuing two
// instructions, two engines moving data in the same clock, Keccak
// permutations, left-over-bit refills of the squeeze buffer, NTT / INTT /
// multiply runs, loop jumps, host reads.
module tb_crypto_top;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_valid, h_ready, h_rvalid, busy, done, differ, dil_fail;
  logic [1:0] h_cmd;
  logic [13:0] h_addr;
  logic [WORD_W-1:0] h_wdata, h_rdata;
  int checks = 0, failures = 0;
  localparam longint QS = 16760833, QD = 8380417;

  crypto_top dut (.*);

  initial begin : watchdog
    #20000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("fail: %s", what); end
  endtask

  // ---- mechanism counters
  int n_dual = 0, n_perm = 0, n_lob = 0, n_ntt = 0, n_intt = 0, n_mul = 0, n_hrd = 0;
  always @(posedge clk) if (rst_n) begin
    if ((dut.u_pa.rd_en || dut.u_pa.wr_en[0] || dut.u_pa.wr_en[1]) &&
        (dut.u_sh.rd_en || dut.u_sh.wr_en[0] || dut.u_sh.wr_en[1])) n_dual++;
    if (dut.u_sh.u_keccak.done) n_perm++;
    if (dut.u_sh.st == dut.u_sh.S_SQ_LOB) n_lob++;
    if (dut.u_pa.start && dut.u_pa.op == PA_NTT) n_ntt++;
    if (dut.u_pa.start && dut.u_pa.op == PA_INTT) n_intt++;
    if (dut.u_pa.start && dut.u_pa.op == PA_MUL) n_mul++;
    if (h_rvalid) n_hrd++;
  end

  // ---- host access
  task automatic hcmd(input logic [1:0] c, input logic [13:0] a, input logic [63:0] d);
    @(negedge clk);
    while (!h_ready) @(negedge clk);
    h_valid = 1; h_cmd = c; h_addr = a; h_wdata = d;
    @(negedge clk); h_valid = 0;
  endtask
  task automatic hread(input int set, input int addr, output logic [63:0] d);
    hcmd(2'd1, {2'(set), 12'(addr)}, '0);
    while (!h_rvalid) @(negedge clk);
    d = h_rdata;
  endtask
  // coefficient i of the polynomial at word base of a pair
  task automatic put_poly(input int pr, input int base, input longint c [256]);
    for (int k = 0; k < 128; k++)
      hcmd(2'd0, {1'(pr), 1'(k / 64), 12'(base + k % 64)}, {32'(c[2*k+1]), 32'(c[2*k])});
  endtask
  task automatic get_poly(input int pr, input int base, output longint c [256]);
    logic [63:0] d;
    for (int k = 0; k < 128; k++) begin
      hread(2 * pr + k / 64, base + k % 64, d);
      c[2*k] = longint'(d[31:0]); c[2*k+1] = longint'(d[63:32]);
    end
  endtask

  function automatic logic [51:0] slot(input int eng, input int op, input int pr, input int a,
                                       input int d, input logic [26:0] x);
    return {2'(eng), 4'(op), 1'(pr), 9'(a / 8), 9'(d / 8), x};
  endfunction
  task automatic put_word(input int addr, input logic [3:0] ctrl, input logic [51:0] s1, input logic [51:0] s2);
    logic [107:0] w;
    w = {ctrl, s1, s2};
    hcmd(2'd2, 14'(addr), w[63:0]);
    hcmd(2'd2, 14'(addr) | 14'h400, {20'd0, w[107:64]});
  endtask
  function automatic logic [26:0] shx(input keccak_mode_e m, input sq_fmt_e f, input int len, input int mu = 8);
    return {2'(m), 3'(f), 12'(len), 4'(mu), 3'd2, 3'd0};
  endfunction
  function automatic logic [26:0] cfg(input bit sab, input bit g88);
    return {12'd0, 10'd80, g88, 3'd4, sab};
  endfunction

  localparam int E_SH = 1, E_PA = 2, E_CS = 3;
  logic [63:0] sib_w [40];
  longint w1_poly [256];
  longint s_poly [256], a_poly [256], r_poly [256], p_poly [256], d_poly [256], b_poly [256];
  logic [63:0] d;
  int clocks;

  initial begin
    h_valid = 0; h_cmd = 0; h_addr = 0; h_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // data: S in pair 0 at 0; seed (bytes 0..33) in set 2 at 0; P and D in pair 1
    for (int i = 0; i < 256; i++) begin
      int v;
      v = $urandom_range(0, 6) - 3;
      s_poly[i] = (v < 0) ? QS + v : v;
      p_poly[i] = (i == 9) ? QD - 4000 : (i % 50);
      d_poly[i] = (i == 9) ? 1000 : 0;
    end
    put_poly(0, 0, s_poly);
    put_poly(1, 256, p_poly);
    put_poly(1, 320, d_poly);
    for (int w = 0; w < 5; w++) begin
      logic [63:0] x;
      x = '0;
      for (int b = 0; b < 8; b++) if (8*w + b < 34) x[8*b +: 8] = 8'(8*w + b);
      hcmd(2'd0, {2'd2, 12'(w)}, x);
    end
    // stand-in SHAKE-256 output for SampleInBall: 40 random words, set 2 from 1000
    for (int w = 0; w < 40; w++) begin
      sib_w[w] = {$urandom, $urandom};
      hcmd(2'd0, {2'd2, 12'(1000 + w)}, sib_w[w]);
    end
    // w1 polynomial (6-bit, gamma2 = (q-1)/88) in pair 1 at 1200
    for (int i = 0; i < 256; i++) w1_poly[i] = $urandom_range(0, 43);
    put_poly(1, 1200, w1_poly);
    // program
    put_word(0,  4'b1000, slot(0, 0, 0, 0, 0, cfg(1, 1)), '0);
    put_word(1,  4'b0000, slot(E_SH, int'(SH_RESET), 1, 0, 0, '0),
                          slot(E_PA, int'(PA_NTT), 0, 0, 128, '0));
    put_word(2,  4'b0000, slot(E_SH, int'(SH_ABSORB), 1, 0, 0, shx(KM_SHA3_256, SQ_RAW, 34)), '0);
    put_word(3,  4'b0000, slot(E_SH, int'(SH_SQUEEZE), 1, 0, 8, shx(KM_SHA3_256, SQ_RAW, 4)), '0);
    put_word(4,  4'b0000, slot(E_SH, int'(SH_RESET), 1, 0, 0, '0), '0);
    put_word(5,  4'b0000, slot(E_SH, int'(SH_ABSORB), 1, 0, 0, shx(KM_SHAKE128, SQ_RAW, 34)), '0);
    put_word(6,  4'b0000, slot(E_SH, int'(SH_SQUEEZE), 0, 0, 256, shx(KM_SHAKE128, SQ_SABER13, 0)), '0);
    put_word(7,  4'b0000, slot(E_SH, int'(SH_SQUEEZE), 1, 0, 128, shx(KM_SHAKE128, SQ_BINOM, 0, 8)),
                          slot(E_PA, int'(PA_NTT), 0, 256, 320, '0));
    put_word(8,  4'b0000, '0, slot(E_PA, int'(PA_MUL), 0, 128, 384, {9'(320 / 8), 18'd0}));
    put_word(9,  4'b0000, '0, slot(E_PA, int'(PA_INTT), 0, 384, 448, '0));
    put_word(10, 4'b0000, '0, slot(E_CS, int'(CS_ADDROUND), 0, 448, 512, {8'd128, 19'd0}));
    put_word(11, 4'b1000, slot(0, 0, 0, 0, 0, cfg(0, 1)), '0);
    put_word(12, 4'b0010, '0, slot(E_PA, int'(PA_ADD), 1, 256, 256, {9'(320 / 8), 18'd0}));
    put_word(13, 4'b0000, slot(E_CS, int'(CS_CLRFLAGS), 1, 0, 0, '0), '0);
    put_word(14, 4'b0100, slot(E_CS, int'(CS_DVERIFY), 1, 256, 0, 27'd1500), '0);
    put_word(15, 4'b0000, slot(E_CS, int'(CS_SIB), 1, 1000, 1104, 27'd240), '0);
    put_word(16, 4'b0000, slot(E_CS, int'(CS_SIB), 1, 1200, 1304, 27'd1), '0);
    put_word(17, 4'b0001, slot(E_CS, int'(CS_WRITE), 1, 0, 600, 27'h5A5A), '0);
    // run
    hcmd(2'd3, '0, '0);
    clocks = 0;
    while (!done && clocks < 200000) begin @(negedge clk); clocks++; end
    chk(done, "program finished");
    $display("program ran %0d clocks", clocks);

    // SHA3-256 of bytes 0..33
    begin
      logic [63:0] ref_h [4] = '{64'he672201e0c456dbd, 64'hcfa044635e2d1514, 64'h688d65c86ab1ff14, 64'ha3c937f7f03a6e17};
      for (int w = 0; w < 4; w++) begin hread(2, 8 + w, d); chk(d == ref_h[w], $sformatf("sha3-256 word %0d", w)); end
    end
    // A is 13-bit, binomial samples in [-4, 4]
    get_poly(0, 256, a_poly);
    get_poly(1, 128, b_poly);
    for (int i = 0; i < 256; i++) begin
      chk(a_poly[i] < 8192, "A coefficient 13-bit");
      chk(b_poly[i] <= 4 || b_poly[i] >= QS - 4, "binomial range");
    end
    // round(S * A) against the schoolbook product mod 2^13
    get_poly(0, 512, r_poly);
    for (int i = 0; i < 256; i++) begin
      longint acc;
      acc = 0;
      for (int j = 0; j < 256; j++) begin
        longint sv, t;
        sv = (s_poly[j] > QS / 2) ? s_poly[j] - QS : s_poly[j];
        t = sv * a_poly[(i - j + 256) % 256];
        acc += (j <= i) ? t : -t;
      end
      chk(r_poly[i] == (((acc + 4) % 8192 + 8192) % 8192) >> 3, $sformatf("round(S*A)[%0d]", i));

    end
    // loop result: coefficient 9 moved from -4000 to -1000, nonce written
    get_poly(1, 256, p_poly);
    chk(p_poly[9] == QD - 1000 && p_poly[10] == 10, "loop polynomial");
    hread(2, 600, d);
    chk(d == 64'h5A5A, "nonce write");

    // SampleInBall challenge, tau = 60
    begin
      longint cref [256], cgot [256];
      logic [63:0] sg;
      int k, nz;
      for (int i = 0; i < 256; i++) cref[i] = 0;
      sg = sib_w[0]; k = 8;
      for (int i = 196; i < 256; i++) begin
        logic [7:0] b;
        do begin b = sib_w[k / 8][(k % 8) * 8 +: 8]; k++; end while (int'(b) > i);
        cref[i] = cref[b];
        cref[b] = sg[0] ? QD - 1 : 1;
        sg = sg >> 1;
      end
      get_poly(1, 1104, cgot);
      nz = 0;
      for (int i = 0; i < 256; i++) begin
        chk(cgot[i] == cref[i], $sformatf("challenge[%0d]", i));
        if (cgot[i] != 0) nz++;
      end
      chk(nz == 60, $sformatf("challenge weight %0d", nz));
    end
    // Encode_H: 24 words of 6-bit w1 in set 2 from 1304
    begin
      logic [1535:0] bits;
      bits = '0;
      for (int i = 0; i < 256; i++) for (int b = 0; b < 6; b++) bits[6 * i + b] = 1'(w1_poly[i] >> b);
      for (int w = 0; w < 24; w++) begin hread(2, 1304 + w, d); chk(d == bits[64 * w +: 64], $sformatf("encode_h word %0d", w)); end
    end
    // mechanisms
    chk(dut.u_pc.par_count >= 2, $sformatf("dual-issue words %0d", dut.u_pc.par_count));
    chk(n_dual > 0, "two engines on memory in one clock");
    chk(dut.u_pc.loop_count == 2, $sformatf("loop jumps %0d", dut.u_pc.loop_count));
    chk(n_perm > 2, $sformatf("keccak permutations %0d", n_perm));
    chk(n_lob > 0, "left-over refill");
    chk(n_ntt == 2 && n_intt == 1 && n_mul == 1, $sformatf("ntt %0d intt %0d mul %0d", n_ntt, n_intt, n_mul));
    chk(n_hrd > 0, "host reads");
    $display("mechanisms: dual-issue %0d, shared-clock memory use %0d, loops %0d, permutations %0d, refills %0d",
             dut.u_pc.par_count, n_dual, dut.u_pc.loop_count, n_perm, n_lob);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
