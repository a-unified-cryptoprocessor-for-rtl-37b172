// Self-checking test of the coefficient stream unit.
// A behavioural two-set memory (one clock read latency) holds random
// polynomials in the processor's layout (word k: set k[6], address
// base + k[5:0], coefficient 2k in bits [31:0], 2k+1 in [63:32]). Each
// instruction is run and every output coefficient is compared with a
// reference computed here from the specifications: Decompose for both
// gamma2, Power2Round, MakeHint and its weight, UseHint, Saber AddRound,
// Verify / CMOV / COPY, the Dilithium norm check (pass and fail), Write,
// Refresh over a short run, Counter_ref and SampleInBall (challenge
// polynomial rebuilt here from the sign word and the byte stream) and
// Encode_H for both w1 widths (bit string rebuilt here), and unpack then
// pack of a 13-bit t0 string (2^12 - c fields) back to the same string. Checks the 2*64 + 5 clocks from
// start to done of a whole-polynomial instruction (128 clocks of streaming
// as the paper gives for Decompose and Power2Round, plus the pipeline tail).
module tb_coef_stream_unit;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, differ, dil_fail, rd_en, sel_saber, g88;
  cs_op_e op;
  logic [7:0] len;
  logic [SET_AW-1:0] a_base, b_base, d_base, d2_base, rd_addr;
  logic [WORD_W-1:0] imm;
  logic [2:0] eps_t;
  logic [9:0] omega, hint_count;
  logic [WORD_W-1:0] rdata [2];
  logic wr_en [2];
  logic [SET_AW-1:0] wr_addr [2];
  logic [WORD_W-1:0] wr_data [2];
  logic [WORD_W-1:0] mem [2][1024];
  int checks = 0, failures = 0;
  localparam longint Q = 8380417;

  coef_stream_unit dut (.*);

  always_ff @(posedge clk) begin
    if (rd_en) begin rdata[0] <= mem[0][rd_addr[9:0]]; rdata[1] <= mem[1][rd_addr[9:0]]; end
    for (int k = 0; k < 2; k++) if (wr_en[k] && rst_n) mem[k][wr_addr[k][9:0]] <= wr_data[k];
  end

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint getc(input int base, input int i);
    int k = i / 2;
    return longint'(mem[k / 64][base + k % 64][(i % 2) * 32 +: 32]);
  endfunction
  task automatic putc(input int base, input int i, input longint v);
    int k = i / 2;
    mem[k / 64][base + k % 64][(i % 2) * 32 +: 32] = 32'(v);
  endtask
  function automatic void decomp(input longint r, input bit is88, output longint r1, output longint r0);
    longint a;
    a = is88 ? 190464 : 523776;
    r0 = r % a; if (r0 > a / 2) r0 -= a;
    if (r - r0 == Q - 1) begin r1 = 0; r0 = r0 - 1; end else r1 = (r - r0) / a;
  endfunction
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("fail: %s", what); end
  endtask

  int clocks;
  task automatic run(input cs_op_e o, input int a, input int b, input int d, input int d2,
                     input int n = 128, input logic [63:0] im = '0);
    @(negedge clk);
    op = o; a_base = 12'(a); b_base = 12'(b); d_base = 12'(d); d2_base = 12'(d2);
    len = 8'(n); imm = im; start = 1;
    @(negedge clk); start = 0; clocks = 1;
    while (!done && clocks < 1000) begin @(negedge clk); clocks++; end
  endtask

  initial begin
    start = 0; op = CS_COPY; len = 128; a_base = 0; b_base = 0; d_base = 0; d2_base = 0;
    imm = '0; sel_saber = 0; g88 = 0; eps_t = 3'd4; omega = 10'd80;
    for (int s = 0; s < 2; s++) for (int i = 0; i < 1024; i++) mem[s][i] = '0;
    for (int i = 0; i < 256; i++) begin
      putc(0, i, {$urandom} % Q);              // A
      putc(64, i, {$urandom} % Q);             // B
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Decompose, both gamma2
    for (int gg = 0; gg < 2; gg++) begin
      g88 = gg[0];
      run(CS_DECOMP, 0, 0, 128, 192);
      chk(clocks == 133, $sformatf("decompose clocks %0d", clocks));
      for (int i = 0; i < 256; i++) begin
        longint e1, e0;
        decomp(getc(0, i), g88, e1, e0);
        chk(getc(128, i) == e1 && getc(192, i) == ((e0 < 0) ? e0 + Q : e0), $sformatf("decompose %0d", i));
      end
    end
    // Power2Round
    run(CS_P2R, 0, 0, 128, 192);
    for (int i = 0; i < 256; i++) begin
      longint r, e0;
      r = getc(0, i); e0 = r % 8192; if (e0 > 4096) e0 -= 8192;
      chk(getc(128, i) == (r - e0) / 8192 && getc(192, i) == ((e0 < 0) ? e0 + Q : e0), "power2round");
    end
    // MakeHint between A and a slightly perturbed copy of A
    g88 = 1;
    for (int i = 0; i < 256; i++) putc(256, i, (getc(0, i) + (($urandom_range(0, 3) == 0) ? 100000 : 10)) % Q);
    run(CS_CLRFLAGS, 0, 0, 0, 0);
    run(CS_MAKEHINT, 0, 256, 320, 0);
    begin
      int w = 0;
      for (int i = 0; i < 256; i++) begin
        longint a1, a0, b1, b0;
        decomp(getc(0, i), 1, a1, a0); decomp(getc(256, i), 1, b1, b0);
        chk(getc(320, i) == longint'(a1 != b1), "makehint");
        if (a1 != b1) w++;
      end
      chk(int'(hint_count) == w, $sformatf("hint weight %0d exp %0d", hint_count, w));
    end
    // UseHint: r from A, hints from the MakeHint output
    run(CS_USEHINT, 0, 320, 384, 0);
    for (int i = 0; i < 256; i++) begin
      longint r1, r0, e;
      decomp(getc(0, i), 1, r1, r0);
      e = (getc(320, i) == 0) ? r1 : (r0 > 0) ? (r1 + 1) % 44 : (r1 + 43) % 44;
      chk(getc(384, i) == e, "usehint");
    end
    // Norm check: bounded vector passes, then one coefficient over fails
    for (int i = 0; i < 256; i++) putc(448, i, ($urandom_range(0, 1)) ? $urandom_range(0, 999) : Q - $urandom_range(1, 999));
    run(CS_CLRFLAGS, 0, 0, 0, 0);
    run(CS_DVERIFY, 448, 0, 0, 0, 128, 64'd1000);
    @(negedge clk); chk(!dil_fail, "norm check pass");
    putc(448, 77, Q - 1000);
    run(CS_DVERIFY, 448, 0, 0, 0, 128, 64'd1000);
    @(negedge clk); chk(dil_fail, "norm check fail");
    // Counter_ref with the fail flag set zeroes the hint weight
    run(CS_CNTREF, 0, 0, 0, 0);
    @(negedge clk); chk(hint_count == 0, "counter_ref");
    // Saber AddRound on the Saber NTT prime
    sel_saber = 1;
    for (int i = 0; i < 256; i++) putc(512, i, {$urandom} % 16760833);
    run(CS_ADDROUND, 512, 0, 576, 0);
    for (int i = 0; i < 256; i++) begin
      longint x;
      x = getc(512, i); if (x > 16760833 / 2) x -= 16760833;
      chk(getc(576, i) == (((x + 4) % 8192 + 8192) % 8192) >> 3, "addround");
    end
    // Verify equal (A against A), CMOV must then keep A
    run(CS_CLRFLAGS, 0, 0, 0, 0);
    run(CS_VERIFY, 0, 0, 0, 0);
    @(negedge clk); chk(!differ, "verify equal");
    run(CS_CMOV, 0, 64, 640, 0);
    for (int i = 0; i < 256; i++) chk(getc(640, i) == getc(0, i), "cmov keep");
    // Verify A against B: differ, CMOV selects B, COPY still copies A
    run(CS_VERIFY, 0, 64, 0, 0);
    @(negedge clk); chk(differ, "verify differ");
    run(CS_CMOV, 0, 64, 640, 0);
    for (int i = 0; i < 256; i++) chk(getc(640, i) == getc(64, i), "cmov select");
    run(CS_COPY, 0, 64, 704, 0);
    for (int i = 0; i < 256; i++) chk(getc(704, i) == getc(0, i), "copy");
    // Write and a short Refresh
    run(CS_WRITE, 0, 0, 900, 0, 1, 64'h0000_0000_0000_BEEF);
    @(negedge clk); chk(mem[0][900] == 64'hBEEF, "write");
    for (int i = 0; i < 12; i++) mem[0][800 + i] = 64'hFFFF;
    run(CS_REFRESH, 0, 0, 800, 0, 10);
    for (int i = 0; i < 12; i++) chk(mem[0][800 + i] == ((i < 10) ? 64'd0 : 64'hFFFF), $sformatf("refresh %0d", i));
    // SampleInBall for the three tau values, from a random SHAKE-256 stream
    foreach (taus[t]) begin
      logic [63:0] sg;
      int k;
      for (int w = 0; w < 40; w++) mem[0][400 + w] = {$urandom, $urandom};
      for (int w = 0; w < 128; w++) mem[w / 64][500 + w % 64] = {$urandom, $urandom};
      run(CS_SIB, 400, 0, 500, 0, 128, 64'(4 * taus[t]));
      for (int i = 0; i < 256; i++) sib_ref[i] = 0;
      sg = mem[0][400]; k = 8;
      for (int i = 256 - taus[t]; i < 256; i++) begin
        logic [7:0] b;
        do begin b = mem[0][400 + k / 8][(k % 8) * 8 +: 8]; k++; end while (int'(b) > i);
        sib_ref[i] = sib_ref[b];
        sib_ref[b] = sg[0] ? Q - 1 : 1;
        sg = sg >> 1;
      end
      for (int i = 0; i < 256; i++) chk(getc(500, i) == sib_ref[i], $sformatf("sampleinball tau %0d coef %0d", taus[t], i));
    end
    // Encode_H: 4-bit (gamma2 = (q-1)/32) and 6-bit (gamma2 = (q-1)/88) w1
    for (int gg = 0; gg < 2; gg++) begin
      logic [1535:0] bits;
      int wd;
      wd = gg ? 6 : 4;
      g88 = 1'(gg);
      bits = '0;
      for (int i = 0; i < 256; i++) begin
        int v;
        v = gg ? $urandom_range(0, 43) : $urandom_range(0, 15);
        putc(200, i, v);
        for (int b = 0; b < wd; b++) bits[wd * i + b] = v[b];
      end
      for (int w = 0; w < 30; w++) mem[0][700 + w] = 64'hDEAD;
      run(CS_SIB, 200, 0, 700, 0, 128, 64'd1);
      chk(clocks < 140, $sformatf("encode_h clocks %0d", clocks));
      for (int w = 0; w < 30; w++)
        chk(mem[0][700 + w] == ((w < 4 * wd) ? bits[64 * w +: 64] : 64'hDEAD), $sformatf("encode_h w=%0d word %0d", wd, w));
    end
    // unpack t0 (W = 13, fields 2^12 - c) from set 0 at 300, then pack it back
    begin
      logic [3327:0] bits;
      longint cref [256];
      logic [26:0] x;
      for (int i = 0; i < 256; i++) begin
        longint f;
        f = longint'($urandom_range(0, 8191));
        for (int b = 0; b < 13; b++) bits[13 * i + b] = f[b];
        cref[i] = ((4096 - f) % Q + Q) % Q;
      end
      for (int w = 0; w < 52; w++) mem[0][300 + w] = bits[64 * w +: 64];
      x = {7'd0, 5'd12, 1'b1, 5'd13, 9'd0} | 27'd2;
      run(CS_SIB, 300, 0, 600, 0, 128, 64'(x));
      for (int i = 0; i < 256; i++) chk(getc(600, i) == cref[i], $sformatf("unpack t0 coef %0d", i));
      run(CS_SIB, 600, 0, 850, 0, 128, 64'(x | 27'd1));
      for (int w = 0; w < 52; w++) chk(mem[0][850 + w] == bits[64 * w +: 64], $sformatf("pack t0 word %0d", w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int taus [3] = '{39, 49, 60};
  longint sib_ref [256];
endmodule
