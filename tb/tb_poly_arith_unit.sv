// Self-checking test of the polynomial arithmetic unit.
//
// A behavioural two-bank memory holds four polynomials. For both primes the
// test runs NTT(A) and compares every coefficient with a reference
// Cooley-Tukey NTT computed here (same twiddle order, output in the unit's
// documented layout), then NTT(B), coefficient-wise multiply, INTT and
// compares with the schoolbook negacyclic product A*B mod (x^256+1, q).
// It also checks INTT(NTT(A)) = A, add and subtract, and the cycle counts
// (8*(64+LAT+3)+1 per transform, 128+LAT+3 per coefficient-wise operation,
// counted from the start clock to the done pulse).
module tb_poly_arith_unit;
  import cp_pkg::*;
  localparam int LAT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, sel_saber, busy, done, rd_en;
  pa_op_e op;
  logic [SET_AW-1:0] src_base, b_base, dst_base, rd_addr;
  logic [WORD_W-1:0] rdata [2];
  logic wr_en [2];
  logic [SET_AW-1:0] wr_addr [2];
  logic [WORD_W-1:0] wr_data [2];
  logic [WORD_W-1:0] mem [2][512];

  poly_arith_unit dut (.*);

  always_ff @(posedge clk) begin
    if (rd_en) begin rdata[0] <= mem[0][rd_addr[8:0]]; rdata[1] <= mem[1][rd_addr[8:0]]; end
    for (int k = 0; k < 2; k++) if (wr_en[k]) mem[k][wr_addr[k][8:0]] <= wr_data[k];
  end

  int checks = 0, failures = 0;
  longint unsigned q;
  longint unsigned pa[256], pb[256], ref_c[256], ref_ntt[256];

  function automatic longint unsigned powm(longint unsigned b, longint unsigned e, longint unsigned m);
    longint unsigned r = 1;
    b = b % m;
    while (e != 0) begin if (e[0]) r = (r * b) % m; b = (b * b) % m; e >>= 1; end
    return r;
  endfunction

  // natural layout: coefficient i at bank i[7], addr i[6:1], half i[0]
  task automatic store_nat(input int base, input longint unsigned p[256]);
    for (int i = 0; i < 256; i++) begin
      if (i[0]) mem[i/128][base + (i%128)/2][63:32] = 32'(p[i]);
      else      mem[i/128][base + (i%128)/2][31:0]  = 32'(p[i]);
    end
  endtask
  function automatic longint unsigned load_nat(int base, int i);
    return i[0] ? mem[i/128][base + (i%128)/2][63:32] : mem[i/128][base + (i%128)/2][31:0];
  endfunction
  // NTT-domain layout: bank i[0], half i[1], addr i[7:2]
  function automatic longint unsigned load_ntt(int base, int i);
    return i[1] ? mem[i%2][base + i/4][63:32] : mem[i%2][base + i/4][31:0];
  endfunction

  task automatic run(input pa_op_e o, input int s, input int b2, input int d, input int exp_cycles);
    int cyc;
    @(negedge clk);
    op = o; src_base = SET_AW'(s); b_base = SET_AW'(b2); dst_base = SET_AW'(d); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != exp_cycles) begin
      failures++; $display("cycle count op %0d: %0d expected %0d", o, cyc, exp_cycles);
    end
  endtask

  task automatic test_prime(input logic sab);
    longint unsigned root, zeta[256], a[256], t, z;
    int k, len;
    sel_saber = sab;
    q    = sab ? 64'd16760833 : 64'd8380417;
    root = sab ? 64'd3091885  : 64'd1753;
    for (int i = 0; i < 256; i++) begin
      logic [7:0] br;
      for (int j = 0; j < 8; j++) br[j] = 8'(i) >> (7 - j);
      zeta[i] = powm(root, 64'(br), q);
      pa[i] = {$urandom, $urandom} % q;
      pb[i] = {$urandom, $urandom} % q;
    end
    pa[0] = q - 1; pb[255] = q - 1;
    // reference NTT (Dilithium reference order, plain arithmetic)
    a = pa; k = 0;
    for (len = 128; len > 0; len >>= 1)
      for (int st = 0; st < 256; st += 2*len) begin
        k++; z = zeta[k];
        for (int j = st; j < st + len; j++) begin
          t = (z * a[j+len]) % q;
          a[j+len] = (a[j] + q - t) % q;
          a[j]     = (a[j] + t) % q;
        end
      end
    ref_ntt = a;
    // reference negacyclic product
    for (int i = 0; i < 256; i++) ref_c[i] = 0;
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        t = (pa[i] * pb[j]) % q;
        if (i + j < 256) ref_c[i+j] = (ref_c[i+j] + t) % q;
        else             ref_c[i+j-256] = (ref_c[i+j-256] + q - t) % q;
      end
    store_nat(0, pa); store_nat(64, pb);
    run(PA_NTT, 0, 0, 128, 8*(64+LAT+3)+1);
    for (int i = 0; i < 256; i++) begin
      checks++;
      if (load_ntt(128, i) != ref_ntt[i]) begin
        failures++;
        if (failures < 10) $display("NTT[%0d] %0d expected %0d", i, load_ntt(128, i), ref_ntt[i]);
      end
    end
    run(PA_INTT, 128, 0, 192, 8*(64+LAT+3)+1);
    for (int i = 0; i < 256; i++) begin
      checks++;
      if (load_nat(192, i) != pa[i]) begin
        failures++;
        if (failures < 10) $display("INTT(NTT)[%0d] %0d expected %0d", i, load_nat(192, i), pa[i]);
      end
    end
    run(PA_NTT, 64, 0, 192, 8*(64+LAT+3)+1);
    run(PA_MUL, 128, 192, 256, 128+LAT+3);
    run(PA_INTT, 256, 0, 256, 8*(64+LAT+3)+1);
    for (int i = 0; i < 256; i++) begin
      checks++;
      if (load_nat(256, i) != ref_c[i]) begin
        failures++;
        if (failures < 10) $display("prod[%0d] %0d expected %0d", i, load_nat(256, i), ref_c[i]);
      end
    end
    store_nat(0, pa); store_nat(64, pb);
    run(PA_ADD, 0, 64, 320, 128+LAT+3);
    run(PA_SUB, 0, 64, 384, 128+LAT+3);
    for (int i = 0; i < 256; i++) begin
      checks += 2;
      if (load_nat(320, i) != (pa[i] + pb[i]) % q) failures++;
      if (load_nat(384, i) != (pa[i] + q - pb[i]) % q) failures++;
    end
  endtask

  initial begin
    start = 0; sel_saber = 0; op = PA_NTT; src_base = '0; b_base = '0; dst_base = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    test_prime(1'b0);
    test_prime(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
