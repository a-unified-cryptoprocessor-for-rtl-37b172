// Self-checking test of the unified pack/unpack unit.
// Runs every field format of the two schemes in both directions:
// Dilithium eta = 2 (3 bits, 2 - c), eta = 4 (4 bits, 4 - c), t0 (13 bits,
// 2^12 - c), t1 (10 bits), z for gamma1 = 2^17 (18 bits) and 2^19 (20 bits),
// and Saber 13-bit (BS2POLVEC). For each run, random fields are drawn, the
// bit string is built here (field i at bits [W*i, W*i + W)) and the
// coefficients are computed from the fields (mod q for offset formats).
// Unpack is fed the string from a stand-in memory that answers requests
// after 1..3 clocks, and every output word is compared. Pack is fed the
// coefficients with random idle clocks, and every output word is compared.
// Both directions must produce exactly 128 or 4*W words, in order, and
// pulse done.
module tb_dil_pack_unpack;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, pack = 0, off_en = 0, req, w_valid = 0, in_valid = 0, busy, done, out_valid;
  logic [4:0] width = 5'd1, off_sh = '0;
  logic [63:0] w_data = '0, in_word = '0, out_word;
  logic [6:0] out_idx;
  int checks = 0, failures = 0;
  localparam longint Q = 8380417;

  dil_pack_unpack dut (.*);

  initial begin : watchdog
    #50000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [5119:0] bits;
  longint coef [256];
  int widx, nout, ndone;
  bit unpacking;

  // stand-in memory for the unpack stream
  initial begin
    forever begin
      @(posedge clk);
      if (req) begin
        int d;
        d = $urandom_range(1, 3);
        repeat (d - 1) @(posedge clk);
        @(negedge clk); w_valid = 1; w_data = bits[64 * widx +: 64]; widx++;
        @(negedge clk); w_valid = 0;
      end
    end
  end

  always @(posedge clk) begin
    if (done) ndone++;
    if (out_valid) begin
      logic [63:0] want;
      want = unpacking ? {32'(coef[2 * out_idx + 1]), 32'(coef[2 * out_idx])} : bits[64 * out_idx +: 64];
      checks += 2;
      if (out_word != want) begin
        failures++;
        if (failures < 10) $display("%s W=%0d word %0d: got %h want %h", unpacking ? "unpack" : "pack", width, out_idx, out_word, want);
      end
      if (int'(out_idx) != nout) begin failures++; $display("index %0d, expected %0d", out_idx, nout); end
      nout++;
    end
  end

  initial begin
    static int fw [7] = '{3, 4, 13, 10, 18, 20, 13};
    static int fs [7] = '{1, 2, 12, 0, 17, 19, 0};
    static bit fo [7] = '{1, 1, 1, 0, 1, 1, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 28; run++) begin
      int f, wd;
      f = run % 7; wd = fw[f];
      bits = '0;
      for (int i = 0; i < 256; i++) begin
        longint fld;
        fld = longint'($urandom) & ((64'd1 << wd) - 1);
        // eta formats only use fields 0..2*eta
        if (f == 0) fld = fld % 5;
        if (f == 1) fld = fld % 9;
        for (int b = 0; b < wd; b++) bits[wd * i + b] = fld[b];
        coef[i] = fo[f] ? (((longint'(1) << fs[f]) - fld) % Q + Q) % Q : fld;
      end
      for (int dir = 0; dir < 2; dir++) begin
        unpacking = (dir == 0);
        widx = 0; nout = 0; ndone = 0;
        @(negedge clk);
        start = 1; pack = !unpacking; width = 5'(wd); off_en = fo[f]; off_sh = 5'(fs[f]);
        @(negedge clk); start = 0;
        if (!unpacking)
          for (int k = 0; k < 128; k++) begin
            if ($urandom_range(0, 3) == 0) @(negedge clk);
            in_valid = 1; in_word = {32'(coef[2 * k + 1]), 32'(coef[2 * k])};
            @(negedge clk); in_valid = 0;
          end
        else
          while (busy) @(negedge clk);
        repeat (3) @(negedge clk);
        checks += 2;
        if (nout != (unpacking ? 128 : 4 * wd)) begin failures++; $display("W=%0d dir %0d: %0d words", wd, dir, nout); end
        if (ndone != 1 || busy) begin failures++; $display("W=%0d dir %0d: done %0d busy %0d", wd, dir, ndone, busy); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
