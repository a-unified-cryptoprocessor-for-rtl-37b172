// Self-checking test of the SampleInBall unit.
// For each run a random tau from {39, 49, 60} and a random stream of 64-bit
// words are chosen. A stand-in memory answers each request after a random
// 1..3 clocks. The reference follows the scheme's definition byte by byte:
// sign word first, then for i = 256 - tau .. 255 draw bytes until one is
// <= i, move c[b] to c[i], and set c[b] to +-1. Every output beat is
// compared (both words), the number of nonzero coefficients must equal
// tau, and the run must finish within the clocks the stream length allows.
module tb_dil_sampleinball;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, req, w_valid = 0, busy, done, out_valid;
  logic [6:0] tau = '0;
  logic [63:0] w_data = '0;
  logic [5:0] out_addr;
  logic [63:0] out_data [2];
  int checks = 0, failures = 0;

  dil_sampleinball dut (.*);

  initial begin : watchdog
    #20000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NW = 40;
  logic [63:0] stream [NW];
  int widx, used_words;
  logic [24:0] ref_c [256];

  // stand-in memory: answer each request after 1..3 clocks
  initial begin
    forever begin
      @(posedge clk);
      if (req) begin
        int d;
        d = $urandom_range(1, 3);
        repeat (d - 1) @(posedge clk);
        @(negedge clk); w_valid = 1; w_data = stream[widx]; widx++;
        @(negedge clk); w_valid = 0;
      end
    end
  end

  task automatic reference(input int t);
    logic [63:0] s;
    int k;
    s = stream[0];
    for (int m = 0; m < 256; m++) ref_c[m] = '0;
    k = 8;
    for (int ii = 256 - t; ii < 256; ii++) begin
      logic [7:0] b;
      do begin
        b = stream[k / 8][(k % 8) * 8 +: 8];
        k++;
      end while (int'(b) > ii);
      ref_c[ii] = ref_c[b];
      ref_c[b] = s[0] ? 25'(Q_DIL - 1) : 25'd1;
      s = s >> 1;
    end
    used_words = (k + 7) / 8;
  endtask

  initial begin
    static int taus [3] = '{39, 49, 60};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 60; run++) begin
      int t, nz, clocks, beats;
      t = taus[run % 3];
      for (int w = 0; w < NW; w++) stream[w] = {$urandom, $urandom};
      // a few runs with bytes biased high, so many are rejected
      if (run % 5 == 4)
        for (int w = 1; w < NW; w++) stream[w] = stream[w] | 64'h8080_8080_8080_8080;
      reference(t);
      widx = 0; nz = 0; clocks = 0; beats = 0;
      @(negedge clk); tau = 7'(t); start = 1;
      @(negedge clk); start = 0;
      while (!done && clocks < 5000) begin
        @(posedge clk); #1;
        clocks++;
        if (out_valid) begin
          for (int s = 0; s < 2; s++)
            for (int h = 0; h < 2; h++) begin
              int idx;
              logic [24:0] got;
              idx = 128 * s + 2 * int'(out_addr) + h;
              got = 25'(out_data[s][32 * h +: 32]);
              checks++;
              if (got != ref_c[idx]) begin
                failures++;
                if (failures < 10) $display("run %0d coef %0d: got %0d want %0d", run, idx, got, ref_c[idx]);
              end
              if (got != 0) nz++;
            end
          beats++;
        end
      end
      checks += 3;
      if (nz != t) begin failures++; $display("run %0d: %0d nonzero, tau %0d", run, nz, t); end
      if (beats != 64) begin failures++; $display("run %0d: %0d output beats", run, beats); end
      if (widx != used_words) begin failures++; $display("run %0d: read %0d words, need %0d", run, widx, used_words); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
