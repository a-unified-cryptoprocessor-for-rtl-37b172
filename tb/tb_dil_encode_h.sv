// Self-checking test of the Encode_H packer.
// For both w1 widths (4 bits for gamma2 = (q-1)/32, 6 bits for
// gamma2 = (q-1)/88) random w1 polynomials are fed two coefficients per
// clock, sometimes with idle clocks between beats. The expected byte
// string is built here bit by bit from the definition: coefficient i
// occupies bits [w*i, w*i + w) of the string, least significant bit first.
// Every output word and its index are compared. The test also checks the
// word count (16 or 24) and that each word appears one clock after the
// beat that completed it.
module tb_dil_encode_h;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, g88 = 0, in_valid = 0, out_valid;
  logic [5:0] in_c [2];
  logic [4:0] out_idx;
  logic [63:0] out_word;
  int checks = 0, failures = 0;

  dil_encode_h dut (.*);

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [5:0] w1 [256];
  logic [1535:0] bits;
  int nout, w, last_beat, clk_n;

  always @(posedge clk) begin
    clk_n++;
    if (out_valid) begin
      checks += 3;
      if (out_word != bits[64 * int'(out_idx) +: 64]) begin
        failures++;
        if (failures < 10) $display("w=%0d word %0d: got %h want %h", w, out_idx, out_word, bits[64 * int'(out_idx) +: 64]);
      end
      if (int'(out_idx) != nout) begin failures++; $display("index %0d, expected %0d", out_idx, nout); end
      if (last_beat != clk_n - 1) begin failures++; $display("word %0d late", out_idx); end
      nout++;
    end
    if (in_valid) last_beat = clk_n;
  end

  initial begin
    in_c[0] = '0; in_c[1] = '0; clk_n = 0; last_beat = -10;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      w = (run % 2) ? 6 : 4;
      bits = '0;
      for (int i = 0; i < 256; i++) begin
        w1[i] = 6'((w == 6) ? $urandom_range(0, 43) : $urandom_range(0, 15));
        for (int b = 0; b < w; b++) bits[w * i + b] = w1[i][b];
      end
      nout = 0;
      @(negedge clk); start = 1; g88 = (w == 6);
      @(negedge clk); start = 0;
      for (int k = 0; k < 128; k++) begin
        if ($urandom_range(0, 3) == 0) @(negedge clk);
        in_valid = 1; in_c[0] = w1[2 * k]; in_c[1] = w1[2 * k + 1];
        @(negedge clk); in_valid = 0;
      end
      repeat (3) @(negedge clk);
      checks++;
      if (nout != 4 * w) begin failures++; $display("w=%0d: %0d words", w, nout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
