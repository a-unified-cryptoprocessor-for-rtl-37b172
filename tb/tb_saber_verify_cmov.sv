// Self-checking test of Saber Verify / CMOV / COPY.
// Streams pairs of words on two lanes: equal streams must leave "differ" low,
// one mismatching word (on a valid lane) must set it; a mismatch on an idle
// lane must not. Then CMOV must pass a (the re-encrypted ciphertext side)
// when differ is low and b when it is high, and COPY must always pass a.
module tb_saber_verify_cmov;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, cmp, copy, differ;
  logic valid [2];
  logic [WORD_W-1:0] a [2], b [2], out [2];
  int checks = 0, failures = 0;

  saber_verify_cmov #(.LANES(2)) dut (.*);

  initial begin : watchdog
    #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic stream(input int bad, input bit idle_bad);
    cmp = 1;
    for (int i = 0; i < 64; i++) begin
      for (int l = 0; l < 2; l++) begin
        a[l] = {$urandom, $urandom}; b[l] = a[l]; valid[l] = 1;
      end
      if (i == bad) b[i % 2] = b[i % 2] ^ (64'd1 << $urandom_range(0, 63));
      if (idle_bad && i == 5) begin valid[1] = 0; b[1] = ~a[1]; end
      @(negedge clk);
    end
    cmp = 0; valid[0] = 0; valid[1] = 0;
  endtask

  task automatic mov(input bit exp_b);
    for (int i = 0; i < 20; i++) begin
      for (int l = 0; l < 2; l++) begin a[l] = {$urandom, $urandom}; b[l] = {$urandom, $urandom}; end
      #1;
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (out[l] != ((exp_b && !copy) ? b[l] : a[l])) begin failures++; $display("cmov lane %0d copy %0d", l, copy); end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    clear = 0; cmp = 0; copy = 0; valid[0] = 0; valid[1] = 0;
    a[0] = '0; a[1] = '0; b[0] = '0; b[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int bad;
      bit idle;
      clear = 1; @(negedge clk); clear = 0;
      bad  = (t % 2) ? $urandom_range(0, 63) : -1;
      idle = (t == 2);
      stream(bad, idle);
      checks++;
      if (differ != (bad >= 0)) begin failures++; $display("test %0d: differ %0d", t, differ); end
      copy = 0; mov(differ);
      copy = 1; mov(differ);
      copy = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
