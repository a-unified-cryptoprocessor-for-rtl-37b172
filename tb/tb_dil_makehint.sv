// Self-checking test of the MakeHint equality checker and weight counter.
// Random pairs of high parts (equal about half the time) with random valid;
// checks h = (r1a != r1b) every clock and that the count equals the number of
// valid differing pairs counted here; then checks that counter_ref clears
// the count only when the loop-fail flag is set, and that clear clears it.
module tb_dil_makehint;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, counter_ref, loop_fail, valid, h;
  logic [9:0] r1a, r1b, count;
  int checks = 0, failures = 0, ref_cnt = 0;

  dil_makehint dut (.*);

  initial begin : watchdog
    #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("fail: %s (count %0d, ref %0d)", what, count, ref_cnt); end
  endtask

  initial begin
    clear = 0; counter_ref = 0; loop_fail = 0; valid = 0; r1a = '0; r1b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      r1a = 10'($urandom_range(0, 43));
      r1b = $urandom_range(0, 1) ? r1a : 10'($urandom_range(0, 43));
      valid = $urandom_range(0, 3) != 0;
      #1 chk(h == (r1a != r1b), "h");
      if (valid && r1a != r1b) ref_cnt++;
    end
    @(negedge clk) valid = 0;
    chk(32'(count) == (ref_cnt % 1024), "count");
    counter_ref = 1; loop_fail = 0;
    @(negedge clk) counter_ref = 0;
    chk(32'(count) == (ref_cnt % 1024), "counter_ref without fail keeps count");
    counter_ref = 1; loop_fail = 1;
    @(negedge clk) counter_ref = 0; loop_fail = 0;
    chk(count == 0, "counter_ref with fail clears");
    valid = 1; r1a = 1; r1b = 2;
    @(negedge clk) valid = 0;
    chk(count == 1, "count restarts");
    clear = 1;
    @(negedge clk) clear = 0;
    chk(count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
