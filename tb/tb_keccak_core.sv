// Self-checking test of the Keccak-f[1600] core.
// Permutes the all-zero state and a patterned state (lane i = i * 0x0101..01)
// and compares all 25 lanes with reference values of the standard
// permutation computed separately; checks that done comes 25 clocks after
// start (one start clock and 24 rounds, one per clock), and that busy covers the rounds.
module tb_keccak_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, start, busy, done;
  logic [1599:0] state_in, state;
  int checks = 0, failures = 0;
  localparam logic [63:0] EXP0 [25] = '{64'hf1258f7940e1dde7, 64'h84d5ccf933c0478a, 64'hd598261ea65aa9ee, 64'hbd1547306f80494d, 64'h8b284e056253d057, 64'hff97a42d7f8e6fd4, 64'h90fee5a0a44647c4, 64'h8c5bda0cd6192e76, 64'had30a6f71b19059c, 64'h30935ab7d08ffc64, 64'heb5aa93f2317d635, 64'ha9a6e6260d712103, 64'h81a57c16dbcf555f, 64'h43b831cd0347c826, 64'h01f22f1a11a5569f, 64'h05e5635a21d9ae61, 64'h64befef28cc970f2, 64'h613670957bc46611, 64'hb87c5a554fd00ecb, 64'h8c3ee88a1ccf32c8, 64'h940c7922ae3a2614, 64'h1841f924a2c509e4, 64'h16f53526e70465c2, 64'h75f644e97f30a13b, 64'heaf1ff7b5ceca249};
  localparam logic [63:0] EXP1 [25] = '{64'h9228104e8e6aadae, 64'hcfab7e1a0fde91c4, 64'h2d0b412547799456, 64'h68e01354fcab18d7, 64'hcb2a452f0a2e76bb, 64'h14cf4f051aebe17a, 64'hffff4672254e2eff, 64'h6042d21ff1e240fe, 64'h3f78769cf1886a69, 64'hf2e8a62ba1048b61, 64'h7b0ad6372677db21, 64'h17d5fd006bf1feb6, 64'h158c3084cc7d47f6, 64'h35ccc1aab02dd9ef, 64'hfe3f4d09a9ff6d3f, 64'ha7c0e43f0c99e52e, 64'ha7fa0b4c8329a845, 64'hbe39502800acf9dc, 64'h056172170b551473, 64'h1a7c4c2f8826fc9b, 64'h79ffe34ef1dc2f60, 64'hb54a26257f4ee911, 64'hc5737d24f3bed743, 64'hc045876047a9c2ff, 64'hde39cf1e73cfd3b8};

  keccak_core dut (.*);

  initial begin : watchdog
    #100000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int which);
    int n;
    @(negedge clk);
    for (int i = 0; i < 25; i++) state_in[64*i +: 64] = (which == 0) ? 64'd0 : 64'(i) * 64'h0101010101010101;
    load = 1;
    @(negedge clk); load = 0; start = 1;
    @(negedge clk); start = 0; n = 1;
    checks++; if (!busy) begin failures++; $display("busy low during rounds"); end
    while (!done && n < 100) begin @(negedge clk); n++; end
    checks++;
    if (n != 25) begin failures++; $display("done after %0d clocks, expected 25", n); end
    @(negedge clk);
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (state[64*i +: 64] != ((which == 0) ? EXP0[i] : EXP1[i])) begin
        failures++; $display("state %0d lane %0d: %h", which, i, state[64*i +: 64]);
      end
    end
  endtask

  initial begin
    load = 0; start = 0; state_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
