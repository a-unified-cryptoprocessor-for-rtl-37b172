// Self-checking test of the program controller.
// Loads a short program through the write port and runs it against three
// stand-in engines that finish after random delays. Checks: the CONFIG word
// sets the configuration; a word with two slots starts both engines in the
// same clock (counted in par_count) with the decoded fields of its slots;
// no word is issued before every engine of the previous word is done; the
// LOOP word jumps back to the MARK word while the fail flag is set (twice
// here, counted in loop_count) and falls through once it is clear; HALT
// ends the program with done.
module tb_program_controller;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_we, start, busy, done, sel_saber, g88, dil_fail;
  logic [9:0] prog_addr, omega;
  logic [107:0] prog_wdata;
  logic [2:0] eps_t;
  logic sh_start, sh_gamma20, sh_pair, sh_done;
  sh_cmd_e sh_cmd; keccak_mode_e sh_mode; sq_fmt_e sh_fmt;
  logic [11:0] sh_len; logic [3:0] sh_mu; logic [2:0] sh_eta;
  logic [SET_AW-1:0] sh_in, sh_out;
  logic pa_start, pa_pair, pa_done;
  pa_op_e pa_op;
  logic [SET_AW-1:0] pa_a, pa_b, pa_d;
  logic cs_start, cs_pair, cs_done;
  cs_op_e cs_op;
  logic [7:0] cs_len;
  logic [SET_AW-1:0] cs_a, cs_b, cs_d, cs_d2;
  logic [WORD_W-1:0] cs_imm;
  logic [15:0] par_count, loop_count;
  int checks = 0, failures = 0;

  program_controller dut (.*);

  initial begin : watchdog
    #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("fail: %s", what); end
  endtask

  // stand-in engines: done after a random 3..40 clocks
  int sh_t = -1, pa_t = -1, cs_t = -1, active = 0;
  initial begin sh_done = 0; pa_done = 0; cs_done = 0; end
  int n_sh = 0, n_pa = 0, n_cs = 0, n_both = 0;
  // (starts seen while reset is still applied come from the random power-up
  // state and are ignored)
  always @(posedge clk) if (rst_n) begin
    sh_done <= 0; pa_done <= 0; cs_done <= 0;
    if (sh_t == 0) begin sh_done <= 1; active--; end
    if (pa_t == 0) begin pa_done <= 1; active--; end
    if (cs_t == 0) begin cs_done <= 1; active--; end
    if (sh_t >= 0) sh_t--;
    if (pa_t >= 0) pa_t--;
    if (cs_t >= 0) cs_t--;
    if (sh_start || pa_start || cs_start) begin
      if (active != 0) begin failures++; $display("issue while an engine is still running"); end
      checks++;
    end
    if (sh_start) begin sh_t = $urandom_range(3, 40); active++; n_sh++; end
    if (pa_start) begin pa_t = $urandom_range(3, 40); active++; n_pa++; end
    if (cs_start) begin cs_t = $urandom_range(3, 40); active++; n_cs++; end
    if (sh_start && pa_start) begin
      n_both++;
      checks += 2;
      if (!(sh_cmd == SH_SQUEEZE && sh_mode == KM_SHAKE128 && sh_fmt == SQ_SABER13 &&
            sh_in == 12'd16 && sh_out == 12'd64 && sh_pair == 1'b1 && sh_len == 12'd34))
        begin failures++; $display("SHA-SHAKE slot fields"); end
      if (!(pa_op == PA_NTT && pa_a == 12'd128 && pa_d == 12'd256 && pa_b == 12'd8 && pa_pair == 1'b0))
        begin failures++; $display("arithmetic slot fields"); end
    end
    if (cs_start && cs_op == CS_WRITE) begin
      checks++;
      if (!(cs_d == 12'd40 && cs_imm == 64'h1234 && cs_pair == 1'b1)) begin failures++; $display("stream slot fields"); end
    end
  end

  function automatic logic [51:0] slot(input int eng, input int op, input int pr, input int a,
                                       input int d, input logic [26:0] x);
    return {2'(eng), 4'(op), 1'(pr), 9'(a), 9'(d), x};
  endfunction
  task automatic put(input int addr, input logic [3:0] ctrl, input logic [51:0] s1, input logic [51:0] s2);
    @(negedge clk);
    prog_we = 1; prog_addr = 10'(addr); prog_wdata = {ctrl, s1, s2};
    @(negedge clk); prog_we = 0;
  endtask

  initial begin
    int loops_seen;
    prog_we = 0; prog_addr = '0; prog_wdata = '0; start = 0; dil_fail = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 0: CONFIG saber prime, eps_T 3, omega 55
    put(0, 4'b1000, slot(0, 0, 0, 0, 0, {12'd0, 10'd55, 1'b0, 3'd3, 1'b1}), '0);
    // 1: SHAKE-128 squeeze (Saber13) on pair 1 in parallel with an NTT on pair 0
    put(1, 4'b0000, slot(1, int'(SH_SQUEEZE), 1, 2, 8, {2'(KM_SHAKE128), 3'(SQ_SABER13), 12'd34, 4'd8, 3'd2, 3'd0}),
                    slot(2, int'(PA_NTT), 0, 16, 32, {9'd1, 18'd0}));
    // 2: MARK, stream Write of a nonce
    put(2, 4'b0010, slot(3, int'(CS_WRITE), 1, 0, 5, 27'h1234), '0);
    // 3: LOOP back while fail
    put(3, 4'b0100, '0, slot(3, int'(CS_DVERIFY), 0, 0, 0, 27'd1000));
    // 4: HALT
    put(4, 4'b0001, slot(2, int'(PA_ADD), 0, 0, 0, '0), '0);
    dil_fail = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    chk(busy, "busy after start");
    repeat (3) @(negedge clk);
    chk(sel_saber == 1 && eps_t == 3'd3 && omega == 10'd55 && g88 == 0, "config");
    loops_seen = 0;
    while (!done) begin
      @(negedge clk);
      if (loop_count == 2 && dil_fail) dil_fail = 0;
    end
    chk(par_count == 1 && n_both == 1, $sformatf("parallel words %0d", par_count));
    chk(loop_count == 2, $sformatf("loop jumps %0d", loop_count));
    chk(n_cs == 6 && n_sh == 1 && n_pa == 2, $sformatf("issues sh %0d pa %0d cs %0d", n_sh, n_pa, n_cs));
    @(negedge clk);
    chk(!busy, "idle after halt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
