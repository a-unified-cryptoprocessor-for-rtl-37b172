// Self-checking test of the host communication controller.
// A behavioural four-set memory sits behind the controller's bus-master
// port (routed by the pair it drives). Random host writes to all four sets
// are read back and compared, with h_rvalid exactly two clocks after the
// read command. Two-beat program writes must produce one prog_we with the
// assembled 108-bit word; H_START must pulse cpu_start; while cpu_busy is
// high h_ready must be low and commands must have no effect.
module tb_comm_ctrl;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic h_valid, h_ready, h_rvalid, cpu_busy, cpu_start, prog_we, own, pair;
  logic [1:0] h_cmd;
  logic [13:0] h_addr;
  logic [WORD_W-1:0] h_wdata, h_rdata;
  logic [9:0] prog_addr;
  logic [107:0] prog_wdata;
  set_req_t mreq [2];
  logic [WORD_W-1:0] mrdata [2];
  logic [WORD_W-1:0] mem [4][64];
  logic [WORD_W-1:0] model [4][64];
  logic [WORD_W-1:0] rd_q [4];
  int checks = 0, failures = 0;

  comm_ctrl dut (.*);

  always_ff @(posedge clk) begin
    for (int s = 0; s < 2; s++) if (own) begin
      if (mreq[s].we) mem[{pair, s[0]}][mreq[s].waddr[5:0]] <= mreq[s].wdata;
      if (mreq[s].re) rd_q[{pair, s[0]}] <= mem[{pair, s[0]}][mreq[s].raddr[5:0]];
    end
  end
  always_comb begin
    mrdata[0] = rd_q[{pair, 1'b0}];
    mrdata[1] = rd_q[{pair, 1'b1}];
  end

  initial begin : watchdog
    #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("fail: %s", what); end
  endtask
  task automatic cmd(input logic [1:0] c, input logic [13:0] a, input logic [63:0] d);
    h_valid = 1; h_cmd = c; h_addr = a; h_wdata = d;
    @(negedge clk); h_valid = 0;
  endtask

  int pw = 0, st = 0;
  logic [107:0] last_prog;
  always @(posedge clk) begin
    if (prog_we) begin pw++; last_prog = prog_wdata; end
    if (cpu_start) st++;
  end

  initial begin
    h_valid = 0; h_cmd = 0; h_addr = 0; h_wdata = 0; cpu_busy = 0;
    for (int s = 0; s < 4; s++) begin rd_q[s] = '0; for (int i = 0; i < 64; i++) begin mem[s][i] = '0; model[s][i] = '0; end end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      int s, a;
      s = $urandom_range(0, 3); a = $urandom_range(0, 63);
      model[s][a] = {$urandom, $urandom};
      cmd(2'd0, {2'(s), 12'(a)}, model[s][a]);
    end
    for (int i = 0; i < 200; i++) begin
      int s, a;
      s = $urandom_range(0, 3); a = $urandom_range(0, 63);
      cmd(2'd1, {2'(s), 12'(a)}, '0);
      chk(!h_rvalid, "rvalid early");
      @(negedge clk);
      chk(h_rvalid && h_rdata == model[s][a], $sformatf("read set %0d addr %0d", s, a));
    end
    cmd(2'd2, 14'd7, 64'h0123_4567_89AB_CDEF);
    chk(pw == 0, "no program write on the first beat");
    cmd(2'd2, 14'd7 | 14'h400, 64'hFEDC_BA98_7654_3210);
    chk(pw == 1 && last_prog == {44'hA98_7654_3210, 64'h0123_4567_89AB_CDEF}, "program word");
    cmd(2'd3, '0, '0);
    chk(st == 1, "start");
    cpu_busy = 1;
    #1 chk(!h_ready, "ready low while busy");
    cmd(2'd0, 14'd3, 64'hDEAD);
    cmd(2'd3, '0, '0);
    cpu_busy = 0;
    chk(st == 1 && mem[0][3] == model[0][3], "commands ignored while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
