// Self-checking test of the unified butterfly.
// Streams 3000 random operations (CT, GS, MUL, ADD, SUB on both primes),
// one per clock, and compares each output pair with values computed here:
// CT (a + wb, a - wb), GS ((a + b)/2, w(a - b)/2) with /2 as the inverse of 2
// mod q, MUL wb, ADD a + b, SUB a - b. Also checks the latency: out_valid
// follows in_valid after exactly MUL_LAT + 3 = 8 clocks.
module tb_butterfly;
  import cp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, sel_saber, out_valid;
  bf_op_e op;
  logic [COEF_W-1:0] a, b, w, o0, o1;
  int checks = 0, failures = 0;
  longint unsigned e0 [$], e1 [$], eop [$];
  int t_in [$];
  int cyc = 0;

  butterfly dut (.*);

  always @(posedge clk) cyc++;

  initial begin : watchdog
    #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint unsigned inv2(input longint unsigned q);
    return (q + 1) / 2;
  endfunction

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    longint unsigned x0, x1, k;
    int ti;
    x0 = e0.pop_front(); x1 = e1.pop_front(); k = eop.pop_front(); ti = t_in.pop_front();
    checks++;
    if (64'(o0) != x0 || (k <= 1 && 64'(o1) != x1)) begin
      failures++;
      if (failures < 10) $display("op %0d got %0d %0d exp %0d %0d", k, o0, o1, x0, x1);
    end
    checks++;
    if (cyc - ti != 8) begin
      failures++; $display("latency %0d, expected 8", cyc - ti);
    end
  end

  initial begin
    in_valid = 0; op = BF_CT; sel_saber = 0; a = '0; b = '0; w = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      longint unsigned q, aa, bb, ww, p;
      @(negedge clk);
      sel_saber = $urandom_range(0, 1);
      q = sel_saber ? 64'd16760833 : 64'd8380417;
      op = bf_op_e'($urandom_range(0, 4));
      aa = {$urandom, $urandom} % q; bb = {$urandom, $urandom} % q; ww = {$urandom, $urandom} % q;
      a = COEF_W'(aa); b = COEF_W'(bb); w = COEF_W'(ww); in_valid = 1;
      unique case (op)
        BF_CT: begin p = (ww * bb) % q; e0.push_back((aa + p) % q); e1.push_back((aa + q - p) % q); end
        BF_GS: begin
          e0.push_back(((aa + bb) % q) * inv2(q) % q);
          e1.push_back((((aa + q - bb) % q) * ww % q) * inv2(q) % q);
        end
        BF_MUL: begin e0.push_back((ww * bb) % q); e1.push_back(0); end
        BF_ADD: begin e0.push_back((aa + bb) % q); e1.push_back(0); end
        default: begin e0.push_back((aa + q - bb) % q); e1.push_back(0); end
      endcase
      eop.push_back(longint'(op));
      t_in.push_back(cyc + 1);
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (e0.size() != 0) begin failures++; $display("%0d results missing", e0.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
