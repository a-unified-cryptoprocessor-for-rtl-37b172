// Self-checking test of the twiddle-factor ROM.
// Builds the powers of each root by repeated multiplication, checks that the
// root is a primitive 512th root of unity (r^256 = -1), and compares every
// entry zeta[k] = r^brv8(k) of both tables on both read ports, one clock
// after the address.
module tb_twiddle_rom;
  import cp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic sel_saber;
  logic [7:0] addr0, addr1;
  logic [COEF_W-1:0] data0, data1;
  int checks = 0, failures = 0;
  longint unsigned pw [256];

  twiddle_rom dut (.*);

  initial begin : watchdog
    #1000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int brv8(input int k);
    int r = 0;
    for (int i = 0; i < 8; i++) if (k[i]) r |= 1 << (7 - i);
    return r;
  endfunction

  initial begin
    sel_saber = 0; addr0 = 0; addr1 = 0;
    for (int s = 0; s < 2; s++) begin
      longint unsigned q, root;
      q    = s ? 64'd16760833 : 64'd8380417;
      root = s ? 64'd3091885  : 64'd1753;
      pw[0] = 1;
      for (int i = 1; i < 256; i++) pw[i] = (pw[i-1] * root) % q;
      checks++;
      if ((pw[255] * root) % q != q - 1) begin failures++; $display("root %0d not primitive", root); end
      for (int k = 0; k < 256; k++) begin
        @(negedge clk);
        sel_saber = s[0]; addr0 = 8'(k); addr1 = 8'(255 - k);
        @(posedge clk); #1;
        checks += 2;
        if (64'(data0) != pw[brv8(k)])       begin failures++; $display("s%0d zeta[%0d] = %0d", s, k, data0); end
        if (64'(data1) != pw[brv8(255 - k)]) begin failures++; $display("s%0d port1 zeta[%0d]", s, 255 - k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
