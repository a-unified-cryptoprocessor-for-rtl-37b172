// Self-checking test of the Saber rounding unit (AddRound, AddPack, UnPack).
// Random multiplier outputs x in [0, q) for both NTT primes, random message
// bits and ciphertext values, eps_T = 3, 4, 6. References written from the
// Saber equations: the residue is lifted to (-q/2, q/2], then
//   AddRound: ((x + 4) mod 2^13) >> 3
//   AddPack:  ((x + 4 - 512 m) mod 2^10) >> (10 - eps_T)
//   UnPack:   ((x + h2 - 2^(10 - eps_T) cm) mod 2^10) >> 9,
//             h2 = 2^8 - 2^(9 - eps_T) + 4
module tb_saber_round;
  import cp_pkg::*;
  logic [1:0] op;
  logic [COEF_W-1:0] x, qp;
  logic [2:0] eps_t;
  logic [9:0] y;
  logic [12:0] r;
  int checks = 0, failures = 0;

  saber_round dut (.*);

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 6000; i++) begin
      longint qq, xs, e, h2;
      int et, m, cm;
      int ets [3] = '{3, 4, 6};
      qq = $urandom_range(0, 1) ? 16760833 : 8380417;
      et = ets[$urandom_range(0, 2)];
      op = 2'($urandom_range(0, 2));
      x  = COEF_W'({$urandom} % qq);
      if (i < 4) x = (i % 2) ? COEF_W'(qq - 1) : COEF_W'(qq / 2);
      qp = COEF_W'(qq); eps_t = 3'(et);
      m  = $urandom_range(0, 1); cm = $urandom_range(0, (1 << et) - 1);
      y  = (op == 2'd1) ? 10'(m) : 10'(cm);
      xs = (longint'(x) > qq / 2) ? longint'(x) - qq : longint'(x);
      h2 = 256 - (1 << (9 - et)) + 4;
      unique case (op)
        2'd0: e = (((xs + 4) % 8192 + 8192) % 8192) >> 3;
        2'd1: e = (((xs + 4 - 512 * m) % 1024 + 1024) % 1024) >> (10 - et);
        default: e = (((xs + h2 - (longint'(cm) << (10 - et))) % 1024 + 1024) % 1024) >> 9;
      endcase
      #1;
      checks++;
      if (longint'(r) != e) begin
        failures++;
        if (failures < 10) $display("op %0d x %0d et %0d y %0d: %0d exp %0d", op, x, et, y, r, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
