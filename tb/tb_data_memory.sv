// Self-checking test of the four-set data memory.
// Writes random words to random addresses of all four sets at once (every
// set every clock, with random read traffic alongside), keeps a model here
// and checks that each read returns the model's word one clock after the
// request, including the top address 2559 and read-during-write (old data).
module tb_data_memory;
  import cp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  set_req_t req [NSETS];
  logic [WORD_W-1:0] rdata [NSETS];
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] model [NSETS][2560];
  logic [WORD_W-1:0] expq [NSETS];
  bit pend [NSETS];

  data_memory dut (.*);

  initial begin : watchdog
    #10000000; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < NSETS; s++) begin req[s] = SET_REQ_IDLE; pend[s] = 0; end
    // initialise every word so all reads are defined
    for (int a = 0; a < 2560; a++) begin
      @(negedge clk);
      for (int s = 0; s < NSETS; s++) begin
        model[s][a] = {$urandom, $urandom};
        req[s] = SET_REQ_IDLE; req[s].we = 1; req[s].waddr = 12'(a); req[s].wdata = model[s][a];
      end
    end
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      for (int s = 0; s < NSETS; s++) begin
        if (pend[s]) begin
          checks++;
          if (rdata[s] != expq[s]) begin failures++; if (failures < 10) $display("set %0d read mismatch", s); end
        end
        req[s] = SET_REQ_IDLE;
        req[s].re = $urandom_range(0, 1);
        req[s].raddr = (i % 97 == 0) ? 12'd2559 : 12'($urandom_range(0, 2559));
        req[s].we = $urandom_range(0, 1);
        req[s].waddr = (i % 5 == 0) ? req[s].raddr : 12'($urandom_range(0, 2559));
        req[s].wdata = {$urandom, $urandom};
        pend[s] = req[s].re;
        expq[s] = model[s][req[s].raddr];
        if (req[s].we) model[s][req[s].waddr] = req[s].wdata;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
