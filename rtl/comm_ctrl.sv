// Communication controller: host access to data memory and program memory.
//
// A simple synchronous host port. A command is accepted in a clock where
// h_valid and h_ready are high; h_ready is low while the processor runs a
// program, so the host never competes with the engines for memory.
//   H_MEM_WR  write h_wdata to set h_addr[13:12], word h_addr[11:0]
//   H_MEM_RD  read that word; h_rdata is valid with h_rvalid two clocks later
//             (one clock for the memory, one output register)
//   H_PROG_WR program word h_addr[9:0] is written in two beats: h_addr[10] = 0
//             holds bits [63:0], h_addr[10] = 1 supplies bits [IW-1:64] from
//             h_wdata and writes the word
//   H_START   start the program at word 0
// Toward the memory bus it is one master that owns the pair of the set it
// addresses; the pair is held for the read-return clock. The paper names a
// communication controller without describing it; this protocol is this
// design's own.
module comm_ctrl
  import cp_pkg::*;
#(
  parameter int unsigned IW  = 108,
  parameter int unsigned PAW = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              h_valid,
  input  logic [1:0]        h_cmd,
  input  logic [13:0]       h_addr,
  input  logic [WORD_W-1:0] h_wdata,
  output logic              h_ready,
  output logic              h_rvalid,
  output logic [WORD_W-1:0] h_rdata,
  input  logic              cpu_busy,
  output logic              cpu_start,
  output logic              prog_we,
  output logic [PAW-1:0]    prog_addr,
  output logic [IW-1:0]     prog_wdata,
  output logic              own,
  output logic              pair,
  output set_req_t          mreq [2],
  input  logic [WORD_W-1:0] mrdata [2]
);
  localparam logic [1:0] H_MEM_WR = 2'd0, H_MEM_RD = 2'd1, H_PROG_WR = 2'd2, H_START = 2'd3;

  logic          acc, rd_p;
  logic          pair_q, sel_q;
  logic [63:0]   lo_q;

  assign h_ready = !cpu_busy;
  assign acc     = h_valid && h_ready;

  always_comb begin
    own  = (acc && (h_cmd == H_MEM_WR || h_cmd == H_MEM_RD)) || rd_p;
    pair = (acc && (h_cmd == H_MEM_WR || h_cmd == H_MEM_RD)) ? h_addr[13] : pair_q;
    for (int s = 0; s < 2; s++) begin
      mreq[s]       = SET_REQ_IDLE;
      mreq[s].raddr = h_addr[11:0];
      mreq[s].waddr = h_addr[11:0];
      mreq[s].wdata = h_wdata;
      mreq[s].re    = acc && h_cmd == H_MEM_RD && h_addr[12] == s[0];
      mreq[s].we    = acc && h_cmd == H_MEM_WR && h_addr[12] == s[0];
    end
    cpu_start  = acc && h_cmd == H_START;
    prog_we    = acc && h_cmd == H_PROG_WR && h_addr[10];
    prog_addr  = h_addr[PAW-1:0];
    prog_wdata = IW'({h_wdata[IW-65:0], lo_q});
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rd_p <= 1'b0; pair_q <= 1'b0; sel_q <= 1'b0; lo_q <= '0;
      h_rvalid <= 1'b0; h_rdata <= '0;
    end else begin
      rd_p     <= acc && h_cmd == H_MEM_RD;
      h_rvalid <= rd_p;
      if (rd_p) h_rdata <= mrdata[sel_q];
      if (acc && (h_cmd == H_MEM_WR || h_cmd == H_MEM_RD)) begin
        pair_q <= h_addr[13]; sel_q <= h_addr[12];
      end
      if (acc && h_cmd == H_PROG_WR && !h_addr[10]) lo_q <= h_wdata;
    end
endmodule
