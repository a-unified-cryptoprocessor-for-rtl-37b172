// Simple dual-port RAM, one read port and one write port, as one FPGA block
// RAM set provides. The read is synchronous: rdata holds the word at raddr
// one clock after re. A read and a write of the same address in the same
// clock return the old word. Contents are not reset. Used for the data
// memory sets and the instruction RAM.
module sdp_ram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 2560,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
