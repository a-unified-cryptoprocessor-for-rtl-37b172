// Unified Saber / Dilithium cryptoprocessor, top level.
//
// Joins the instruction-set processor: the program controller issues up to
// two instructions per word to three engines that work on a four-set data
// memory through a pair-wise memory bus:
//   poly_arith_unit   NTT / INTT / coefficient-wise multiply, add, subtract
//                     with two unified butterflies (Saber and Dilithium)
//   sha_shake_unit    Keccak SHA3/SHAKE with samplers on the output stream
//   coef_stream_unit  Saber rounding/packing/verify/CMOV and Dilithium
//                     Power2Round/Decompose/hints/norm checks/Write/Refresh
// The host loads data and the program through comm_ctrl and starts the
// program; done pulses when it halts. Flags: Saber Verify "differ" and the
// Dilithium loop-fail flag. Memory-bus master order (priority on conflict):
// arithmetic, SHA-SHAKE, stream, host.
// Latency of the whole is set by the program; each engine documents its own.
module crypto_top
  import cp_pkg::*;
#(
  parameter int unsigned MEM_DEPTH  = 2560,
  parameter int unsigned PROG_DEPTH = 1024,
  parameter int unsigned SAB_X      = 24,        // Saber NTT prime 2^X - 2^Y + 1
  parameter int unsigned SAB_Y      = 14,
  parameter longint unsigned SAB_ROOT = 3091885    // 512th root of unity mod that prime
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
  output logic              busy,
  output logic              done,
  output logic              differ,
  output logic              dil_fail
);
  localparam int unsigned NM = 4;
  localparam int unsigned IW = 108;
  localparam int unsigned PAW = $clog2(PROG_DEPTH);

  // ---- program controller
  logic prog_we, cpu_start;
  logic [PAW-1:0] prog_addr;
  logic [IW-1:0]  prog_wdata;
  logic sel_saber, g88;
  logic [2:0] eps_t;
  logic [9:0] omega, hint_count;
  logic sh_start, sh_gamma20, sh_pair, sh_done, sh_busy;
  sh_cmd_e sh_cmd; keccak_mode_e sh_mode; sq_fmt_e sh_fmt;
  logic [11:0] sh_len; logic [3:0] sh_mu; logic [2:0] sh_eta;
  logic [SET_AW-1:0] sh_in, sh_out;
  logic pa_start, pa_pair, pa_done, pa_busy;
  pa_op_e pa_op;
  logic [SET_AW-1:0] pa_a, pa_b, pa_d;
  logic cs_start, cs_pair, cs_done, cs_busy;
  cs_op_e cs_op;
  logic [7:0] cs_len;
  logic [SET_AW-1:0] cs_a, cs_b, cs_d, cs_d2;
  logic [WORD_W-1:0] cs_imm;
  logic [15:0] par_count, loop_count;

  program_controller #(.DEPTH(PROG_DEPTH), .IW(IW)) u_pc (
    .clk, .rst_n, .prog_we, .prog_addr, .prog_wdata, .start(cpu_start), .busy, .done,
    .sel_saber, .eps_t, .g88, .omega, .dil_fail,
    .sh_start, .sh_cmd, .sh_mode, .sh_fmt, .sh_len, .sh_mu, .sh_eta, .sh_gamma20,
    .sh_in, .sh_out, .sh_pair, .sh_done,
    .pa_start, .pa_op, .pa_a, .pa_b, .pa_d, .pa_pair, .pa_done,
    .cs_start, .cs_op, .cs_len, .cs_a, .cs_b, .cs_d, .cs_d2, .cs_imm, .cs_pair, .cs_done,
    .par_count, .loop_count
  );

  // ---- memory bus and data memory
  logic              own  [NM];
  logic              pair [NM];
  set_req_t          mreq [NM][2];
  logic [WORD_W-1:0] mrdata [NM][2];
  set_req_t          sreq [NSETS];
  logic [WORD_W-1:0] srdata [NSETS];

  mem_bus #(.NM(NM)) u_bus (.clk, .own, .pair, .mreq, .mrdata, .sreq, .srdata);
  data_memory #(.DEPTH(MEM_DEPTH)) u_mem (.clk, .req(sreq), .rdata(srdata));

  // engine memory ports
  logic              e_rd_en   [3];
  logic [SET_AW-1:0] e_rd_addr [3];
  logic              e_wr_en   [3][2];
  logic [SET_AW-1:0] e_wr_addr [3][2];
  logic [WORD_W-1:0] e_wr_data [3][2];
  logic [WORD_W-1:0] e_rdata   [3][2];

  always_comb begin
    own[0] = pa_busy || pa_start;  pair[0] = pa_pair;
    own[1] = sh_busy || sh_start;  pair[1] = sh_pair;
    own[2] = cs_busy || cs_start;  pair[2] = cs_pair;
    for (int e = 0; e < 3; e++)
      for (int s = 0; s < 2; s++) begin
        mreq[e][s]       = SET_REQ_IDLE;
        mreq[e][s].re    = e_rd_en[e];
        mreq[e][s].raddr = e_rd_addr[e];
        mreq[e][s].we    = e_wr_en[e][s];
        mreq[e][s].waddr = e_wr_addr[e][s];
        mreq[e][s].wdata = e_wr_data[e][s];
        e_rdata[e][s]    = mrdata[e][s];
      end
  end

  // ---- engines
  poly_arith_unit #(.SAB_X(SAB_X), .SAB_Y(SAB_Y), .SAB_ROOT(SAB_ROOT)) u_pa (
    .clk, .rst_n, .start(pa_start), .op(pa_op), .sel_saber,
    .src_base(pa_a), .b_base(pa_b), .dst_base(pa_d), .busy(pa_busy), .done(pa_done),
    .rd_en(e_rd_en[0]), .rd_addr(e_rd_addr[0]), .rdata(e_rdata[0]),
    .wr_en(e_wr_en[0]), .wr_addr(e_wr_addr[0]), .wr_data(e_wr_data[0])
  );

  sha_shake_unit #(.SAB_X(SAB_X), .SAB_Y(SAB_Y)) u_sh (
    .clk, .rst_n, .start(sh_start), .cmd(sh_cmd), .mode(sh_mode), .fmt(sh_fmt),
    .len(sh_len), .mu(sh_mu), .eta(sh_eta), .gamma20(sh_gamma20), .sel_saber,
    .in_base(sh_in), .out_base(sh_out), .busy(sh_busy), .done(sh_done),
    .rd_en(e_rd_en[1]), .rd_addr(e_rd_addr[1]), .rdata(e_rdata[1]),
    .wr_en(e_wr_en[1]), .wr_addr(e_wr_addr[1]), .wr_data(e_wr_data[1])
  );

  coef_stream_unit #(.SAB_X(SAB_X), .SAB_Y(SAB_Y)) u_cs (
    .clk, .rst_n, .start(cs_start), .op(cs_op), .len(cs_len),
    .a_base(cs_a), .b_base(cs_b), .d_base(cs_d), .d2_base(cs_d2), .imm(cs_imm),
    .sel_saber, .eps_t, .g88, .omega, .busy(cs_busy), .done(cs_done),
    .differ, .dil_fail, .hint_count,
    .rd_en(e_rd_en[2]), .rd_addr(e_rd_addr[2]), .rdata(e_rdata[2]),
    .wr_en(e_wr_en[2]), .wr_addr(e_wr_addr[2]), .wr_data(e_wr_data[2])
  );

  // ---- host port
  comm_ctrl #(.IW(IW), .PAW(PAW)) u_comm (
    .clk, .rst_n, .h_valid, .h_cmd, .h_addr, .h_wdata, .h_ready, .h_rvalid, .h_rdata,
    .cpu_busy(busy), .cpu_start, .prog_we, .prog_addr, .prog_wdata,
    .own(own[3]), .pair(pair[3]), .mreq(mreq[3]), .mrdata(mrdata[3])
  );
endmodule
