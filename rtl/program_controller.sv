// Program controller: instruction RAM, fetch, dual issue and loop control.
//
// The host loads a program into the instruction RAM and pulses start. Each
// IW-bit instruction word holds 4 control bits, one Set-1 slot and one Set-2
// slot (the paper stores "the two types of instructions ... together along
// with 4 control bits in the Instruction RAM"). The controller fetches a
// word (one clock, synchronous RAM), issues both slots in the same clock to
// their engines and waits until every issued engine has reported done; then
// it moves to the next word. Two non-empty slots therefore run in parallel,
// a word with one empty slot runs a single instruction in sequence.
//
// Word layout (this design's encoding):
//   [IW-1:IW-4]  control: bit0 HALT (stop after this word), bit1 MARK (this
//                word starts the signing loop), bit2 LOOP (after this word,
//                jump back to the marked word if the Dilithium fail flag is
//                set), bit3 CONFIG (slot 1 carries configuration, nothing is
//                issued)
//   [103:52]     slot 1, [51:0] slot 2, each:
//     [51:50] engine (0 none, 1 SHA-SHAKE, 2 polynomial arithmetic,
//             3 coefficient stream), [49:46] opcode of that engine,
//     [45] memory-set pair, [44:36] A / input base, [35:27] destination base
//     (both in units of 8 words), [26:0] engine-specific:
//       SHA-SHAKE: [26:25] mode, [24:22] format, [21:10] length, [9:6] mu,
//                  [5:3] eta, [2] gamma1 = 2^19
//       arithmetic: [26:18] B base
//       stream:    [26:19] length in words, [18:10] B base, [9:1] second
//                  destination; Write stores [26:0] zero-extended; the norm
//                  check takes its bound from [22:0] and works on 128 words
//   CONFIG (slot 1 field [26:0]): [0] Saber NTT prime, [3:1] eps_T,
//                  [4] gamma2 = (q-1)/88, [14:5] omega
// Which instruction may go into which slot follows the paper's Table of
// Set-1 / Set-2 instructions only loosely: any engine may sit in either
// slot; the program must not give both slots the same engine or the same
// memory-set pair (an assertion reports both).
// Engine pairs are held until the next issue so read data returning after
// the last read is routed correctly. Counters: words issued with two
// instructions (par_count) and loop jumps (loop_count).
module program_controller
  import cp_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,   // three 36-kbit RAMs used 1024 x 108
  parameter int unsigned IW    = 108,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // program load and control
  input  logic              prog_we,
  input  logic [AW-1:0]     prog_addr,
  input  logic [IW-1:0]     prog_wdata,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // configuration
  output logic              sel_saber,
  output logic [2:0]        eps_t,
  output logic              g88,
  output logic [9:0]        omega,
  input  logic              dil_fail,
  // SHA-SHAKE engine
  output logic              sh_start,
  output sh_cmd_e           sh_cmd,
  output keccak_mode_e      sh_mode,
  output sq_fmt_e           sh_fmt,
  output logic [11:0]       sh_len,
  output logic [3:0]        sh_mu,
  output logic [2:0]        sh_eta,
  output logic              sh_gamma20,
  output logic [SET_AW-1:0] sh_in,
  output logic [SET_AW-1:0] sh_out,
  output logic              sh_pair,
  input  logic              sh_done,
  // polynomial arithmetic engine
  output logic              pa_start,
  output pa_op_e            pa_op,
  output logic [SET_AW-1:0] pa_a,
  output logic [SET_AW-1:0] pa_b,
  output logic [SET_AW-1:0] pa_d,
  output logic              pa_pair,
  input  logic              pa_done,
  // coefficient stream engine
  output logic              cs_start,
  output cs_op_e            cs_op,
  output logic [7:0]        cs_len,
  output logic [SET_AW-1:0] cs_a,
  output logic [SET_AW-1:0] cs_b,
  output logic [SET_AW-1:0] cs_d,
  output logic [SET_AW-1:0] cs_d2,
  output logic [WORD_W-1:0] cs_imm,
  output logic              cs_pair,
  input  logic              cs_done,
  // statistics
  output logic [15:0]       par_count,
  output logic [15:0]       loop_count
);
  localparam int unsigned SW = 52;
  localparam logic [1:0] E_NONE = 2'd0, E_SH = 2'd1, E_PA = 2'd2, E_CS = 2'd3;

  typedef enum logic [1:0] {P_IDLE, P_FETCH, P_ISSUE, P_WAIT} pst_e;
  pst_e          st;
  logic [AW-1:0] pc, mark;
  logic [IW-1:0] iword;
  logic [3:0]    ctrl;
  logic [SW-1:0] slot [2];
  logic          pend_sh, pend_pa, pend_cs;

  sdp_ram #(.WIDTH(IW), .DEPTH(DEPTH), .AW(AW)) u_imem (
    .clk, .re(st == P_FETCH), .raddr(pc), .rdata(iword),
    .we(prog_we), .waddr(prog_addr), .wdata(prog_wdata)
  );

  assign ctrl    = iword[IW-1 -: 4];
  assign slot[0] = iword[2*SW-1 -: SW];
  assign slot[1] = iword[SW-1:0];
  assign busy    = (st != P_IDLE);

  function automatic logic [SET_AW-1:0] base(input logic [8:0] f);
    return SET_AW'({f, 3'b000});
  endfunction

  // decode: each engine takes the slot that names it
  logic issue;
  logic use_sh, use_pa, use_cs;
  logic [SW-1:0] ssh, spa, scs;
  always_comb begin
    issue = (st == P_ISSUE) && !ctrl[3];
    use_sh = 1'b0; use_pa = 1'b0; use_cs = 1'b0;
    ssh = '0; spa = '0; scs = '0;
    for (int s = 0; s < 2; s++)
      unique case (slot[s][51:50])
        E_SH: begin use_sh = 1'b1; ssh = slot[s]; end
        E_PA: begin use_pa = 1'b1; spa = slot[s]; end
        E_CS: begin use_cs = 1'b1; scs = slot[s]; end
        default: ;
      endcase
  end

  assign sh_start = issue && use_sh;
  assign pa_start = issue && use_pa;
  assign cs_start = issue && use_cs;

  assign sh_cmd     = sh_cmd_e'(ssh[47:46]);
  assign sh_mode    = keccak_mode_e'(ssh[26:25]);
  assign sh_fmt     = sq_fmt_e'(ssh[24:22]);
  assign sh_len     = ssh[21:10];
  assign sh_mu      = ssh[9:6];
  assign sh_eta     = ssh[5:3];
  assign sh_gamma20 = ssh[2];
  assign sh_in      = base(ssh[44:36]);
  assign sh_out     = base(ssh[35:27]);

  assign pa_op = pa_op_e'(spa[48:46]);
  assign pa_a  = base(spa[44:36]);
  assign pa_d  = base(spa[35:27]);
  assign pa_b  = base(spa[26:18]);

  assign cs_op  = cs_op_e'(scs[49:46]);
  assign cs_len = (cs_op == CS_DVERIFY) ? 8'd128 : scs[26:19];
  assign cs_a   = base(scs[44:36]);
  assign cs_d   = base(scs[35:27]);
  assign cs_b   = base(scs[18:10]);
  assign cs_d2  = base(scs[9:1]);
  assign cs_imm = WORD_W'(scs[26:0]);

  // engine pairs: taken from the slot in the issue clock (an engine may
  // access memory in its start clock), then held until the next issue
  logic sh_pair_q, pa_pair_q, cs_pair_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sh_pair_q <= 1'b0; pa_pair_q <= 1'b0; cs_pair_q <= 1'b0;
    end else begin
      sh_pair_q <= sh_pair; pa_pair_q <= pa_pair; cs_pair_q <= cs_pair;
    end
  assign sh_pair = sh_start ? ssh[45] : sh_pair_q;
  assign pa_pair = pa_start ? spa[45] : pa_pair_q;
  assign cs_pair = cs_start ? scs[45] : cs_pair_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; pc <= '0; mark <= '0; done <= 1'b0;
      pend_sh <= 1'b0; pend_pa <= 1'b0; pend_cs <= 1'b0;
      sel_saber <= 1'b0; eps_t <= 3'd4; g88 <= 1'b0; omega <= 10'd80;
      par_count <= '0; loop_count <= '0;
    end else begin
      done <= 1'b0;
      if (sh_done) pend_sh <= 1'b0;
      if (pa_done) pend_pa <= 1'b0;
      if (cs_done) pend_cs <= 1'b0;
      unique case (st)
        P_IDLE: if (start) begin st <= P_FETCH; pc <= '0; end
        P_FETCH: st <= P_ISSUE;
        P_ISSUE: begin
          if (ctrl[1]) mark <= pc;
          if (ctrl[3]) begin
            sel_saber <= slot[0][0]; eps_t <= slot[0][3:1];
            g88 <= slot[0][4]; omega <= slot[0][14:5];
          end else begin
            pend_sh <= use_sh; pend_pa <= use_pa; pend_cs <= use_cs;
            if (32'(use_sh) + 32'(use_pa) + 32'(use_cs) >= 2) par_count <= par_count + 16'd1;
          end
          st <= P_WAIT;
        end
        default: if (!pend_sh && !pend_pa && !pend_cs) begin
          if (ctrl[2] && dil_fail) begin
            pc <= mark; loop_count <= loop_count + 16'd1; st <= P_FETCH;
          end else if (ctrl[0]) begin
            st <= P_IDLE; done <= 1'b1;
          end else begin
            pc <= pc + AW'(1); st <= P_FETCH;
          end
        end
      endcase
    end
  end

  // program errors: two slots on one engine or on one memory-set pair
  always_ff @(posedge clk)
    if (issue && slot[0][51:50] != E_NONE && slot[1][51:50] != E_NONE) begin
      assert (slot[0][51:50] != slot[1][51:50])
        else $error("program_controller: both slots use engine %0d at pc %0d", slot[0][51:50], pc);
      assert (slot[0][45] != slot[1][45])
        else $error("program_controller: both slots use pair %0d at pc %0d", slot[0][45], pc);
    end
endmodule
