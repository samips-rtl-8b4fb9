// samips_decode -- DeCode, the instruction decoder of the ID stage.
//
// DeCode takes an instruction with its colour (CIns) and its PC+4 (BaseAddID). It first
// applies the multi-colour check: the instruction is accepted if its ID colour bit equals
// the stage's, or if a deeper stage's bit (EX, MEM) differs (the first instruction of a
// control transfer made deeper in the pipeline); otherwise it is dropped without a trace.
// On acceptance the stage takes over the instruction's colour, except right after a jump
// resolved here: the jump's delay-slot instruction still has the old colour, and the
// stage's own bit is inverted only then (register R of the paper).
//
// An accepted instruction is decoded (MIPS I: all CPU instructions plus MFC0, MTC0, RFE)
// into:
//   * RegRead {RNo0, RNo1, WNo} for the RegBank (WNo = 0 for no CPU register write);
//   * the EXCtrl bundle for the EXEunit: EX/MEM/WB control (encodings as in samips_pkg),
//     Offset32 (sign- or zero-extended immediate), Sa, the CP0 register number (CIDRd),
//     PC+4, the colour and a branch-delay-slot flag;
//   * CP0RAdd for MFC0;
//   * IDch for J/JAL (target) and for the ID-stage exceptions: reserved instruction,
//     BREAK and SYSCALL. An exception inverts the ID colour bit at once and travels on as an
//     EXC operation (EXCS when it sits in a branch delay slot) so that WB writes EPC.
// The paper's S register (delay slot after an ID jump) is generalised here to a flag set
// after any branch or jump, so that EXCS also covers delay slots of branches resolved in EX.
// The hazard report IDch is posted through a one-place buffer so that DeCode can go on
// while the AAU is busy (own choice: removes a handshake cycle between IF and ID).
// Timing: inputs are taken together; outputs are offered the next cycle; the next
// instruction is taken once all outputs of the current one have been accepted.
module samips_decode
  import samips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        cins_valid,
  input  pcv_t        cins,
  input  logic        baseaddid_valid,
  input  logic [31:0] baseaddid,
  output logic        in_ready,          // acknowledges CIns and BaseAddID together
  output logic        regread_valid,
  input  logic        regread_ready,
  output rr_t         regread,
  output logic        exctrl_valid,
  input  logic        exctrl_ready,
  output id2ex_t      exctrl,
  output logic        idch_valid,
  input  logic        idch_ready,
  output haz_t        idch,
  output logic        cp0radd_valid,
  input  logic        cp0radd_ready,
  output logic [4:0]  cp0radd
);
  colour_t idc;
  logic    r_jump;     // R: a jump was resolved here, flip own colour at the next instruction
  logic    prev_br;    // previous accepted instruction was a branch or jump
  logic    p_rr, p_ex, p_cp;
  logic    p_ch;

  rr_t     rr_r;
  id2ex_t  ex_r;
  haz_t    ch_r;
  logic [4:0] cpa_r;

  wire busy = p_rr | p_ex | p_cp;
  assign in_ready      = ~busy & cins_valid & baseaddid_valid & ~(p_ch & ~idch_ready);
  assign regread_valid = p_rr;  assign regread = rr_r;
  assign exctrl_valid  = p_ex;  assign exctrl  = ex_r;
  assign cp0radd_valid = p_cp;  assign cp0radd = cpa_r;
  assign idch_valid    = p_ch;  assign idch    = ch_r;

  // ---------------------------------------------------------------- decode
  logic [31:0] ins;
  logic [5:0]  opc, fn;
  logic [4:0]  rs, rt, rdf, sh;
  logic [15:0] imm;
  assign ins = cins.a;
  assign opc = ins[31:26];
  assign rs  = ins[25:21];
  assign rt  = ins[20:16];
  assign rdf = ins[15:11];
  assign sh  = ins[10:6];
  assign fn  = ins[5:0];
  assign imm = ins[15:0];

  ctrl_t      d_ctrl;
  rr_t        d_rr;
  logic [31:0] d_off;
  logic [4:0] d_sa;
  logic       d_jump, d_exc, d_cop, d_branch;
  logic [4:0] d_code;

  function automatic ctrl_t mk(ex_op_e ex, acc_e acc, logic [2:0] dt, wne_e wne, logic cnp);
    return '{ex: ex, acc: acc, dt: dt, wne: wne, cnp: cnp};
  endfunction

  always_comb begin
    d_ctrl    = mk(OP_NOP, ACC_NON, 3'b000, WNE_NUN, 1'b1);
    d_rr      = '0;
    d_off     = {{16{imm[15]}}, imm};
    d_sa      = sh;
    d_jump    = 1'b0;   // J / JAL resolved in ID
    d_exc     = 1'b0;
    d_code    = EXC_RI;
    d_cop     = 1'b0;   // MFC0: read CP0
    d_branch  = 1'b0;   // any branch or jump (its successor is a delay slot)
    unique case (opc)
      6'o00: begin // SPECIAL
        unique case (fn)
          6'o00: begin d_ctrl = mk(OP_SLL,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, rt, rdf}; end
          6'o02: begin d_ctrl = mk(OP_SRL,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, rt, rdf}; end
          6'o03: begin d_ctrl = mk(OP_SRA,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, rt, rdf}; end
          6'o04: begin d_ctrl = mk(OP_SLLV, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o06: begin d_ctrl = mk(OP_SRLV, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o07: begin d_ctrl = mk(OP_SRAV, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o10: begin d_ctrl = mk(OP_JR,   ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, 5'd0, 5'd0}; d_branch = 1'b1; end
          6'o11: begin d_ctrl = mk(OP_JALR, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rdf}; d_branch = 1'b1; end
          6'o14: begin d_exc = 1'b1; d_code = EXC_SYS; end
          6'o15: begin d_exc = 1'b1; d_code = EXC_BP;  end
          6'o20: begin d_ctrl = mk(OP_MFHI, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, 5'd0, rdf}; end
          6'o21: begin d_ctrl = mk(OP_MTHI, ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, 5'd0, 5'd0}; end
          6'o22: begin d_ctrl = mk(OP_MFLO, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, 5'd0, rdf}; end
          6'o23: begin d_ctrl = mk(OP_MTLO, ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, 5'd0, 5'd0}; end
          6'o30: begin d_ctrl = mk(OP_MULT,  ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end
          6'o31: begin d_ctrl = mk(OP_MULTU, ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end
          6'o32: begin d_ctrl = mk(OP_DIV,   ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end
          6'o33: begin d_ctrl = mk(OP_DIVU,  ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end
          6'o40: begin d_ctrl = mk(OP_ADD,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o41: begin d_ctrl = mk(OP_ADDU, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o42: begin d_ctrl = mk(OP_SUB,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o43: begin d_ctrl = mk(OP_SUBU, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o44: begin d_ctrl = mk(OP_AND,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o45: begin d_ctrl = mk(OP_OR,   ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o46: begin d_ctrl = mk(OP_XOR,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o47: begin d_ctrl = mk(OP_NOR,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o52: begin d_ctrl = mk(OP_SLT,  ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          6'o53: begin d_ctrl = mk(OP_SLTU, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{rs, rt, rdf}; end
          default: d_exc = 1'b1;
        endcase
      end
      6'o01: begin // REGIMM
        d_branch = 1'b1;
        unique case (rt)
          5'o00: begin d_ctrl = mk(OP_BLTZ,   ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, 5'd0, 5'd0}; end
          5'o01: begin d_ctrl = mk(OP_BGEZ,   ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, 5'd0, 5'd0}; end
          5'o20: begin d_ctrl = mk(OP_BLTZAL, ACC_NON, 3'b0, WNE_W, 1'b1);   d_rr = '{rs, 5'd0, 5'd31}; end
          5'o21: begin d_ctrl = mk(OP_BGEZAL, ACC_NON, 3'b0, WNE_W, 1'b1);   d_rr = '{rs, 5'd0, 5'd31}; end
          default: begin d_exc = 1'b1; d_branch = 1'b0; end
        endcase
      end
      6'o02: begin d_jump = 1'b1; d_branch = 1'b1; end                       // J
      6'o03: begin d_jump = 1'b1; d_branch = 1'b1;          // JAL
                   d_ctrl = mk(OP_JAL, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, 5'd0, 5'd31}; end
      6'o04: begin d_ctrl = mk(OP_BEQ,  ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; d_branch = 1'b1; end
      6'o05: begin d_ctrl = mk(OP_BNE,  ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; d_branch = 1'b1; end
      6'o06: begin d_ctrl = mk(OP_BLEZ, ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, 5'd0, 5'd0}; d_branch = 1'b1; end
      6'o07: begin d_ctrl = mk(OP_BGTZ, ACC_NON, 3'b0, WNE_NUN, 1'b1); d_rr = '{rs, 5'd0, 5'd0}; d_branch = 1'b1; end
      6'o10: begin d_ctrl = mk(OP_ADD,  ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rt}; end
      6'o11: begin d_ctrl = mk(OP_ADDU, ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rt}; end
      6'o12: begin d_ctrl = mk(OP_SLT,  ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rt}; end
      6'o13: begin d_ctrl = mk(OP_SLTU, ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rt}; end
      6'o14: begin d_ctrl = mk(OP_AND,  ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rt}; d_off = {16'd0, imm}; end
      6'o15: begin d_ctrl = mk(OP_OR,   ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rt}; d_off = {16'd0, imm}; end
      6'o16: begin d_ctrl = mk(OP_XOR,  ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{rs, 5'd0, rt}; d_off = {16'd0, imm}; end
      6'o17: begin d_ctrl = mk(OP_SLL,  ACC_IMM, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, 5'd0, rt};   // LUI
                   d_off = {16'd0, imm}; d_sa = 5'd16; end
      6'o20: begin // COP0
        if (rs == 5'o00) begin      // MFC0
          d_ctrl = mk(OP_COR, ACC_NON, 3'b0, WNE_W, 1'b1); d_rr = '{5'd0, 5'd0, rt}; d_cop = 1'b1;
        end else if (rs == 5'o04) begin // MTC0: rt passes the ALU (OR with $0), WB writes CP0
          d_ctrl = mk(OP_OR, ACC_NON, 3'b0, WNE_W, 1'b0); d_rr = '{5'd0, rt, 5'd0};
        end else if (rs == 5'o20 && fn == 6'o20) begin // RFE
          d_ctrl = mk(OP_NOP, ACC_NON, 3'b0, WNE_NUN, 1'b0);
        end else d_exc = 1'b1;
      end
      6'o40: begin d_ctrl = mk(OP_MA, ACC_READ,  DT_BS, WNE_W, 1'b1);   d_rr = '{rs, 5'd0, rt}; end // LB
      6'o41: begin d_ctrl = mk(OP_MA, ACC_READ,  DT_HS, WNE_W, 1'b1);   d_rr = '{rs, 5'd0, rt}; end // LH
      6'o42: begin d_ctrl = mk(OP_MA, ACC_READ,  DT_WL, WNE_W, 1'b1);   d_rr = '{rs, rt, rt};   end // LWL
      6'o43: begin d_ctrl = mk(OP_MA, ACC_READ,  DT_W,  WNE_W, 1'b1);   d_rr = '{rs, 5'd0, rt}; end // LW
      6'o44: begin d_ctrl = mk(OP_MA, ACC_READ,  DT_BU, WNE_W, 1'b1);   d_rr = '{rs, 5'd0, rt}; end // LBU
      6'o45: begin d_ctrl = mk(OP_MA, ACC_READ,  DT_HU, WNE_W, 1'b1);   d_rr = '{rs, 5'd0, rt}; end // LHU
      6'o46: begin d_ctrl = mk(OP_MA, ACC_READ,  DT_WR, WNE_W, 1'b1);   d_rr = '{rs, rt, rt};   end // LWR
      6'o50: begin d_ctrl = mk(OP_MA, ACC_WRITE, DT_BS, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end // SB
      6'o51: begin d_ctrl = mk(OP_MA, ACC_WRITE, DT_HS, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end // SH
      6'o52: begin d_ctrl = mk(OP_MA, ACC_WRITE, DT_WL, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end // SWL
      6'o53: begin d_ctrl = mk(OP_MA, ACC_WRITE, DT_W,  WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end // SW
      6'o56: begin d_ctrl = mk(OP_MA, ACC_WRITE, DT_WR, WNE_NUN, 1'b1); d_rr = '{rs, rt, 5'd0}; end // SWR
      default: d_exc = 1'b1;
    endcase
    // A write to $0 is no write at all.
    if (d_ctrl.cnp && d_ctrl.wne == WNE_W && d_rr.wno == 5'd0) d_ctrl.wne = WNE_NUN;
  end

  // ---------------------------------------------------------------- colour check
  logic    accept, same;
  colour_t c_new;      // stage colour after this instruction
  always_comb begin
    same   = (cins.c == idc);
    accept = same || (cins.c.ex != idc.ex) || (cins.c.mem != idc.mem);
    c_new  = cins.c;
    if (r_jump && same) c_new.id = ~idc.id;
  end

  wire take = in_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      idc <= '0; r_jump <= 1'b0; prev_br <= 1'b0;
      p_rr <= 1'b0; p_ex <= 1'b0; p_cp <= 1'b0; p_ch <= 1'b0;
      rr_r <= '0; ex_r <= '0; ch_r <= '0; cpa_r <= '0;
    end else begin
      if (p_rr && regread_ready) p_rr <= 1'b0;
      if (p_ex && exctrl_ready)  p_ex <= 1'b0;
      if (p_cp && cp0radd_ready) p_cp <= 1'b0;
      if (p_ch && idch_ready)    p_ch <= 1'b0;
      if (take && accept) begin
        r_jump  <= 1'b0;
        prev_br <= d_branch && !d_exc;
        idc     <= c_new;
        p_rr    <= 1'b1;
        p_ex    <= 1'b1;
        ex_r    <= '{ctrl: d_ctrl, c: cins.c, bd: prev_br, base: baseaddid, off: d_off,
                     sa: d_sa, cp0rd: rdf, wno: d_rr.wno};
        rr_r    <= d_rr;
        if (d_exc) begin
          colour_t ce;
          ce = c_new; ce.id = ~c_new.id;
          idc     <= ce;
          rr_r    <= '0;
          ex_r.wno <= 5'd0;
          ex_r.ctrl <= mk(prev_br ? OP_EXCS : OP_EXC, ACC_NON, 3'b000, WNE_EXC, 1'b0);
          ch_r    <= '{c: ce, st: ST_ID, enj: 1'b1, a: cause_value(d_code)};
          p_ch    <= 1'b1;
          prev_br <= 1'b0;
        end else if (d_jump) begin
          colour_t cj;
          cj = c_new; cj.id = ~c_new.id;
          ch_r   <= '{c: cj, st: ST_ID, enj: 1'b0, a: {baseaddid[31:28], ins[25:0], 2'b00}};
          p_ch   <= 1'b1;
          r_jump <= 1'b1;
        end
        if (d_cop && !d_exc) begin
          p_cp  <= 1'b1;
          cpa_r <= rdf;
        end
      end
    end
  end

endmodule
