// samips_exeunit -- EXEunit, the execute stage.
//
// For each instruction the unit joins: EXCtrl (control, Offset32, Sa, CIDRd, BaseAddEX,
// colour, destination number) from DeCode, Op0 and Op1 (register or forwarded operands,
// always both), the old destination value (register or forwarded, merged like an operand)
// when the instruction writes a CPU register, and the
// CP0 read data for MFC0. All inputs are taken in the same cycle.
// Multi-colour check on the EX and MEM colour bits: accepted if the EX bit equals the
// stage's or the MEM bit differs; a taken branch or JR/JALR sends EXch {target} with the
// stage colour's EX bit inverted and sets a flag (Rx) so that the stage inverts its own
// bit only after its delay-slot instruction (same colour) has passed. Overflow of ADD,
// ADDI, SUB raises an exception at once (EXch with the Cause value, EX bit inverted).
// ALU: add/sub, logic, set-on-less-than, shifts (constant and variable, LUI as a shift of
// the immediate by 16), multiply/divide into HI/LO, MFHI/MFLO/MTHI/MTLO, address
// calculation (Op0 + Offset32, Op1 as store data), links (PC+8 = BaseAddEX+4).
// Rejected instructions are not dropped: they go on with memory access NON and, if they
// write a register, wNe = R (reset to the old value), so that the forwarding streams and
// the hazard queue stay consistent; an exception turns the instruction into such a reset
// that also writes EPC (cNp = 0) in WB. EPC = BaseAddEX - 4, or - 8 in a delay slot.
// MEMCtrl/EXRes/MemD/EXRd are sent as one bundle; EXch is posted through a one-place
// buffer (own choice) so that the unit does not wait for the AAU.
// Timing: inputs joined in one cycle, bundle offered the next cycle.
module samips_exeunit
  import samips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        exctrl_valid,
  output logic        exctrl_ready,
  input  id2ex_t      exctrl,
  input  logic        op0_valid,
  output logic        op0_ready,
  input  logic [31:0] op0,
  input  logic        op1_valid,
  output logic        op1_ready,
  input  logic [31:0] op1,
  input  logic        pidrd_valid,
  output logic        pidrd_ready,
  input  logic [31:0] pidrd,
  input  logic        cp0rdata_valid,
  output logic        cp0rdata_ready,
  input  logic [31:0] cp0rdata,
  output logic        mem_valid,
  input  logic        mem_ready,
  output ex2mem_t     mem,
  output logic        exch_valid,
  input  logic        exch_ready,
  output haz_t        exch
);
  logic    exc_ex, exc_mem;   // stage colour (the ID bit is of no concern here)
  logic    r_br;          // Rx: invert own bit after the delay slot
  logic [31:0] hi, lo;
  logic    p_mem, p_ch;
  ex2mem_t mem_r;
  haz_t    ch_r;

  assign mem_valid  = p_mem; assign mem  = mem_r;
  assign exch_valid = p_ch;  assign exch = ch_r;

  ctrl_t ct;
  assign ct = exctrl.ctrl;
  wire need_pid = cpu_write(ct.wne, ct.cnp);
  wire need_cp  = (ct.ex == OP_COR);
  wire room = (~p_mem | mem_ready) & (~p_ch | exch_ready);
  wire go   = room & exctrl_valid & op0_valid & op1_valid &
              (~need_pid | pidrd_valid) & (~need_cp | cp0rdata_valid);
  assign exctrl_ready   = go;
  assign op0_ready      = go;
  assign op1_ready      = go;
  assign pidrd_ready    = go & need_pid;
  assign cp0rdata_ready = go & need_cp;

  // ---------------------------------------------------------------- ALU
  logic [31:0] b, res, target, link, epc;
  logic [32:0] sum;
  logic        ovf, taken, is_br;
  logic [63:0] prod;
  logic [31:0] q, r;
  logic        wr_hilo;
  logic [31:0] hi_n, lo_n;
  logic [4:0]  shamt;

  always_comb begin
    b      = (ct.acc == ACC_IMM) ? exctrl.off : op1;
    link   = exctrl.base + 32'd4;
    target = exctrl.base + {exctrl.off[29:0], 2'b00};
    epc    = exctrl.base - (exctrl.bd ? 32'd8 : 32'd4);
    shamt  = (ct.ex == OP_SLLV || ct.ex == OP_SRLV || ct.ex == OP_SRAV) ? op0[4:0] : exctrl.sa;
    sum    = '0;
    res    = '0;
    ovf    = 1'b0;
    taken  = 1'b0;
    is_br  = 1'b0;
    prod   = '0;
    q      = '0;
    r      = '0;
    wr_hilo = 1'b0;
    hi_n   = hi;
    lo_n   = lo;
    unique case (ct.ex)
      OP_ADD:  begin sum = {op0[31], op0} + {b[31], b}; res = sum[31:0]; ovf = sum[32] ^ sum[31]; end
      OP_ADDU: res = op0 + b;
      OP_SUB:  begin sum = {op0[31], op0} - {b[31], b}; res = sum[31:0]; ovf = sum[32] ^ sum[31]; end
      OP_SUBU: res = op0 - b;
      OP_AND:  res = op0 & b;
      OP_OR:   res = op0 | b;
      OP_XOR:  res = op0 ^ b;
      OP_NOR:  res = ~(op0 | b);
      OP_SLT:  res = {31'd0, $signed(op0) < $signed(b)};
      OP_SLTU: res = {31'd0, op0 < b};
      OP_SLL, OP_SLLV: res = b << shamt;
      OP_SRL, OP_SRLV: res = b >> shamt;
      OP_SRA, OP_SRAV: res = $unsigned($signed(b) >>> shamt);
      OP_MA:   res = op0 + exctrl.off;
      OP_COR:  res = cp0rdata;
      OP_EXC, OP_EXCS: res = epc;
      OP_BEQ:  begin is_br = 1'b1; taken = (op0 == op1); end
      OP_BNE:  begin is_br = 1'b1; taken = (op0 != op1); end
      OP_BGTZ: begin is_br = 1'b1; taken = ~op0[31] & (op0 != 32'd0); end
      OP_BLEZ: begin is_br = 1'b1; taken = op0[31] | (op0 == 32'd0); end
      OP_BLTZ: begin is_br = 1'b1; taken = op0[31]; end
      OP_BGEZ: begin is_br = 1'b1; taken = ~op0[31]; end
      OP_BLTZAL: begin is_br = 1'b1; taken = op0[31];  res = link; end
      OP_BGEZAL: begin is_br = 1'b1; taken = ~op0[31]; res = link; end
      OP_JR:   begin is_br = 1'b1; taken = 1'b1; target = op0; end
      OP_JALR: begin is_br = 1'b1; taken = 1'b1; target = op0; res = link; end
      OP_JAL:  res = link;
      OP_MULT:  begin prod = $unsigned($signed({{32{op0[31]}}, op0}) * $signed({{32{op1[31]}}, op1}));
                      wr_hilo = 1'b1; hi_n = prod[63:32]; lo_n = prod[31:0]; end
      OP_MULTU: begin prod = {32'd0, op0} * {32'd0, op1};
                      wr_hilo = 1'b1; hi_n = prod[63:32]; lo_n = prod[31:0]; end
      OP_DIV:   begin
                  if (op1 != 32'd0) begin
                    q = $unsigned($signed(op0) / $signed(op1));
                    r = $unsigned($signed(op0) % $signed(op1));
                  end else r = op0;
                  wr_hilo = 1'b1; hi_n = r; lo_n = q;
                end
      OP_DIVU:  begin
                  if (op1 != 32'd0) begin q = op0 / op1; r = op0 % op1; end else r = op0;
                  wr_hilo = 1'b1; hi_n = r; lo_n = q;
                end
      OP_MTHI: begin wr_hilo = 1'b1; hi_n = op0; end
      OP_MTLO: begin wr_hilo = 1'b1; lo_n = op0; end
      OP_MFHI: res = hi;
      OP_MFLO: res = lo;
      default: res = '0;
    endcase
  end

  // ---------------------------------------------------------------- colour check
  colour_t ci;
  logic    accept, same;
  colour_t c_new;
  always_comb begin
    ci     = exctrl.c;
    same   = (ci.ex == exc_ex) && (ci.mem == exc_mem);
    accept = (ci.ex == exc_ex) || (ci.mem != exc_mem);
    c_new  = ci;
    if (r_br && same) c_new.ex = ~exc_ex;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      exc_ex <= 1'b0; exc_mem <= 1'b0; r_br <= 1'b0; hi <= '0; lo <= '0;
      p_mem <= 1'b0; p_ch <= 1'b0; mem_r <= '0; ch_r <= '0;
    end else begin
      if (p_mem && mem_ready) p_mem <= 1'b0;
      if (p_ch && exch_ready) p_ch <= 1'b0;
      if (go) begin
        p_mem <= 1'b1;
        mem_r <= '{acc: ct.acc, dt: ct.dt, wne: ct.wne, cnp: ct.cnp, c: ci, bd: exctrl.bd,
                   base: exctrl.base, res: res, memd: op1, rd: '{rd: exctrl.wno, data: pidrd}};
        // no CPU destination: carry the CP0 register number (MTC0) instead
        if (!need_pid) mem_r.rd <= '{rd: exctrl.cp0rd, data: 32'd0};
        if (!accept) begin
          mem_r.acc <= ACC_NON;
          mem_r.wne <= need_pid ? WNE_R : WNE_NUN;
          mem_r.cnp <= 1'b1;
        end else begin
          colour_t cx;
          cx = c_new; cx.ex = ~c_new.ex;
          exc_ex  <= c_new.ex;
          exc_mem <= c_new.mem;
          r_br <= 1'b0;
          if (wr_hilo) begin hi <= hi_n; lo <= lo_n; end
          if (ovf) begin
            exc_ex <= cx.ex;
            mem_r.acc <= ACC_NON;
            mem_r.wne <= need_pid ? WNE_R : WNE_EXC;
            mem_r.cnp <= 1'b0;
            mem_r.res <= epc;
            ch_r <= '{c: cx, st: ST_EX, enj: 1'b1, a: cause_value(EXC_OV)};
            p_ch <= 1'b1;
          end else if (is_br && taken) begin
            ch_r <= '{c: cx, st: ST_EX, enj: 1'b0, a: target};
            p_ch <= 1'b1;
            r_br <= 1'b1;
          end
        end
      end
    end
  end

endmodule
