// tb_samips_exeunit -- testbench of samips_exeunit.
//
// Random instructions (ALU, immediate, shifts, SLT, MULT/DIV with MFHI/MFLO, address
// calculation, branches, JR/JALR/JAL, MFC0, exceptions from ID) are driven with random
// operands and random colours relative to the stage colour tracked by a reference model.
// Inputs are offered with random delays and the outputs have random readiness. Checked
// against the model: EXRes, MemD, memory/WB control, EXch for taken branches and jumps
// (target, EX bit inverted) and for overflow (Cause Ov, EPC as result), cancellation of
// instructions with a wrong colour (wNe = R for writers, no EXch, HI/LO unchanged), the
// delayed colour flip after a branch delay slot, and that the unit waits for PIDRd and the
// CP0 data only when needed. Cycle count: the bundle is offered one cycle after the join.
module tb_samips_exeunit;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic exctrl_valid = 0, exctrl_ready, op0_valid = 0, op0_ready, op1_valid = 0, op1_ready;
  logic pidrd_valid = 0, pidrd_ready, cp0rdata_valid = 0, cp0rdata_ready;
  logic mem_valid, mem_ready = 0, exch_valid, exch_ready = 0;
  id2ex_t exctrl = '0;
  logic [31:0] op0 = 0, op1 = 0, pidrd = 0, cp0rdata = 0;
  ex2mem_t mem; haz_t exch;
  samips_exeunit dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // ---------------------------------------------------------------- model
  logic m_ex = 0, m_mem = 0, m_r = 0;
  logic [31:0] m_hi = 0, m_lo = 0;
  ex2mem_t e_mem [$];
  haz_t    e_ch [$];
  int n_br = 0, n_ovf = 0, n_rej = 0;

  ex_op_e OPS [38] = '{OP_ADD, OP_ADDU, OP_SUB, OP_SUBU, OP_AND, OP_OR, OP_XOR, OP_NOR,
    OP_SLT, OP_SLTU, OP_SLL, OP_SRL, OP_SRA, OP_SLLV, OP_SRLV, OP_SRAV, OP_MA, OP_COR,
    OP_BEQ, OP_BNE, OP_BGTZ, OP_BLEZ, OP_BLTZ, OP_BGEZ, OP_BGEZAL, OP_JR, OP_JALR, OP_JAL,
    OP_MULT, OP_MULTU, OP_DIV, OP_DIVU, OP_MFHI, OP_MFLO, OP_MTHI, OP_MTLO, OP_EXC, OP_NOP};

  task automatic model(id2ex_t x, logic [31:0] a, logic [31:0] b0, logic [31:0] old);
    logic [31:0] b, res, tgt;
    logic [63:0] p;
    logic ovf, br, tk, acc, same, wr;
    ex2mem_t o;
    wr  = cpu_write(x.ctrl.wne, x.ctrl.cnp);
    b   = (x.ctrl.acc == ACC_IMM) ? x.off : b0;
    res = 0; ovf = 0; br = 0; tk = 0; tgt = x.base + (x.off << 2);
    case (x.ctrl.ex)
      OP_ADD:  begin res = a + b; ovf = (a[31] == b[31]) && (res[31] != a[31]); end
      OP_ADDU: res = a + b;
      OP_SUB:  begin res = a - b; ovf = (a[31] != b[31]) && (res[31] != a[31]); end
      OP_SUBU: res = a - b;
      OP_AND:  res = a & b;  OP_OR: res = a | b;  OP_XOR: res = a ^ b;  OP_NOR: res = ~(a | b);
      OP_SLT:  res = ($signed(a) < $signed(b)) ? 1 : 0;
      OP_SLTU: res = (a < b) ? 1 : 0;
      OP_SLL:  res = b << x.sa;  OP_SRL: res = b >> x.sa;  OP_SRA: res = $signed(b) >>> x.sa;
      OP_SLLV: res = b << a[4:0]; OP_SRLV: res = b >> a[4:0]; OP_SRAV: res = $signed(b) >>> a[4:0];
      OP_MA:   res = a + x.off;
      OP_COR:  res = 32'hC0C0_0000 | x.cp0rd;
      OP_BEQ:  begin br = 1; tk = a == b0; end
      OP_BNE:  begin br = 1; tk = a != b0; end
      OP_BGTZ: begin br = 1; tk = $signed(a) > 0; end
      OP_BLEZ: begin br = 1; tk = $signed(a) <= 0; end
      OP_BLTZ: begin br = 1; tk = $signed(a) < 0; end
      OP_BGEZ: begin br = 1; tk = $signed(a) >= 0; end
      OP_BGEZAL: begin br = 1; tk = $signed(a) >= 0; res = x.base + 4; end
      OP_JR:   begin br = 1; tk = 1; tgt = a; end
      OP_JALR: begin br = 1; tk = 1; tgt = a; res = x.base + 4; end
      OP_JAL:  res = x.base + 4;
      OP_MFHI: res = m_hi;  OP_MFLO: res = m_lo;
      OP_EXC:  res = x.base - (x.bd ? 8 : 4);
      default: ;
    endcase
    acc  = (x.c.ex == m_ex) || (x.c.mem != m_mem);
    same = (x.c.ex == m_ex) && (x.c.mem == m_mem);
    o = '{acc: x.ctrl.acc, dt: x.ctrl.dt, wne: x.ctrl.wne, cnp: x.ctrl.cnp, c: x.c, bd: x.bd,
          base: x.base, res: res, memd: b0, rd: wr ? '{x.wno, old} : '{x.cp0rd, 32'd0}};
    if (!acc) begin
      o.acc = ACC_NON; o.wne = wr ? WNE_R : WNE_NUN; o.cnp = 1; n_rej++;
    end else begin
      logic nex;
      nex = (m_r && same) ? ~x.c.ex : x.c.ex;
      m_ex = nex; m_mem = x.c.mem; m_r = 0;
      case (x.ctrl.ex)
        OP_MULT:  begin p = $signed({{32{a[31]}}, a}) * $signed({{32{b0[31]}}, b0}); m_hi = p[63:32]; m_lo = p[31:0]; end
        OP_MULTU: begin p = {32'd0, a} * {32'd0, b0}; m_hi = p[63:32]; m_lo = p[31:0]; end
        OP_DIV:   if (b0 != 0) begin m_lo = $signed(a) / $signed(b0); m_hi = $signed(a) % $signed(b0); end
                  else begin m_lo = 0; m_hi = a; end
        OP_DIVU:  if (b0 != 0) begin m_lo = a / b0; m_hi = a % b0; end else begin m_lo = 0; m_hi = a; end
        OP_MTHI:  m_hi = a;
        OP_MTLO:  m_lo = a;
        default: ;
      endcase
      if (ovf) begin
        o.acc = ACC_NON; o.wne = wr ? WNE_R : WNE_EXC; o.cnp = 0;
        o.res = x.base - (x.bd ? 8 : 4);
        m_ex = ~nex;
        e_ch.push_back('{c: '{mem: x.c.mem, ex: ~nex, id: x.c.id}, st: ST_EX, enj: 1, a: {25'd0, EXC_OV, 2'b00}});
        n_ovf++;
      end else if (br && tk) begin
        e_ch.push_back('{c: '{mem: x.c.mem, ex: ~nex, id: x.c.id}, st: ST_EX, enj: 0, a: tgt});
        m_r = 1; n_br++;
      end
    end
    e_mem.push_back(o);
  endtask

  function automatic id2ex_t rnd_ins();
    id2ex_t x;
    ex_op_e op;
    op = OPS[$urandom_range(37, 0)];
    x = '0;
    x.ctrl.ex = op; x.ctrl.acc = ACC_NON; x.ctrl.wne = WNE_NUN; x.ctrl.cnp = 1;
    x.ctrl.dt = 3'($urandom);
    if (op inside {OP_ADD, OP_ADDU, OP_AND, OP_OR, OP_SLT, OP_SLL} && $urandom_range(1, 0)) x.ctrl.acc = ACC_IMM;
    if (op == OP_MA) x.ctrl.acc = acc_e'($urandom_range(1, 0));
    if (!(op inside {OP_BEQ, OP_BNE, OP_BGTZ, OP_BLEZ, OP_BLTZ, OP_BGEZ, OP_JR, OP_MULT, OP_MULTU,
                     OP_DIV, OP_DIVU, OP_MTHI, OP_MTLO, OP_NOP, OP_EXC})) begin
      x.ctrl.wne = WNE_W; x.wno = 5'($urandom_range(31, 1));
    end
    if (op == OP_MA && x.ctrl.acc == ACC_WRITE) begin x.ctrl.wne = WNE_NUN; x.wno = 0; end
    if (op == OP_EXC) begin x.ctrl.wne = WNE_EXC; x.ctrl.cnp = 0; end
    x.c   = '{mem: ($urandom_range(7, 0) == 0) ? ~m_mem : m_mem,
              ex: ($urandom_range(5, 0) == 0) ? ~m_ex : m_ex, id: 1'($urandom)};
    x.bd  = 1'($urandom);
    x.base = $urandom & ~32'h3;
    x.off = {{16{1'($urandom)}}, 16'($urandom)};
    x.sa  = 5'($urandom);
    x.cp0rd = 5'($urandom);
    return x;
  endfunction

  function automatic logic [31:0] rnd_op();
    case ($urandom_range(3, 0))
      0: return 32'h7fff_ff00 + $urandom_range(511, 0);   // overflow region
      1: return $urandom_range(3, 0);
      default: return $urandom;
    endcase
  endfunction

  // ---------------------------------------------------------------- driver
  int n = 0, got = 0, since = 100;
  localparam int N = 4000;
  always @(posedge clk) if (!rst) begin
    since <= since + 1;
    if (exctrl_valid && exctrl_ready) begin
      chk(op0_ready && op1_ready, "operands joined");
      chk(pidrd_ready == cpu_write(exctrl.ctrl.wne, exctrl.ctrl.cnp), "PIDRd only for writers");
      chk(cp0rdata_ready == (exctrl.ctrl.ex == OP_COR), "CP0 data only for MFC0");
      model(exctrl, op0, op1, pidrd);
      {exctrl_valid, op0_valid, op1_valid, pidrd_valid, cp0rdata_valid} <= '0;
      n <= n + 1; since <= 0;
    end else if (!exctrl_valid && n < N && $urandom_range(1, 0)) begin
      id2ex_t x;
      x = rnd_ins();
      exctrl <= x; exctrl_valid <= 1;
      op0 <= rnd_op(); op1 <= rnd_op(); op0_valid <= 1; op1_valid <= 1;
      pidrd <= $urandom; pidrd_valid <= cpu_write(x.ctrl.wne, x.ctrl.cnp);
      cp0rdata <= 32'hC0C0_0000 | x.cp0rd; cp0rdata_valid <= (x.ctrl.ex == OP_COR);
    end
    if (mem_valid && mem_ready) begin
      chk(e_mem.size() > 0 && mem == e_mem[0], "MEM bundle");
      if (e_mem.size() > 0 && mem != e_mem[0] && failures < 5)
        $display("  got %p\n  exp %p", mem, e_mem[0]);
      void'(e_mem.pop_front()); got++;
    end
    if (exch_valid && exch_ready) begin
      chk(e_ch.size() > 0 && exch == e_ch[0], "EXch"); void'(e_ch.pop_front());
    end
    mem_ready  <= $urandom_range(1, 0);
    exch_ready <= $urandom_range(1, 0);
  end
  always @(negedge clk) if (!rst && since == 0) chk(mem_valid, "bundle one cycle after join");

  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (n == N);
    wait (got == N);
    repeat (10) @(posedge clk);
    chk(e_ch.size() == 0, "all EXch delivered");
    $display("branches %0d overflows %0d cancelled %0d", n_br, n_ovf, n_rej);
    chk(n_br > 50 && n_ovf > 20 && n_rej > 50, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
