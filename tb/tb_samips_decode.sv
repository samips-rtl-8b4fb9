// tb_samips_decode -- testbench of samips_decode.
//
// Part 1: a table of instructions (every major class) with random register fields and
// immediates is decoded; checked are RegRead {RNo0, RNo1, WNo}, the EX operation, memory
// access/data type, wNe/cNp, Offset32 (sign or zero extension), Sa, CP0RAdd for MFC0, and
// that J/JAL send IDch {target, ID bit inverted} and SYSCALL/BREAK/RI send IDch {Cause
// value, exception}. Part 2: multi-colour behaviour: after a jump the delay-slot instruction
// (same colour) is accepted and only then the ID bit flips, wrong-path instructions with the
// old colour are dropped (no output at all), the target with the new colour is accepted,
// and an instruction whose EX bit differs (deeper hazard) is passed on with its colour.
// Random readiness on all outputs; a new instruction is only taken when all are done.
module tb_samips_decode;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cins_valid = 0, baseaddid_valid = 0, in_ready;
  pcv_t cins = '0;
  logic [31:0] baseaddid = 0;
  logic regread_valid, regread_ready = 0, exctrl_valid, exctrl_ready = 0;
  logic idch_valid, idch_ready = 0, cp0radd_valid, cp0radd_ready = 0;
  rr_t regread; id2ex_t exctrl; haz_t idch; logic [4:0] cp0radd;
  samips_decode dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // collected outputs of the last instruction
  bit g_rr, g_ex, g_ch, g_cp;
  rr_t o_rr; id2ex_t o_ex; haz_t o_ch; logic [4:0] o_cp;
  bit rnd_ready = 1;
  always @(posedge clk) if (!rst) begin
    if (regread_valid && regread_ready) begin g_rr = 1; o_rr = regread; end
    if (exctrl_valid && exctrl_ready)   begin g_ex = 1; o_ex = exctrl; end
    if (idch_valid && idch_ready)       begin g_ch = 1; o_ch = idch; end
    if (cp0radd_valid && cp0radd_ready) begin g_cp = 1; o_cp = cp0radd; end
    regread_ready <= rnd_ready ? $urandom_range(1, 0) : 1'b1;
    exctrl_ready  <= rnd_ready ? $urandom_range(1, 0) : 1'b1;
    idch_ready    <= rnd_ready ? $urandom_range(1, 0) : 1'b1;
    cp0radd_ready <= rnd_ready ? $urandom_range(1, 0) : 1'b1;
  end

  task automatic issue(logic [31:0] ins, colour_t c, logic [31:0] pc);
    g_rr = 0; g_ex = 0; g_ch = 0; g_cp = 0;
    cins <= '{c: c, a: ins}; baseaddid <= pc + 32'd4;
    cins_valid <= 1; baseaddid_valid <= 1;
    do @(posedge clk); while (!in_ready);
    cins_valid <= 0; baseaddid_valid <= 0;
    repeat (40) @(posedge clk);      // let all outputs drain
  endtask

  function automatic logic [31:0] R(int rs, int rt, int rd, int sh, int fn);
    return {6'd0, 5'(rs), 5'(rt), 5'(rd), 5'(sh), 6'(fn)};
  endfunction
  function automatic logic [31:0] I(int op, int rs, int rt, int imm);
    return {6'(op), 5'(rs), 5'(rt), 16'(imm)};
  endfunction

  task automatic expect_ex(string n, rr_t rr, ex_op_e op, acc_e acc, logic [2:0] dt, wne_e wne, logic cnp);
    chk(g_rr && o_rr == rr, {n, ": RegRead"});
    chk(g_ex && o_ex.ctrl.ex == op && o_ex.ctrl.acc == acc && o_ex.ctrl.wne == wne &&
        o_ex.ctrl.cnp == cnp && (acc inside {ACC_READ, ACC_WRITE} ? o_ex.ctrl.dt == dt : 1'b1),
        {n, ": EXCtrl"});
    chk(g_ex && o_ex.wno == rr.wno, {n, ": destination"});
  endtask

  colour_t c0 = 3'b000;
  logic [31:0] pc = 32'h100;

  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int rs, rt, rd, imm;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (40) begin
      rs = $urandom_range(31, 1); rt = $urandom_range(31, 1); rd = $urandom_range(31, 1);
      imm = $urandom_range(16'hffff, 0);
      issue(R(rs, rt, rd, 0, 6'h21), c0, pc); expect_ex("addu", '{rs, rt, rd}, OP_ADDU, ACC_NON, 0, WNE_W, 1);
      issue(R(rs, rt, rd, 0, 6'h22), c0, pc); expect_ex("sub", '{rs, rt, rd}, OP_SUB, ACC_NON, 0, WNE_W, 1);
      issue(R(rs, rt, rd, 0, 6'h2a), c0, pc); expect_ex("slt", '{rs, rt, rd}, OP_SLT, ACC_NON, 0, WNE_W, 1);
      issue(R(0, rt, rd, 5, 6'h03), c0, pc);  expect_ex("sra", '{0, rt, rd}, OP_SRA, ACC_NON, 0, WNE_W, 1);
      chk(o_ex.sa == 5, "sra: Sa");
      issue(R(rs, rt, 0, 0, 6'h1a), c0, pc);  expect_ex("div", '{rs, rt, 0}, OP_DIV, ACC_NON, 0, WNE_NUN, 1);
      issue(R(rs, rt, 0, 0, 6'h21), c0, pc);  expect_ex("addu to $0", '{rs, rt, 0}, OP_ADDU, ACC_NON, 0, WNE_NUN, 1);
      issue(I(6'h08, rs, rt, imm), c0, pc);   expect_ex("addi", '{rs, 0, rt}, OP_ADD, ACC_IMM, 0, WNE_W, 1);
      chk(o_ex.off == {{16{imm[15]}}, 16'(imm)}, "addi: sign extension");
      issue(I(6'h0d, rs, rt, imm), c0, pc);   expect_ex("ori", '{rs, 0, rt}, OP_OR, ACC_IMM, 0, WNE_W, 1);
      chk(o_ex.off == {16'd0, 16'(imm)}, "ori: zero extension");
      issue(I(6'h0f, 0, rt, imm), c0, pc);    expect_ex("lui", '{0, 0, rt}, OP_SLL, ACC_IMM, 0, WNE_W, 1);
      chk(o_ex.sa == 16, "lui: shift 16");
      issue(I(6'h23, rs, rt, imm), c0, pc);   expect_ex("lw", '{rs, 0, rt}, OP_MA, ACC_READ, DT_W, WNE_W, 1);
      issue(I(6'h20, rs, rt, imm), c0, pc);   expect_ex("lb", '{rs, 0, rt}, OP_MA, ACC_READ, DT_BS, WNE_W, 1);
      issue(I(6'h25, rs, rt, imm), c0, pc);   expect_ex("lhu", '{rs, 0, rt}, OP_MA, ACC_READ, DT_HU, WNE_W, 1);
      issue(I(6'h22, rs, rt, imm), c0, pc);   expect_ex("lwl", '{rs, rt, rt}, OP_MA, ACC_READ, DT_WL, WNE_W, 1);
      issue(I(6'h2b, rs, rt, imm), c0, pc);   expect_ex("sw", '{rs, rt, 0}, OP_MA, ACC_WRITE, DT_W, WNE_NUN, 1);
      issue(I(6'h28, rs, rt, imm), c0, pc);   expect_ex("sb", '{rs, rt, 0}, OP_MA, ACC_WRITE, DT_BS, WNE_NUN, 1);
      issue(I(6'h04, rs, rt, imm), c0, pc);   expect_ex("beq", '{rs, rt, 0}, OP_BEQ, ACC_NON, 0, WNE_NUN, 1);
      issue(I(6'h01, rs, 5'h11, imm), c0, pc); expect_ex("bgezal", '{rs, 0, 31}, OP_BGEZAL, ACC_NON, 0, WNE_W, 1);
      issue(R(rs, 0, rd, 0, 6'h09), c0, pc);  expect_ex("jalr", '{rs, 0, rd}, OP_JALR, ACC_NON, 0, WNE_W, 1);
      issue({6'h10, 5'd0, 5'(rt), 5'd14, 11'd0}, c0, pc);
      expect_ex("mfc0", '{0, 0, rt}, OP_COR, ACC_NON, 0, WNE_W, 1);
      chk(g_cp && o_cp == 14, "mfc0: CP0RAdd");
      issue({6'h10, 5'd4, 5'(rt), 5'd12, 11'd0}, c0, pc);
      expect_ex("mtc0", '{0, rt, 0}, OP_OR, ACC_NON, 0, WNE_W, 0);
      chk(o_ex.cp0rd == 12 && !g_cp, "mtc0: CP0 register");
      issue({6'h10, 5'b10000, 15'd0, 6'h10}, c0, pc);
      expect_ex("rfe", '{0, 0, 0}, OP_NOP, ACC_NON, 0, WNE_NUN, 0);
      chk(!g_ch, "no IDch for ordinary instructions");
      // exceptions (each flips the ID colour bit)
      issue(R(0, 0, 0, 0, 6'h0c), c0, pc);
      chk(g_ch && o_ch.enj && o_ch.st == ST_ID && o_ch.a == {25'd0, EXC_SYS, 2'b00} &&
          o_ch.c == (c0 ^ 3'b001), "syscall: IDch exception");
      chk(g_ex && o_ex.ctrl.ex == OP_EXC && o_ex.ctrl.wne == WNE_EXC && !o_ex.ctrl.cnp && g_rr && o_rr == '0,
          "syscall: EPC write in WB, no register access");
      c0 = c0 ^ 3'b001;
      issue(32'hfc00_0000, c0, pc);
      chk(g_ch && o_ch.a == {25'd0, EXC_RI, 2'b00} && o_ch.c == (c0 ^ 3'b001), "RI: IDch exception");
      c0 = c0 ^ 3'b001;
    end
    // ---- part 2: colour handling around a jump
    rnd_ready = 0;
    issue({6'h03, 26'h40}, c0, 32'h1000);          // jal 0x100
    chk(g_ch && !o_ch.enj && o_ch.a == 32'h100 && o_ch.c == (c0 ^ 3'b001), "jal: IDch target, ID bit inverted");
    expect_ex("jal", '{0, 0, 31}, OP_JAL, ACC_NON, 0, WNE_W, 1);
    issue(R(1, 2, 3, 0, 6'h21), c0, 32'h1004);     // delay slot: same colour, accepted
    chk(g_rr && g_ex && o_ex.bd, "delay slot accepted, marked as delay slot");
    issue(R(1, 2, 4, 0, 6'h21), c0, 32'h1008);     // wrong path: dropped
    chk(!g_rr && !g_ex && !g_ch, "wrong-path instruction dropped");
    issue(R(1, 2, 5, 0, 6'h21), c0 ^ 3'b001, 32'h100);  // target, new colour
    chk(g_rr && g_ex && !o_ex.bd, "target accepted");
    c0 = c0 ^ 3'b001;
    issue(R(1, 2, 6, 0, 6'h21), c0 ^ 3'b010, 32'h200);  // EX bit changed by a deeper hazard
    chk(g_rr && g_ex && o_ex.c == (c0 ^ 3'b010), "deeper colour change accepted");
    // An EX bit that differs from the stage's cannot be told apart from a newer one in ID:
    // the instruction is passed on (the EX stage cancels it).
    issue(R(1, 2, 7, 0, 6'h21), c0, 32'h104);
    chk(g_rr && g_ex && o_ex.c == c0, "differing EX bit passed on to EX");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
