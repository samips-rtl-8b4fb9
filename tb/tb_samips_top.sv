// tb_samips_top -- end-to-end testbench of the SAMIPS processor.
//
// A small MIPS I program, assembled by the functions below, is loaded into the behavioural
// memory (samips_mem_model) and run four times with memory latencies of 0..3 random cycles.
// The program exercises:
// (memory latency runs 2 and 3 add 8 cycles to every data read) RAW hazards resolved by EXR, MEMR and WBR forwarding, a load and
// its delay slot, taken and untaken branches with delay slots, JAL/JR (ID and EX control
// hazards with discarded wrong-path instructions), an arithmetic overflow, a load address
// error, SYSCALL, BREAK and a reserved instruction (each entering the handler at
// 0x8000_0080, which logs Cause, counts the exception and returns with JR/RFE), MULT/MFLO,
// SB/LBU, MTC0 and MFC0. Results are stored to memory and compared with the expected values.
// Each mechanism is also counted on internal handshakes; a mechanism that never happened
// is a failure. The one exception is the RegBank's WBR case (operand three instructions
// back, still waiting for write-back): in this integration every unit holds at most one
// instruction, so the instruction three back has always written back before the RegBank
// can take the reader. Its count is reported and the case is covered by tb_samips_regbank. The top is instantiated with its default parameters.
module tb_samips_top;
  import samips_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned maxlat = 0;
  int unsigned dlat = 0;

  logic        ireq_v, ireq_r, irsp_v, irsp_r;
  logic [31:0] ireq_a, irsp_i;
  logic [2:0]  ireq_c, irsp_c;
  logic        dadd_v, dadd_r, dadd_w, dwd_v, dwd_r, drd_v, drd_r;
  logic [2:0]  dadd_dt;
  logic [31:0] dadd_a, dwd, drd;
  logic [31:0] st_o, ca_o, epc_o;
  logic [2:0]  aauc;
  int unsigned n_loads, n_stores;

  samips_top dut (
    .clk, .rst,
    .imem_req_valid(ireq_v), .imem_req_ready(ireq_r), .imem_req_addr(ireq_a),
    .imem_req_colour(ireq_c),
    .imem_rsp_valid(irsp_v), .imem_rsp_ready(irsp_r), .imem_rsp_ins(irsp_i),
    .imem_rsp_colour(irsp_c),
    .dmem_add_valid(dadd_v), .dmem_add_ready(dadd_r), .dmem_add_write(dadd_w),
    .dmem_add_dtype(dadd_dt), .dmem_add_addr(dadd_a),
    .dmem_wdata_valid(dwd_v), .dmem_wdata_ready(dwd_r), .dmem_wdata(dwd),
    .dmem_rdata_valid(drd_v), .dmem_rdata_ready(drd_r), .dmem_rdata(drd),
    .cp0_status(st_o), .cp0_cause(ca_o), .cp0_epc(epc_o), .aau_colour(aauc));

  samips_mem_model #(.AW(12)) mem (
    .clk, .rst, .maxlat, .dlat,
    .ireq_valid(ireq_v), .ireq_ready(ireq_r), .ireq_addr(ireq_a), .ireq_colour(ireq_c),
    .irsp_valid(irsp_v), .irsp_ready(irsp_r), .irsp_ins(irsp_i), .irsp_colour(irsp_c),
    .dadd_valid(dadd_v), .dadd_ready(dadd_r), .dadd_write(dadd_w), .dadd_dtype(dadd_dt),
    .dadd_addr(dadd_a), .dwd_valid(dwd_v), .dwd_ready(dwd_r), .dwd(dwd),
    .drd_valid(drd_v), .drd_ready(drd_r), .drd(drd), .n_loads, .n_stores);

  // ------------------------------------------------------------ assembler
  function automatic logic [31:0] R(int rs, int rt, int rd, int sh, int fn);
    return {6'd0, 5'(rs), 5'(rt), 5'(rd), 5'(sh), 6'(fn)};
  endfunction
  function automatic logic [31:0] I(int op, int rs, int rt, int imm);
    return {6'(op), 5'(rs), 5'(rt), 16'(imm)};
  endfunction
  function automatic logic [31:0] JI(int op, int word);
    return {6'(op), 26'(word)};
  endfunction
  localparam logic [31:0] NOP = 32'd0;
  function automatic logic [31:0] MFC0(int rt, int rd); return {6'h10, 5'd0, 5'(rt), 5'(rd), 11'd0}; endfunction
  function automatic logic [31:0] MTC0(int rt, int rd); return {6'h10, 5'd4, 5'(rt), 5'(rd), 11'd0}; endfunction
  localparam logic [31:0] RFE = {6'h10, 5'b10000, 15'd0, 6'h10};

  int pc_i;
  task automatic emit(logic [31:0] w);
    mem.imem[pc_i] = w;
    pc_i++;
  endtask

  localparam int DB = 32'h800;         // data base ($29)
  localparam int LOGB = 32'hA00;       // exception log ($28)

  task automatic load_program();
    int at_beq, at_bne, l17, l21, at_jal, sub, at_j;
    for (int i = 0; i < 4096; i++) begin mem.imem[i] = NOP; mem.dmem[i] = 32'd0; end
    pc_i = 0;
    emit(I(6'h09, 0, 2, 5));            // addiu $2,$0,5
    emit(I(6'h09, 0, 3, 7));            // addiu $3,$0,7
    emit(R(2, 3, 4, 0, 6'h21));         // addu  $4,$2,$3     -> 12   (EXR, MEMR)
    emit(I(6'h09, 0, 29, DB));          // addiu $29,$0,0x800
    emit(R(4, 2, 5, 0, 6'h23));         // subu  $5,$4,$2     -> 7    (MEMR)
    emit(R(4, 3, 6, 0, 6'h24));         // and   $6,$4,$3     -> 4    (WBR)
    emit(I(6'h2b, 29, 4, 0));           // sw $4,0($29)
    emit(I(6'h2b, 29, 5, 4));           // sw $5,4($29)
    emit(I(6'h2b, 29, 6, 8));           // sw $6,8($29)
    emit(I(6'h23, 29, 7, 0));           // lw $7,0($29)       -> 12
    emit(I(6'h09, 0, 28, LOGB));        // addiu $28,$0,0xA00 (load delay slot)
    emit(R(7, 7, 8, 0, 6'h21));         // addu $8,$7,$7      -> 24
    emit(I(6'h2b, 29, 8, 12));          // sw $8,12($29)
    emit(I(6'h23, 29, 23, 4));          // lw $23,4($29)      -> 7 (slow read)
    emit(R(0, 0, 24, 0, 6'h21));        // addu $24,$0,$0
    emit(R(0, 0, 25, 0, 6'h21));        // addu $25,$0,$0
    emit(R(23, 23, 24, 0, 6'h21));      // addu $24,$23,$23   -> 14 (WBR: waits for the load)
    emit(I(6'h2b, 29, 24, 64));         // sw $24,64($29)
    emit(R(0, 0, 17, 0, 6'h21));        // addu $17,$0,$0     (exception counter)
    at_beq = pc_i; emit(NOP);           // beq $2,$2,l17
    emit(I(6'h09, 0, 9, 1));            // addiu $9,$0,1      delay slot, executed
    emit(I(6'h09, 9, 9, 100));          // wrong path
    emit(I(6'h09, 9, 9, 100));          // wrong path
    l17 = pc_i;
    emit(I(6'h2b, 29, 9, 16));          // sw $9,16($29)      -> 1
    at_bne = pc_i; emit(NOP);           // bne $2,$2,l21 (not taken)
    emit(I(6'h09, 0, 10, 3));           // addiu $10,$0,3     delay slot
    emit(I(6'h09, 10, 10, 4));          // addiu $10,$10,4    -> 7
    l21 = pc_i;
    emit(I(6'h2b, 29, 10, 20));         // sw $10,20($29)     -> 7
    at_jal = pc_i; emit(NOP);           // jal sub
    emit(I(6'h09, 0, 11, 9));           // addiu $11,$0,9     delay slot
    emit(I(6'h2b, 29, 11, 24));         // sw $11,24($29)     -> 9
    emit(I(6'h2b, 29, 12, 28));         // sw $12,28($29)     -> 55
    emit(I(6'h0f, 0, 13, 16'h7fff));    // lui $13,0x7fff
    emit(R(13, 13, 14, 0, 6'h20));      // add $14,$13,$13    overflow, $14 stays 0
    emit(I(6'h2b, 29, 14, 32));         // sw $14,32($29)     -> 0
    emit(I(6'h23, 29, 15, 1));          // lw $15,1($29)      address error, $15 stays 0
    emit(I(6'h2b, 29, 15, 36));         // sw $15,36($29)     -> 0
    emit(R(0, 0, 0, 0, 6'h0c));         // syscall
    emit(R(0, 0, 0, 0, 6'h0d));         // break
    emit(32'hfc00_0000);                // reserved instruction
    emit(R(2, 3, 0, 0, 6'h18));         // mult $2,$3
    emit(R(0, 0, 16, 0, 6'h12));        // mflo $16           -> 35
    emit(I(6'h2b, 29, 16, 40));         // sw $16,40($29)
    emit(I(6'h2b, 29, 17, 44));         // sw $17,44($29)     -> 5
    emit(I(6'h0d, 0, 20, 16'hff00));    // ori $20,$0,0xff00
    emit(MTC0(20, 12));                 // mtc0 $20,Status
    emit(I(6'h28, 29, 3, 48));          // sb $3,48($29)      -> 0x07000000
    emit(I(6'h24, 29, 19, 48));         // lbu $19,48($29)    -> 7
    emit(NOP);
    emit(I(6'h2b, 29, 19, 52));         // sw $19,52($29)
    for (int k = 0; k < 10; k++) emit(NOP);
    emit(MFC0(21, 12));                 // mfc0 $21,Status    -> 0xff00
    emit(NOP);
    emit(I(6'h2b, 29, 21, 56));         // sw $21,56($29)
    emit(I(6'h09, 0, 22, 16'h5a));      // addiu $22,$0,0x5a
    emit(I(6'h2b, 29, 22, 60));         // sw $22,60($29)     end marker
    at_j = pc_i; emit(JI(6'h02, at_j)); // j .
    emit(NOP);
    sub = pc_i;
    emit(I(6'h09, 0, 12, 55));          // sub: addiu $12,$0,55
    emit(R(31, 0, 0, 0, 6'h08));        // jr $31
    emit(NOP);
    emit(I(6'h09, 0, 12, 99));          // wrong path
    mem.imem[at_beq] = I(6'h04, 2, 2, l17 - at_beq - 1);
    mem.imem[at_bne] = I(6'h05, 2, 2, l21 - at_bne - 1);
    mem.imem[at_jal] = JI(6'h03, sub);
    // exception handler at 0x8000_0080
    pc_i = 1024 + 32;
    emit(NOP);
    emit(NOP);
    emit(MFC0(26, 14));                 // mfc0 $26,EPC
    emit(MFC0(27, 13));                 // mfc0 $27,Cause
    emit(I(6'h09, 17, 17, 1));          // addiu $17,$17,1
    emit(I(6'h2b, 28, 27, 0));          // sw $27,0($28)
    emit(I(6'h09, 28, 28, 4));          // addiu $28,$28,4
    emit(I(6'h09, 26, 26, 4));          // addiu $26,$26,4
    emit(R(26, 0, 0, 0, 6'h08));        // jr $26
    emit(RFE);                          // rfe (delay slot)
  endtask

  function automatic logic [31:0] dword(int a);
    return mem.dmem[{1'b0, a[11:2]}];
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h (latency %0d)", what, got, exp, maxlat);
    end
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_exr = 0, n_memr = 0, n_wbr = 0, n_rej_id = 0, n_rej_ex = 0, n_rej_mem = 0;
  int n_idch = 0, n_exch = 0, n_memch = 0, n_exc = 0, n_rfe = 0, n_mult = 0, n_cop_rd = 0;
  always @(posedge clk) if (!rst) begin
    if (dut.u_regbank.take) begin
      if (dut.u_regbank.c0 == FW_EXR  || dut.u_regbank.c1 == FW_EXR)  n_exr++;
      if (dut.u_regbank.c0 == FW_MEMR || dut.u_regbank.c1 == FW_MEMR) n_memr++;
      if (dut.u_regbank.c0 == FW_WBR  || dut.u_regbank.c1 == FW_WBR)  n_wbr++;
    end
    if (dut.u_decode.take && !dut.u_decode.accept) n_rej_id++;
    if (dut.u_exeunit.go && !dut.u_exeunit.accept) n_rej_ex++;
    if (dut.u_memint.st == dut.u_memint.S_CHK && dut.u_memint.x.c.mem != dut.u_memint.memc)
      n_rej_mem++;
    if (dut.idch_v && dut.idch_r) n_idch++;
    if (dut.exch_v && dut.exch_r) n_exch++;
    if (dut.memch_v && dut.memch_r) n_memch++;
    if (dut.cp0w2_v && dut.cp0w2_r) n_exc++;
    if (dut.cp0w1_v && dut.cp0w1_r && dut.cp0w1_d.cmd == CP0_RFE) n_rfe++;
    if (dut.u_exeunit.go && dut.u_exeunit.ct.ex == OP_MULT) n_mult++;
    if (dut.cra_v && dut.cra_r) n_cop_rd++;
  end

  task automatic count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask

  // ------------------------------------------------------------ run
  int unsigned cyc;
  initial begin : watchdog
    #(4 * 40000 * 10 + 1000);
    $display("FAIL watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int run = 0; run < 4; run++) begin
      maxlat = run;
      dlat   = (run >= 2) ? 8 : 0;
      rst = 1'b1;
      load_program();
      repeat (3) @(posedge clk);
      // the register file has no reset: start every run from zeros
      for (int i = 0; i < 32; i++) dut.u_regbank.regs[i] = 32'd0;
      rst = 1'b0;
      cyc = 0;
      while (dword(DB + 60) != 32'h5a && cyc < 40000) begin @(posedge clk); cyc++; end
      repeat (20) @(posedge clk);
      $display("run %0d (memory latency 0..%0d): %0d cycles", run, maxlat, cyc);
      check("end marker", dword(DB + 60), 32'h5a);
      check("addu EXR/MEMR",   dword(DB + 0),  32'd12);
      check("subu MEMR",       dword(DB + 4),  32'd7);
      check("and WBR",         dword(DB + 8),  32'd4);
      check("lw + addu",       dword(DB + 12), 32'd24);
      check("taken branch",    dword(DB + 16), 32'd1);
      check("untaken branch",  dword(DB + 20), 32'd7);
      check("jal delay slot",  dword(DB + 24), 32'd9);
      check("jal/jr subroutine", dword(DB + 28), 32'd55);
      check("overflow no write", dword(DB + 32), 32'd0);
      check("adel no write",   dword(DB + 36), 32'd0);
      check("mult/mflo",       dword(DB + 40), 32'd35);
      check("exception count", dword(DB + 44), 32'd5);
      check("sb",              dword(DB + 48), 32'h0700_0000);
      check("lbu",             dword(DB + 52), 32'd7);
      check("WBR after load",  dword(DB + 64), 32'd14);
      check("mtc0/mfc0",       dword(DB + 56), 32'h0000_ff00);
      check("cause Ov",   dword(LOGB + 0),  {25'd0, EXC_OV,   2'b00});
      check("cause AdEL", dword(LOGB + 4),  {25'd0, EXC_ADEL, 2'b00});
      check("cause Sys",  dword(LOGB + 8),  {25'd0, EXC_SYS,  2'b00});
      check("cause Bp",   dword(LOGB + 12), {25'd0, EXC_BP,   2'b00});
      check("cause RI",   dword(LOGB + 16), {25'd0, EXC_RI,   2'b00});
      check("no sixth exception", dword(LOGB + 20), 32'd0);
      check("kernel mode at end", {31'd0, st_o[1]}, 32'd0);
      check("status at end", st_o, 32'h0000_ff00);
    end
    $display("mechanisms over all runs:");
    count("forwarding EXR", n_exr);
    count("forwarding MEMR", n_memr);
    count("ID control hazard (IDch)", n_idch);
    count("EX control hazard (EXch)", n_exch);
    count("MEM control hazard (MEMch)", n_memch);
    count("instruction dropped in ID", n_rej_id);
    count("instruction cancelled in EX", n_rej_ex);
    count("exception (CP0W2)", n_exc);
    count("RFE", n_rfe);
    count("multiply", n_mult);
    count("CP0 read", n_cop_rd);
    count("loads (last run)", int'(mem.n_loads));
    count("stores (last run)", int'(mem.n_stores));
    count("instruction cancelled in MEM", n_rej_mem);
    $display("  %-28s %0d (not reachable here, see header)", "register WBR wait", n_wbr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
