// tb_samips_regbank -- testbench of samips_regbank.
//
// Part 1 reproduces the paper's data-hazard example (SUB $2,$1,$3; AND $3,$2,$4;
// OR $4,$1,$2; ADD $5,$1,$2; SW $5,100($2)) with no write-back in between and checks after
// every instruction the FRACtrl sent, the FRAQ and DHDQ contents and the forwarding case of
// $2: EXR for AND, MEMR for OR, WBR for ADD (its ReadData waits for SUB's RegWrite and
// carries that value), and for SW $2 is read from the register file once SUB has written
// it (the read waits while the oldest entry W3 is still pending).
// Part 2: random instruction stream against a reference model of the DHDQ/FRAQ. Each
// writer's RegWrite is issued in program order at a random later time (also in the same
// cycle as a read); checked are FRACtrl, FWCtrl, ReadData0/1 and PIDRd values, and that
// only NON/WBR operands produce ReadData.
module tb_samips_regbank;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic regread_valid = 0, regread_ready, regwrite_valid = 0, regwrite_ready;
  logic fractrl_valid, fractrl_ready = 0, fwctrl_valid, fwctrl_ready = 0;
  logic rd0_valid, rd0_ready = 0, rd1_valid, rd1_ready = 0, pidrd_valid, pidrd_ready = 0;
  rr_t regread = '0;
  rw_t regwrite = '0;
  fractrl_t fractrl;
  fwctrl_t fwctrl;
  logic [31:0] rd0, rd1, pidrd;
  samips_regbank dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // ---------------------------------------------------------------- part 1 helpers
  task automatic rread(int r0, int r1, int w);
    regread <= '{5'(r0), 5'(r1), 5'(w)}; regread_valid <= 1;
    do @(posedge clk); while (!regread_ready);
    regread_valid <= 0;
    @(negedge clk);
  endtask
  task automatic rwrite(int rd, logic [31:0] v);
    regwrite <= '{rnw: 1'b1, rd: 5'(rd), data: v}; regwrite_valid <= 1;
    @(posedge clk);
    regwrite_valid <= 0;
    @(negedge clk);
  endtask
  task automatic take_ctrl();   // consume FRACtrl/FWCtrl of the last read
    fractrl_ready <= 1; fwctrl_ready <= 1; @(posedge clk); fractrl_ready <= 0; fwctrl_ready <= 0;
  endtask
  function automatic bit dq(int a, int b, int c, int d);
    return dut.dq[0] == 5'(a) && dut.dq[1] == 5'(b) && dut.dq[2] == 5'(c) && dut.dq[3] == 5'(d);
  endfunction

  // ---------------------------------------------------------------- part 2 model
  bit rnd = 0;
  localparam int N = 3000;
  logic [4:0]  m_dq [4];
  fractrl_t    m_fraq;
  logic [31:0] m_reg [32];
  int          wq [$];                // pending writers (instruction numbers), program order
  logic [4:0]  w_rd [N];
  logic [31:0] w_val [N];
  int k = 0, nw = 0;
  fractrl_t    e_fra [$];
  fwctrl_t     e_fw [$];
  logic [31:0] e_r0 [$], e_r1 [$], e_pid [$];

  function automatic fwcase_e m_case(logic [4:0] r);
    if (r == 0) return FW_NON;
    if (r == m_dq[0]) return FW_EXR;
    if (r == m_dq[1]) return FW_MEMR;
    if (r == m_dq[2]) return FW_WBR;
    return FW_NON;
  endfunction

  always @(posedge clk) if (rnd) begin
    // write first (the RegBank applies a same-cycle write before the read)
    if (regwrite_valid) begin
      int j, hit;
      j = wq.pop_front();
      m_reg[w_rd[j]] = w_val[j];
      hit = -1;
      for (int i = 3; i >= 0; i--) if (hit < 0 && m_dq[i] == w_rd[j]) hit = i;
      chk(hit >= 0, "write has a pending entry");
      if (hit >= 0) m_dq[hit] = 0;
      regwrite_valid <= 0;
    end
    if (regread_valid && regread_ready) begin
      fwcase_e c0, c1, c2;
      chk(m_dq[3] == 0, "no read while W3 pending");
      c0 = m_case(regread.rno0); c1 = m_case(regread.rno1); c2 = m_case(regread.wno);
      e_fra.push_back(m_fraq);
      e_fw.push_back('{c2: c2, c1: c1, c0: c0});
      if (c0 == FW_NON) e_r0.push_back(m_reg[regread.rno0]);
      if (c0 == FW_WBR) e_r0.push_back(w_val[k-3]);
      if (c1 == FW_NON) e_r1.push_back(m_reg[regread.rno1]);
      if (c1 == FW_WBR) e_r1.push_back(w_val[k-3]);
      if (regread.wno != 0 && c2 == FW_NON) e_pid.push_back(m_reg[regread.wno]);
      if (regread.wno != 0 && c2 == FW_WBR) e_pid.push_back(w_val[k-3]);
      m_fraq = '{exa: regread.wno != 0, mema: m_fraq.exa};
      m_dq[3] = m_dq[2]; m_dq[2] = m_dq[1]; m_dq[1] = m_dq[0]; m_dq[0] = regread.wno;
      if (regread.wno != 0) wq.push_back(k);
      k++;
      regread_valid <= 0;
    end else if (!regread_valid && k < N && $urandom_range(1, 0)) begin
      logic [4:0] w;
      w = ($urandom_range(3, 0) == 0) ? 5'd0 : 5'($urandom_range(7, 1));   // few registers: many hazards
      w_rd[k] = w; w_val[k] = $urandom;
      regread <= '{5'($urandom_range(7, 0)), 5'($urandom_range(7, 0)), w};
      regread_valid <= 1;
    end
    if (!regwrite_valid && wq.size() > 0 && $urandom_range(2, 0) == 0) begin
      regwrite <= '{rnw: 1'b1, rd: w_rd[wq[0]], data: w_val[wq[0]]};
      regwrite_valid <= 1;
    end
    if (fractrl_valid && fractrl_ready) begin chk(e_fra.size() > 0 && fractrl == e_fra[0], "FRACtrl"); void'(e_fra.pop_front()); end
    if (fwctrl_valid && fwctrl_ready) begin chk(e_fw.size() > 0 && fwctrl == e_fw[0], "FWCtrl"); void'(e_fw.pop_front()); end
    if (rd0_valid && rd0_ready) begin chk(e_r0.size() > 0 && rd0 == e_r0[0], "ReadData0"); void'(e_r0.pop_front()); end
    if (rd1_valid && rd1_ready) begin chk(e_r1.size() > 0 && rd1 == e_r1[0], "ReadData1"); void'(e_r1.pop_front()); end
    if (pidrd_valid && pidrd_ready) begin chk(e_pid.size() > 0 && pidrd == e_pid[0], "PIDRd"); void'(e_pid.pop_front()); end
    fractrl_ready <= $urandom_range(1, 0); fwctrl_ready <= $urandom_range(1, 0);
    rd0_ready <= $urandom_range(1, 0); rd1_ready <= $urandom_range(1, 0); pidrd_ready <= $urandom_range(1, 0);
  end

  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    chk(dq(0, 0, 0, 0) && dut.fraq == '0, "initialisation: empty queues");
    dut.regs[1] = 32'd11;   // register contents for the example
    dut.regs[3] = 32'd33;
    // SUB $2,$1,$3
    rread(1, 3, 2);
    chk(fractrl == '{0, 0} && fwctrl.c0 == FW_NON && fwctrl.c1 == FW_NON, "SUB: both read");
    chk(rd0 == 11 && rd1 == 33, "SUB: register values");
    chk(dut.fraq == '{1, 0} && dq(2, 0, 0, 0), "SUB: FRAQ (1,0) DHDQ (2,0,0,0)");
    take_ctrl(); rd0_ready <= 1; rd1_ready <= 1; pidrd_ready <= 1; @(posedge clk);
    // AND $3,$2,$4
    rread(2, 4, 3);
    chk(fwctrl.c0 == FW_EXR && !rd0_valid, "AND: $2 forwarded (EXR)");
    chk(dut.fraq == '{1, 1} && dq(3, 2, 0, 0), "AND: FRAQ (1,1) DHDQ (3,2,0,0)");
    take_ctrl(); @(posedge clk);
    // OR $4,$1,$2
    rread(1, 2, 4);
    chk(fwctrl.c1 == FW_MEMR && !rd1_valid, "OR: $2 forwarded (MEMR)");
    chk(dut.fraq == '{1, 1} && dq(4, 3, 2, 0), "OR: FRAQ (1,1) DHDQ (4,3,2,0)");
    take_ctrl(); @(posedge clk);
    // ADD $5,$1,$2
    rread(1, 2, 5);
    chk(fwctrl.c1 == FW_WBR, "ADD: $2 waits for write-back (WBR)");
    chk(dut.fraq == '{1, 1} && dq(5, 4, 3, 2), "ADD: FRAQ (1,1) DHDQ (5,4,3,2)");
    take_ctrl();
    repeat (3) begin @(negedge clk); chk(!rd1_valid, "ADD: ReadData1 held"); end
    // SW $5,100($2) must wait while W3 ($2 of SUB) is pending
    regread <= '{5'd2, 5'd5, 5'd0}; regread_valid <= 1;
    repeat (3) begin @(negedge clk); chk(!regread_ready, "SW: waits for W3"); end
    rwrite(2, 32'h2222);                 // SUB writes back
    chk(rd1_valid && rd1 == 32'h2222, "ADD: ReadData1 = SUB result");
    do @(posedge clk); while (!regread_ready);
    regread_valid <= 0;
    @(negedge clk);
    chk(fwctrl.c0 == FW_NON && rd0 == 32'h2222, "SW: $2 valid again, read from RegBank");
    chk(fwctrl.c1 == FW_EXR, "SW: $5 forwarded (EXR)");
    chk(dq(0, 5, 4, 3), "SW: DHDQ (0,5,4,3)");
    take_ctrl(); @(posedge clk);
    // ---- part 2: drain the example and reset, then random
    rst = 1; @(posedge clk); rst = 0;
    for (int i = 0; i < 4; i++) m_dq[i] = 0;
    for (int i = 0; i < 32; i++) m_reg[i] = dut.regs[i];
    m_reg[0] = 0;
    m_fraq = '0;
    rnd = 1;
    wait (k == N);
    wait (wq.size() == 0);
    repeat (20) @(posedge clk);
    chk(e_fra.size() == 0 && e_r0.size() == 0 && e_r1.size() == 0 && e_pid.size() == 0, "all outputs delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
