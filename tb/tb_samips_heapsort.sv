// tb_samips_heapsort -- workload testbench: Heapsort of 10 integers on SAMIPS.
//
// The processor (default parameters) runs a hand-assembled Heapsort over an array of 10
// random signed 32-bit integers, the size of the Heapsort benchmark: a heap-building loop
// and a sort loop (BLTZ/BLEZ, J with work in the delay slot) call a sift-down subroutine
// with JAL/JR that uses SLL/SRL index arithmetic, SLT comparisons and word loads/stores.
// The program is generated by the assembler functions below in two passes (labels first,
// then code) and loaded into the behavioural memory; it ends by storing a marker word
// and spinning. Loads are followed by one independent instruction before their value is
// used, as MIPS I requires. Three runs use memory latencies of 0, 1 and 3 random cycles.
// Checked: the array ends sorted and equal to a reference sort of the input, within the
// watchdog. The cycle count and the numbers of loads, stores and redirects are printed.
module tb_samips_heapsort;
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
  function automatic logic [31:0] R(int rs, int rt, int rd, int fn);
    return {6'd0, 5'(rs), 5'(rt), 5'(rd), 5'd0, 6'(fn)};
  endfunction
  function automatic logic [31:0] I(int op, int rs, int rt, int imm);
    return {6'(op), 5'(rs), 5'(rt), 16'(imm)};
  endfunction
  function automatic logic [31:0] JI(int op, int word);
    return {6'(op), 26'(word)};
  endfunction
  function automatic logic [31:0] SH(int rt, int rd, int sh, int fn);
    return {6'd0, 5'd0, 5'(rt), 5'(rd), 5'(sh), 6'(fn)};
  endfunction
  localparam logic [31:0] NOP = 32'd0;
  localparam int ADDIU = 9, LW = 35, SW = 43, BEQ = 4, BNE = 5, J = 2, JAL = 3;
  localparam int SLT = 42, ADDU = 33, JR = 8, SLL = 0, SRL = 2, REGIMM = 1, BLEZ = 6;

  int pc_i;
  bit pass2;
  task automatic emit(logic [31:0] w);
    if (pass2) mem.imem[pc_i] = w;
    pc_i++;
  endtask
  function automatic int br(int target); return target - pc_i - 1; endfunction

  localparam int N = 10;
  localparam int DB = 32'h800;          // array
  localparam int MARK = 32'h900;        // end marker
  int L_build, L_sort, L_sl, L_done, L_spin, L_sift, L_nor, L_sret;

  task automatic assemble();
    pc_i = 0;
    emit(I(ADDIU, 0, 4, DB));
    emit(I(ADDIU, 0, 5, N));
    emit(SH(5, 16, 1, SRL));               // start = n / 2 - 1
    emit(I(ADDIU, 16, 16, -1));
    L_build = pc_i;
    emit(I(REGIMM, 16, 0, br(L_sort)));    // BLTZ start
    emit(NOP);
    emit(R(16, 0, 6, ADDU));
    emit(R(5, 0, 7, ADDU));
    emit(JI(JAL, L_sift));
    emit(NOP);
    emit(JI(J, L_build));
    emit(I(ADDIU, 16, 16, -1));            // delay slot
    L_sort = pc_i;
    emit(I(ADDIU, 5, 17, -1));             // end = n - 1
    L_sl = pc_i;
    emit(I(BLEZ, 17, 0, br(L_done)));
    emit(NOP);
    emit(I(LW, 4, 8, 0));                  // swap a[0], a[end]
    emit(SH(17, 9, 2, SLL));
    emit(R(9, 4, 9, ADDU));
    emit(I(LW, 9, 10, 0));
    emit(I(SW, 9, 8, 0));
    emit(I(SW, 4, 10, 0));
    emit(R(0, 0, 6, ADDU));
    emit(R(17, 0, 7, ADDU));
    emit(JI(JAL, L_sift));
    emit(NOP);
    emit(JI(J, L_sl));
    emit(I(ADDIU, 17, 17, -1));            // delay slot
    L_done = pc_i;
    emit(I(ADDIU, 0, 8, 32'h5a));
    emit(I(SW, 0, 8, MARK));
    L_spin = pc_i;
    emit(JI(J, L_spin));
    emit(NOP);
    // sift-down($6 = root index, $7 = heap size), array at $4
    L_sift = pc_i;
    emit(SH(6, 8, 1, SLL));                // child = 2 * root + 1
    emit(I(ADDIU, 8, 8, 1));
    emit(R(8, 7, 9, SLT));
    emit(I(BEQ, 9, 0, br(L_sret)));
    emit(NOP);
    emit(I(ADDIU, 8, 10, 1));
    emit(R(10, 7, 9, SLT));
    emit(I(BEQ, 9, 0, br(L_nor)));
    emit(NOP);
    emit(SH(8, 11, 2, SLL));
    emit(R(11, 4, 11, ADDU));
    emit(I(LW, 11, 12, 0));
    emit(I(LW, 11, 13, 4));
    emit(NOP);
    emit(R(12, 13, 9, SLT));               // a[child] < a[child + 1] : take the right child
    emit(I(BEQ, 9, 0, br(L_nor)));
    emit(NOP);
    emit(R(10, 0, 8, ADDU));
    L_nor = pc_i;
    emit(SH(6, 11, 2, SLL));
    emit(R(11, 4, 11, ADDU));
    emit(SH(8, 14, 2, SLL));
    emit(R(14, 4, 14, ADDU));
    emit(I(LW, 11, 12, 0));
    emit(I(LW, 14, 13, 0));
    emit(NOP);
    emit(R(12, 13, 9, SLT));               // a[root] < a[child] : swap and go on
    emit(I(BEQ, 9, 0, br(L_sret)));
    emit(NOP);
    emit(I(SW, 11, 13, 0));
    emit(I(SW, 14, 12, 0));
    emit(JI(J, L_sift + 0));
    emit(R(8, 0, 6, ADDU));                // root = child (delay slot)
    L_sret = pc_i;
    emit(R(31, 0, 0, JR));
    emit(NOP);
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

  int n_br = 0;
  always @(posedge clk) if (!rst && ((dut.exch_v && dut.exch_r) || (dut.idch_v && dut.idch_r))) n_br++;

  initial begin : watchdog
    #(3 * 60000 * 10 + 1000);
    $display("FAIL watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned cyc;
  logic signed [31:0] v [N], s [N], t;
  localparam int unsigned LATS [3] = '{0, 1, 3};
  initial begin
    for (int run = 0; run < 3; run++) begin
      maxlat = LATS[run];
      rst = 1'b1;
      for (int i = 0; i < 4096; i++) begin mem.imem[i] = NOP; mem.dmem[i] = 32'd0; end
      pass2 = 0; assemble();
      pass2 = 1; assemble();
      for (int i = 0; i < N; i++) begin
        v[i] = (run == 1) ? $signed(32'($urandom_range(20, 0)) - 10) : $signed($urandom);
        mem.dmem[{1'b0, 10'((DB >> 2) + i)}] = v[i];
        s[i] = v[i];
      end
      for (int i = 0; i < N; i++)
        for (int k = 0; k + 1 < N - i; k++)
          if (s[k] > s[k + 1]) begin t = s[k]; s[k] = s[k + 1]; s[k + 1] = t; end
      repeat (3) @(posedge clk);
      for (int i = 0; i < 32; i++) dut.u_regbank.regs[i] = 32'd0;
      n_br = 0;
      rst = 1'b0;
      cyc = 0;
      while (dword(MARK) != 32'h5a && cyc < 60000) begin @(posedge clk); cyc++; end
      repeat (20) @(posedge clk);
      check("end marker", dword(MARK), 32'h5a);
      for (int i = 0; i < N; i++) check($sformatf("a[%0d]", i), dword(DB + 4 * i), s[i]);
      $display("run %0d (latency 0..%0d): %0d cycles, %0d loads, %0d stores, %0d redirects",
               run, maxlat, cyc, n_loads, n_stores, n_br);
      checks++;
      if (n_loads == 0 || n_br == 0) begin failures++; $display("FAIL no loads or redirects"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
