// tb_samips_qsort -- workload testbench: recursive Quicksort of 10 integers on SAMIPS.
//
// The processor (default parameters) runs a hand-assembled recursive Quicksort (Lomuto
// partition, stack frames on $29, JAL/JR calls) over an array of 10 random signed 32-bit
// integers, the size of the Quicksort benchmark. The program is generated by the
// assembler functions below in two passes (labels first, then code) and loaded into the
// behavioural memory; it ends by storing a marker word and spinning. Loads are always
// followed by one independent instruction before their value is used, as MIPS I requires.
// Three runs use memory latencies of 0, 1 and 3 random cycles. Checked: the array is
// sorted and equal to a reference sort of the input, the stack pointer is
// restored, and the run ends within the watchdog. The cycle count and the numbers of
// loads, stores and taken control transfers are printed.
module tb_samips_qsort;
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
  localparam logic [31:0] NOP = 32'd0;
  localparam int ADDIU = 9, LW = 35, SW = 43, BEQ = 4, BNE = 5, J = 2, JAL = 3;
  localparam int SLT = 42, ADDU = 33, JR = 8;

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
  localparam int STK = 32'hFF0;         // stack top
  int L_qs, L_loopj, L_nextj, L_endj, L_ret, L_spin;

  task automatic assemble();
    pc_i = 0;
    emit(I(ADDIU, 0, 29, STK));
    emit(I(ADDIU, 0, 4, DB));
    emit(I(ADDIU, 0, 5, DB + 4 * (N - 1)));
    emit(JI(JAL, L_qs));
    emit(NOP);
    emit(I(ADDIU, 0, 8, 32'h5a));
    emit(I(SW, 0, 8, MARK));
    L_spin = pc_i;
    emit(JI(J, L_spin));
    emit(NOP);
    // qsort($4 = address of first, $5 = address of last)
    L_qs = pc_i;
    emit(R(4, 5, 8, SLT));                 // lo < hi ?
    emit(I(BEQ, 8, 0, br(L_ret)));
    emit(NOP);
    emit(I(ADDIU, 29, 29, -16));
    emit(I(SW, 29, 31, 0));
    emit(I(SW, 29, 4, 4));
    emit(I(SW, 29, 5, 8));
    emit(I(LW, 5, 9, 0));                  // pivot = a[hi]
    emit(I(ADDIU, 4, 10, -4));             // i = lo - 4
    emit(R(4, 0, 11, ADDU));               // j = lo
    L_loopj = pc_i;
    emit(R(11, 5, 8, SLT));                // j < hi ?
    emit(I(BEQ, 8, 0, br(L_endj)));
    emit(NOP);
    emit(I(LW, 11, 12, 0));                // a[j]
    emit(NOP);
    emit(R(9, 12, 8, SLT));                // pivot < a[j] : skip
    emit(I(BNE, 8, 0, br(L_nextj)));
    emit(NOP);
    emit(I(ADDIU, 10, 10, 4));             // i++
    emit(I(LW, 10, 13, 0));
    emit(I(SW, 10, 12, 0));                // a[i] = a[j]
    emit(I(SW, 11, 13, 0));                // a[j] = old a[i]
    L_nextj = pc_i;
    emit(JI(J, L_loopj));
    emit(I(ADDIU, 11, 11, 4));             // j++ (delay slot)
    L_endj = pc_i;
    emit(I(ADDIU, 10, 10, 4));             // p = i + 1
    emit(I(LW, 10, 13, 0));
    emit(I(LW, 5, 12, 0));
    emit(NOP);
    emit(I(SW, 10, 12, 0));                // a[p] = pivot
    emit(I(SW, 5, 13, 0));                 // a[hi] = old a[p]
    emit(I(SW, 29, 10, 12));
    emit(I(ADDIU, 10, 5, -4));             // qsort(lo, p - 1)
    emit(JI(JAL, L_qs));
    emit(NOP);
    emit(I(LW, 29, 10, 12));
    emit(I(LW, 29, 5, 8));
    emit(NOP);
    emit(I(ADDIU, 10, 4, 4));              // qsort(p + 1, hi)
    emit(JI(JAL, L_qs));
    emit(NOP);
    emit(I(LW, 29, 31, 0));
    emit(NOP);
    emit(I(ADDIU, 29, 29, 16));
    L_ret = pc_i;
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
      check("stack pointer restored", dut.u_regbank.regs[29], STK);
      $display("run %0d (latency 0..%0d): %0d cycles, %0d loads, %0d stores, %0d redirects",
               run, maxlat, cyc, n_loads, n_stores, n_br);
      checks++;
      if (n_loads == 0 || n_br == 0) begin failures++; $display("FAIL no loads or redirects"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
