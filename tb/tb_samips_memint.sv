// tb_samips_memint -- testbench of samips_memint.
//
// Random EX bundles (loads, stores of every data type, ALU results, MTC0 and exception
// bundles, cancelled instructions) with random addresses, random colours, random user
// mode and random readiness on every output. A small memory responder answers reads
// after a random latency. Checked against a reference model: FEXRes is sent once per
// CPU-writing instruction and carries EXRes or, for wNe = R, the old value; MemAdd and
// WriteData per access; ReadData becomes MEMRes; a wrong MEM colour cancels the
// instruction (no access, wNe = R / NUN); an address error (misaligned word/halfword,
// kernel address in user mode) gives MEMch {AdEL/AdES} with the MEM bit inverted, no
// access, and an EPC bundle to WB. Cycle count: a non-writing, non-memory instruction
// offers its WB bundle two cycles after it was taken.
module tb_samips_memint;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic user_mode = 0, in_valid = 0, in_ready;
  ex2mem_t in = '0;
  logic fexres_valid, fexres_ready = 0;  logic [31:0] fexres;
  logic memadd_valid, memadd_ready = 0;  memadd_t memadd;
  logic wdata_valid, wdata_ready = 0;    logic [31:0] wdata;
  logic rdata_valid = 0, rdata_ready;    logic [31:0] rdata = 0;
  logic wb_valid, wb_ready = 0;          mem2wb_t wb;
  logic memch_valid, memch_ready = 0;    haz_t memch;
  samips_memint dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // ---------------------------------------------------------------- model
  logic m_memc = 0;
  logic [31:0] e_fex [$], e_wd [$];
  memadd_t e_ma [$];
  mem2wb_t e_wb [$];
  logic    e_rd [$];      // WB result comes from ReadData
  haz_t    e_ch [$];
  logic [31:0] rd_vals [$];
  int n_ld = 0, n_st = 0, n_err = 0, n_rej = 0;

  task automatic model(ex2mem_t x, logic um);
    logic wr, acc, err;
    mem2wb_t o;
    wr  = cpu_write(x.wne, x.cnp);
    if (wr) e_fex.push_back(wb_value(x.wne, x.res, x.rd.data));
    o   = '{wne: x.wne, cnp: x.cnp, res: x.res, rd: x.rd};
    acc = (x.acc == ACC_READ || x.acc == ACC_WRITE);
    err = acc && ((x.dt == DT_W && x.res[1:0] != 0) ||
                  ((x.dt == DT_HS || x.dt == DT_HU) && x.res[0]) || (um && x.res[31]));
    if (x.c.mem != m_memc) begin
      o.wne = wr ? WNE_R : WNE_NUN; o.cnp = 1; n_rej++;
      e_rd.push_back(0);
    end else if (err) begin
      m_memc = ~m_memc;
      o.wne = wr ? WNE_R : WNE_EXC; o.cnp = 0; o.res = x.base - (x.bd ? 8 : 4);
      e_ch.push_back('{c: '{mem: m_memc, ex: x.c.ex, id: x.c.id}, st: ST_MEM, enj: 1,
                       a: cause_value(x.acc == ACC_WRITE ? EXC_ADES : EXC_ADEL)});
      e_rd.push_back(0); n_err++;
    end else if (acc) begin
      e_ma.push_back('{wr: x.acc == ACC_WRITE, dt: x.dt, a: x.res});
      e_wd.push_back(x.memd);
      e_rd.push_back(x.acc == ACC_READ);
      if (x.acc == ACC_READ) n_ld++; else n_st++;
    end else e_rd.push_back(0);
    e_wb.push_back(o);
  endtask

  function automatic ex2mem_t rnd_in();
    ex2mem_t x;
    x = '0;
    x.acc = acc_e'($urandom_range(3, 0));
    x.dt  = 3'($urandom_range(7, 1));
    case ($urandom_range(3, 0))
      0: x.wne = WNE_R;
      1: x.wne = WNE_EXC;
      default: x.wne = (x.acc == ACC_READ) ? WNE_W : wne_e'($urandom_range(3, 0));
    endcase
    if (x.acc == ACC_WRITE && x.wne == WNE_W) x.wne = WNE_NUN;
    x.cnp  = (x.wne == WNE_EXC) ? 1'b0 : ($urandom_range(5, 0) != 0);
    x.c    = '{mem: ($urandom_range(7, 0) == 0) ? ~m_memc : m_memc, ex: 1'($urandom), id: 1'($urandom)};
    x.bd   = 1'($urandom);
    x.base = $urandom & ~32'h3;
    x.res  = ($urandom_range(3, 0) == 0) ? $urandom : ($urandom & 32'h7fff_fffc) | ($urandom_range(7, 0) == 0 ? 1 : 0);
    if ($urandom_range(9, 0) == 0) x.res[31] = 1;
    x.memd = $urandom;
    x.rd   = '{rd: 5'($urandom), data: $urandom};
    return x;
  endfunction

  // ---------------------------------------------------------------- driver / responder
  int n = 0, got = 0, since = 100;
  logic chk_fast = 0;
  localparam int N = 5000;
  int lat = -1;

  always @(posedge clk) if (!rst) begin
    since <= since + 1;
    if (in_valid && in_ready) begin
      model(in, user_mode);
      chk_fast <= !cpu_write(in.wne, in.cnp) && !(in.acc == ACC_READ || in.acc == ACC_WRITE)
                  && (in.c.mem == m_memc);
      in_valid <= 0; n <= n + 1; since <= 0;
    end else if (!in_valid && in_ready && n < N && $urandom_range(1, 0)) begin
      in <= rnd_in(); in_valid <= 1;
      if ($urandom_range(15, 0) == 0) user_mode <= ~user_mode;
    end
    if (fexres_valid && fexres_ready) begin
      chk(e_fex.size() > 0 && fexres == e_fex[0], "FEXRes"); void'(e_fex.pop_front());
    end
    if (memadd_valid && memadd_ready) begin
      chk(e_ma.size() > 0 && memadd == e_ma[0], "MemAdd"); void'(e_ma.pop_front());
      if (memadd.wr == 0) lat <= $urandom_range(4, 0);
    end
    if (wdata_valid && wdata_ready) begin
      chk(e_wd.size() > 0 && wdata == e_wd[0], "WriteData"); void'(e_wd.pop_front());
    end
    if (rdata_valid && rdata_ready) begin rdata_valid <= 0; rd_vals.push_back(rdata); end
    else if (!rdata_valid && lat == 0) begin rdata_valid <= 1; rdata <= $urandom; lat <= -1; end
    else if (lat > 0) lat <= lat - 1;
    if (wb_valid && wb_ready) begin
      mem2wb_t e;
      e = e_wb.pop_front();
      if (e_rd.pop_front()) begin
        chk(rd_vals.size() > 0, "ReadData seen");
        if (rd_vals.size() > 0) e.res = rd_vals.pop_front();
      end
      chk(wb == e, "WB bundle");
      if (wb != e && failures < 5) $display("  got %p\n  exp %p", wb, e);
      got++;
    end
    if (memch_valid && memch_ready) begin
      chk(e_ch.size() > 0 && memch == e_ch[0], "MEMch"); void'(e_ch.pop_front());
    end
    fexres_ready <= $urandom_range(1, 0);
    memadd_ready <= $urandom_range(1, 0);
    wdata_ready  <= $urandom_range(1, 0);
    wb_ready     <= $urandom_range(2, 0) != 0;
    memch_ready  <= $urandom_range(1, 0);
  end
  always @(negedge clk) if (!rst && since == 1 && chk_fast) chk(wb_valid, "WB two cycles after take");

  initial begin
    #3000000;
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
    chk(e_ch.size() == 0 && e_ma.size() == 0 && e_fex.size() == 0, "all outputs delivered");
    $display("loads %0d stores %0d address errors %0d cancelled %0d", n_ld, n_st, n_err, n_rej);
    chk(n_ld > 200 && n_st > 200 && n_err > 100 && n_rej > 100, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
