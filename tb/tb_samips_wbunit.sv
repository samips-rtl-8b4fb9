// tb_samips_wbunit -- testbench of samips_wbunit.
//
// Random WBCtrl/MEMRes/MEMRd bundles (all wNe/cNp combinations) are sent with random delays
// while the three outputs have random readiness. Expected per bundle:
//   CPU writer (W with cNp = 1, or R): RegWrite {rnw = (wNe == W), rd, value} and FMEMRes =
//   value, where value = MEMRes, or the old value for R;
//   cNp = 0: CP0W1 = {MEMRes, rd, WRITE} for W, {MEMRes, 14, EXC} for EXC/R, {0, 12, RFE}
//   for NUN. Nothing else may appear. Cycle count: outputs are offered one cycle after the
//   bundle is taken.
module tb_samips_wbunit;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, regwrite_valid, regwrite_ready = 0;
  logic fmemres_valid, fmemres_ready = 0, cp0w1_valid, cp0w1_ready = 0;
  mem2wb_t in = '0;
  rw_t regwrite;
  logic [31:0] fmemres;
  cp0w_t cp0w1;
  samips_wbunit dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  rw_t rq [$]; logic [31:0] fq [$]; cp0w_t cq [$];
  int n = 0, since = 100;
  localparam int N = 2000;

  always @(posedge clk) if (!rst) begin
    since <= since + 1;
    if (in_valid && in_ready) begin
      logic [31:0] v;
      v = (in.wne == WNE_R) ? in.rd.data : in.res;
      if (in.wne == WNE_R || (in.wne == WNE_W && in.cnp)) begin
        rq.push_back('{rnw: in.wne == WNE_W, rd: in.rd.rd, data: v});
        fq.push_back(v);
      end
      if (!in.cnp)
        case (in.wne)
          WNE_W:   cq.push_back('{data: in.res, a: in.rd.rd, cmd: CP0_WRITE});
          WNE_NUN: cq.push_back('{data: 32'd0, a: 5'd12, cmd: CP0_RFE});
          default: cq.push_back('{data: in.res, a: 5'd14, cmd: CP0_EXC});
        endcase
      in_valid <= 0; n <= n + 1; since <= 0;
    end else if (!in_valid && n < N && $urandom_range(1, 0)) begin
      in_valid <= 1;
      in <= '{wne: wne_e'($urandom_range(3, 0)), cnp: 1'($urandom), res: $urandom,
              rd: '{rd: 5'($urandom_range(31, 1)), data: $urandom}};
    end
    if (regwrite_valid && regwrite_ready) begin
      chk(rq.size() > 0 && regwrite == rq[0], "RegWrite"); void'(rq.pop_front());
    end
    if (fmemres_valid && fmemres_ready) begin
      chk(fq.size() > 0 && fmemres == fq[0], "FMEMRes"); void'(fq.pop_front());
    end
    if (cp0w1_valid && cp0w1_ready) begin
      chk(cq.size() > 0 && cp0w1 == cq[0], "CP0W1"); void'(cq.pop_front());
    end
    regwrite_ready <= $urandom_range(1, 0);
    fmemres_ready  <= $urandom_range(1, 0);
    cp0w1_ready    <= $urandom_range(1, 0);
  end

  always @(negedge clk) if (!rst && since == 0)
    chk(regwrite_valid == (rq.size() > 0) && cp0w1_valid == (cq.size() > 0), "outputs one cycle after input");

  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (n == N);
    repeat (20) @(posedge clk);
    chk(rq.size() == 0 && fq.size() == 0 && cq.size() == 0, "all outputs delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
