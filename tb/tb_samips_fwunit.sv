// tb_samips_fwunit -- testbench of samips_fwunit.
//
// A reference stream of "instructions" is generated at random: each writes a register or
// not. For instruction k the testbench sends FRACtrl {exa = k-1 writes, mema = k-2 writes}
// and a random FWCtrl whose EXR/MEMR cases are only used where the matching result exists.
// Independent random producers send the FEXRes stream (one value per writer, tagged with its
// instruction number) and the FMEMRes stream, with random delays, and the consumers of
// FOp0/FOp1/FOp2 have random readiness. Checked: every forwarded operand equals the result
// of instruction k-1 (EXR) or k-2 (MEMR), operands marked NON/WBR produce no FOp, and all
// result values are consumed (streams stay aligned).
module tb_samips_fwunit;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic fractrl_valid = 0, fractrl_ready, fwctrl_valid = 0, fwctrl_ready;
  logic fexres_valid = 0, fexres_ready, fmemres_valid = 0, fmemres_ready;
  logic fop0_valid, fop0_ready = 0, fop1_valid, fop1_ready = 0, fop2_valid, fop2_ready = 0;
  fractrl_t fractrl = '0;
  fwctrl_t  fwctrl = '{FW_NON, FW_NON, FW_NON};
  logic [31:0] fexres = 0, fmemres = 0, fop0, fop1, fop2;
  samips_fwunit dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  localparam int N = 1500;
  bit          wr  [N];
  logic [31:0] val [N];
  fwctrl_t     fw  [N];
  int          wrs [$];          // indices of writers, in order
  int k_ctrl = 0, k_ex = 0, k_mem = 0;    // next instruction / writer index to send
  // expected FOp values per output
  logic [31:0] e0 [$], e1 [$], e2 [$];

  function automatic fwcase_e rc(int k);
    int r;
    r = $urandom_range(3, 0);
    if (r == 1 && !(k >= 1 && wr[k-1])) r = 0;
    if (r == 2 && !(k >= 2 && wr[k-2])) r = 0;
    return fwcase_e'(r);
  endfunction

  always @(posedge clk) if (!rst) begin
    // control
    if (fractrl_valid && fractrl_ready) begin
      chk(fwctrl_ready, "FRACtrl and FWCtrl together");
      fractrl_valid <= 0; fwctrl_valid <= 0; k_ctrl <= k_ctrl + 1;
    end else if (!fractrl_valid && k_ctrl < N && $urandom_range(1, 0)) begin
      fractrl_valid <= 1; fwctrl_valid <= 1;
      fractrl <= '{exa: k_ctrl >= 1 && wr[k_ctrl-1], mema: k_ctrl >= 2 && wr[k_ctrl-2]};
      fwctrl  <= fw[k_ctrl];
    end
    // results
    if (fexres_valid && fexres_ready) begin fexres_valid <= 0; k_ex <= k_ex + 1; end
    else if (!fexres_valid && k_ex < wrs.size() && $urandom_range(2, 0) == 0) begin
      fexres_valid <= 1; fexres <= val[wrs[k_ex]];
    end
    if (fmemres_valid && fmemres_ready) begin fmemres_valid <= 0; k_mem <= k_mem + 1; end
    else if (!fmemres_valid && k_mem < wrs.size() && $urandom_range(2, 0) == 0) begin
      fmemres_valid <= 1; fmemres <= val[wrs[k_mem]];
    end
    if (fop0_valid && fop0_ready) begin chk(e0.size() > 0 && fop0 == e0[0], "FOp0"); void'(e0.pop_front()); end
    if (fop1_valid && fop1_ready) begin chk(e1.size() > 0 && fop1 == e1[0], "FOp1"); void'(e1.pop_front()); end
    if (fop2_valid && fop2_ready) begin chk(e2.size() > 0 && fop2 == e2[0], "FOp2"); void'(e2.pop_front()); end
    fop0_ready <= $urandom_range(1, 0);
    fop1_ready <= $urandom_range(1, 0);
    fop2_ready <= $urandom_range(1, 0);
  end

  function automatic logic [31:0] ev(fwcase_e c, int k);
    return (c == FW_EXR) ? val[k-1] : val[k-2];
  endfunction

  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int k = 0; k < N; k++) begin
      wr[k] = $urandom_range(2, 0) != 0;
      val[k] = $urandom;
      if (wr[k]) wrs.push_back(k);
    end
    for (int k = 0; k < N; k++) begin
      fw[k] = '{c2: rc(k), c1: rc(k), c0: rc(k)};
      if (fw[k].c0 inside {FW_EXR, FW_MEMR}) e0.push_back(ev(fw[k].c0, k));
      if (fw[k].c1 inside {FW_EXR, FW_MEMR}) e1.push_back(ev(fw[k].c1, k));
      if (fw[k].c2 inside {FW_EXR, FW_MEMR}) e2.push_back(ev(fw[k].c2, k));
    end
    repeat (3) @(posedge clk);
    rst = 0;
    wait (k_ctrl == N);
    repeat (50) @(posedge clk);
    chk(e0.size() == 0 && e1.size() == 0 && e2.size() == 0, "all operands forwarded");
    // results of the last two instructions are consumed by later rounds that never come
    chk(k_ex >= wrs.size() - 1 && k_mem >= wrs.size() - 2, "result streams consumed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
