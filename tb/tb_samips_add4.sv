// tb_samips_add4 -- testbench of samips_add4.
//
// Random coloured PC values are offered on PCvalue with random readiness of the two
// outputs. Checked: PCplus4 = {colour, PC + 4}, BaseAddID = PC + 4, exactly one of each per
// PCvalue, BaseAddID is never offered before PCplus4 has been accepted (the ordering that
// lets the delay-slot address reach the AAU before any branch target), and a new PCvalue is
// only taken when both outputs are done. Cycle count: PCplus4 is offered one cycle after the
// PCvalue transfer.
module tb_samips_add4;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pcvalue_valid = 0, pcvalue_ready, pcplus4_valid, pcplus4_ready = 0;
  logic baseaddid_valid, baseaddid_ready = 0;
  pcv_t pcvalue = '0, pcplus4;
  logic [31:0] baseaddid;
  samips_add4 dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  pcv_t cur;
  bit p4_done, b_done, active;
  int n = 0, nb = 0, since;
  localparam int N = 1000;

  always @(posedge clk) if (!rst) begin
    since <= since + 1;
    if (pcplus4_valid && pcplus4_ready) begin
      chk(active && !p4_done, "one PCplus4"); chk(pcplus4 == '{c: cur.c, a: cur.a + 32'd4}, "PCplus4 value");
      p4_done = 1;
    end
    if (baseaddid_valid && baseaddid_ready) begin
      chk(active && !b_done, "one BaseAddID"); chk(baseaddid == cur.a + 32'd4, "BaseAddID value");
      b_done = 1; nb++;
    end
    if (pcvalue_valid && pcvalue_ready) begin
      chk(!active || (p4_done && b_done), "new PC only when done");
      cur = pcvalue; active = 1; p4_done = 0; b_done = 0; pcvalue_valid <= 0; n++; since <= 0;
    end else if (!pcvalue_valid && n < N && $urandom_range(1, 0)) begin
      pcvalue_valid <= 1; pcvalue <= '{c: colour_t'($urandom), a: $urandom};
    end
    pcplus4_ready   <= $urandom_range(1, 0);
    baseaddid_ready <= $urandom_range(1, 0);
  end

  always @(negedge clk) if (!rst && active) begin
    if (baseaddid_valid) chk(p4_done, "BaseAddID after PCplus4");
    if (since == 1 && !p4_done) chk(pcplus4_valid, "PCplus4 one cycle after PCvalue");
  end

  initial begin
    #200000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    active = 0; p4_done = 0; b_done = 0; since = 100;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (n == N && b_done && p4_done);
    chk(nb == N, "count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
