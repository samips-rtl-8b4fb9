// tb_samips_pc -- testbench of samips_pc.
//
// After reset the PC must offer RESET_PC with colour 000 on CInsAdd and PCvalue. The
// testbench then answers each pair of transfers with a random coloured NPC after a random
// delay, with random readiness on both outputs, and checks: both outputs carry the last
// NPC, each NPC gives exactly one transfer on each output, NPC is refused while an address
// is still being sent, and the new address is offered one cycle after the NPC transfer.
module tb_samips_pc;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic npc_valid = 0, npc_ready, cinsadd_valid, cinsadd_ready = 0, pcvalue_valid, pcvalue_ready = 0;
  pcv_t npc = '0, cinsadd, pcvalue;
  samips_pc #(.RESET_PC(32'h0000_0100)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  pcv_t exp;
  int   gi = 0, gv = 0, nn = 0;
  bit   got_i, got_v;
  int   since_npc;
  localparam int N = 1000;

  always @(posedge clk) if (!rst) begin
    since_npc <= since_npc + 1;
    if (cinsadd_valid && cinsadd_ready) begin
      chk(cinsadd == exp, "CInsAdd value"); chk(!got_i, "one CInsAdd per NPC");
      got_i = 1; gi++;
    end
    if (pcvalue_valid && pcvalue_ready) begin
      chk(pcvalue == exp, "PCvalue value"); chk(!got_v, "one PCvalue per NPC");
      got_v = 1; gv++;
    end
    if (npc_valid && npc_ready) begin
      chk(got_i && got_v, "NPC only after both sent");
      exp = npc; got_i = 0; got_v = 0; npc_valid <= 0; nn++;
      since_npc <= 0;
    end else if (!npc_valid && got_i && got_v && nn < N && $urandom_range(2, 0) == 0) begin
      npc_valid <= 1; npc <= '{c: colour_t'($urandom), a: $urandom};
    end
    cinsadd_ready <= $urandom_range(1, 0);
    pcvalue_ready <= $urandom_range(1, 0);
  end

  // the new address is offered exactly one cycle after the NPC transfer
  always @(negedge clk) if (!rst && (cinsadd_valid || pcvalue_valid))
    chk(!npc_ready, "NPC refused while sending");
  always @(negedge clk) if (!rst && since_npc == 1 && nn > 0 && !got_i && !got_v)
    chk(cinsadd_valid && pcvalue_valid, "offer one cycle after NPC");

  initial begin
    #200000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    exp = '{c: '0, a: 32'h100}; got_i = 0; got_v = 0; since_npc = 100;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk);
    chk(cinsadd_valid && pcvalue_valid && cinsadd == exp, "reset address offered");
    wait (nn == N && got_i && got_v);
    chk(gi == N + 1 && gv == N + 1, "transfer counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
