// tb_samips_aau -- testbench of samips_aau.
//
// Part 1 (directed): a PC+4 request of the current colour is passed to NPC; one of another
// colour is dropped; an EX branch sets AAUC and loads its target; an ID request whose EX bit
// disagrees with the new AAUC is dropped; a MEM exception is always taken, gives NPC =
// 0x8000_0080 and CP0W2 {Cause value, register 13, exception command}.
// Part 2 (random): random requests (stage, colour, branch/exception) on both inputs and
// random readiness of NPC/CP0W2, checked against a reference model of the acceptance rules
// (PC: colour equal to AAUC; ID: EX and MEM bits equal; EX: MEM bit equal; MEM: always),
// the NTarget1 priority, and the outputs of every accepted request. Cycle count: NPC is
// offered one cycle after the request is taken.
module tb_samips_aau;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic nt1_valid = 0, nt1_ready, nt2_valid = 0, nt2_ready, npc_valid, npc_ready = 0;
  logic cp0w2_valid, cp0w2_ready = 0;
  haz_t nt1 = '0, nt2 = '0;
  pcv_t npc;
  cp0w_t cp0w2;
  colour_t aauc_o;
  samips_aau dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  // reference model
  colour_t m_c = '0;
  function automatic bit m_pass(haz_t h, colour_t c);
    unique case (h.st)
      ST_PC:  return h.c == c;
      ST_ID:  return h.c.ex == c.ex && h.c.mem == c.mem;
      ST_EX:  return h.c.mem == c.mem;
      default: return 1'b1;
    endcase
  endfunction

  pcv_t  exp_npc [$];
  cp0w_t exp_cp  [$];
  bit rnd = 0;
  int n_sent1 = 0, n_sent2 = 0;
  // random phase: producers and consumers driven from one clocked process
  always @(posedge clk) if (rnd) begin
    if (nt1_valid && nt1_ready) begin nt1_valid <= 0; n_sent1 <= n_sent1 + 1; end
    else if (!nt1_valid && $urandom_range(1, 0)) begin nt1_valid <= 1; nt1 <= rnd_req(); end
    if (nt2_valid && nt2_ready) begin nt2_valid <= 0; n_sent2 <= n_sent2 + 1; end
    else if (!nt2_valid && $urandom_range(1, 0)) begin nt2_valid <= 1; nt2 <= rnd_req(); end
    npc_ready <= $urandom_range(1, 0); cp0w2_ready <= $urandom_range(1, 0);
  end
  int n_taken = 0, n_drop = 0, n_exc = 0, since = 100;

  always @(posedge clk) if (!rst) begin
    haz_t h;
    bit   t;
    since <= since + 1;
    t = 0;
    if (nt1_valid && nt1_ready) begin h = nt1; t = 1; chk(!nt2_ready, "single grant"); end
    else if (nt2_valid && nt2_ready) begin h = nt2; t = 1; chk(!nt1_valid, "NTarget1 priority"); end
    if (t) begin
      if (m_pass(h, m_c)) begin
        n_taken++;
        if (h.st != ST_PC) m_c = h.c;
        if (h.st != ST_PC && h.enj) begin
          exp_npc.push_back('{c: h.c, a: 32'h8000_0080});
          exp_cp.push_back('{data: h.a, a: 5'd13, cmd: CP0_EXC});
          n_exc++;
        end else exp_npc.push_back('{c: h.c, a: h.a});
        since <= 0;
      end else n_drop++;
    end
    if (npc_valid && npc_ready) begin
      chk(exp_npc.size() > 0 && npc == exp_npc[0], "NPC value");
      if (exp_npc.size() > 0) void'(exp_npc.pop_front());
    end
    if (cp0w2_valid && cp0w2_ready) begin
      chk(exp_cp.size() > 0 && cp0w2 == exp_cp[0], "CP0W2 value");
      if (exp_cp.size() > 0) void'(exp_cp.pop_front());
    end
  end
  always @(negedge clk) if (!rst) begin
    chk(aauc_o == m_c, "AAUC");
    if (since == 0) chk(npc_valid, "NPC one cycle after request");
  end

  function automatic haz_t rnd_req();
    haz_t h;
    h.st  = stage_e'($urandom_range(3, 0));
    h.c   = ($urandom_range(3, 0) == 0) ? colour_t'($urandom) : m_c;
    if (h.st != ST_PC && $urandom_range(1, 0)) begin
      // a genuine control transfer flips the sender's own bit
      unique case (h.st)
        ST_ID:  h.c.id  = ~h.c.id;
        ST_EX:  h.c.ex  = ~h.c.ex;
        default: h.c.mem = ~h.c.mem;
      endcase
    end
    h.enj = (h.st != ST_PC) && ($urandom_range(3, 0) == 0);
    h.a   = $urandom;
    return h;
  endfunction

  task automatic send1(haz_t h);
    nt1 <= h; nt1_valid <= 1;
    do @(posedge clk); while (!nt1_ready);
    nt1_valid <= 0;
  endtask
  task automatic send2(haz_t h);
    nt2 <= h; nt2_valid <= 1;
    do @(posedge clk); while (!nt2_ready);
    nt2_valid <= 0;
  endtask

  initial begin
    #400000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    npc_ready <= 1; cp0w2_ready <= 1;
    // ---- directed
    send1('{c: 3'b000, st: ST_PC, enj: 0, a: 32'h4});
    send1('{c: 3'b010, st: ST_PC, enj: 0, a: 32'h8});          // dropped
    send2('{c: 3'b010, st: ST_EX, enj: 0, a: 32'h40});         // branch in EX
    send2('{c: 3'b001, st: ST_ID, enj: 0, a: 32'h80});         // old EX bit: dropped
    send1('{c: 3'b110, st: ST_MEM, enj: 1, a: 32'h10});        // MEM exception
    repeat (4) @(posedge clk);
    chk(n_taken == 3 && n_drop == 2 && n_exc == 1, "directed accept/drop");
    chk(aauc_o == 3'b110, "directed AAUC");
    // ---- random
    rnd = 1;
    wait (n_sent1 >= 2000 && n_sent2 >= 2000);
    rnd = 0;
    npc_ready <= 1; cp0w2_ready <= 1;
    repeat (10) @(posedge clk);
    chk(exp_npc.size() == 0 && exp_cp.size() == 0, "all outputs delivered");
    $display("taken %0d dropped %0d exceptions %0d", n_taken, n_drop, n_exc);
    chk(n_drop > 100 && n_exc > 100, "random coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
