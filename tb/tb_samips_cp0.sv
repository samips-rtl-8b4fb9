// tb_samips_cp0 -- testbench of samips_cp0.
//
// Directed sequence: reset values (all zero, kernel mode); MTC0-style writes of Status,
// Cause and EPC; an exception (CP0W2 Cause write with push) moves the mode stack
// Status[5:0] -> {Status[3:0], 00}; RFE pops it back; user_mode follows Status bit 1.
// CP0 reads are held back between an exception's Cause write and its EPC write. A CP0W1 and
// a CP0W2 in the same cycle: CP0W2 is taken first. Then random commands are checked against
// a reference model (all 32 register numbers), with reads returning the model's values one
// cycle after the request.
module tb_samips_cp0;
  import samips_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cp0w1_valid = 0, cp0w1_ready, cp0w2_valid = 0, cp0w2_ready, cp0radd_valid = 0, cp0radd_ready;
  logic cp0rdata_valid, cp0rdata_ready = 1, user_mode;
  cp0w_t cp0w1 = '0, cp0w2 = '0;
  logic [4:0] cp0radd = 0;
  logic [31:0] cp0rdata, status_o, cause_o, epc_o;
  samips_cp0 dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  logic [31:0] m_st = 0, m_ca = 0, m_epc = 0;
  logic [31:0] m_gen [32] = '{default: 0};
  task automatic m_apply(cp0w_t w);
    if (w.cmd == CP0_RFE) m_st[3:0] = m_st[5:2];
    else begin
      case (w.a)
        5'd12: m_st = w.data;
        5'd13: m_ca = w.data;
        5'd14: m_epc = w.data;
        default: m_gen[w.a] = w.data;
      endcase
      if (w.cmd == CP0_EXC && w.a == 5'd13) m_st[5:0] = {m_st[3:0], 2'b00};
    end
  endtask
  function automatic logic [31:0] m_rd(logic [4:0] a);
    case (a) 5'd12: return m_st; 5'd13: return m_ca; 5'd14: return m_epc; default: return m_gen[a]; endcase
  endfunction

  task automatic w1(cp0w_t w);
    cp0w1 <= w; cp0w1_valid <= 1;
    do @(posedge clk); while (!cp0w1_ready);
    cp0w1_valid <= 0; m_apply(w);
  endtask
  task automatic w2(cp0w_t w);
    cp0w2 <= w; cp0w2_valid <= 1;
    @(posedge clk);
    cp0w2_valid <= 0; m_apply(w);
  endtask
  task automatic rd(logic [4:0] a, logic [31:0] exp, string what);
    cp0radd <= a; cp0radd_valid <= 1;
    do @(posedge clk); while (!cp0radd_ready);
    cp0radd_valid <= 0;
    @(negedge clk);
    chk(cp0rdata_valid && cp0rdata == exp, what);
  endtask
  task automatic state(string what);
    @(negedge clk);
    chk(status_o == m_st && cause_o == m_ca && epc_o == m_epc && user_mode == m_st[1], what);
  endtask

  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    state("reset values");
    chk(!user_mode, "kernel mode after reset");
    w1('{data: 32'h0000_ff02, a: 5'd12, cmd: CP0_WRITE});      // user mode, IEc 0
    state("Status write");
    chk(user_mode, "user mode");
    rd(5'd12, 32'h0000_ff02, "read Status");
    w2('{data: 32'h0000_0030, a: 5'd13, cmd: CP0_EXC});        // exception: Cause + push
    state("exception push");
    chk(!user_mode && status_o[5:0] == 6'b001000, "pushed mode stack");
    // a read is held back until the EPC write of the exception arrived
    cp0radd <= 5'd14; cp0radd_valid <= 1;
    repeat (3) begin @(negedge clk); chk(!cp0radd_ready, "read held back"); end
    w1('{data: 32'h0000_0104, a: 5'd14, cmd: CP0_EXC});        // EPC from WB
    do @(posedge clk); while (!cp0radd_ready);
    cp0radd_valid <= 0;
    @(negedge clk);
    chk(cp0rdata_valid && cp0rdata == 32'h104, "EPC read after exception");
    rd(5'd13, 32'h30, "Cause read");
    w1('{data: 32'h0, a: 5'd12, cmd: CP0_RFE});
    state("RFE pop");
    chk(user_mode && status_o[5:0] == 6'b000010, "popped mode stack");
    // simultaneous commands: CP0W2 first
    cp0w1 <= '{data: 32'h11, a: 5'd14, cmd: CP0_WRITE}; cp0w1_valid <= 1;
    cp0w2 <= '{data: 32'h22, a: 5'd14, cmd: CP0_WRITE}; cp0w2_valid <= 1;
    @(negedge clk);
    chk(cp0w2_ready && !cp0w1_ready, "CP0W2 priority");
    @(posedge clk); cp0w2_valid <= 0; m_apply('{data: 32'h22, a: 5'd14, cmd: CP0_WRITE});
    @(posedge clk); cp0w1_valid <= 0; m_apply('{data: 32'h11, a: 5'd14, cmd: CP0_WRITE});
    state("order of simultaneous writes");
    // random
    repeat (2000) begin
      int r;
      cp0w_t w;
      r = $urandom_range(3, 0);
      w = '{data: $urandom, a: 5'($urandom_range(1, 0) ? $urandom_range(15, 11) : $urandom_range(31, 0)), cmd: cp0cmd_e'($urandom_range(2, 0))};
      if (w.cmd == CP0_EXC) w.a = ($urandom_range(1, 0)) ? 5'd13 : 5'd14;
      if (r == 0) w1(w);
      else if (r == 1 && w.cmd != CP0_EXC) w2(w);
      else if (r == 2 && dut.pend <= 0) begin
        logic [4:0] a;
        a = 5'($urandom_range(1, 0) ? $urandom_range(15, 10) : $urandom_range(31, 0));
        rd(a, m_rd(a), "random read");
      end
      state("random state");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
