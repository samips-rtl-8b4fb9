// tb_samips_arb -- testbench of samips_arb (two-input priority merge).
//
// Two random producers offer numbered items on inputs a and b (valid held until accepted,
// data stable) and a random consumer drives y_ready. Checked every cycle: y_valid is the OR
// of the input valids, the selected item is a's when a is valid (priority), at most one
// input is acknowledged and only together with y_ready; every item of each input arrives
// exactly once and in order. The merge is combinational (zero cycles), which is checked
// by comparing y_data with the offered item in the same cycle.
module tb_samips_arb;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_valid = 0, a_ready, b_valid = 0, b_ready, y_valid, y_ready = 0;
  logic [31:0] a_data = 0, b_data = 0, y_data;
  samips_arb #(.T(logic [31:0])) dut (.*);

  int na = 0, nb = 0, ga = 0, gb = 0;   // items sent / received per input
  localparam int N = 2000;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", msg, $time); end
  endtask

  always @(negedge clk) if (!rst) begin
    chk(y_valid == (a_valid | b_valid), "y_valid");
    if (a_valid) chk(y_data == a_data, "priority a");
    else if (b_valid) chk(y_data == b_data, "data b");
    chk(!(a_ready && b_ready), "one ack");
    chk(!(a_ready || b_ready) || y_ready, "ack needs y_ready");
  end

  always @(posedge clk) if (!rst) begin
    if (y_valid && y_ready) begin
      if (y_data[31]) begin chk(y_data[30:0] == 31'(gb), "b order"); gb++; end
      else begin chk(y_data[30:0] == 31'(ga), "a order"); ga++; end
    end
    if (a_valid && a_ready) begin a_valid <= 0; na <= na + 1; end
    else if (!a_valid && na < N && $urandom_range(3, 0) != 0) begin
      a_valid <= 1; a_data <= {1'b0, 31'(na)};
    end
    if (b_valid && b_ready) begin b_valid <= 0; nb <= nb + 1; end
    else if (!b_valid && nb < N && $urandom_range(3, 0) != 0) begin
      b_valid <= 1; b_data <= {1'b1, 31'(nb)};
    end
    y_ready <= $urandom_range(2, 0) != 0;
  end

  initial begin
    #100000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (ga == N && gb == N);
    repeat (2) @(posedge clk);
    chk(ga == N && gb == N, "all items");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
