// samips_cp0 -- simplified system control coprocessor (CP0).
//
// Holds the three registers needed for exception handling: Status (12), Cause (13) and
// EPC (14). Status bits 5..0 are the three-level mode stack {KUo, IEo, KUp, IEp, KUc, IEc}
// (KU = 1: user mode). Commands (cp0w_t) arrive from the WBUnit (CP0W1: MTC0, EPC write,
// RFE) and from the AAU (CP0W2: Cause write on an exception):
//   CP0_WRITE  write data to register a;
//   CP0_EXC    write data to register a; if a is Cause, also push the mode stack
//              (Status[5:0] := Status[3:0], 00: kernel mode, interrupts disabled);
//   CP0_RFE    pop the mode stack (Status[3:0] := Status[5:2]).
// CP0W2 has priority when both arrive in the same cycle. CP0RAdd (MFC0) is answered with
// the register value on CP0RData one cycle later. The other 29 of the 32 registers are plain
// read/write storage (their special functions, TLB and cache control, are not built).
// user_mode = Status.KUc goes to MemInt for the address check.
// Own choice: an exception writes Cause (from the AAU) and EPC (from WB, when the faulting
// instruction gets there) at different times, so a counter of Cause writes not yet matched
// by an EPC write holds back CP0 reads while it is positive; a handler's MFC0 therefore
// never sees a stale EPC.
// Reset value of all registers: zero (kernel mode). Own choice: only these three registers
// have a function; the others hold what is written, so no TLB, cache control or PRId.
module samips_cp0
  import samips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        cp0w1_valid,
  output logic        cp0w1_ready,
  input  cp0w_t       cp0w1,
  input  logic        cp0w2_valid,
  output logic        cp0w2_ready,
  input  cp0w_t       cp0w2,
  input  logic        cp0radd_valid,
  output logic        cp0radd_ready,
  input  logic [4:0]  cp0radd,
  output logic        cp0rdata_valid,
  input  logic        cp0rdata_ready,
  output logic [31:0] cp0rdata,
  output logic        user_mode,
  output logic [31:0] status_o,
  output logic [31:0] cause_o,
  output logic [31:0] epc_o
);
  logic [31:0] status, cause, epc;
  logic [31:0] gen [32];       // the other CP0 registers: plain storage
  logic        p_rd;
  logic [31:0] rd_r;
  logic signed [3:0] pend;     // Cause writes minus EPC writes of exceptions

  assign cp0w2_ready    = 1'b1;
  assign cp0w1_ready    = ~cp0w2_valid;
  assign cp0radd_ready  = ~p_rd & ~(pend > 4'sd0);
  assign cp0rdata_valid = p_rd;
  assign cp0rdata       = rd_r;
  assign user_mode      = status[1];
  assign status_o = status;
  assign cause_o  = cause;
  assign epc_o    = epc;

  logic  do_w;
  cp0w_t w;
  assign do_w = cp0w2_valid | cp0w1_valid;
  assign w    = cp0w2_valid ? cp0w2 : cp0w1;

  always_ff @(posedge clk) begin
    if (rst) begin
      status <= '0; cause <= '0; epc <= '0; p_rd <= 1'b0; rd_r <= '0; pend <= '0;
      for (int i = 0; i < 32; i++) gen[i] <= '0;
    end else begin
      if (do_w) begin
        if (w.cmd == CP0_RFE) status[3:0] <= status[5:2];
        else begin
          unique case (w.a)
            CP0_STATUS: status <= w.data;
            CP0_CAUSE:  cause  <= w.data;
            CP0_EPC:    epc    <= w.data;
            default:    gen[w.a] <= w.data;
          endcase
          if (w.cmd == CP0_EXC && w.a == CP0_CAUSE) status[5:0] <= {status[3:0], 2'b00};
        end
      end
      pend <= pend + ((cp0w2_valid && cp0w2.cmd == CP0_EXC) ? 4'sd1 : 4'sd0)
                   - ((cp0w1_valid && cp0w1_ready && cp0w1.cmd == CP0_EXC) ? 4'sd1 : 4'sd0);
      if (p_rd && cp0rdata_ready) p_rd <= 1'b0;
      if (cp0radd_valid && cp0radd_ready) begin
        p_rd <= 1'b1;
        unique case (cp0radd)
          CP0_STATUS: rd_r <= status;
          CP0_CAUSE:  rd_r <= cause;
          CP0_EPC:    rd_r <= epc;
          default:    rd_r <= gen[cp0radd];
        endcase
      end
    end
  end
endmodule
