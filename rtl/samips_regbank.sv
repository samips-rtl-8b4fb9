// samips_regbank -- RegBank: register file with the data-hazard detection queue.
//
// The RegBank holds the 32 general registers ($0 reads as zero) and decides, for every
// instruction that DeCode passes on (RegRead {RNo0, RNo1, WNo}), where each of its two
// operands will come from. It keeps the Data Hazard Detection Queue (DHDQ): the
// destination numbers of the last DHDQ_DEPTH register-writing-or-not instructions, W0 the
// most recent. For operand number r (priority order):
//   r = 0          -> NON : read the register file (gives 0)
//   r = W0         -> EXR : the value comes from the forwarding unit (EX result, FEXRes)
//   r = W1         -> MEMR: the value comes from the forwarding unit (MEM result, FMEMRes)
//   r = W2         -> WBR : wait for that instruction's RegWrite and send its value
//   otherwise      -> NON : read the register file
// ReadData0/1 are only sent for NON and WBR; FWCtrl {case1, case0} always goes to the
// FWunit, together with FRACtrl, the head of the Forwarding Result Arrival Queue (FRAQ):
// {exa, mema} tells the FWunit whether the previous and the one-before instruction will
// deliver a forwarded result, so it consumes exactly those. After the read the DHDQ is
// shifted (W0 := WNo) and FRAQ := {WNo != 0, exa}.
// The destination WNo is classified like an operand (case2 in FWCtrl): its old value, which
// a cancelled instruction must leave behind, is sent on PIDRd for NON/WBR or forwarded by
// the FWunit (FOp2) for EXR/MEMR. Reading it straight from the register file would give a
// stale value while an earlier write to the same register is still in flight.
// RegWrite {rnw, rd, data} clears the oldest DHDQ entry equal to rd and, if rnw, writes the
// register. RegWrite is always accepted, also while outputs are pending, and a write in the
// same cycle as a read is applied first (bypass); otherwise WB could block the read it feeds.
// Design choices (not in the paper): a read waits while W3 (the oldest entry) still holds
// a pending write, so no pending entry is ever dropped; a RegWrite with no matching entry is
// therefore impossible (asserted) instead of clearing W3 by default.
// Timing: a RegRead is taken in one cycle when no output is pending; the outputs are
// offered from the next cycle (ReadData of a WBR operand once the RegWrite arrives).
module samips_regbank
  import samips_pkg::*;
#(
  parameter int unsigned NREGS      = 32,
  parameter int unsigned DHDQ_DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      regread_valid,
  output logic      regread_ready,
  input  rr_t       regread,
  input  logic      regwrite_valid,
  output logic      regwrite_ready,
  input  rw_t       regwrite,
  output logic      fractrl_valid,
  input  logic      fractrl_ready,
  output fractrl_t  fractrl,
  output logic      fwctrl_valid,
  input  logic      fwctrl_ready,
  output fwctrl_t   fwctrl,
  output logic      rd0_valid,
  input  logic      rd0_ready,
  output logic [31:0] rd0,
  output logic      rd1_valid,
  input  logic      rd1_ready,
  output logic [31:0] rd1,
  output logic      pidrd_valid,
  input  logic      pidrd_ready,
  output logic [31:0] pidrd
);
  localparam int unsigned OLD = DHDQ_DEPTH - 1;
  // The three forwarding cases EXR/MEMR/WBR map onto W0..W2, W3 only delays the reuse.
  if (DHDQ_DEPTH != 4) begin : g_depth_check
    $error("samips_regbank: DHDQ_DEPTH must be 4");
  end

  logic [31:0] regs [NREGS];
  logic [4:0]  dq   [DHDQ_DEPTH];
  fractrl_t    fraq;

  logic p_fra, p_fw, p_r0, p_r1, p_pid;
  logic w0, w1, w2;        // operand / old value waits for the RegWrite of W2 (WBR)
  logic [4:0] wreg;        // register number of that pending write
  fractrl_t fra_r; fwctrl_t fw_r; logic [31:0] r0_r, r1_r, pid_r;

  assign regwrite_ready = 1'b1;
  assign fractrl_valid = p_fra; assign fractrl = fra_r;
  assign fwctrl_valid  = p_fw;  assign fwctrl  = fw_r;
  assign rd0_valid = p_r0 & ~w0; assign rd0 = r0_r;
  assign rd1_valid = p_r1 & ~w1; assign rd1 = r1_r;
  assign pidrd_valid = p_pid & ~w2; assign pidrd = pid_r;

  // ---- effect of this cycle's RegWrite
  wire wr = regwrite_valid;
  logic [DHDQ_DEPTH-1:0] clr;   // one-hot: entry cleared by this write
  logic [4:0] dqc [DHDQ_DEPTH]; // DHDQ after the clear
  always_comb begin
    clr = '0;
    for (int i = OLD; i >= 0; i--)
      if (wr && regwrite.rd != 5'd0 && dq[i] == regwrite.rd && clr == '0) clr[i] = 1'b1;
    for (int i = 0; i < DHDQ_DEPTH; i++) dqc[i] = clr[i] ? 5'd0 : dq[i];
  end

  // register value with same-cycle write bypass
  function automatic logic [31:0] rdreg(input logic [4:0] r);
    if (r == 5'd0) return 32'd0;
    if (wr && regwrite.rnw && regwrite.rd == r) return regwrite.data;
    return regs[r];
  endfunction

  function automatic fwcase_e fcase(input logic [4:0] r);
    if (r == 5'd0)     return FW_NON;
    if (r == dqc[0])   return FW_EXR;
    if (r == dqc[1])   return FW_MEMR;
    if (r == dqc[2])   return FW_WBR;
    return FW_NON;
  endfunction

  fwcase_e c0, c1, c2;
  assign c0 = fcase(regread.rno0);
  assign c1 = fcase(regread.rno1);
  assign c2 = fcase(regread.wno);

  wire busy = p_fra | p_fw | p_r0 | p_r1 | p_pid;
  assign regread_ready = ~busy & (dqc[OLD] == 5'd0);
  wire take = regread_valid & regread_ready;

  // The WBR entry was W2 at the read and is the oldest entry (W3) after the shift; no
  // further shift happens while waiting, so the awaited RegWrite is the one clearing W3.
  wire wbr_hit = wr && regwrite.rd == wreg && clr[OLD];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DHDQ_DEPTH; i++) dq[i] <= 5'd0;
      fraq <= '0;
      p_fra <= 1'b0; p_fw <= 1'b0; p_r0 <= 1'b0; p_r1 <= 1'b0; p_pid <= 1'b0;
      w0 <= 1'b0; w1 <= 1'b0; w2 <= 1'b0; wreg <= 5'd0;
      fra_r <= '0; fw_r <= '{FW_NON, FW_NON, FW_NON}; r0_r <= '0; r1_r <= '0; pid_r <= '0;
    end else begin
      for (int i = 0; i < DHDQ_DEPTH; i++) dq[i] <= dqc[i];
      if (p_fra && fractrl_ready) p_fra <= 1'b0;
      if (p_fw  && fwctrl_ready)  p_fw  <= 1'b0;
      if (rd0_valid && rd0_ready) p_r0  <= 1'b0;
      if (rd1_valid && rd1_ready) p_r1  <= 1'b0;
      if (pidrd_valid && pidrd_ready) p_pid <= 1'b0;
      if (wbr_hit) begin
        if (w0) begin r0_r <= regwrite.data; w0 <= 1'b0; end
        if (w1) begin r1_r <= regwrite.data; w1 <= 1'b0; end
        if (w2) begin pid_r <= regwrite.data; w2 <= 1'b0; end
      end
      if (take) begin
        dq[0] <= regread.wno;
        for (int i = 1; i < DHDQ_DEPTH; i++) dq[i] <= dqc[i-1];
        fra_r <= fraq;
        fraq  <= '{exa: regread.wno != 5'd0, mema: fraq.exa};
        fw_r  <= '{c2: c2, c1: c1, c0: c0};
        p_fra <= 1'b1;
        p_fw  <= 1'b1;
        p_r0  <= (c0 == FW_NON) || (c0 == FW_WBR);
        p_r1  <= (c1 == FW_NON) || (c1 == FW_WBR);
        w0    <= (c0 == FW_WBR);
        w1    <= (c1 == FW_WBR);
        w2    <= (c2 == FW_WBR);
        wreg  <= (c0 == FW_WBR) ? regread.rno0 : (c1 == FW_WBR) ? regread.rno1 : regread.wno;
        r0_r  <= rdreg(regread.rno0);
        r1_r  <= rdreg(regread.rno1);
        p_pid <= (regread.wno != 5'd0) && ((c2 == FW_NON) || (c2 == FW_WBR));
        pid_r <= rdreg(regread.wno);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst && wr && regwrite.rnw && regwrite.rd != 5'd0) regs[regwrite.rd] <= regwrite.data;
  end

  // Every RegWrite releases a pending DHDQ entry.
  a_write_matches: assert property (@(posedge clk) disable iff (rst)
    (regwrite_valid && regwrite.rd != 5'd0) |-> (clr != '0));
endmodule
