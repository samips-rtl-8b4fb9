// samips_fwunit -- FWunit, the asynchronous forwarding unit.
//
// For every instruction leaving the RegBank the FWunit receives FRACtrl {exa, mema} and
// FWCtrl {case1, case0}. FRACtrl says whether the previous instruction (exa) and the one
// before it (mema) write a register; only then will their results arrive on FEXRes (from
// MemInt, the EX result of the previous instruction) and FMEMRes (from WBUnit, the MEM
// result of the one before). The unit takes exactly those results, in any order, and then
// sends FOp0/FOp1 for the operands marked EXR (value of FEXRes) or MEMR (value of FMEMRes),
// and FOp2 for the old value of the destination register (case2, own extension).
// Results that are not needed are still consumed so that the streams stay aligned.
// Timing: one round per instruction: collect (1+ cycles), then send (1+ cycles).
module samips_fwunit
  import samips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        fractrl_valid,
  output logic        fractrl_ready,
  input  fractrl_t    fractrl,
  input  logic        fwctrl_valid,
  output logic        fwctrl_ready,
  input  fwctrl_t     fwctrl,
  input  logic        fexres_valid,
  output logic        fexres_ready,
  input  logic [31:0] fexres,
  input  logic        fmemres_valid,
  output logic        fmemres_ready,
  input  logic [31:0] fmemres,
  output logic        fop0_valid,
  input  logic        fop0_ready,
  output logic [31:0] fop0,
  output logic        fop1_valid,
  input  logic        fop1_ready,
  output logic [31:0] fop1,
  output logic        fop2_valid,
  input  logic        fop2_ready,
  output logic [31:0] fop2
);
  typedef enum logic [1:0] {S_CTRL, S_RES, S_SEND} state_e;
  state_e st;
  fwctrl_t  fw_r;
  logic need_ex, need_mem;        // result still to be taken
  logic [31:0] ex_v, mem_v;
  logic s0, s1, s2;               // operand still to be sent

  assign fractrl_ready = (st == S_CTRL) & fwctrl_valid;
  assign fwctrl_ready  = (st == S_CTRL) & fractrl_valid;
  assign fexres_ready  = (st == S_RES) & need_ex;
  assign fmemres_ready = (st == S_RES) & need_mem;

  function automatic logic [31:0] pick(fwcase_e c, logic [31:0] e, logic [31:0] m);
    return (c == FW_EXR) ? e : m;
  endfunction

  assign fop0_valid = (st == S_SEND) & s0;
  assign fop1_valid = (st == S_SEND) & s1;
  assign fop0 = pick(fw_r.c0, ex_v, mem_v);
  assign fop1 = pick(fw_r.c1, ex_v, mem_v);
  assign fop2_valid = (st == S_SEND) & s2;
  assign fop2 = pick(fw_r.c2, ex_v, mem_v);

  function automatic logic fwd(fwcase_e c);
    return c == FW_EXR || c == FW_MEMR;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_CTRL; fw_r <= '{FW_NON, FW_NON, FW_NON};
      need_ex <= 1'b0; need_mem <= 1'b0; ex_v <= '0; mem_v <= '0; s0 <= 1'b0; s1 <= 1'b0; s2 <= 1'b0;
    end else begin
      unique case (st)
        S_CTRL: if (fractrl_valid && fwctrl_valid) begin
          fw_r     <= fwctrl;
          need_ex  <= fractrl.exa;
          need_mem <= fractrl.mema;
          s0       <= fwd(fwctrl.c0);
          s1       <= fwd(fwctrl.c1);
          s2       <= fwd(fwctrl.c2);
          st       <= S_RES;
        end
        S_RES: begin
          if (fexres_valid && need_ex)   begin ex_v  <= fexres;  need_ex  <= 1'b0; end
          if (fmemres_valid && need_mem) begin mem_v <= fmemres; need_mem <= 1'b0; end
          if ((!need_ex || fexres_valid) && (!need_mem || fmemres_valid))
            st <= (s0 || s1 || s2) ? S_SEND : S_CTRL;
        end
        S_SEND: begin
          if (fop0_ready) s0 <= 1'b0;
          if (fop1_ready) s1 <= 1'b0;
          if (fop2_ready) s2 <= 1'b0;
          if ((!s0 || fop0_ready) && (!s1 || fop1_ready) && (!s2 || fop2_ready)) st <= S_CTRL;
        end
        default: st <= S_CTRL;
      endcase
    end
  end

  // An operand is only forwarded from a result that actually arrives.
  a_exr_has_result: assert property (@(posedge clk) disable iff (rst)
    (st == S_CTRL && fractrl_valid && fwctrl_valid &&
     (fwctrl.c0 == FW_EXR || fwctrl.c1 == FW_EXR || fwctrl.c2 == FW_EXR)) |-> fractrl.exa);
  a_memr_has_result: assert property (@(posedge clk) disable iff (rst)
    (st == S_CTRL && fractrl_valid && fwctrl_valid &&
     (fwctrl.c0 == FW_MEMR || fwctrl.c1 == FW_MEMR || fwctrl.c2 == FW_MEMR)) |-> fractrl.mema);
endmodule
