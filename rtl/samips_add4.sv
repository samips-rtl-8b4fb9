// samips_add4 -- the PC incrementer of the IF stage.
//
// Takes the coloured PC (PCvalue) and produces PC+4 twice: as PCplus4, with the colour, for
// Arb1/AAU, and as BaseAddID, without colour, for DeCode (the base address for branch and
// jump targets and for the exception return address). PCplus4 is sent first and BaseAddID
// only after it: DeCode cannot start on an instruction before the AAU has the address of
// the instruction behind it, so a branch's delay-slot instruction is always fetched before
// the branch target (this ordering is this design's choice; the paper sends both in parallel).
// Timing: PCplus4 is offered the cycle after PCvalue is taken, BaseAddID after PCplus4.
module samips_add4
  import samips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        pcvalue_valid,
  output logic        pcvalue_ready,
  input  pcv_t        pcvalue,
  output logic        pcplus4_valid,
  input  logic        pcplus4_ready,
  output pcv_t        pcplus4,
  output logic        baseaddid_valid,
  input  logic        baseaddid_ready,
  output logic [31:0] baseaddid
);
  typedef enum logic [1:0] {S_IDLE, S_P4, S_BASE} state_e;
  state_e state;
  pcv_t   sum_r;

  assign pcvalue_ready   = (state == S_IDLE);
  assign pcplus4_valid   = (state == S_P4);
  assign pcplus4         = sum_r;
  assign baseaddid_valid = (state == S_BASE);
  assign baseaddid       = sum_r.a;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      sum_r <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (pcvalue_valid) begin
          sum_r <= '{c: pcvalue.c, a: pcvalue.a + 32'd4};
          state <= S_P4;
        end
        S_P4:   if (pcplus4_ready) state <= S_BASE;
        S_BASE: if (baseaddid_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
