// samips_pc -- the program counter of the IF stage.
//
// The PC process of SAMIPS loops forever: it sends the coloured PC to instruction memory
// (CInsAdd) and, in parallel, to ADD4 (PCvalue); once both are acknowledged it waits for the
// next PC from the AAU (NPC) and stores it. The loop of the paper reads NPC first; here it is
// rotated so that the reset value RESET_PC (colour 000) is sent first.
// Channels are valid/ready pairs; a transfer happens on a rising clock edge with both high.
// Timing: one cycle from the NPC transfer to the new address being offered.
module samips_pc
  import samips_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic clk,
  input  logic rst,
  input  logic npc_valid,
  output logic npc_ready,
  input  pcv_t npc,
  output logic cinsadd_valid,
  input  logic cinsadd_ready,
  output pcv_t cinsadd,
  output logic pcvalue_valid,
  input  logic pcvalue_ready,
  output pcv_t pcvalue
);
  pcv_t pc_r;
  logic sending, sent_i, sent_v;

  assign cinsadd       = pc_r;
  assign pcvalue       = pc_r;
  assign cinsadd_valid = sending & ~sent_i;
  assign pcvalue_valid = sending & ~sent_v;
  assign npc_ready     = ~sending;

  always_ff @(posedge clk) begin
    if (rst) begin
      pc_r    <= '{c: '0, a: RESET_PC};
      sending <= 1'b1;
      sent_i  <= 1'b0;
      sent_v  <= 1'b0;
    end else if (sending) begin
      if (cinsadd_valid && cinsadd_ready) sent_i <= 1'b1;
      if (pcvalue_valid && pcvalue_ready) sent_v <= 1'b1;
      if ((sent_i || (cinsadd_valid && cinsadd_ready)) &&
          (sent_v || (pcvalue_valid && pcvalue_ready))) begin
        sending <= 1'b0;
        sent_i  <= 1'b0;
        sent_v  <= 1'b0;
      end
    end else if (npc_valid) begin
      pc_r    <= npc;
      sending <= 1'b1;
    end
  end
endmodule
