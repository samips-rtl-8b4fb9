// samips_aau -- Address Arbitration Unit, the heart of the multi-colour control-hazard scheme.
//
// Every address that may be fetched reaches the AAU as a request carrying a colour vector
// (one bit per hazard-raising stage: ID, EX, MEM), the number of the stage that sent it and
// a branch/exception flag. The AAU keeps the processor's colour state AAUC and, following
// the paper's Balsa model:
//   * a PC+4 request is passed on only if its colour equals AAUC (otherwise it belongs to a
//     stream that a control transfer has already abandoned and is dropped);
//   * a request from stage ID, EX or MEM is accepted if all colour bits of stages deeper
//     than the sender match AAUC (a deeper stage has priority over a shallower one); MEM
//     requests are always accepted. An accepted request sets AAUC to its colour. A branch
//     loads its target into the PC; an exception loads the exception vector EXC_VECTOR and
//     writes the cause value carried in the request's address field to CP0 register 13
//     (Cause) over CP0W2, pushing the Status mode stack.
// The two inputs come from Arb1 (NTarget1: PC+4 and MEM requests) and Arb2 (NTarget2: EX and
// ID requests); the AAU's own arbiter gives NTarget1 priority (own choice, see ADD4).
// Timing: a request is taken when the AAU is idle; NPC (and CP0W2) are offered the next cycle
// and the AAU is idle again once they have been taken.
module samips_aau
  import samips_pkg::*;
#(
  parameter logic [31:0] EXC_VECTOR = 32'h8000_0080
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  nt1_valid,
  output logic  nt1_ready,
  input  haz_t  nt1,
  input  logic  nt2_valid,
  output logic  nt2_ready,
  input  haz_t  nt2,
  output logic  npc_valid,
  input  logic  npc_ready,
  output pcv_t  npc,
  output logic  cp0w2_valid,
  input  logic  cp0w2_ready,
  output cp0w_t cp0w2,
  output colour_t aauc_o
);
  colour_t aauc;
  logic    busy, npc_pend, cp0_pend;
  pcv_t    npc_r;
  cp0w_t   cp0w_r;
  logic    ch_valid, ch_ready;
  haz_t    ch;

  samips_arb #(.T(haz_t)) u_arb (
    .a_valid(nt1_valid), .a_ready(nt1_ready), .a_data(nt1),
    .b_valid(nt2_valid), .b_ready(nt2_ready), .b_data(nt2),
    .y_valid(ch_valid),  .y_ready(ch_ready),  .y_data(ch)
  );

  assign ch_ready    = ~busy;
  assign npc_valid   = npc_pend;
  assign npc         = npc_r;
  assign cp0w2_valid = cp0_pend;
  assign cp0w2       = cp0w_r;
  assign aauc_o      = aauc;

  logic pass_pc, pass_haz;
  always_comb begin
    pass_pc  = (ch.st == ST_PC) && (ch.c == aauc);
    pass_haz = ((ch.st == ST_ID)  && (ch.c.ex == aauc.ex) && (ch.c.mem == aauc.mem)) ||
               ((ch.st == ST_EX)  && (ch.c.mem == aauc.mem)) ||
               (ch.st == ST_MEM);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      aauc     <= '0;
      busy     <= 1'b0;
      npc_pend <= 1'b0;
      cp0_pend <= 1'b0;
      npc_r    <= '0;
      cp0w_r   <= '0;
    end else if (!busy) begin
      if (ch_valid && (pass_pc || pass_haz)) begin
        busy     <= 1'b1;
        npc_pend <= 1'b1;
        if (pass_haz) aauc <= ch.c;
        if (pass_haz && ch.enj) begin
          npc_r    <= '{c: ch.c, a: EXC_VECTOR};
          cp0w_r   <= '{data: ch.a, a: CP0_CAUSE, cmd: CP0_EXC};
          cp0_pend <= 1'b1;
        end else begin
          npc_r <= '{c: ch.c, a: ch.a};
        end
      end
    end else begin
      if (npc_pend && npc_ready) npc_pend <= 1'b0;
      if (cp0_pend && cp0w2_ready) cp0_pend <= 1'b0;
      if ((!npc_pend || npc_ready) && (!cp0_pend || cp0w2_ready)) busy <= 1'b0;
    end
  end
endmodule
