// samips_wbunit -- WBUnit, the write-back stage.
//
// For each WBCtrl {wNe, cNp}, MEMRes, MEMRd bundle from MemInt:
//   * a CPU register writer (wNe = W with cNp = 1, or wNe = R) sends RegWrite to the
//     RegBank and the same value on FMEMRes to the FWunit. For wNe = R (cancelled
//     instruction) RegWrite only releases the hazard entry (rnw = 0) and the value is the
//     old register value carried in MEMRd;
//   * a coprocessor operation (cNp = 0) sends CP0W1 to CP0:
//       wNe = W        -> MTC0: write MEMRes to CP0 register MEMRd.rd,
//       wNe = EXC or R -> exception: write MEMRes (the EPC) to EPC,
//       wNe = NUN      -> RFE: pop the Status mode stack.
// The three outputs are offered together and complete independently (RegWrite is always
// accepted by the RegBank); the next bundle is taken when all are done.
// Own choice: a cancelled write does not write the old value back (rnw = 0), so that a
// stale old value can never overwrite the result of an earlier instruction.
module samips_wbunit
  import samips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  output logic        in_ready,
  input  mem2wb_t     in,
  output logic        regwrite_valid,
  input  logic        regwrite_ready,
  output rw_t         regwrite,
  output logic        fmemres_valid,
  input  logic        fmemres_ready,
  output logic [31:0] fmemres,
  output logic        cp0w1_valid,
  input  logic        cp0w1_ready,
  output cp0w_t       cp0w1
);
  logic p_rw, p_fm, p_cp;
  rw_t   rw_r;
  cp0w_t cp_r;
  logic [31:0] fm_r;

  assign in_ready       = ~p_rw & ~p_fm & ~p_cp;
  assign regwrite_valid = p_rw; assign regwrite = rw_r;
  assign fmemres_valid  = p_fm; assign fmemres  = fm_r;
  assign cp0w1_valid    = p_cp; assign cp0w1    = cp_r;

  logic [31:0] val;
  assign val = wb_value(in.wne, in.res, in.rd.data);

  always_ff @(posedge clk) begin
    if (rst) begin
      p_rw <= 1'b0; p_fm <= 1'b0; p_cp <= 1'b0; rw_r <= '0; cp_r <= '0; fm_r <= '0;
    end else begin
      if (p_rw && regwrite_ready) p_rw <= 1'b0;
      if (p_fm && fmemres_ready)  p_fm <= 1'b0;
      if (p_cp && cp0w1_ready)    p_cp <= 1'b0;
      if (in_valid && in_ready) begin
        if (cpu_write(in.wne, in.cnp)) begin
          p_rw <= 1'b1;
          p_fm <= 1'b1;
          rw_r <= '{rnw: in.wne == WNE_W, rd: in.rd.rd, data: val};
          fm_r <= val;
        end
        if (!in.cnp) begin
          p_cp <= 1'b1;
          unique case (in.wne)
            WNE_W:   cp_r <= '{data: in.res, a: in.rd.rd, cmd: CP0_WRITE};
            WNE_NUN: cp_r <= '{data: 32'd0,  a: CP0_STATUS, cmd: CP0_RFE};
            default: cp_r <= '{data: in.res, a: CP0_EPC, cmd: CP0_EXC};
          endcase
        end
      end
    end
  end
endmodule
