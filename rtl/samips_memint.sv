// samips_memint -- MemInt, the memory interface (MEM stage).
//
// For every instruction from the EXEunit (MEMCtrl, EXRes, MemD, EXRd bundle) the unit:
//  1. sends FEXRes to the FWunit if the instruction writes a CPU register (before any
//     colour check, so the forwarding stream holds one value per writer). The value is
//     EXRes (for a load: the address, MIPS I loads have a delay slot) or, for a cancelled
//     instruction (wNe = R), the old register value;
//  2. checks the colour: only the MEM bit counts (MEM is the deepest hazard source);
//     a mismatching instruction is cancelled (wNe = R for a writer, otherwise no-op);
//  3. for READ/WRITE accesses checks the address (word access not word-aligned, halfword
//     not halfword-aligned, or a kernel address, bit 31 set, in user mode). An error is an
//     exception: MEMch {Cause AdEL/AdES} with the MEM colour bit inverted at once, and the
//     instruction goes on to WB as an EPC write (EPC = BaseAddEX - 4, - 8 in a delay slot);
//  4. otherwise sends MemAdd {write, data type, address} and WriteData (MemD, used by stores
//     and by the LWL/LWR merge) to the data memory and, for a read, waits for ReadData;
//  5. sends WBCtrl, MEMRes, MEMRd to the WBUnit (one bundle); MEMch is posted through a
//     one-place buffer (own choice) so that the unit does not wait for the AAU.
// Timing: one state per step; a non-memory instruction takes 2-3 cycles.
module samips_memint
  import samips_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        user_mode,
  input  logic        in_valid,
  output logic        in_ready,
  input  ex2mem_t     in,
  output logic        fexres_valid,
  input  logic        fexres_ready,
  output logic [31:0] fexres,
  output logic        memadd_valid,
  input  logic        memadd_ready,
  output memadd_t     memadd,
  output logic        wdata_valid,
  input  logic        wdata_ready,
  output logic [31:0] wdata,
  input  logic        rdata_valid,
  output logic        rdata_ready,
  input  logic [31:0] rdata,
  output logic        wb_valid,
  input  logic        wb_ready,
  output mem2wb_t     wb,
  output logic        memch_valid,
  input  logic        memch_ready,
  output haz_t        memch
);
  typedef enum logic [2:0] {S_IN, S_FEX, S_CHK, S_MEM, S_RD, S_OUT} state_e;
  state_e  st;
  ex2mem_t x;
  logic    memc;          // stage colour (MEM bit)
  logic    s_a, s_d;      // MemAdd / WriteData still to send
  logic    p_ch;
  haz_t    ch_r;
  mem2wb_t wb_r;

  wire writer = cpu_write(x.wne, x.cnp);
  assign in_ready     = (st == S_IN);
  assign fexres_valid = (st == S_FEX);
  assign fexres       = wb_value(x.wne, x.res, x.rd.data);
  assign memadd_valid = (st == S_MEM) & s_a;
  assign memadd       = '{wr: x.acc == ACC_WRITE, dt: x.dt, a: x.res};
  assign wdata_valid  = (st == S_MEM) & s_d;
  assign wdata        = x.memd;
  assign rdata_ready  = (st == S_RD);
  assign wb_valid     = (st == S_OUT);
  assign wb           = wb_r;
  assign memch_valid  = p_ch;
  assign memch        = ch_r;

  logic aerr;
  always_comb begin
    aerr = 1'b0;
    if (x.acc == ACC_READ || x.acc == ACC_WRITE) begin
      if (x.dt == DT_W && x.res[1:0] != 2'b00) aerr = 1'b1;
      if ((x.dt == DT_HS || x.dt == DT_HU) && x.res[0]) aerr = 1'b1;
      if (user_mode && x.res[31]) aerr = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IN; x <= '0; memc <= 1'b0; s_a <= 1'b0; s_d <= 1'b0;
      p_ch <= 1'b0; ch_r <= '0; wb_r <= '0;
    end else begin
      if (p_ch && memch_ready) p_ch <= 1'b0;
      unique case (st)
        S_IN: if (in_valid) begin
          x  <= in;
          st <= cpu_write(in.wne, in.cnp) ? S_FEX : S_CHK;
        end
        S_FEX: if (fexres_ready) st <= S_CHK;
        S_CHK: begin
          wb_r <= '{wne: x.wne, cnp: x.cnp, res: x.res, rd: x.rd};
          if (x.c.mem != memc) begin
            wb_r.wne <= writer ? WNE_R : WNE_NUN;
            wb_r.cnp <= 1'b1;
            st <= S_OUT;
          end else if (aerr) begin
            if (!p_ch || memch_ready) begin   // room for the exception report
              colour_t cx;
              cx = x.c; cx.mem = ~memc;
              memc <= ~memc;
              wb_r.wne <= writer ? WNE_R : WNE_EXC;
              wb_r.cnp <= 1'b0;
              wb_r.res <= x.base - (x.bd ? 32'd8 : 32'd4);
              ch_r <= '{c: cx, st: ST_MEM, enj: 1'b1,
                        a: cause_value(x.acc == ACC_WRITE ? EXC_ADES : EXC_ADEL)};
              p_ch <= 1'b1;
              st <= S_OUT;
            end
          end else if (x.acc == ACC_READ || x.acc == ACC_WRITE) begin
            s_a <= 1'b1; s_d <= 1'b1;
            st  <= S_MEM;
          end else st <= S_OUT;
        end
        S_MEM: begin
          if (memadd_ready) s_a <= 1'b0;
          if (wdata_ready)  s_d <= 1'b0;
          if ((!s_a || memadd_ready) && (!s_d || wdata_ready))
            st <= (x.acc == ACC_READ) ? S_RD : S_OUT;
        end
        S_RD: if (rdata_valid) begin
          wb_r.res <= rdata;
          st <= S_OUT;
        end
        S_OUT: if (wb_ready) st <= S_IN;
        default: st <= S_IN;
      endcase
    end
  end
endmodule
