// samips_top -- SAMIPS: asynchronous-style five-stage MIPS pipeline, top level.
//
// Connects the pipeline units with handshake channels (valid/ready, a transfer happens on a
// rising clock edge with both high). Channel names follow the paper's block diagram:
//   PC --CInsAdd--> instruction memory --CIns--> DeCode
//   PC --PCvalue--> ADD4 --PCplus4--> Arb1 --NTarget1--> AAU --NPC--> PC
//                        --BaseAddID--> DeCode
//   MemInt --MEMch--> Arb1;  EXEunit --EXch--> Arb2;  DeCode --IDch--> Arb2 --NTarget2--> AAU
//   AAU --CP0W2--> CP0;  WBUnit --CP0W1--> CP0
//   DeCode --RegRead--> RegBank --ReadData0/1--> Mux1/Mux2 --Op0/Op1--> EXEunit
//   RegBank --FRACtrl/FWCtrl--> FWunit --FOp0/FOp1--> Mux1/Mux2
//   RegBank --PIDRd--> Mux3 <--FOp2-- FWunit, Mux3 --> EXEunit (old destination value)
//   DeCode --EXCtrl--> EXEunit;  DeCode --CP0RAdd--> CP0
//   CP0 --CP0RData--> EXEunit;  EXEunit --MEMCtrl/EXRes/MemD/EXRd--> MemInt
//   MemInt --FEXRes--> FWunit;  MemInt --MemAdd/WriteData--> data memory --ReadData--> MemInt
//   MemInt --WBCtrl/MEMRes/MEMRd--> WBUnit --RegWrite--> RegBank;  WBUnit --FMEMRes--> FWunit
// The arbiters and operand merges (Arb1, Arb2, Mux1, Mux2, Mux3) are samips_arb instances with
// fixed priority (MEMch over PCplus4, EXch over IDch; the RegBank and FWunit never offer the
// same operand at the same time). PCplus4 enters Arb1 as a hazard-type request from the PC
// "stage" so that the AAU handles all next-address sources alike.
// Memories are outside: the instruction memory returns the instruction with the colour of
// its address; the data memory answers reads only. All ports are plain signals; the CP0
// registers and the AAU colour are brought out for observation.
module samips_top
  import samips_pkg::*;
#(
  parameter logic [31:0] RESET_PC   = 32'h0000_0000,
  parameter logic [31:0] EXC_VECTOR = 32'h8000_0080
) (
  input  logic        clk,
  input  logic        rst,
  // instruction memory
  output logic        imem_req_valid,
  input  logic        imem_req_ready,
  output logic [31:0] imem_req_addr,
  output logic [2:0]  imem_req_colour,
  input  logic        imem_rsp_valid,
  output logic        imem_rsp_ready,
  input  logic [31:0] imem_rsp_ins,
  input  logic [2:0]  imem_rsp_colour,
  // data memory
  output logic        dmem_add_valid,
  input  logic        dmem_add_ready,
  output logic        dmem_add_write,
  output logic [2:0]  dmem_add_dtype,
  output logic [31:0] dmem_add_addr,
  output logic        dmem_wdata_valid,
  input  logic        dmem_wdata_ready,
  output logic [31:0] dmem_wdata,
  input  logic        dmem_rdata_valid,
  output logic        dmem_rdata_ready,
  input  logic [31:0] dmem_rdata,
  // observation
  output logic [31:0] cp0_status,
  output logic [31:0] cp0_cause,
  output logic [31:0] cp0_epc,
  output logic [2:0]  aau_colour
);
  // ---------------------------------------------------------------- channels
  logic npc_v, npc_r;            pcv_t npc_d;
  logic cia_v, cia_r;            pcv_t cia_d;
  logic pcv_v, pcv_r;            pcv_t pcv_d;
  logic p4_v, p4_r;              pcv_t p4_d;
  logic bid_v;                   logic [31:0] bid_d;
  logic id_in_r;
  logic nt1_v, nt1_r;            haz_t nt1_d;
  logic nt2_v, nt2_r;            haz_t nt2_d;
  logic memch_v, memch_r;        haz_t memch_d;
  logic exch_v, exch_r;          haz_t exch_d;
  logic idch_v, idch_r;          haz_t idch_d;
  logic p4h_r;                   haz_t p4h_d;
  logic cp0w2_v, cp0w2_r;        cp0w_t cp0w2_d;
  logic cp0w1_v, cp0w1_r;        cp0w_t cp0w1_d;
  logic rr_v, rr_r;              rr_t rr_d;
  logic exc_v, exc_r;            id2ex_t exc_d;
  logic cra_v, cra_r;            logic [4:0] cra_d;
  logic crd_v, crd_r;            logic [31:0] crd_d;
  logic rw_v, rw_r;              rw_t rw_d;
  logic fra_v, fra_r;            fractrl_t fra_d;
  logic fw_v, fw_r;              fwctrl_t fw_d;
  logic rd0_v, rd0_r;            logic [31:0] rd0_d;
  logic rd1_v, rd1_r;            logic [31:0] rd1_d;
  logic pid_v, pid_r;            logic [31:0] pid_d;
  logic fop2_v, fop2_r;          logic [31:0] fop2_d;
  logic old_v, old_r;            logic [31:0] old_d;
  logic fop0_v, fop0_r;          logic [31:0] fop0_d;
  logic fop1_v, fop1_r;          logic [31:0] fop1_d;
  logic op0_v, op0_r;            logic [31:0] op0_d;
  logic op1_v, op1_r;            logic [31:0] op1_d;
  logic fex_v, fex_r;            logic [31:0] fex_d;
  logic fmem_v, fmem_r;          logic [31:0] fmem_d;
  logic em_v, em_r;              ex2mem_t em_d;
  logic mw_v, mw_r;              mem2wb_t mw_d;
  logic madd_v;                  memadd_t madd_d;
  logic user_mode;
  colour_t aauc;
  pcv_t cins_d;

  // ---------------------------------------------------------------- fetch
  samips_pc #(.RESET_PC(RESET_PC)) u_pc (
    .clk, .rst,
    .npc_valid(npc_v), .npc_ready(npc_r), .npc(npc_d),
    .cinsadd_valid(cia_v), .cinsadd_ready(cia_r), .cinsadd(cia_d),
    .pcvalue_valid(pcv_v), .pcvalue_ready(pcv_r), .pcvalue(pcv_d));

  assign imem_req_valid  = cia_v;
  assign cia_r           = imem_req_ready;
  assign imem_req_addr   = cia_d.a;
  assign imem_req_colour = cia_d.c;
  assign cins_d          = '{c: imem_rsp_colour, a: imem_rsp_ins};
  assign imem_rsp_ready  = id_in_r;

  samips_add4 u_add4 (
    .clk, .rst,
    .pcvalue_valid(pcv_v), .pcvalue_ready(pcv_r), .pcvalue(pcv_d),
    .pcplus4_valid(p4_v), .pcplus4_ready(p4_r), .pcplus4(p4_d),
    .baseaddid_valid(bid_v), .baseaddid_ready(id_in_r), .baseaddid(bid_d));

  assign p4h_d = '{c: p4_d.c, st: ST_PC, enj: 1'b0, a: p4_d.a};
  assign p4_r  = p4h_r;

  samips_arb #(.T(haz_t)) u_arb1 (
    .a_valid(memch_v), .a_ready(memch_r), .a_data(memch_d),
    .b_valid(p4_v),    .b_ready(p4h_r),   .b_data(p4h_d),
    .y_valid(nt1_v),   .y_ready(nt1_r),   .y_data(nt1_d));

  samips_arb #(.T(haz_t)) u_arb2 (
    .a_valid(exch_v),  .a_ready(exch_r),  .a_data(exch_d),
    .b_valid(idch_v),  .b_ready(idch_r),  .b_data(idch_d),
    .y_valid(nt2_v),   .y_ready(nt2_r),   .y_data(nt2_d));

  samips_aau #(.EXC_VECTOR(EXC_VECTOR)) u_aau (
    .clk, .rst,
    .nt1_valid(nt1_v), .nt1_ready(nt1_r), .nt1(nt1_d),
    .nt2_valid(nt2_v), .nt2_ready(nt2_r), .nt2(nt2_d),
    .npc_valid(npc_v), .npc_ready(npc_r), .npc(npc_d),
    .cp0w2_valid(cp0w2_v), .cp0w2_ready(cp0w2_r), .cp0w2(cp0w2_d),
    .aauc_o(aauc));
  assign aau_colour = aauc;

  // ---------------------------------------------------------------- decode
  samips_decode u_decode (
    .clk, .rst,
    .cins_valid(imem_rsp_valid), .cins(cins_d),
    .baseaddid_valid(bid_v), .baseaddid(bid_d),
    .in_ready(id_in_r),
    .regread_valid(rr_v), .regread_ready(rr_r), .regread(rr_d),
    .exctrl_valid(exc_v), .exctrl_ready(exc_r), .exctrl(exc_d),
    .idch_valid(idch_v), .idch_ready(idch_r), .idch(idch_d),
    .cp0radd_valid(cra_v), .cp0radd_ready(cra_r), .cp0radd(cra_d));

  samips_regbank u_regbank (
    .clk, .rst,
    .regread_valid(rr_v), .regread_ready(rr_r), .regread(rr_d),
    .regwrite_valid(rw_v), .regwrite_ready(rw_r), .regwrite(rw_d),
    .fractrl_valid(fra_v), .fractrl_ready(fra_r), .fractrl(fra_d),
    .fwctrl_valid(fw_v), .fwctrl_ready(fw_r), .fwctrl(fw_d),
    .rd0_valid(rd0_v), .rd0_ready(rd0_r), .rd0(rd0_d),
    .rd1_valid(rd1_v), .rd1_ready(rd1_r), .rd1(rd1_d),
    .pidrd_valid(pid_v), .pidrd_ready(pid_r), .pidrd(pid_d));

  samips_fwunit u_fwunit (
    .clk, .rst,
    .fractrl_valid(fra_v), .fractrl_ready(fra_r), .fractrl(fra_d),
    .fwctrl_valid(fw_v), .fwctrl_ready(fw_r), .fwctrl(fw_d),
    .fexres_valid(fex_v), .fexres_ready(fex_r), .fexres(fex_d),
    .fmemres_valid(fmem_v), .fmemres_ready(fmem_r), .fmemres(fmem_d),
    .fop0_valid(fop0_v), .fop0_ready(fop0_r), .fop0(fop0_d),
    .fop1_valid(fop1_v), .fop1_ready(fop1_r), .fop1(fop1_d),
    .fop2_valid(fop2_v), .fop2_ready(fop2_r), .fop2(fop2_d));

  samips_arb #(.T(logic [31:0])) u_mux1 (
    .a_valid(rd0_v),  .a_ready(rd0_r),  .a_data(rd0_d),
    .b_valid(fop0_v), .b_ready(fop0_r), .b_data(fop0_d),
    .y_valid(op0_v),  .y_ready(op0_r),  .y_data(op0_d));

  samips_arb #(.T(logic [31:0])) u_mux2 (
    .a_valid(rd1_v),  .a_ready(rd1_r),  .a_data(rd1_d),
    .b_valid(fop1_v), .b_ready(fop1_r), .b_data(fop1_d),
    .y_valid(op1_v),  .y_ready(op1_r),  .y_data(op1_d));

  samips_arb #(.T(logic [31:0])) u_mux3 (
    .a_valid(pid_v),  .a_ready(pid_r),  .a_data(pid_d),
    .b_valid(fop2_v), .b_ready(fop2_r), .b_data(fop2_d),
    .y_valid(old_v),  .y_ready(old_r),  .y_data(old_d));

  // ---------------------------------------------------------------- execute
  samips_exeunit u_exeunit (
    .clk, .rst,
    .exctrl_valid(exc_v), .exctrl_ready(exc_r), .exctrl(exc_d),
    .op0_valid(op0_v), .op0_ready(op0_r), .op0(op0_d),
    .op1_valid(op1_v), .op1_ready(op1_r), .op1(op1_d),
    .pidrd_valid(old_v), .pidrd_ready(old_r), .pidrd(old_d),
    .cp0rdata_valid(crd_v), .cp0rdata_ready(crd_r), .cp0rdata(crd_d),
    .mem_valid(em_v), .mem_ready(em_r), .mem(em_d),
    .exch_valid(exch_v), .exch_ready(exch_r), .exch(exch_d));

  // ---------------------------------------------------------------- memory
  samips_memint u_memint (
    .clk, .rst, .user_mode,
    .in_valid(em_v), .in_ready(em_r), .in(em_d),
    .fexres_valid(fex_v), .fexres_ready(fex_r), .fexres(fex_d),
    .memadd_valid(madd_v), .memadd_ready(dmem_add_ready), .memadd(madd_d),
    .wdata_valid(dmem_wdata_valid), .wdata_ready(dmem_wdata_ready), .wdata(dmem_wdata),
    .rdata_valid(dmem_rdata_valid), .rdata_ready(dmem_rdata_ready), .rdata(dmem_rdata),
    .wb_valid(mw_v), .wb_ready(mw_r), .wb(mw_d),
    .memch_valid(memch_v), .memch_ready(memch_r), .memch(memch_d));

  assign dmem_add_valid = madd_v;
  assign dmem_add_write = madd_d.wr;
  assign dmem_add_dtype = madd_d.dt;
  assign dmem_add_addr  = madd_d.a;

  // ---------------------------------------------------------------- write back
  samips_wbunit u_wbunit (
    .clk, .rst,
    .in_valid(mw_v), .in_ready(mw_r), .in(mw_d),
    .regwrite_valid(rw_v), .regwrite_ready(rw_r), .regwrite(rw_d),
    .fmemres_valid(fmem_v), .fmemres_ready(fmem_r), .fmemres(fmem_d),
    .cp0w1_valid(cp0w1_v), .cp0w1_ready(cp0w1_r), .cp0w1(cp0w1_d));

  samips_cp0 u_cp0 (
    .clk, .rst,
    .cp0w1_valid(cp0w1_v), .cp0w1_ready(cp0w1_r), .cp0w1(cp0w1_d),
    .cp0w2_valid(cp0w2_v), .cp0w2_ready(cp0w2_r), .cp0w2(cp0w2_d),
    .cp0radd_valid(cra_v), .cp0radd_ready(cra_r), .cp0radd(cra_d),
    .cp0rdata_valid(crd_v), .cp0rdata_ready(crd_r), .cp0rdata(crd_d),
    .user_mode,
    .status_o(cp0_status), .cause_o(cp0_cause), .epc_o(cp0_epc));
endmodule
