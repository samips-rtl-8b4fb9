// samips_pkg -- types and constants shared by the SAMIPS pipeline units.
//
// SAMIPS is a five-stage MIPS R3000-compatible processor whose stages talk only over
// handshake channels. This package holds the channel payload types, the control
// encodings of the EX, MEM and WB stages and the helper functions used by several units.
//
// Encodings that follow the paper's tables:
//   * EX control (6 bits): the row of the encoding table is bits 5..3, the column bits 2..0
//     (the decode code tests bits 5..4 = 0 for branches, 1 for ALU, and bits 5..2 = 9 for
//     the constant shifts, which only fits this orientation).
//   * MEM control: a 2-bit access type (READ, WRITE, IMM, NON) and a 3-bit data type
//     (bits 2..1 select word/half/byte, bit 0 the variant).
//   * WB control: a 2-bit wNe field (NUN, EXC, W(rite), R(eset)) and a cNp bit
//     (0 = coprocessor operation, 1 = CPU operation).
//   * Colour vector: one bit each for the ID, EX and MEM stages (the three stages that can
//     raise a control hazard); MEM has the highest priority.
//   * Cause ExcCode values: AdEL 4, AdES 5, Sys 8, Bp 9, RI 10, Ov 12.
// Design choices of this implementation (not from the paper): the stage numbers
// (PC 0, ID 1, EX 2, MEM 3), the CP0 write command encoding, and bundling the values
// that one unit always sends together to one other unit into a single struct channel.
package samips_pkg;

  typedef struct packed {
    logic mem;
    logic ex;
    logic id;
  } colour_t;

  typedef enum logic [1:0] {ST_PC = 2'd0, ST_ID = 2'd1, ST_EX = 2'd2, ST_MEM = 2'd3} stage_e;

  // Coloured address or instruction word (PCvalue, PCplus4, NPC, CInsAdd, CIns).
  typedef struct packed {
    colour_t     c;
    logic [31:0] a;
  } pcv_t;

  // Control hazard report (IDch, EXch, MEMch, NTarget1/2).  For an exception the
  // address field carries the Cause value (ExcCode in bits 6..2).
  typedef struct packed {
    colour_t     c;
    stage_e      st;
    logic        enj;   // 1 = exception, 0 = branch/jump
    logic [31:0] a;
  } haz_t;

  typedef enum logic [5:0] {
    OP_BEQ   = 6'o00, OP_BNE  = 6'o01, OP_BGTZ = 6'o02, OP_BLEZ = 6'o03,
    OP_BLTZ  = 6'o04, OP_BLTZAL = 6'o05, OP_BGEZ = 6'o06, OP_BGEZAL = 6'o07,
    OP_JR    = 6'o11, OP_JALR = 6'o12, OP_JAL  = 6'o13,
    OP_ADD   = 6'o20, OP_SUB  = 6'o21, OP_ADDU = 6'o22, OP_SUBU = 6'o23,
    OP_AND   = 6'o24, OP_OR   = 6'o25, OP_XOR  = 6'o26, OP_NOR  = 6'o27,
    OP_EXC   = 6'o30, OP_EXCS = 6'o31, OP_MA   = 6'o32, OP_COR  = 6'o33,
    OP_SLTU  = 6'o34, OP_SLT  = 6'o35,
    OP_SLLV  = 6'o40, OP_SRLV = 6'o41, OP_SRAV = 6'o42, OP_NOP  = 6'o43,
    OP_SLL   = 6'o44, OP_SRL  = 6'o45, OP_SRA  = 6'o46,
    OP_MULTU = 6'o60, OP_MULT = 6'o61, OP_DIVU = 6'o62, OP_DIV  = 6'o63,
    OP_MTHI  = 6'o64, OP_MTLO = 6'o65, OP_MFHI = 6'o66, OP_MFLO = 6'o67
  } ex_op_e;

  typedef enum logic [1:0] {ACC_READ = 2'b00, ACC_WRITE = 2'b01, ACC_IMM = 2'b10, ACC_NON = 2'b11} acc_e;

  localparam logic [2:0] DT_W  = 3'b001, DT_WL = 3'b010, DT_WR = 3'b011,
                         DT_HS = 3'b100, DT_HU = 3'b101, DT_BS = 3'b110, DT_BU = 3'b111;

  typedef enum logic [1:0] {WNE_NUN = 2'b00, WNE_EXC = 2'b01, WNE_W = 2'b10, WNE_R = 2'b11} wne_e;

  typedef struct packed {
    ex_op_e     ex;
    acc_e       acc;
    logic [2:0] dt;
    wne_e       wne;
    logic       cnp;   // 1 = CPU, 0 = CP0
  } ctrl_t;

  // DeCode -> EXEunit: EXCtrl with Offset32, Sa, CIDRd, BaseAddEX and the colour.
  typedef struct packed {
    ctrl_t       ctrl;
    colour_t     c;
    logic        bd;     // instruction sits in a branch delay slot
    logic [31:0] base;   // PC + 4 of the instruction
    logic [31:0] off;    // Offset32
    logic [4:0]  sa;
    logic [4:0]  cp0rd;  // CIDRd
    logic [4:0]  wno;    // destination CPU register (0: none)
  } id2ex_t;

  typedef struct packed {
    logic [4:0] rno0;
    logic [4:0] rno1;
    logic [4:0] wno;
  } rr_t;

  typedef struct packed {
    logic        rnw;    // 1 = write the register, 0 = only clear the hazard entry
    logic [4:0]  rd;
    logic [31:0] data;
  } rw_t;

  // EXRd / MEMRd: destination register with its value before the instruction.
  typedef struct packed {
    logic [4:0]  rd;
    logic [31:0] data;
  } rd_t;

  typedef enum logic [1:0] {FW_NON = 2'd0, FW_EXR = 2'd1, FW_MEMR = 2'd2, FW_WBR = 2'd3} fwcase_e;

  // c2 is the case of the destination register: its value before the instruction (the
  // old value a cancelled instruction must leave behind) is obtained like an operand.
  typedef struct packed {
    fwcase_e c2;
    fwcase_e c1;
    fwcase_e c0;
  } fwctrl_t;

  typedef struct packed {
    logic exa;    // FEXRes will arrive (previous instruction writes a register)
    logic mema;   // FMEMRes will arrive (instruction before that writes a register)
  } fractrl_t;

  // EXEunit -> MemInt: MEMCtrl with EXRes, MemD and EXRd.
  typedef struct packed {
    acc_e        acc;
    logic [2:0]  dt;
    wne_e        wne;
    logic        cnp;
    colour_t     c;
    logic        bd;
    logic [31:0] base;
    logic [31:0] res;
    logic [31:0] memd;
    rd_t         rd;
  } ex2mem_t;

  typedef struct packed {
    logic        wr;
    logic [2:0]  dt;
    logic [31:0] a;
  } memadd_t;

  // MemInt -> WBUnit: WBCtrl with MEMRes and MEMRd.
  typedef struct packed {
    wne_e        wne;
    logic        cnp;
    logic [31:0] res;
    rd_t         rd;
  } mem2wb_t;

  typedef enum logic [1:0] {CP0_WRITE = 2'd0, CP0_EXC = 2'd1, CP0_RFE = 2'd2} cp0cmd_e;

  typedef struct packed {
    logic [31:0] data;
    logic [4:0]  a;
    cp0cmd_e     cmd;
  } cp0w_t;

  localparam logic [4:0] EXC_ADEL = 5'd4, EXC_ADES = 5'd5, EXC_SYS = 5'd8,
                         EXC_BP = 5'd9, EXC_RI = 5'd10, EXC_OV = 5'd12;

  localparam logic [4:0] CP0_STATUS = 5'd12, CP0_CAUSE = 5'd13, CP0_EPC = 5'd14;

  // An instruction writes (or must release) a CPU register unless it is a CP0 write.
  function automatic logic cpu_write(wne_e wne, logic cnp);
    return wne[1] && !(wne == WNE_W && !cnp);
  endfunction

  // Value written back or forwarded: the old register value for a cancelled write.
  function automatic logic [31:0] wb_value(wne_e wne, logic [31:0] res, logic [31:0] old);
    return (wne == WNE_R) ? old : res;
  endfunction

  function automatic logic [31:0] cause_value(logic [4:0] code);
    return {25'd0, code, 2'b00};
  endfunction

endpackage
