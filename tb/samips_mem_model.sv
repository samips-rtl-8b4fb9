// samips_mem_model -- behavioural instruction and data memory for the SAMIPS testbenches.
//
// Harvard memory: imem and dmem are separate word arrays of 2**(AW) words each. An address
// maps to word index {addr[31], addr[AW-1:2]}, so the user area at 0 and the kernel area at
// 0x8000_0000 (exception vector 0x8000_0080) do not overlap.
// Instruction side: a request {address, colour} is answered with {instruction, colour}
// after a random delay of 0..MAXLAT cycles (MAXLAT = 0: next cycle).
// Data side: MemAdd {write, data type, address} and WriteData are taken together; stores
// update the addressed byte lanes (big-endian), loads return the merged/extended word after
// a fixed delay dlat plus a random delay (LWL/LWR merge the old register value that arrives as WriteData).
// Counters of loads and stores are kept for the testbench.
module samips_mem_model #(
  parameter int AW = 12
) (
  input  logic        clk,
  input  logic        rst,
  input  int unsigned maxlat,
  input  int unsigned dlat,     // extra fixed delay of data reads
  input  logic        ireq_valid,
  output logic        ireq_ready,
  input  logic [31:0] ireq_addr,
  input  logic [2:0]  ireq_colour,
  output logic        irsp_valid,
  input  logic        irsp_ready,
  output logic [31:0] irsp_ins,
  output logic [2:0]  irsp_colour,
  input  logic        dadd_valid,
  output logic        dadd_ready,
  input  logic        dadd_write,
  input  logic [2:0]  dadd_dtype,
  input  logic [31:0] dadd_addr,
  input  logic        dwd_valid,
  output logic        dwd_ready,
  input  logic [31:0] dwd,
  output logic        drd_valid,
  input  logic        drd_ready,
  output logic [31:0] drd,
  output int unsigned n_loads,
  output int unsigned n_stores
);
  logic [31:0] imem [2**AW];
  logic [31:0] dmem [2**AW];

  function automatic int unsigned idx(logic [31:0] a);
    return {a[31], a[AW-1:2]};
  endfunction

  // ---------------- instruction side
  logic        ibusy;
  int unsigned idly;
  assign ireq_ready = ~ibusy;
  always_ff @(posedge clk) begin
    if (rst) begin
      ibusy <= 1'b0; irsp_valid <= 1'b0; idly <= 0; irsp_ins <= '0; irsp_colour <= '0;
    end else begin
      if (ireq_valid && ireq_ready) begin
        ibusy       <= 1'b1;
        idly        <= (maxlat == 0) ? 0 : $urandom_range(maxlat, 0);
        irsp_ins    <= imem[idx(ireq_addr)];
        irsp_colour <= ireq_colour;
      end
      if (ibusy && !irsp_valid) begin
        if (idly == 0) irsp_valid <= 1'b1;
        else idly <= idly - 1;
      end
      if (irsp_valid && irsp_ready) begin
        irsp_valid <= 1'b0;
        ibusy      <= 1'b0;
      end
    end
  end

  // ---------------- data side
  localparam logic [2:0] W = 3'b001, WL = 3'b010, WR = 3'b011, HS = 3'b100, HU = 3'b101,
                         BS = 3'b110, BU = 3'b111;

  function automatic logic [31:0] load(logic [31:0] m, logic [2:0] dt, logic [1:0] o,
                                       logic [31:0] r);
    logic [7:0]  b;
    logic [15:0] h;
    b = m[31 - 8*o -: 8];
    h = o[1] ? m[15:0] : m[31:16];
    case (dt)
      BS: return {{24{b[7]}}, b};
      BU: return {24'd0, b};
      HS: return {{16{h[15]}}, h};
      HU: return {16'd0, h};
      WL: return (m << (8*o)) | (r & ((32'h1 << (8*o)) - 1));
      WR: return (m >> (8*(3-o))) | (r & ~(32'hffff_ffff >> (8*(3-o))));
      default: return m;
    endcase
  endfunction

  function automatic logic [31:0] store(logic [31:0] m, logic [2:0] dt, logic [1:0] o,
                                        logic [31:0] r);
    logic [31:0] x;
    x = m;
    case (dt)
      BS, BU: x[31 - 8*o -: 8] = r[7:0];
      HS, HU: if (o[1]) x[15:0] = r[15:0]; else x[31:16] = r[15:0];
      WL: x = (m & ~(32'hffff_ffff >> (8*o))) | (r >> (8*o));
      WR: x = (m & ~(32'hffff_ffff << (8*(3-o)))) | (r << (8*(3-o)));
      default: x = r;
    endcase
    return x;
  endfunction

  logic        dbusy;
  int unsigned ddly;
  assign dadd_ready = ~dbusy & dadd_valid & dwd_valid;
  assign dwd_ready  = dadd_ready;
  always_ff @(posedge clk) begin
    if (rst) begin
      dbusy <= 1'b0; drd_valid <= 1'b0; ddly <= 0; drd <= '0; n_loads <= 0; n_stores <= 0;
    end else begin
      if (dadd_ready) begin
        if (dadd_write) begin
          dmem[idx(dadd_addr)] <= store(dmem[idx(dadd_addr)], dadd_dtype, dadd_addr[1:0], dwd);
          n_stores <= n_stores + 1;
        end else begin
          dbusy <= 1'b1;
          ddly  <= dlat + ((maxlat == 0) ? 0 : $urandom_range(maxlat, 0));
          drd   <= load(dmem[idx(dadd_addr)], dadd_dtype, dadd_addr[1:0], dwd);
          n_loads <= n_loads + 1;
        end
      end
      if (dbusy && !drd_valid) begin
        if (ddly == 0) drd_valid <= 1'b1;
        else ddly <= ddly - 1;
      end
      if (drd_valid && drd_ready) begin
        drd_valid <= 1'b0;
        dbusy     <= 1'b0;
      end
    end
  end
endmodule
