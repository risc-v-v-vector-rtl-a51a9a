// rvv_vector_unit: small RVV vector unit with a reduced vector register file.
//
// A Zve64x-style vector coprocessor for an in-order 32-bit RISC-V core, in the
// embedded-DSP configuration the paper studies: VLEN = 64, DLEN = 32, a 32-bit
// load/store path, and NUM_VREGS = 16 architectural vector registers instead
// of the 32 that RVV 1.0 requires (8 is the other option the paper proposes).
// Instructions keep the standard encoding; a register group that reaches past
// the last register is an illegal instruction.
//
// Structure:
//   vissue  - takes one instruction per cycle from the scalar core, runs
//             vset*, decodes (vdecode) and dispatches in program order
//   vchain  - chunk-level chaining/hazard control between the units
//   vlsu    - unit-stride loads/stores, one 32-bit beat per cycle, latency 1
//   valu    - add/sub/move and widening add, one chunk per cycle, latency 3
//   vmac    - multiply and (widening) multiply-accumulate, latency 5
//   vrf     - NUM_VREGS x VLEN register file in DLEN chunks,
//             8 read ports (1 LSU, 3 ALU, 4 MAC) and 5 write ports (1+2+2)
// Each unit works through an instruction one DLEN chunk ("group") per cycle,
// so with LMUL*VLEN/DLEN groups an instruction keeps its unit busy for several
// cycles while the single issue slot feeds the other units; the chaining
// controller lets them overlap on the same registers chunk by chunk.
//
// Interface: the scalar core presents insn/rs1/rs2 with insn_valid and
// waits for insn_ready; vset* results come back on res_valid/res_data and
// rejected instructions on `illegal` (both one cycle after acceptance).
// `busy` is high while any vector instruction is still executing; the core
// must wait for !busy before reading memory written by vector stores.
// mem_* is a 32-bit SRAM-style port with read data one cycle after the
// request. `dbg` reports per-cycle chaining events and stalls.
module rvv_vector_unit
  import rvv_pkg::*;
#(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32,
  parameter int unsigned ALU_LAT   = 3,
  parameter int unsigned MAC_LAT   = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction interface from the scalar core
  input  logic              insn_valid,
  output logic              insn_ready,
  input  logic [31:0]       insn,
  input  logic [XLEN-1:0]   rs1,
  input  logic [XLEN-1:0]   rs2,
  output logic              res_valid,
  output logic [XLEN-1:0]   res_data,
  output logic              illegal,
  output logic              busy,
  // data memory
  output logic              mem_req,
  output logic              mem_we,
  output logic [XLEN-1:0]   mem_addr,
  output logic [DLEN-1:0]   mem_wdata,
  output logic [DLEN/8-1:0] mem_be,
  input  logic [DLEN-1:0]   mem_rdata,
  // observation
  output chain_dbg_t        dbg
);

  localparam int unsigned CPR = VLEN / DLEN;
  localparam int unsigned NCH = NUM_VREGS * CPR;
  localparam int unsigned CW  = $clog2(NCH);
  localparam int unsigned DB  = DLEN / 8;
  localparam int unsigned NRP = 8;
  localparam int unsigned NWP = 5;

  // dispatch
  logic           disp_valid;
  fu_e            disp_fu;
  uop_t           disp_uop;
  logic [NCH-1:0] disp_dst;
  logic           waw_hazard;
  logic [NFU-1:0] fu_free;
  logic [NFU-1:0] start;

  // unit status
  logic [NFU-1:0]           active, last, go;
  logic [NFU-1:0][NCH-1:0]  rd_now, wr_now, rd_fut, wr_fut, wr_all, pipe_wr;
  logic [NFU-1:0]           q_valid;
  logic [NFU-1:0][NCH-1:0]  q_rd, q_wr;

  // register file ports
  logic [NRP-1:0][CW-1:0]   raddr;
  logic [NRP-1:0][DLEN-1:0] rdata;
  logic [NWP-1:0]           we;
  logic [NWP-1:0][CW-1:0]   waddr;
  logic [NWP-1:0][DLEN-1:0] wdata;
  logic [NWP-1:0][DB-1:0]   wbe;

  logic [VL_W-1:0] vl_o;
  logic [7:0]      vtype_o;
  logic            vill_o;

  vissue #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN)) u_issue (
    .clk, .rst_n,
    .in_valid(insn_valid), .in_ready(insn_ready), .in_insn(insn),
    .in_rs1(rs1), .in_rs2(rs2),
    .res_valid, .res_data, .illegal,
    .disp_valid, .disp_fu, .disp_uop, .disp_dst, .waw_hazard, .fu_free,
    .vl_o, .vtype_o, .vill_o,
    .waw_stall(dbg.waw_stall), .fu_stall(dbg.fu_stall)
  );

  always_comb begin
    for (int f = 0; f < NFU; f++) start[f] = disp_valid && (disp_fu == fu_e'(f));
  end

  vchain #(.NCH(NCH)) u_chain (
    .clk, .rst_n, .active, .rd_now, .wr_now, .rd_fut, .wr_fut, .wr_all,
    .pipe_wr, .q_valid, .q_rd, .q_wr, .last, .disp_valid, .disp_fu, .disp_dst,
    .waw_hazard, .fu_free, .go,
    .chained(dbg.chained), .raw_stall(dbg.raw_stall), .war_stall(dbg.war_stall)
  );
  assign dbg.go = go;

  vlsu #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN)) u_lsu (
    .clk, .rst_n, .start(start[FU_LSU]), .uop_in(disp_uop), .go(go[FU_LSU]),
    .active(active[FU_LSU]), .last(last[FU_LSU]),
    .rd_now(rd_now[FU_LSU]), .wr_now(wr_now[FU_LSU]), .rd_fut(rd_fut[FU_LSU]),
    .wr_fut(wr_fut[FU_LSU]), .wr_all(wr_all[FU_LSU]),
    .q_valid(q_valid[FU_LSU]), .q_rd(q_rd[FU_LSU]), .q_wr(q_wr[FU_LSU]),
    .vrf_raddr(raddr[0]), .vrf_rdata(rdata[0]),
    .vrf_we(we[0]), .vrf_waddr(waddr[0]), .vrf_wdata(wdata[0]), .vrf_wbe(wbe[0]),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_be, .mem_rdata
  );

  valu #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN), .LAT(ALU_LAT)) u_alu (
    .clk, .rst_n, .start(start[FU_ALU]), .uop_in(disp_uop), .go(go[FU_ALU]),
    .active(active[FU_ALU]), .last(last[FU_ALU]),
    .rd_now(rd_now[FU_ALU]), .wr_now(wr_now[FU_ALU]), .rd_fut(rd_fut[FU_ALU]),
    .wr_fut(wr_fut[FU_ALU]), .wr_all(wr_all[FU_ALU]),
    .q_valid(q_valid[FU_ALU]), .q_rd(q_rd[FU_ALU]), .q_wr(q_wr[FU_ALU]), .pipe_wr(pipe_wr[FU_ALU]),
    .vrf_raddr(raddr[3:1]), .vrf_rdata(rdata[3:1]),
    .vrf_we(we[2:1]), .vrf_waddr(waddr[2:1]), .vrf_wdata(wdata[2:1]), .vrf_wbe(wbe[2:1])
  );

  vmac #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN), .LAT(MAC_LAT)) u_mac (
    .clk, .rst_n, .start(start[FU_MAC]), .uop_in(disp_uop), .go(go[FU_MAC]),
    .active(active[FU_MAC]), .last(last[FU_MAC]),
    .rd_now(rd_now[FU_MAC]), .wr_now(wr_now[FU_MAC]), .rd_fut(rd_fut[FU_MAC]),
    .wr_fut(wr_fut[FU_MAC]), .wr_all(wr_all[FU_MAC]),
    .q_valid(q_valid[FU_MAC]), .q_rd(q_rd[FU_MAC]), .q_wr(q_wr[FU_MAC]), .pipe_wr(pipe_wr[FU_MAC]),
    .vrf_raddr(raddr[7:4]), .vrf_rdata(rdata[7:4]),
    .vrf_we(we[4:3]), .vrf_waddr(waddr[4:3]), .vrf_wdata(wdata[4:3]), .vrf_wbe(wbe[4:3])
  );

  vrf #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN), .NRP(NRP), .NWP(NWP)) u_vrf (
    .clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata, .wbe
  );

  // a load beat is written in the cycle it returns, visible through the
  // register-file bypass: nothing of the load unit is in flight
  assign pipe_wr[FU_LSU] = '0;

  always_comb begin
    busy = |active || |q_valid || |we;
    for (int f = 0; f < NFU; f++) busy |= |pipe_wr[f];
  end

  logic unused;
  assign unused = ^{vl_o, vtype_o, vill_o};

endmodule
