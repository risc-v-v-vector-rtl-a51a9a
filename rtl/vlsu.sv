// vlsu: vector load/store unit.
//
// Moves unit-stride vectors between memory and the register file one
// DLEN-bit beat per cycle, matching the paper's 32-bit load/store bandwidth
// and 1-cycle load latency: a load beat requested in cycle t is returned by
// memory in cycle t+1 and written to the register file in that same cycle,
// so a chained consumer can read it from cycle t+2.
//
// Each beat g of an instruction covers bytes [g*DLEN/8, (g+1)*DLEN/8) of the
// vector and register-file chunk vd*CPR + g. Bytes at or beyond vl*EEW/8 are
// neither written to memory nor to the register file (tail undisturbed).
//
// Memory port (this design's choice): a simple synchronous SRAM-style port,
// always ready: mem_req with mem_we/mem_addr/mem_wdata/mem_be in cycle t, and
// for reads mem_rdata valid in cycle t+1. The base address must be aligned to
// DLEN/8 bytes; the paper's kernels only use such addresses.
//
// Sequencing and the hazard masks come from vfu_seq; the unit advances when
// the chaining controller grants `go`. A returning load beat is visible to
// readers in the cycle it is written (register-file bypass), so the unit has
// no result in flight that readers must wait for and no pipe_wr output.
module vlsu
  import rvv_pkg::*;
#(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32,
  localparam int unsigned CPR      = VLEN / DLEN,
  localparam int unsigned NCH      = NUM_VREGS * CPR,
  localparam int unsigned CW       = $clog2(NCH),
  localparam int unsigned DB       = DLEN / 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // dispatch
  input  logic                start,
  input  uop_t                uop_in,
  // chaining controller
  input  logic                go,
  output logic                active,
  output logic                last,
  output logic [NCH-1:0]      rd_now,
  output logic [NCH-1:0]      wr_now,
  output logic [NCH-1:0]      rd_fut,
  output logic [NCH-1:0]      wr_fut,
  output logic [NCH-1:0]      wr_all,
  output logic                q_valid,
  output logic [NCH-1:0]      q_rd,
  output logic [NCH-1:0]      q_wr,
  // register file
  output logic [CW-1:0]       vrf_raddr,
  input  logic [DLEN-1:0]     vrf_rdata,
  output logic                vrf_we,
  output logic [CW-1:0]       vrf_waddr,
  output logic [DLEN-1:0]     vrf_wdata,
  output logic [DB-1:0]       vrf_wbe,
  // memory
  output logic                mem_req,
  output logic                mem_we,
  output logic [XLEN-1:0]     mem_addr,
  output logic [DLEN-1:0]     mem_wdata,
  output logic [DB-1:0]       mem_be,
  input  logic [DLEN-1:0]     mem_rdata
);

  uop_t            uop;
  logic [VL_W-1:0] grp;
  logic            done;
  logic [CW-1:0]   a_vs1, a_vs2_0, a_vs2_1, a_vd_0, a_vd_1;

  vfu_seq #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN)) u_seq (
    .clk, .rst_n, .start, .uop_in, .go,
    .active, .uop, .grp, .done,
    .a_vs1, .a_vs2_0, .a_vs2_1, .a_vd_0, .a_vd_1,
    .rd_now, .wr_now, .rd_fut, .wr_fut, .wr_all, .q_valid, .q_rd, .q_wr
  );

  assign last = (grp == uop.ngroups - 1'b1);

  // byte enables of the current beat: bytes below vl*EEW/8
  logic [DB-1:0]   be;
  logic [VL_W+3:0] nbytes;
  always_comb begin
    nbytes = (VL_W+4)'(uop.vl) << uop.sew;
    for (int b = 0; b < DB; b++)
      be[b] = ((VL_W+4)'(grp) * DB + b) < nbytes;
  end

  assign vrf_raddr = a_vd_0;
  assign mem_req   = go;
  assign mem_we    = (uop.op == OP_STORE);
  assign mem_addr  = uop.scalar + XLEN'(grp) * DB;
  assign mem_wdata = vrf_rdata;
  assign mem_be    = be;

  // one-stage load return
  logic            ld_v;
  logic [CW-1:0]   ld_chunk;
  logic [DB-1:0]   ld_be;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_v     <= 1'b0;
      ld_chunk <= '0;
      ld_be    <= '0;
    end else begin
      ld_v     <= go && (uop.op == OP_LOAD);
      ld_chunk <= a_vd_0;
      ld_be    <= be;
    end
  end

  assign vrf_we    = ld_v;
  assign vrf_waddr = ld_chunk;
  assign vrf_wdata = mem_rdata;
  assign vrf_wbe   = ld_be;

  // unused sequencer outputs (the unit has a single register operand)
  logic unused;
  assign unused = ^{a_vs1, a_vs2_0, a_vs2_1, a_vd_1, done};

endmodule
