// vmac: vector multiply-accumulate unit.
//
// Processes one group per cycle: the DLEN/SEW elements of one DLEN chunk of
// narrow source operands. The widening multiply-accumulate vwmacc(u) reads a
// chunk pair of 2*SEW accumulators and writes the updated pair back, so the
// unit produces a double-wide result every cycle (the paper's "M:vN:0,vN:1"
// writes). Latency from operand read to register write is LAT = 5 cycles
// (paper: 5 cycles for multiply-accumulate); throughput one group per cycle.
//
// Operations (x = vs1 element or the scalar rs1, y = vs2 element):
//   OP_MUL    vd = low SEW bits of x*y
//   OP_MACC   vd = vd + x*y (low SEW bits)
//   OP_WMACC  vd(2*SEW) = vd + sext(x)*sext(y)
//   OP_WMACCU vd(2*SEW) = vd + zext(x)*zext(y)
// Elements at index >= vl keep their old value (byte enables).
//
// The accumulator is read in the same cycle as the multiplicands, so a
// vwmacc that depends on the previous vwmacc's result (same accumulator
// registers) waits until that result is written. The arithmetic is done in
// the read cycle and the result then travels through LAT register stages
// (vwb_pipe); the stage split is left to retiming.
module vmac
  import rvv_pkg::*;
#(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32,
  parameter int unsigned LAT       = 5,
  localparam int unsigned CPR      = VLEN / DLEN,
  localparam int unsigned NCH      = NUM_VREGS * CPR,
  localparam int unsigned CW       = $clog2(NCH),
  localparam int unsigned DB       = DLEN / 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  uop_t                   uop_in,
  input  logic                   go,
  output logic                   active,
  output logic                   last,
  output logic [NCH-1:0]         rd_now,
  output logic [NCH-1:0]         wr_now,
  output logic [NCH-1:0]         rd_fut,
  output logic [NCH-1:0]         wr_fut,
  output logic [NCH-1:0]         wr_all,
  output logic                   q_valid,
  output logic [NCH-1:0]         q_rd,
  output logic [NCH-1:0]         q_wr,
  output logic [NCH-1:0]         pipe_wr,
  // register file: read ports vs1, vs2, vd (low), vd (high)
  output logic [3:0][CW-1:0]     vrf_raddr,
  input  logic [3:0][DLEN-1:0]   vrf_rdata,
  output logic [1:0]             vrf_we,
  output logic [1:0][CW-1:0]     vrf_waddr,
  output logic [1:0][DLEN-1:0]   vrf_wdata,
  output logic [1:0][DB-1:0]     vrf_wbe
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
  assign vrf_raddr[0] = a_vs1;
  assign vrf_raddr[1] = a_vs2_0;
  assign vrf_raddr[2] = a_vd_0;
  assign vrf_raddr[3] = a_vd_1;

  function automatic logic [63:0] fmask(int unsigned bits);
    return (bits >= 64) ? '1 : ((64'd1 << bits) - 64'd1);
  endfunction

  function automatic logic [63:0] ext(logic [63:0] v, int unsigned bits, logic sgn);
    automatic logic [63:0] m;
    m = fmask(bits);
    return (sgn && v[bits-1]) ? (v | ~m) : (v & m);
  endfunction

  logic [2*DLEN-1:0] res;
  logic [2*DB-1:0]   res_be;

  always_comb begin
    automatic int unsigned sb, n, ob;
    automatic logic [2*DLEN-1:0] acc;
    automatic logic [63:0] x, y, a, r;
    sb  = sew_bits(uop.sew);
    n   = DLEN / sb;
    ob  = uop.wide_vd ? 2 * sb : sb;
    acc = {vrf_rdata[3], vrf_rdata[2]};
    res    = '0;
    res_be = '0;
    for (int unsigned i = 0; i < DLEN / 8; i++) begin
      if (i < n) begin
        x = uop.use_scalar ? 64'(uop.scalar) : 64'(vrf_rdata[0] >> (i * sb));
        x = ext(x, sb, uop.sign_ext);
        y = ext(64'(vrf_rdata[1] >> (i * sb)), sb, uop.sign_ext);
        a = 64'(acc >> (i * ob)) & fmask(ob);
        unique case (uop.op)
          OP_MUL:  r = x * y;
          default: r = a + x * y;   // OP_MACC, OP_WMACC, OP_WMACCU
        endcase
        res |= (2*DLEN)'(r & fmask(ob)) << (i * ob);
        if ((VL_W+4)'(grp) * n + i < (VL_W+4)'(uop.vl))
          res_be |= (2*DB)'(fmask(ob / 8)) << (i * ob / 8);
      end
    end
  end

  vwb_pipe #(.LAT(LAT), .NCH(NCH), .DLEN(DLEN)) u_pipe (
    .clk, .rst_n,
    .in_valid(go), .in_wide(uop.wide_vd), .in_addr(a_vd_0),
    .in_data(res), .in_be(res_be),
    .we(vrf_we), .waddr(vrf_waddr), .wdata(vrf_wdata), .wbe(vrf_wbe),
    .pipe_wr
  );

  logic unused;
  assign unused = ^{a_vs2_1, done};

endmodule
