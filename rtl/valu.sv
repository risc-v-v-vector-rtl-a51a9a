// valu: vector integer ALU.
//
// Processes one group per cycle: the DLEN/SEW elements of one DLEN chunk of
// narrow operands. Non-widening results fill one chunk; widening results
// (vwadd(u), vwsub(u) and their .w forms) are 2*SEW wide and fill
// a chunk pair, so the unit writes double-wide results each cycle, as the
// paper's accumulation kernel assumes. Latency from operand read to register
// write is LAT = 3 cycles (paper: 3 cycles for ALU operations); throughput is
// one group per cycle.
//
// Operations (vd = result, x = vs1 element or scalar/immediate):
//   OP_ADD  vd = vs2 + x     OP_SUB vd = vs2 - x     OP_RSUB vd = x - vs2
//   OP_MV   vd = x           OP_AND/OR/XOR  bitwise vs2 op x
//   OP_SLL/SRL/SRA  vs2 shifted by x mod SEW (SRA arithmetic)
//   OP_MIN/MAX (signed), OP_MINU/MAXU (unsigned) of vs2 and x
//   OP_WADD vd = sext(vs2) + sext(x), or vs2 + sext(x) when vs2 is wide
//   OP_WSUB vd = sext(vs2) - sext(x), or vs2 - sext(x) when vs2 is wide
//   OP_WADDU/OP_WSUBU as above with zero extension
// Operands are sign-extended to 64 bits when uop.sign_ext is set (vmin,
// vmax, vsra and the signed widening forms) and zero-extended otherwise.
// The paper names only the widening add; the other operations are the
// common RVV integer ALU instructions with the same latency.
// Elements at index >= vl keep their old value (byte enables).
//
// The arithmetic is done in the read cycle and the result then travels
// through LAT register stages (vwb_pipe); a synthesis tool with retiming can
// spread the logic over them. The operand ports read the register file
// combinationally at the addresses given by the sequencer.
module valu
  import rvv_pkg::*;
#(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32,
  parameter int unsigned LAT       = 3,
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
  // register file: read ports vs1, vs2 (low), vs2 (high)
  output logic [2:0][CW-1:0]     vrf_raddr,
  input  logic [2:0][DLEN-1:0]   vrf_rdata,
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
  assign vrf_raddr[2] = a_vs2_1;

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
    automatic logic [2*DLEN-1:0] a_vs2w;
    automatic logic [63:0] x, y, r;
    automatic logic [5:0]  sh;
    sb = sew_bits(uop.sew);
    n  = DLEN / sb;
    ob = uop.wide_vd ? 2 * sb : sb;
    a_vs2w = {vrf_rdata[2], vrf_rdata[1]};
    res    = '0;
    res_be = '0;
    for (int unsigned i = 0; i < DLEN / 8; i++) begin
      if (i < n) begin
        x = uop.use_scalar ? 64'(uop.scalar) : 64'(vrf_rdata[0] >> (i * sb));
        x = ext(x, sb, uop.sign_ext);
        if (uop.wide_vs2) y = 64'(a_vs2w >> (i * 2 * sb)) & fmask(2 * sb);
        else              y = ext(64'(vrf_rdata[1] >> (i * sb)), sb, uop.sign_ext);
        sh = x[5:0] & 6'(sb - 1);
        unique case (uop.op)
          OP_SUB, OP_WSUB, OP_WSUBU: r = y - x;
          OP_RSUB: r = x - y;
          OP_MV:   r = x;
          OP_AND:  r = y & x;
          OP_OR:   r = y | x;
          OP_XOR:  r = y ^ x;
          OP_SLL:  r = y << sh;
          // y is zero-extended for vsrl and sign-extended for vsra
          OP_SRL, OP_SRA: r = 64'($signed(y) >>> sh);
          OP_MIN:  r = ($signed(y) < $signed(x)) ? y : x;
          OP_MINU: r = (y < x) ? y : x;
          OP_MAX:  r = ($signed(y) > $signed(x)) ? y : x;
          OP_MAXU: r = (y > x) ? y : x;
          default: r = y + x;   // OP_ADD, OP_WADD, OP_WADDU
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
  assign unused = ^{a_vd_1, done};

endmodule
