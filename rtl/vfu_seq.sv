// vfu_seq: per-unit instruction sequencer shared by the three functional units.
//
// A vector instruction occupies its unit for several cycles: the unit steps
// through "groups", one per cycle, each group being one DLEN-wide chunk of
// source elements (for loads/stores: one 32-bit memory beat). For a group g
// the operands live at fixed chunks of the register file:
//   narrow operand in register r : chunk r*CPR + g
//   wide (2*SEW) operand in r    : chunks r*CPR + 2g and r*CPR + 2g + 1
// where CPR = VLEN/DLEN is the number of chunks per register.
//
// The sequencer holds the current uop, advances g whenever the chaining
// controller grants `go`, and publishes chunk bit-masks describing what the
// instruction reads and writes now (this group), in the future (this group and
// all later ones) and in total. The chaining controller (vchain) uses these
// masks to decide when the group may proceed.
//
// A second, queued instruction can be held behind the running one (one-entry
// buffer, q_*), so the dispatcher can hand over the next instruction while
// the unit still works on the current one; it starts the cycle after the
// current instruction's last group. Without this buffer a unit would idle
// for a cycle between back-to-back instructions and the 8-cycle matrix
// multiplication loop could not keep the MAC busy every cycle.
//
// Interface: `start` hands over a new uop and is only allowed while the
// buffer is empty (q_valid low); it goes straight to the current slot when
// that is idle or finishing. `done` is high in the cycle the last group of the
// current instruction goes. q_rd/q_wr are the chunks the queued instruction
// will read/write.
module vfu_seq
  import rvv_pkg::*;
#(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32,
  localparam int unsigned CPR      = VLEN / DLEN,
  localparam int unsigned NCH      = NUM_VREGS * CPR,
  localparam int unsigned CW       = $clog2(NCH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  uop_t            uop_in,
  input  logic            go,
  output logic            active,
  output uop_t            uop,
  output logic [VL_W-1:0] grp,
  output logic            done,
  // chunk indices of the current group
  output logic [CW-1:0]   a_vs1,     // narrow vs1 chunk
  output logic [CW-1:0]   a_vs2_0,   // vs2 chunk (low chunk if wide)
  output logic [CW-1:0]   a_vs2_1,   // vs2 high chunk (wide only)
  output logic [CW-1:0]   a_vd_0,    // vd chunk (low chunk if wide)
  output logic [CW-1:0]   a_vd_1,    // vd high chunk (wide only)
  // chunk masks
  output logic [NCH-1:0]  rd_now,
  output logic [NCH-1:0]  wr_now,
  output logic [NCH-1:0]  rd_fut,
  output logic [NCH-1:0]  wr_fut,
  output logic [NCH-1:0]  wr_all,
  output logic            q_valid,
  output logic [NCH-1:0]  q_rd,
  output logic [NCH-1:0]  q_wr
);

  uop_t q_uop;

  // chunk base of a register
  function automatic int unsigned cbase(logic [4:0] r);
    return int'(r) * CPR;
  endfunction

  logic cur_free;
  assign cur_free = !active || done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      uop     <= '0;
      grp     <= '0;
      q_valid <= 1'b0;
      q_uop   <= '0;
    end else begin
      if (cur_free) begin
        if (q_valid) begin
          // queued instruction becomes current
          active  <= 1'b1;
          uop     <= q_uop;
          grp     <= '0;
          q_valid <= start;
          if (start) q_uop <= uop_in;
        end else if (start) begin
          active <= 1'b1;
          uop    <= uop_in;
          grp    <= '0;
        end else begin
          active <= 1'b0;
        end
      end else begin
        if (go) grp <= grp + 1'b1;
        if (start) begin
          q_valid <= 1'b1;
          q_uop   <= uop_in;
        end
      end
    end
  end

  // chunk masks of everything an instruction touches, from group g onwards
  task automatic ranges(input uop_t u, input int unsigned g,
                        output logic [NCH-1:0] rd, output logic [NCH-1:0] wr);
    automatic int unsigned s1, s2, d, s1_hi, s2_hi, d_hi;
    s1 = cbase(u.vs1) + g;
    s2 = u.wide_vs2 ? cbase(u.vs2) + 2*g : cbase(u.vs2) + g;
    d  = u.wide_vd  ? cbase(u.vd)  + 2*g : cbase(u.vd)  + g;
    s1_hi = cbase(u.vs1) + int'(u.ngroups);
    s2_hi = cbase(u.vs2) + (u.wide_vs2 ? 2 : 1) * int'(u.ngroups);
    d_hi  = cbase(u.vd)  + (u.wide_vd ? 2 : 1) * int'(u.ngroups);
    rd = '0;
    wr = '0;
    for (int unsigned c = 0; c < NCH; c++) begin
      if (u.rd_vs1 && c >= s1 && c < s1_hi) rd[c] = 1'b1;
      if (u.rd_vs2 && c >= s2 && c < s2_hi) rd[c] = 1'b1;
      if (u.rd_vd  && c >= d  && c < d_hi)  rd[c] = 1'b1;
      if (u.wr_vd  && c >= d  && c < d_hi)  wr[c] = 1'b1;
    end
  endtask

  assign done = active && go && (grp == uop.ngroups - 1'b1);

  always_comb begin
    automatic int unsigned s1, s2, d, g;
    automatic logic [NCH-1:0] all_rd, all_wr, fut_rd, fut_wr, qr, qw;
    g  = int'(grp);
    s1 = cbase(uop.vs1) + g;
    s2 = uop.wide_vs2 ? cbase(uop.vs2) + 2*g : cbase(uop.vs2) + g;
    d  = uop.wide_vd  ? cbase(uop.vd)  + 2*g : cbase(uop.vd)  + g;
    a_vs1   = CW'(s1);
    a_vs2_0 = CW'(s2);
    a_vs2_1 = CW'(s2 + 1);
    a_vd_0  = CW'(d);
    a_vd_1  = CW'(d + 1);

    ranges(uop, 0, all_rd, all_wr);
    ranges(uop, g, fut_rd, fut_wr);
    ranges(q_uop, 0, qr, qw);
    rd_now = '0;
    wr_now = '0;
    for (int unsigned c = 0; c < NCH; c++) begin
      if (uop.rd_vs1 && c == s1) rd_now[c] = 1'b1;
      if (uop.rd_vs2 && (c == s2 || (uop.wide_vs2 && c == s2 + 1))) rd_now[c] = 1'b1;
      if (uop.rd_vd  && (c == d  || (uop.wide_vd  && c == d + 1)))  rd_now[c] = 1'b1;
      if (uop.wr_vd  && (c == d  || (uop.wide_vd  && c == d + 1)))  wr_now[c] = 1'b1;
    end
    rd_fut = active ? fut_rd : '0;
    wr_fut = active ? fut_wr : '0;
    wr_all = active ? all_wr : '0;
    if (!active) begin
      rd_now = '0;
      wr_now = '0;
    end
    q_rd = q_valid ? qr : '0;
    q_wr = q_valid ? qw : '0;
  end

endmodule
