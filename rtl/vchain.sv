// vchain: chaining and hazard controller of the vector unit.
//
// The unit issues at most one vector instruction per cycle, in program order,
// but each instruction then runs for several cycles in its functional unit
// (load/store, ALU or MAC), one DLEN chunk per cycle. Chaining lets a
// dependent instruction in another unit start as soon as the chunks it needs
// have been written, instead of waiting for the whole register group. This is
// what gives the "convoys" of the paper: a load, a MAC and an ALU instruction
// overlapping in time.
//
// Tracking is at chunk granularity using bit masks over all NCH chunks of the
// register file, supplied by each unit's sequencer (vfu_seq) and pipeline:
//   rd_now/wr_now : chunks the unit's current group reads / writes
//   rd_fut/wr_fut : chunks its instruction still has to read / write
//   pipe_wr       : chunks whose results are in flight in the unit's pipeline
//   q_rd/q_wr     : chunks of the instruction queued behind the current one
// For each unit, and separately for its current and its queued instruction,
// the controller counts how many OLDER instructions each other unit held at
// dispatch (0..2: that unit's current and queued one). A count drops when
// that unit sequences the last group of an instruction; when a queued
// instruction becomes current its counts move with it.
//
// A unit's current group may go when
//   RAW: none of its read chunks is in flight in any pipeline, and none is
//        still to be written by an older instruction;
//   WAR: none of its write chunks is still to be read by an older instruction.
// WAW between units is resolved at dispatch (waw_hazard): an instruction is
// held while its destination overlaps chunks another unit will still write.
// Writes by one unit are ordered by its own in-order pipeline.
// Because a younger writer only starts on a chunk once every older reader has
// read it, every in-flight write a reader sees belongs to an older
// instruction, so waiting can never deadlock.
//
// The masks and rules are this design's own; the paper states only that
// chaining between load, ALU and MAC exists.
module vchain
  import rvv_pkg::*;
#(
  parameter int unsigned NCH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NFU-1:0]           active,
  input  logic [NFU-1:0][NCH-1:0]  rd_now,
  input  logic [NFU-1:0][NCH-1:0]  wr_now,
  input  logic [NFU-1:0][NCH-1:0]  rd_fut,
  input  logic [NFU-1:0][NCH-1:0]  wr_fut,
  input  logic [NFU-1:0][NCH-1:0]  wr_all,
  input  logic [NFU-1:0][NCH-1:0]  pipe_wr,
  input  logic [NFU-1:0]           q_valid,
  input  logic [NFU-1:0][NCH-1:0]  q_rd,
  input  logic [NFU-1:0][NCH-1:0]  q_wr,
  input  logic [NFU-1:0]           last,     // current group is the instruction's last
  // dispatch
  input  logic                     disp_valid,   // an instruction is being dispatched
  input  fu_e                      disp_fu,
  input  logic [NCH-1:0]           disp_dst,     // chunks its destination group covers
  output logic                     waw_hazard,
  output logic [NFU-1:0]           fu_free,
  output logic [NFU-1:0]           go,
  output logic [NFU-1:0]           chained,
  output logic [NFU-1:0]           raw_stall,
  output logic [NFU-1:0]           war_stall
);

  logic [NFU-1:0][NFU-1:0][1:0] cnt_cur, cnt_q;   // older instructions per unit
  logic [NFU-1:0]          done;
  logic [NCH-1:0]          pend_all;

  always_comb begin
    pend_all = '0;
    for (int f = 0; f < NFU; f++) pend_all |= pipe_wr[f];
  end

  always_comb begin
    for (int f = 0; f < NFU; f++) begin
      automatic logic [NCH-1:0] older_wr, older_rd, older_all;
      older_wr = '0; older_rd = '0; older_all = '0;
      for (int o = 0; o < NFU; o++) begin
        if (cnt_cur[f][o] >= 2'd1) begin
          older_wr  |= wr_fut[o];
          older_rd  |= rd_fut[o];
          older_all |= wr_all[o];
        end
        if (cnt_cur[f][o] >= 2'd2) begin
          older_wr  |= q_wr[o];
          older_rd  |= q_rd[o];
          older_all |= q_wr[o];
        end
      end
      raw_stall[f] = active[f] && |(rd_now[f] & (pend_all | older_wr));
      war_stall[f] = active[f] && |(wr_now[f] & older_rd);
      go[f]        = active[f] && !raw_stall[f] && !war_stall[f];
      chained[f]   = go[f] && |(rd_now[f] & older_all);
      done[f]      = go[f] && last[f];
      fu_free[f]   = !q_valid[f];
    end
  end

  always_comb begin
    automatic logic [NCH-1:0] other_wr;
    other_wr = '0;
    for (int o = 0; o < NFU; o++)
      if (fu_e'(o) != disp_fu) other_wr |= pipe_wr[o] | wr_fut[o] | q_wr[o];
    waw_hazard = |(disp_dst & other_wr);
  end

  function automatic logic [1:0] dec(logic [1:0] c, logic d);
    return (d && c != 2'd0) ? c - 2'd1 : c;
  endfunction

  logic [NFU-1:0]               disp_here, to_cur, promote;
  logic [NFU-1:0][NFU-1:0][1:0] newcnt;
  always_comb begin
    for (int f = 0; f < NFU; f++) begin
      disp_here[f] = disp_valid && fu_e'(f) == disp_fu;
      to_cur[f]    = (!active[f] || done[f]) && !q_valid[f];
      promote[f]   = done[f] && q_valid[f];
      for (int o = 0; o < NFU; o++)
        newcnt[f][o] = (o == f) ? 2'd0
                     : 2'(32'(active[o]) + 32'(q_valid[o]) - 32'(done[o]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_cur <= '0;
      cnt_q   <= '0;
    end else begin
      for (int f = 0; f < NFU; f++) begin
        for (int o = 0; o < NFU; o++) begin
          if (disp_here[f] && to_cur[f]) begin
            cnt_cur[f][o] <= newcnt[f][o];
            cnt_q[f][o]   <= 2'd0;
          end else begin
            cnt_cur[f][o] <= promote[f] ? dec(cnt_q[f][o], done[o]) : dec(cnt_cur[f][o], done[o]);
            cnt_q[f][o]   <= disp_here[f] ? newcnt[f][o] : dec(cnt_q[f][o], done[o]);
          end
        end
      end
    end
  end

  // A unit only proceeds when it holds an instruction.
  for (genvar f = 0; f < NFU; f++) begin : g_chk
    a_go_active: assert property (@(posedge clk) disable iff (!rst_n) go[f] |-> active[f]);
    a_disp_free: assert property (@(posedge clk) disable iff (!rst_n)
      (disp_valid && disp_fu == fu_e'(f)) |-> fu_free[f]);
  end

endmodule
