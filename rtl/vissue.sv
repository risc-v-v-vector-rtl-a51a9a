// vissue: in-order, single-issue dispatcher of the vector unit.
//
// Receives vector instructions from the scalar core one at a time over a
// valid/ready handshake, together with the scalar operands rs1/rs2. It holds
// the vector configuration state (vtype and vl), executes vsetvli/vsetivli/
// vsetvl itself, and hands every other instruction, decoded by vdecode, to
// its functional unit. At most one instruction is accepted per cycle; this
// matches the paper's single-issue processor, where overlap between vector
// instructions comes only from chaining.
//
// An instruction is accepted (in_ready) when
//   - it is a vset*, illegal, or has vl = 0 (no unit needed), or
//   - its unit's sequencer is free (idle, or finishing its last group this
//     cycle) and its destination does not overlap chunks another unit will
//     still write (waw_hazard from vchain).
// vl and vtype are captured into the uop at dispatch, so a following vset*
// never waits for earlier vector instructions.
//
// Results: for a vset* the new vl is returned in res_data with res_valid one
// cycle after acceptance (the scalar core writes it to rd). An illegal
// instruction (unsupported, or a register beyond the reduced register file)
// raises `illegal` for one cycle, one cycle after acceptance, and is dropped.
//
// vset* semantics follow RVV 1.0 (AVL from rs1, VLMAX when rs1=x0 and rd!=x0,
// vl kept when both are x0). ELEN is 64. Reset state: vill set, vl = 0.
module vissue
  import rvv_pkg::*;
#(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32,
  localparam int unsigned CPR      = VLEN / DLEN,
  localparam int unsigned NCH      = NUM_VREGS * CPR
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the scalar core
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [31:0]       in_insn,
  input  logic [XLEN-1:0]   in_rs1,
  input  logic [XLEN-1:0]   in_rs2,
  output logic              res_valid,
  output logic [XLEN-1:0]   res_data,
  output logic              illegal,
  // to the functional units and the chaining controller
  output logic              disp_valid,
  output fu_e               disp_fu,
  output uop_t              disp_uop,
  output logic [NCH-1:0]    disp_dst,
  input  logic              waw_hazard,
  input  logic [NFU-1:0]    fu_free,
  // status
  output logic [VL_W-1:0]   vl_o,
  output logic [7:0]        vtype_o,
  output logic              vill_o,
  output logic              waw_stall,
  output logic              fu_stall
);

  logic [1:0]      vsew;
  logic [2:0]      vlmul;
  logic            vta, vma, vill;
  logic [VL_W-1:0] vl;

  logic is_cfg, legal;
  uop_t uop;

  vdecode #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN)) u_dec (
    .insn(in_insn), .rs1_val(in_rs1), .vsew, .vlmul, .vill, .vl,
    .is_cfg, .legal, .uop
  );

  // ---- vset* -----------------------------------------------------------
  logic [XLEN-1:0] new_vtype;
  logic [XLEN-1:0] avl;
  logic            new_vill;
  logic [VL_W-1:0] new_vl;
  logic [XLEN-1:0] vlmax;

  always_comb begin
    automatic int l2, sew_l2;
    if (in_insn[31] == 1'b0)        new_vtype = XLEN'(in_insn[30:20]);   // vsetvli
    else if (in_insn[30] == 1'b1)   new_vtype = XLEN'(in_insn[29:20]);   // vsetivli
    else                            new_vtype = in_rs2;                  // vsetvl
    l2     = new_vtype[2] ? int'(new_vtype[2:0]) - 8 : int'(new_vtype[2:0]);
    sew_l2 = int'(new_vtype[5:3]) + 3;
    new_vill = (new_vtype[XLEN-1:8] != '0) || new_vtype[5] || (new_vtype[2:0] == 3'b100)
               || (sew_l2 > 6 + l2);
    vlmax = (l2 >= 0) ? (XLEN'(VLEN) >> sew_l2) << l2 : (XLEN'(VLEN) >> sew_l2) >> (-l2);
    if (in_insn[31:30] == 2'b11)       avl = XLEN'(in_insn[19:15]);
    else if (in_insn[19:15] != 5'd0)   avl = in_rs1;
    else if (in_insn[11:7] != 5'd0)    avl = '1;
    else                               avl = XLEN'(vl);
    new_vl = new_vill ? '0 : VL_W'((avl < vlmax) ? avl : vlmax);
  end

  // ---- dispatch ----------------------------------------------------------
  logic needs_fu;
  assign needs_fu  = legal && !is_cfg && (uop.ngroups != '0);
  assign disp_fu   = uop.fu;
  assign disp_uop  = uop;
  assign fu_stall  = in_valid && needs_fu && !fu_free[uop.fu];
  assign waw_stall = in_valid && needs_fu && fu_free[uop.fu] && waw_hazard;
  assign in_ready  = !needs_fu || (fu_free[uop.fu] && !waw_hazard);
  assign disp_valid = in_valid && in_ready && needs_fu;

  always_comb begin
    automatic int unsigned lo, hi;
    lo = int'(uop.vd) * CPR;
    hi = (int'(uop.vd) + int'(uop.dregs)) * CPR;
    disp_dst = '0;
    if (uop.wr_vd)
      for (int unsigned c = 0; c < NCH; c++) disp_dst[c] = (c >= lo) && (c < hi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vsew      <= '0;
      vlmul     <= '0;
      vta       <= 1'b0;
      vma       <= 1'b0;
      vill      <= 1'b1;
      vl        <= '0;
      res_valid <= 1'b0;
      res_data  <= '0;
      illegal   <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      illegal   <= 1'b0;
      if (in_valid && in_ready) begin
        if (!legal) begin
          illegal <= 1'b1;
        end else if (is_cfg) begin
          vill      <= new_vill;
          vsew      <= new_vill ? '0 : new_vtype[4:3];
          vlmul     <= new_vill ? '0 : new_vtype[2:0];
          vta       <= new_vill ? 1'b0 : new_vtype[6];
          vma       <= new_vill ? 1'b0 : new_vtype[7];
          vl        <= new_vl;
          res_valid <= 1'b1;
          res_data  <= XLEN'(new_vl);
        end
      end
    end
  end

  assign vl_o    = vl;
  assign vtype_o = {vma, vta, 1'b0, vsew, vlmul};
  assign vill_o  = vill;

endmodule
