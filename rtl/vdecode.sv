// vdecode: decoder and legality check for the vector instruction subset.
//
// Takes one 32-bit instruction, the scalar operand rs1 and the current
// vtype/vl state and produces a uop_t for one of the three functional units.
// Purely combinational.
//
// The key rule of the reduced register file is enforced here: the 5-bit
// register fields are kept as in RVV 1.0, so code for this unit is built by
// the same compiler told that only NUM_VREGS registers exist. Any register
// group that reaches past register NUM_VREGS-1 is an illegal instruction.
// Register groups must also be aligned to their size (RVV 1.0 rule), and a
// widening instruction's destination group may not overlap a narrow source
// group (stricter than RVV 1.0, which allows some overlaps; kept simple here).
//
// Supported (RVV 1.0 encodings, all unmasked, vm=1):
//   ALU: vadd.vv/vx/vi, vsub.vv/vx, vrsub.vx/vi, vand/vor/vxor.vv/vx/vi,
//        vsll/vsrl/vsra.vv/vx/vi, vmin(u)/vmax(u).vv/vx, vmv.v.v/x/i,
//        vwadd(u)/vwsub(u).vv/vx/wv/wx
//   MAC: vmul.vv/vx, vmacc.vv/vx, vwmacc(u).vv/vx
//   LSU: vle8/16/32/64.v, vse8/16/32/64.v (unit stride),
//        vl<n>re8/16/32/64.v and vs<n>r.v, n = 1, 2, 4, 8 (whole registers;
//        these ignore vtype and vl and stay legal while vill is set)
//   CFG: vsetvli, vsetivli, vsetvl (flagged as is_cfg, executed by vissue)
// Arithmetic is limited to SEW of 8, 16 and 32 bits (at most DLEN); 64-bit
// elements are reached as widened results (accumulators) and by loads and
// stores. Masked forms, strided/indexed/segment memory
// operations and fractional-LMUL widening are rejected as illegal.
//
// Outputs: is_cfg (a vset* instruction), legal (the instruction is
// supported and its registers are valid), uop (valid when legal && !is_cfg).
module vdecode
  import rvv_pkg::*;
#(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32
) (
  input  logic [31:0]     insn,
  input  logic [XLEN-1:0] rs1_val,
  input  logic [1:0]      vsew,      // current vtype.vsew
  input  logic [2:0]      vlmul,     // current vtype.vlmul
  input  logic            vill,      // current vtype.vill
  input  logic [VL_W-1:0] vl,
  output logic            is_cfg,
  output logic            legal,
  output uop_t            uop
);

  localparam int unsigned DB_LOG = $clog2(DLEN / 8);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [5:0] funct6;
  logic       vm;
  logic [4:0] f_vd, f_vs1, f_vs2;

  assign opcode = insn[6:0];
  assign funct3 = insn[14:12];
  assign funct6 = insn[31:26];
  assign vm     = insn[25];
  assign f_vd   = insn[11:7];
  assign f_vs1  = insn[19:15];
  assign f_vs2  = insn[24:20];

  // log2 of LMUL as a signed number, -3 .. 3
  function automatic int lmul_log2(logic [2:0] m);
    return (m[2]) ? int'(m) - 8 : int'(m);
  endfunction

  function automatic int unsigned group_regs(int l2);
    return (l2 > 0) ? (1 << l2) : 1;
  endfunction

  // Group starts at r, holds n registers: inside the reduced file and aligned.
  function automatic logic group_ok(logic [4:0] r, int unsigned n);
    return (int'(r) + n <= NUM_VREGS) && ((int'(r) % n) == 0);
  endfunction

  function automatic logic overlap(logic [4:0] a, int unsigned na, logic [4:0] b, int unsigned nb);
    return (int'(a) < int'(b) + nb) && (int'(b) < int'(a) + na);
  endfunction

  always_comb begin
    automatic int          l2, e2, eew_l2;
    automatic int unsigned nregs, wregs, eregs;
    automatic logic        known, ok, whole;
    automatic logic [VL_W+3:0] bytes;

    is_cfg = 1'b0;
    legal  = 1'b0;
    known  = 1'b0;
    ok     = 1'b1;
    uop    = '0;
    uop.vd = f_vd;
    uop.vs1 = f_vs1;
    uop.vs2 = f_vs2;
    uop.sew = vsew;
    uop.vl  = vl;
    uop.scalar = rs1_val;

    l2     = lmul_log2(vlmul);
    nregs  = group_regs(l2);
    wregs  = group_regs(l2 + 1);
    eew_l2 = 0;
    e2     = 0;
    whole  = 1'b0;
    eregs  = 1;

    unique case (opcode)
      OPC_OPV: begin
        if (funct3 == F3_OPCFG) begin
          is_cfg = 1'b1;
          known  = 1'b1;
        end else begin
          uop.rd_vs2 = 1'b1;
          uop.wr_vd  = 1'b1;
          uop.rd_vs1 = (funct3 == F3_OPIVV) || (funct3 == F3_OPMVV);
          uop.use_scalar = !uop.rd_vs1;
          if (funct3 == F3_OPIVI)
            uop.scalar = {{(XLEN-5){f_vs1[4]}}, f_vs1};
          uop.fu = FU_ALU;
          known  = 1'b1;
          unique case (funct3)
            F3_OPIVV, F3_OPIVX, F3_OPIVI: begin
              unique case (funct6)
                F6_VADD:  uop.op = OP_ADD;
                F6_VSUB:  begin uop.op = OP_SUB;  if (funct3 == F3_OPIVI) known = 1'b0; end
                F6_VRSUB: begin uop.op = OP_RSUB; if (funct3 == F3_OPIVV) known = 1'b0; end
                F6_VMINU: begin uop.op = OP_MINU; if (funct3 == F3_OPIVI) known = 1'b0; end
                F6_VMIN:  begin uop.op = OP_MIN;  uop.sign_ext = 1'b1; if (funct3 == F3_OPIVI) known = 1'b0; end
                F6_VMAXU: begin uop.op = OP_MAXU; if (funct3 == F3_OPIVI) known = 1'b0; end
                F6_VMAX:  begin uop.op = OP_MAX;  uop.sign_ext = 1'b1; if (funct3 == F3_OPIVI) known = 1'b0; end
                F6_VAND:  uop.op = OP_AND;
                F6_VOR:   uop.op = OP_OR;
                F6_VXOR:  uop.op = OP_XOR;
                F6_VSLL:  uop.op = OP_SLL;
                F6_VSRL:  uop.op = OP_SRL;
                F6_VSRA:  begin uop.op = OP_SRA; uop.sign_ext = 1'b1; end
                F6_VMERGE: begin
                  if (vm && f_vs2 == 5'd0) begin
                    uop.op = OP_MV;
                    uop.rd_vs2 = 1'b0;
                  end else known = 1'b0;
                end
                default: known = 1'b0;
              endcase
              // shift amounts given as immediates are unsigned
              if (funct3 == F3_OPIVI && (funct6 == F6_VSLL || funct6 == F6_VSRL || funct6 == F6_VSRA))
                uop.scalar = XLEN'(f_vs1);
            end
            F3_OPMVV, F3_OPMVX: begin
              unique case (funct6)
                F6_VWADDU:  begin uop.op = OP_WADDU; uop.wide_vd = 1'b1; end
                F6_VWADD:   begin uop.op = OP_WADD;  uop.wide_vd = 1'b1; uop.sign_ext = 1'b1; end
                F6_VWADDUW: begin uop.op = OP_WADDU; uop.wide_vd = 1'b1; uop.wide_vs2 = 1'b1; end
                F6_VWADDW:  begin uop.op = OP_WADD;  uop.wide_vd = 1'b1; uop.wide_vs2 = 1'b1; uop.sign_ext = 1'b1; end
                F6_VWSUBU:  begin uop.op = OP_WSUBU; uop.wide_vd = 1'b1; end
                F6_VWSUB:   begin uop.op = OP_WSUB;  uop.wide_vd = 1'b1; uop.sign_ext = 1'b1; end
                F6_VWSUBUW: begin uop.op = OP_WSUBU; uop.wide_vd = 1'b1; uop.wide_vs2 = 1'b1; end
                F6_VWSUBW:  begin uop.op = OP_WSUB;  uop.wide_vd = 1'b1; uop.wide_vs2 = 1'b1; uop.sign_ext = 1'b1; end
                F6_VMUL:    begin uop.op = OP_MUL;   uop.fu = FU_MAC; end
                F6_VMACC:   begin uop.op = OP_MACC;  uop.fu = FU_MAC; uop.rd_vd = 1'b1; end
                F6_VWMACCU: begin uop.op = OP_WMACCU; uop.fu = FU_MAC; uop.rd_vd = 1'b1; uop.wide_vd = 1'b1; end
                F6_VWMACC:  begin uop.op = OP_WMACC; uop.fu = FU_MAC; uop.rd_vd = 1'b1; uop.wide_vd = 1'b1; uop.sign_ext = 1'b1; end
                default:    known = 1'b0;
              endcase
            end
            default: known = 1'b0;
          endcase
          // element width and grouping limits of the arithmetic units
          if (vill || !vm) ok = 1'b0;
          if (sew_bits(vsew) > DLEN || vsew == 2'd3) ok = 1'b0;
          if (uop.wide_vd && (l2 < 0 || l2 > 2)) ok = 1'b0;
          // register groups
          if (uop.wide_vd) begin
            if (!group_ok(f_vd, wregs)) ok = 1'b0;
          end else if (!group_ok(f_vd, nregs)) ok = 1'b0;
          if (uop.rd_vs1 && !group_ok(f_vs1, nregs)) ok = 1'b0;
          if (uop.rd_vs2) begin
            if (uop.wide_vs2) begin
              if (!group_ok(f_vs2, wregs)) ok = 1'b0;
            end else if (!group_ok(f_vs2, nregs)) ok = 1'b0;
          end
          if (uop.wide_vd) begin
            if (uop.rd_vs1 && overlap(f_vd, wregs, f_vs1, nregs)) ok = 1'b0;
            if (uop.rd_vs2 && !uop.wide_vs2 && overlap(f_vd, wregs, f_vs2, nregs)) ok = 1'b0;
          end
          uop.dregs = 4'(uop.wide_vd ? wregs : nregs);
          bytes = (VL_W+4)'(vl) << vsew;
          uop.ngroups = VL_W'((bytes + (VL_W+4)'(DLEN/8 - 1)) >> DB_LOG);
        end
      end
      OPC_LOADF, OPC_STOREF: begin
        // unit stride: nf=0, mew=0, mop=0, lumop/sumop=0, vm=1
        // whole register: nf = 0/1/3/7, mew=0, mop=0, vm=1, lumop/sumop=01000
        whole = (insn[28:25] == 4'b0001) && (f_vs2 == 5'b01000);
        if (whole)
          known = (insn[31:29] inside {3'd0, 3'd1, 3'd3, 3'd7}) &&
                  (opcode == OPC_LOADF || funct3 == 3'b000);
        else
          known = (insn[31:25] == 7'b0000001) && (f_vs2 == 5'd0);
        unique case (funct3)
          3'b000:  eew_l2 = 0;
          3'b101:  eew_l2 = 1;
          3'b110:  eew_l2 = 2;
          3'b111:  eew_l2 = 3;
          default: known = 1'b0;
        endcase
        if (whole) begin
          // vl<n>re<eew>.v / vs<n>r.v: n registers, independent of vtype and vl
          eregs  = int'(insn[31:29]) + 1;
          uop.vl = VL_W'((eregs * (VLEN / 8)) >> eew_l2);
        end else begin
          e2    = eew_l2 - int'(vsew) + l2;
          eregs = group_regs(e2);
          if (vill || e2 < -3 || e2 > 3) ok = 1'b0;
        end
        if (!group_ok(f_vd, eregs)) ok = 1'b0;
        uop.fu      = FU_LSU;
        uop.op      = (opcode == OPC_LOADF) ? OP_LOAD : OP_STORE;
        uop.sew     = 2'(eew_l2);
        uop.wr_vd   = (opcode == OPC_LOADF);
        uop.rd_vd   = (opcode == OPC_STOREF);
        uop.dregs   = 4'(eregs);
        bytes = (VL_W+4)'(uop.vl) << eew_l2;
        uop.ngroups = VL_W'((bytes + (VL_W+4)'(DLEN/8 - 1)) >> DB_LOG);
      end
      default: known = 1'b0;
    endcase

    legal = known && (is_cfg || ok);
  end

endmodule
