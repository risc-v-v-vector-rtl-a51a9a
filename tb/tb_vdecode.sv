// tb_vdecode: self-checking test of the instruction decoder.
//
// Encodes instructions in the testbench (RVV 1.0 formats) and checks the
// decoder's verdict and uop fields against expectations written out per
// case: unit, operation, operand flags, destination group size and the number
// of DLEN groups. The central check is the reduced register file: with 16
// registers every group ending at or below v15 is legal and every group
// reaching v16..v31 is illegal; a second instance with 8 registers draws the
// line at v7. Misaligned groups, masked forms, SEW 64 arithmetic and
// unsupported encodings must be rejected.
module tb_vdecode;
  import rvv_pkg::*;

  int checks = 0, failures = 0;

  logic [31:0]     insn;
  logic [XLEN-1:0] rs1_val;
  logic [1:0]      vsew;
  logic [2:0]      vlmul;
  logic            vill;
  logic [VL_W-1:0] vl;
  logic            is_cfg16, legal16, is_cfg8, legal8;
  uop_t            uop16, uop8;

  vdecode #(.NUM_VREGS(16), .VLEN(64), .DLEN(32)) dut16 (
    .insn, .rs1_val, .vsew, .vlmul, .vill, .vl, .is_cfg(is_cfg16), .legal(legal16), .uop(uop16));
  vdecode #(.NUM_VREGS(8), .VLEN(64), .DLEN(32)) dut8 (
    .insn, .rs1_val, .vsew, .vlmul, .vill, .vl, .is_cfg(is_cfg8), .legal(legal8), .uop(uop8));

  function automatic logic [31:0] opv(logic [5:0] f6, int vs2, int vs1, logic [2:0] f3, int vd, bit vm = 1);
    return {f6, vm, 5'(vs2), 5'(vs1), f3, 5'(vd), 7'b1010111};
  endfunction
  function automatic logic [31:0] vle(logic [2:0] w, int vd, int rs1f, logic store = 0);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'(rs1f), w, 5'(vd), store ? 7'b0100111 : 7'b0000111};
  endfunction

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (insn %h)", what, insn);
    end
  endtask

  task automatic setup(int sew, int lm, int l);
    vsew = 2'(sew); vlmul = 3'(lm); vill = 1'b0; vl = 16'(l);
  endtask

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rs1_val = 32'h1234_5678;
    // Table 1: vwmacc.vx v0, x7, v8 at e8, LMUL 2, vl 16
    setup(0, 1, 16);
    insn = opv(6'b111101, 8, 7, 3'b110, 0); #1;
    chk("vwmacc.vx legal", legal16 && !is_cfg16);
    chk("vwmacc.vx fields", uop16.fu == FU_MAC && uop16.op == OP_WMACC && uop16.wide_vd &&
        uop16.rd_vd && !uop16.rd_vs1 && uop16.use_scalar && uop16.sign_ext &&
        uop16.scalar == rs1_val && uop16.dregs == 4 && uop16.ngroups == 4);
    chk("vwmacc.vx v0,v8 illegal with 8 regs", !legal8);
    // vle8.v v8, LMUL 2: 16 bytes = 4 beats
    insn = vle(3'b000, 8, 28); #1;
    chk("vle8 legal", legal16 && uop16.fu == FU_LSU && uop16.op == OP_LOAD && uop16.ngroups == 4 && uop16.dregs == 2 && uop16.wr_vd);
    chk("vle8 v8 illegal with 8 regs", !legal8);
    insn = vle(3'b000, 14, 28); #1;
    chk("vle8 v14 (LMUL 2) legal", legal16);
    insn = vle(3'b000, 16, 28); #1;
    chk("vle8 v16 illegal (Table 4 register)", !legal16);
    insn = vle(3'b000, 13, 28); #1;
    chk("misaligned group illegal", !legal16);
    insn = vle(3'b101, 4, 28); #1;     // vle16 at SEW 8: EMUL 4
    chk("vle16 at e8 m2: EMUL 4", legal16 && uop16.dregs == 4 && uop16.ngroups == 8 && uop16.sew == 2'd1);
    insn = vle(3'b111, 0, 28, 1); #1;  // vse64 at e8 m2: EMUL 16 -> illegal
    chk("vse64 at e8 m2 illegal (EMUL 16)", !legal16);
    // Table 5: vwadd.wv v4, v4, v0 at e16, LMUL 2
    setup(1, 1, 8);
    insn = opv(6'b110101, 4, 0, 3'b010, 4); #1;
    chk("vwadd.wv legal", legal16 && uop16.fu == FU_ALU && uop16.op == OP_WADD && uop16.wide_vs2 &&
        uop16.wide_vd && uop16.rd_vs1 && uop16.ngroups == 4 && uop16.dregs == 4);
    chk("vwadd.wv v4,v4,v0 legal with 8 regs", legal8);
    insn = opv(6'b110101, 2, 0, 3'b010, 2); #1;
    chk("vwadd.wv to misaligned v2 illegal", !legal16);
    insn = opv(6'b110001, 0, 2, 3'b010, 0); #1;
    chk("widening overlap illegal", !legal16);
    insn = opv(6'b110000, 4, 2, 3'b110, 8); #1;
    chk("vwaddu.vx", legal16 && uop16.op == OP_WADDU && !uop16.sign_ext && uop16.use_scalar);
    insn = opv(6'b110011, 2, 4, 3'b010, 8); #1;
    chk("vwsub.vv", legal16 && uop16.op == OP_WSUB && uop16.sign_ext && uop16.dregs == 4);
    insn = opv(6'b110110, 8, 4, 3'b110, 8); #1;
    chk("vwsubu.wx", legal16 && uop16.op == OP_WSUBU && !uop16.sign_ext && uop16.wide_vs2);
    // Table 6: vwmacc.vv v4, v0, v2
    insn = opv(6'b111101, 2, 0, 3'b010, 4); #1;
    chk("vwmacc.vv", legal16 && uop16.rd_vs1 && uop16.rd_vs2 && uop16.rd_vd && !uop16.use_scalar);
    // Table 7: vwmacc.vx at e8 LMUL 4 into v8..v15
    setup(0, 2, 32);
    insn = opv(6'b111101, 0, 12, 3'b110, 8); #1;
    chk("vwmacc.vx m4 into v8", legal16 && uop16.dregs == 8 && uop16.ngroups == 8);
    chk("... illegal with 8 regs", !legal8);
    insn = opv(6'b111101, 0, 12, 3'b110, 4); #1;
    chk("vwmacc.vx m4 into v4 misaligned (EMUL 8)", !legal16);
    setup(0, 3, 64);
    insn = opv(6'b111101, 0, 12, 3'b110, 0); #1;
    chk("widening at LMUL 8 illegal", !legal16);
    // non-widening ALU and MAC ops at e32 LMUL 1
    setup(2, 0, 2);
    insn = opv(6'b000000, 3, 5, 3'b000, 1); #1;
    chk("vadd.vv", legal16 && uop16.op == OP_ADD && uop16.ngroups == 2 && uop16.dregs == 1);
    insn = opv(6'b000000, 3, 5'b11110, 3'b011, 1); #1;
    chk("vadd.vi imm -2", legal16 && uop16.use_scalar && uop16.scalar == 32'hffff_fffe);
    insn = opv(6'b000010, 3, 5, 3'b100, 1); #1;
    chk("vsub.vx", legal16 && uop16.op == OP_SUB && uop16.use_scalar);
    insn = opv(6'b000010, 3, 5, 3'b011, 1); #1;
    chk("vsub.vi does not exist", !legal16);
    insn = opv(6'b000011, 3, 5, 3'b100, 1); #1;
    chk("vrsub.vx", legal16 && uop16.op == OP_RSUB && uop16.use_scalar);
    insn = opv(6'b000011, 3, 5, 3'b000, 1); #1;
    chk("vrsub.vv does not exist", !legal16);
    insn = opv(6'b000101, 3, 5, 3'b000, 1); #1;
    chk("vmin.vv signed", legal16 && uop16.op == OP_MIN && uop16.sign_ext);
    insn = opv(6'b000110, 3, 5, 3'b100, 1); #1;
    chk("vmaxu.vx unsigned", legal16 && uop16.op == OP_MAXU && !uop16.sign_ext);
    insn = opv(6'b000111, 3, 5, 3'b011, 1); #1;
    chk("vmax.vi does not exist", !legal16);
    insn = opv(6'b001011, 3, 5'b11111, 3'b011, 1); #1;
    chk("vxor.vi imm -1", legal16 && uop16.op == OP_XOR && uop16.scalar == 32'hffff_ffff);
    insn = opv(6'b100101, 3, 5'b11111, 3'b011, 1); #1;
    chk("vsll.vi imm zero-extended", legal16 && uop16.fu == FU_ALU && uop16.op == OP_SLL &&
        uop16.scalar == 32'd31);
    insn = opv(6'b101001, 3, 5, 3'b000, 1); #1;
    chk("vsra.vv sign_ext", legal16 && uop16.op == OP_SRA && uop16.sign_ext);
    insn = opv(6'b101000, 3, 5, 3'b100, 1); #1;
    chk("vsrl.vx", legal16 && uop16.op == OP_SRL && !uop16.sign_ext);
    insn = opv(6'b010111, 0, 5, 3'b100, 1); #1;
    chk("vmv.v.x", legal16 && uop16.op == OP_MV && !uop16.rd_vs2);
    insn = opv(6'b010111, 0, 5, 3'b100, 1, 0); #1;
    chk("masked vmerge illegal", !legal16);
    insn = opv(6'b100101, 3, 5, 3'b010, 1); #1;
    chk("vmul.vv", legal16 && uop16.fu == FU_MAC && uop16.op == OP_MUL && !uop16.rd_vd);
    insn = opv(6'b101101, 3, 5, 3'b110, 1); #1;
    chk("vmacc.vx", legal16 && uop16.op == OP_MACC && uop16.rd_vd && !uop16.wide_vd);
    insn = opv(6'b000000, 3, 5, 3'b000, 1, 0); #1;
    chk("masked vadd illegal", !legal16);
    insn = opv(6'b000000, 3, 5, 3'b000, 17); #1;
    chk("vadd to v17 illegal", !legal16);
    insn = opv(6'b000000, 7, 5, 3'b000, 1); #1;
    chk("vadd.vv v1,v7,v5 legal with 8 regs", legal8);
    insn = opv(6'b000000, 8, 5, 3'b000, 1); #1;
    chk("vadd.vv v1,v8,v5 illegal with 8 regs", !legal8 && legal16);
    setup(3, 0, 1);
    insn = opv(6'b000000, 3, 5, 3'b000, 1); #1;
    chk("SEW 64 arithmetic rejected", !legal16);
    insn = vle(3'b111, 1, 5); #1;
    chk("vle64 at SEW 64 legal", legal16 && uop16.ngroups == 2);
    vill = 1'b1; #1;
    chk("vill rejects vector instruction", !legal16);
    // whole-register loads and stores ignore vtype/vl, even with vill set
    insn = {3'd3, 1'b0, 2'b00, 1'b1, 5'b01000, 5'd10, 3'b101, 5'd4, 7'b0000111}; #1;   // vl4re16.v v4
    chk("vl4re16.v v4 legal while vill", legal16 && uop16.fu == FU_LSU && uop16.op == OP_LOAD &&
        uop16.dregs == 4 && uop16.vl == 16 && uop16.ngroups == 8 && uop16.sew == 2'd1);
    chk("vl4re16.v v4 legal with 8 regs (v4..v7)", legal8);
    insn = {3'd3, 1'b0, 2'b00, 1'b1, 5'b01000, 5'd10, 3'b101, 5'd2, 7'b0000111}; #1;
    chk("vl4re16.v v2 misaligned", !legal16);
    insn = {3'd7, 1'b0, 2'b00, 1'b1, 5'b01000, 5'd10, 3'b000, 5'd8, 7'b0100111}; #1;   // vs8r.v v8
    chk("vs8r.v v8", legal16 && !legal8 && uop16.op == OP_STORE && uop16.rd_vd && uop16.vl == 64 && uop16.ngroups == 16);
    insn = {3'd7, 1'b0, 2'b00, 1'b1, 5'b01000, 5'd10, 3'b101, 5'd8, 7'b0100111}; #1;
    chk("vs8r with EEW 16 encoding reserved", !legal16);
    insn = {3'd2, 1'b0, 2'b00, 1'b1, 5'b01000, 5'd10, 3'b000, 5'd0, 7'b0000111}; #1;
    chk("vl3re8 reserved", !legal16);
    vill = 1'b0;
    // configuration and other opcodes
    insn = {1'b0, 11'h008, 5'd5, 3'b111, 5'd1, 7'b1010111}; #1;
    chk("vsetvli is_cfg", is_cfg16 && legal16);
    insn = 32'h0000_0013; #1;   // addi x0,x0,0
    chk("scalar opcode not legal", !legal16 && !is_cfg16);
    insn = opv(6'b100000, 3, 5, 3'b000, 1); #1;
    chk("unsupported funct6 illegal", !legal16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
