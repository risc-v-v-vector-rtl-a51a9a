// tb_vissue: self-checking test of the dispatcher and the vector CSRs.
//
// Drives a random stream of vsetvli / vsetivli / vsetvl, vector add and load
// instructions (some using registers beyond the 16-register file, some with
// bad vtype values) while randomly toggling the unit-free and WAW-hazard
// inputs that normally come from the chaining controller. A reference model
// in the testbench computes, per RVV 1.0, the new vtype, vill and vl, and
// checks every cycle:
//   - in_ready / disp_valid / fu_stall / waw_stall follow the gating rules;
//   - the dispatched uop carries the current vl and the destination mask;
//   - res_valid/res_data return the new vl exactly one cycle after a vset*;
//   - illegal pulses exactly one cycle after an illegal instruction;
//   - vl_o/vtype_o/vill_o track the reference model.
module tb_vissue;
  import rvv_pkg::*;

  localparam int VLEN = 64, DLEN = 32, NUM_VREGS = 16, CPR = VLEN / DLEN, NCH = NUM_VREGS * CPR;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic              in_valid, in_ready;
  logic [31:0]       in_insn;
  logic [XLEN-1:0]   in_rs1, in_rs2;
  logic              res_valid, illegal;
  logic [XLEN-1:0]   res_data;
  logic              disp_valid, waw_hazard, waw_stall, fu_stall, vill_o;
  fu_e               disp_fu;
  uop_t              disp_uop;
  logic [NCH-1:0]    disp_dst;
  logic [NFU-1:0]    fu_free;
  logic [VL_W-1:0]   vl_o;
  logic [7:0]        vtype_o;

  vissue #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  // reference state
  int  r_sew = 0, r_lmul = 0, r_vl = 0;   // r_lmul: vlmul field
  bit  r_vill = 1;
  bit  exp_res = 0, exp_ill = 0;
  int  exp_res_data = 0;

  function automatic int vlmax_of(int sew_f, int lmul_f);
    int l2 = (lmul_f >= 4) ? lmul_f - 8 : lmul_f;
    int e = 8 << sew_f;
    return (l2 >= 0) ? (VLEN / e) << l2 : (VLEN / e) >> (-l2);
  endfunction

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_disp = 0, n_cfg = 0, n_ill = 0, n_fu_stall = 0, n_waw_stall = 0;

  initial begin
    in_valid = 0; in_insn = '0; in_rs1 = '0; in_rs2 = '0; waw_hazard = 0; fu_free = '1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk("reset: vill", vill_o && vl_o == 0);
    for (int it = 0; it < 4000; it++) begin
      automatic int kind = $urandom_range(0, 9);
      automatic int rd = $urandom_range(0, 3), rs1f = $urandom_range(0, 3);
      automatic bit cfg = 0, vec_ok = 0, ill = 0;
      automatic int nsew = 0, nlmul = 0, nvl = 0;
      automatic bit nvill = 0;
      automatic int vd = 0, vs2 = 0, vs1 = 0;
      automatic fu_e fu = FU_ALU;
      logic [31:0] vt;
      @(negedge clk);
      in_rs1 = $urandom_range(0, 3) == 0 ? $urandom : $urandom_range(0, 40);
      in_rs2 = '0;
      vt = {24'd0, 1'b0, 1'b0, 1'b0, 2'($urandom_range(0, 3)), 3'($urandom_range(0, 7))};
      if ($urandom_range(0, 9) == 0) vt[5] = 1'b1;                 // reserved SEW
      if ($urandom_range(0, 19) == 0) vt[12] = 1'b1;               // reserved vtype bits
      fu_free    = NFU'($urandom_range(0, 7)) | (($urandom_range(0, 1) == 0) ? 3'b111 : 3'b000);
      waw_hazard = $urandom_range(0, 3) == 0;
      if (kind <= 2) begin
        // vset*
        int avl;
        int sew_l2, l2;
        cfg = 1;
        case (kind)
          0: in_insn = {1'b0, vt[10:0], 5'(rs1f), 3'b111, 5'(rd), 7'b1010111};
          1: begin rs1f = $urandom_range(0, 31); in_insn = {2'b11, vt[9:0], 5'(rs1f), 3'b111, 5'(rd), 7'b1010111}; end
          default: begin in_rs2 = vt; in_insn = {1'b1, 6'b000000, 5'd2, 5'(rs1f), 3'b111, 5'(rd), 7'b1010111}; end
        endcase
        if (kind == 0) vt = {21'd0, vt[10:0]};
        if (kind == 1) vt = {22'd0, vt[9:0]};
        sew_l2 = int'(vt[5:3]) + 3;
        l2 = vt[2] ? int'(vt[2:0]) - 8 : int'(vt[2:0]);
        nvill = (vt[31:8] != 0) || vt[5] || vt[2:0] == 3'b100 || sew_l2 > 6 + l2;
        if (kind == 1) avl = rs1f;
        else if (rs1f != 0) avl = (in_rs1 > 32'h7fff_ffff) ? 32'h7fff_ffff : int'(in_rs1);
        else if (rd != 0) avl = 32'h7fff_ffff;
        else avl = r_vl;
        if (nvill) begin nvl = 0; nsew = 0; nlmul = 0; end
        else begin
          nsew = vt[4:3]; nlmul = vt[2:0];
          nvl = (avl < vlmax_of(nsew, nlmul)) ? avl : vlmax_of(nsew, nlmul);
        end
      end else begin
        // vadd.vv or vle8.v, sometimes with registers past v15
        automatic int lm = (r_lmul >= 4) ? 1 : (1 << r_lmul);
        automatic bit is_ld = kind >= 7;
        vd  = $urandom_range(0, 7) * lm % 24;
        vs2 = $urandom_range(0, 7) * lm % 24;
        vs1 = $urandom_range(0, 7) * lm % 24;
        fu = is_ld ? FU_LSU : FU_ALU;
        if (is_ld) in_insn = {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, 3'b000, 5'(vd), 7'b0000111};
        else       in_insn = {6'b000000, 1'b1, 5'(vs2), 5'(vs1), 3'b000, 5'(vd), 7'b1010111};
        if (is_ld) begin
          // vle8: EEW 8, EMUL = LMUL * 8 / SEW
          automatic int emul_num = lm * 8, emul;   // times SEW
          automatic int frac = (r_lmul >= 4);
          emul = frac ? 1 : emul_num / (8 << r_sew);
          if (emul < 1) emul = 1;
          vec_ok = !r_vill && (vd % emul == 0) && (vd + emul <= NUM_VREGS) && !(frac == 0 && emul_num < (8 << r_sew) && 0);
          // fractional EMUL below 1/8 is illegal
          if (!r_vill) begin
            automatic int l2 = (r_lmul >= 4) ? r_lmul - 8 : r_lmul;
            if (l2 + 3 - (r_sew + 3) < -3) vec_ok = 0;
          end
        end else begin
          vec_ok = !r_vill && r_sew != 3 && vd + lm <= NUM_VREGS && vs1 + lm <= NUM_VREGS && vs2 + lm <= NUM_VREGS;
        end
        ill = !vec_ok;
      end
      in_valid = 1;
      #1;
      begin
        automatic bit needs = vec_ok && r_vl != 0;
        automatic bit exp_ready = !needs || (fu_free[fu] && !waw_hazard);
        chk($sformatf("in_ready kind %0d", kind), in_ready == exp_ready);
        chk("disp_valid", disp_valid == (needs && exp_ready));
        chk("fu_stall", fu_stall == (needs && !fu_free[fu]));
        chk("waw_stall", waw_stall == (needs && fu_free[fu] && waw_hazard));
        if (needs && !fu_free[fu]) n_fu_stall++;
        if (needs && fu_free[fu] && waw_hazard) n_waw_stall++;
        if (disp_valid) begin
          automatic int lmd = (r_lmul >= 4) ? 1 : (1 << r_lmul);
          automatic logic [NCH-1:0] m = '0;
          if (fu == FU_LSU) lmd = (r_lmul >= 4) ? 1 : ((lmd * 8 / (8 << r_sew)) < 1 ? 1 : lmd * 8 / (8 << r_sew));
          for (int c = vd * CPR; c < (vd + lmd) * CPR; c++) m[c] = 1;
          chk("disp_fu", disp_fu == fu);
          chk("disp_uop.vl", int'(disp_uop.vl) == r_vl);
          chk("disp_dst", disp_dst == m);
          n_disp++;
        end
        @(posedge clk);
        #1;
        chk("res_valid", res_valid == (cfg && exp_ready));
        if (cfg) chk($sformatf("vset vl %0d vs %0d", res_data, nvl), res_data == nvl);
        chk("illegal pulse", illegal == (ill && exp_ready));
        if (ill) n_ill++;
        if (cfg) begin
          n_cfg++;
          r_vill = nvill; r_sew = nsew; r_lmul = nlmul; r_vl = nvl;
        end
        chk("vl_o", int'(vl_o) == r_vl);
        chk("vill_o", vill_o == r_vill);
        chk("vtype_o", r_vill || (vtype_o[4:3] == r_sew && vtype_o[2:0] == r_lmul));
      end
      in_valid = 0;
    end
    chk("coverage: dispatches", n_disp > 100);
    chk("coverage: vset", n_cfg > 100);
    chk("coverage: illegal", n_ill > 20);
    chk("coverage: unit busy stalls", n_fu_stall > 20);
    chk("coverage: WAW stalls", n_waw_stall > 20);
    $display("dispatched %0d, vset %0d, illegal %0d, fu stalls %0d, waw stalls %0d",
             n_disp, n_cfg, n_ill, n_fu_stall, n_waw_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
