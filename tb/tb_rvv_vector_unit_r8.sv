// tb_rvv_vector_unit_r8: end-to-end test of the vector unit built with only
// 8 vector registers (NUM_VREGS = 8), the smaller register file the reduced
// register proposal also allows.
//
// Same structure as the default-size test: the testbench plays the scalar
// core, a sequential ISA reference model executes every accepted instruction,
// and registers and memory are compared at the end. It runs the kernels whose
// register footprint fits in v0..v7, with the same loop timings as with 16
// registers:
//   GEMM 2 x 8, e8 -> e16, LMUL 1 (9-cycle loop, MAC busy 4 of 9), B in v2
//   accumulation e16 -> e32, LMUL 2 (4-cycle loop, ALU and load 100 %)
//   dot product e16 -> e32, LMUL 2 (8-cycle loop, load 100 %, MAC 50 %)
// and checks that the kernels that need more registers are rejected: the
// 2 x 16 GEMM's second accumulator (v8..v11), the matrix x vector
// accumulator (v8..v15) and any register from v8 up. Whole-register moves,
// directed hazards and a random instruction stream confined to v0..v7
// follow; each mechanism must be seen at least once.
module tb_rvv_vector_unit_r8;
  import rvv_pkg::*;

  localparam int unsigned NUM_VREGS = 8;
  localparam int unsigned VLEN  = 64;
  localparam int unsigned DLEN  = 32;
  localparam int unsigned VLENB = VLEN / 8;
  localparam int unsigned MEMW  = 4096;            // words of test memory

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              insn_valid;
  logic              insn_ready;
  logic [31:0]       insn;
  logic [XLEN-1:0]   rs1, rs2;
  logic              res_valid;
  logic [XLEN-1:0]   res_data;
  logic              illegal;
  logic              busy;
  logic              mem_req, mem_we;
  logic [XLEN-1:0]   mem_addr;
  logic [DLEN-1:0]   mem_wdata, mem_rdata;
  logic [DLEN/8-1:0] mem_be;
  chain_dbg_t        dbg;

  rvv_vector_unit #(.NUM_VREGS(NUM_VREGS)) dut (
    .clk, .rst_n, .insn_valid, .insn_ready, .insn, .rs1, .rs2,
    .res_valid, .res_data, .illegal, .busy,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_be, .mem_rdata, .dbg
  );

  // ---------------- memory model: one-cycle synchronous read -------------
  logic [31:0] dmem [MEMW];
  always_ff @(posedge clk) begin
    if (mem_req) begin
      if (mem_we) begin
        for (int b = 0; b < 4; b++)
          if (mem_be[b]) dmem[mem_addr[13:2]][b*8 +: 8] <= mem_wdata[b*8 +: 8];
      end else begin
        mem_rdata <= dmem[mem_addr[13:2]];
      end
    end
  end

  // ---------------- bookkeeping -------------------------------------------
  int checks = 0, failures = 0;
  longint cycle = 0;
  longint n_go [NFU];
  longint n_chained [NFU];
  longint n_raw = 0, n_war = 0, n_waw = 0, n_fustall = 0, n_illegal = 0, n_vset = 0;
  int exp_illegal = 0;

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      for (int f = 0; f < NFU; f++) begin
        if (dbg.go[f])      n_go[f]      <= n_go[f] + 1;
        if (dbg.chained[f]) n_chained[f] <= n_chained[f] + 1;
      end
      if (|dbg.raw_stall) n_raw <= n_raw + 1;
      if (|dbg.war_stall) n_war <= n_war + 1;
      if (dbg.waw_stall)  n_waw <= n_waw + 1;
      if (dbg.fu_stall)   n_fustall <= n_fustall + 1;
      if (illegal)        n_illegal <= n_illegal + 1;
    end
  end

  // optional per-cycle trace: run with +trace
  bit trace;
  initial trace = $test$plusargs("trace");
  always @(posedge clk) if (trace && rst_n)
    $display("c%0d valid=%b ready=%b insn=%h go=%b chained=%b raw=%b war=%b waw=%b fu=%b",
             cycle, insn_valid, insn_ready, insn, dbg.go, dbg.chained, dbg.raw_stall,
             dbg.war_stall, dbg.waw_stall, dbg.fu_stall);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- instruction encodings (RVV 1.0) ------------------------
  function automatic logic [10:0] vt(int sew_l2, int lmul_code);
    return 11'((sew_l2 << 3) | lmul_code);   // vta = vma = 0
  endfunction
  function automatic logic [31:0] e_vsetvli(int rd, int rs1f, logic [10:0] vtype);
    return {1'b0, vtype, 5'(rs1f), 3'b111, 5'(rd), 7'b1010111};
  endfunction
  function automatic logic [31:0] e_opv(logic [5:0] f6, int vs2, int vs1, logic [2:0] f3, int vd);
    return {f6, 1'b1, 5'(vs2), 5'(vs1), f3, 5'(vd), 7'b1010111};
  endfunction
  function automatic logic [2:0] wcode(int eew_l2);
    return (eew_l2 == 0) ? 3'b000 : (eew_l2 == 1) ? 3'b101 : (eew_l2 == 2) ? 3'b110 : 3'b111;
  endfunction
  function automatic logic [31:0] e_vle(int eew_l2, int vd, int rs1f);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'(rs1f), wcode(eew_l2), 5'(vd), 7'b0000111};
  endfunction
  function automatic logic [31:0] e_vse(int eew_l2, int vs3, int rs1f);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'(rs1f), wcode(eew_l2), 5'(vs3), 7'b0100111};
  endfunction

  // ---------------- ISA reference model -----------------------------------
  logic [7:0]  rvr [NUM_VREGS * VLENB];
  logic [31:0] rmem [MEMW];
  int          r_vl = 0, r_sew = 0, r_lmul = 0;   // sew/lmul as log2
  int          vl_q [$];                          // expected vset results
  logic        r_vill = 1'b1;

  function automatic logic [7:0] rmem_b(int a);
    return rmem[a >> 2][(a & 3) * 8 +: 8];
  endfunction

  function automatic logic [63:0] rget(int r, int i, int eb);
    logic [63:0] v = '0;
    for (int b = 0; b < eb; b++) v[b*8 +: 8] = rvr[r * VLENB + i * eb + b];
    return v;
  endfunction
  task automatic rset(int r, int i, int eb, logic [63:0] v);
    for (int b = 0; b < eb; b++) rvr[r * VLENB + i * eb + b] = v[b*8 +: 8];
  endtask
  function automatic logic [63:0] sx(logic [63:0] v, int bits, logic sgn);
    logic [63:0] m = (bits >= 64) ? '1 : (64'd1 << bits) - 1;
    return (sgn && v[bits-1]) ? (v | ~m) : (v & m);
  endfunction

  // executes one legal instruction; returns the vl for a vset*
  task automatic ref_exec(input logic [31:0] i, input logic [31:0] x1);
    logic [6:0] opc = i[6:0];
    logic [2:0] f3  = i[14:12];
    logic [5:0] f6  = i[31:26];
    int vd = i[11:7], vs1 = i[19:15], vs2 = i[24:20];
    if (opc == 7'b1010111 && f3 == 3'b111) begin
      int sew_l2 = i[25:23], lm = i[22:20], l2, vlmax;
      longint avl;
      l2 = lm[2] ? lm - 8 : lm;
      vlmax = (l2 >= 0) ? (VLEN >> (sew_l2 + 3)) << l2 : (VLEN >> (sew_l2 + 3)) >> (-l2);
      if (vs1 != 0) avl = x1; else if (vd != 0) avl = 64'hffff_ffff; else avl = r_vl;
      r_vl = (avl < vlmax) ? int'(avl) : vlmax;
      r_sew = sew_l2; r_lmul = l2; r_vill = 1'b0;
      vl_q.push_back(r_vl);
    end else if ((opc == 7'b0000111 || opc == 7'b0100111) && i[24:20] == 5'b01000) begin
      // whole-register load/store: (nf+1) registers, ignores vl
      for (int b = 0; b < (int'(i[31:29]) + 1) * VLENB; b++) begin
        int a = int'(x1) + b;
        if (opc == 7'b0000111) rvr[vd * VLENB + b] = rmem_b(a);
        else rmem[a >> 2][(a & 3) * 8 +: 8] = rvr[vd * VLENB + b];
      end
    end else if (opc == 7'b0000111 || opc == 7'b0100111) begin
      int eb = 1 << ((f3 == 3'b000) ? 0 : (f3 == 3'b101) ? 1 : (f3 == 3'b110) ? 2 : 3);
      for (int e = 0; e < r_vl; e++)
        for (int b = 0; b < eb; b++) begin
          int a = int'(x1) + e * eb + b;
          if (opc == 7'b0000111) rvr[vd * VLENB + e * eb + b] = rmem_b(a);
          else rmem[a >> 2][(a & 3) * 8 +: 8] = rvr[vd * VLENB + e * eb + b];
        end
    end else begin
      int sb = 8 << r_sew, eb = 1 << r_sew;
      for (int e = 0; e < r_vl; e++) begin
        logic [63:0] x, y, w, acc, r;
        logic sgn;
        sgn = 1'b1;
        if (f3 == 3'b000 || f3 == 3'b010) x = rget(vs1, e, eb);
        else if (f3 == 3'b011) x = sx(64'(vs1), 5, 1'b1);
        else x = 64'(x1);
        if (f3 == 3'b010 || f3 == 3'b110) begin
          unique case (f6)
            6'b110000, 6'b110001, 6'b110100, 6'b110101,
            6'b110010, 6'b110011, 6'b110110, 6'b110111: begin   // widening add/sub
              sgn = f6[0];
              w = (f6[2]) ? rget(vs2, e, 2 * eb) : sx(rget(vs2, e, eb), sb, sgn);
              r = f6[1] ? w - sx(x, sb, sgn) : w + sx(x, sb, sgn);
              rset(vd, e, 2 * eb, r);
            end
            6'b100101: rset(vd, e, eb, x * rget(vs2, e, eb));
            6'b101101: rset(vd, e, eb, rget(vd, e, eb) + x * rget(vs2, e, eb));
            6'b111100, 6'b111101: begin
              sgn = f6[0];
              acc = rget(vd, e, 2 * eb);
              r = acc + sx(x, sb, sgn) * sx(rget(vs2, e, eb), sb, sgn);
              rset(vd, e, 2 * eb, r);
            end
            default: ;
          endcase
        end else begin
          logic [63:0] y0, xs, ys;
          int sh;
          y0 = rget(vs2, e, eb);
          xs = sx(x, sb, 1'b1); ys = sx(y0, sb, 1'b1);
          sh = int'(x[5:0]) % sb;
          unique case (f6)
            6'b000000: rset(vd, e, eb, y0 + x);
            6'b000010: rset(vd, e, eb, y0 - x);
            6'b000011: rset(vd, e, eb, x - y0);
            6'b000100: rset(vd, e, eb, (y0 < sx(x, sb, 1'b0)) ? y0 : x);
            6'b000101: rset(vd, e, eb, ($signed(ys) < $signed(xs)) ? y0 : x);
            6'b000110: rset(vd, e, eb, (y0 > sx(x, sb, 1'b0)) ? y0 : x);
            6'b000111: rset(vd, e, eb, ($signed(ys) > $signed(xs)) ? y0 : x);
            6'b001001: rset(vd, e, eb, y0 & x);
            6'b001010: rset(vd, e, eb, y0 | x);
            6'b001011: rset(vd, e, eb, y0 ^ x);
            6'b100101: rset(vd, e, eb, y0 << sh);
            6'b101000: rset(vd, e, eb, y0 >> sh);
            6'b101001: rset(vd, e, eb, 64'($signed(ys) >>> sh));
            6'b010111: rset(vd, e, eb, x);
            default: ;
          endcase
        end
      end
    end
  endtask

  // ---------------- issue helpers (all start and end at a falling edge) ---
  task automatic issue(input logic [31:0] i, input logic [31:0] x1 = 0, input bit exp_ill = 0);
    insn = i; rs1 = x1; rs2 = '0; insn_valid = 1'b1;
    #1;                                   // let the decoder settle
    while (!insn_ready) begin
      @(negedge clk);
      #1;
    end
    if (exp_ill) exp_illegal++;
    else ref_exec(i, x1);
    if (i[6:0] == 7'b1010111 && i[14:12] == 3'b111) n_vset++;
    @(negedge clk);
    insn_valid = 1'b0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic drain();
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  // vset result check
  always @(posedge clk) if (rst_n && res_valid) begin
    int e;
    e = (vl_q.size() > 0) ? vl_q.pop_front() : -1;
    checks++;
    if (res_data != 32'(e)) begin
      failures++;
      $display("FAIL: vset returned vl=%0d, expected %0d", res_data, e);
    end
  end

  function automatic logic [7:0] dmem_b(int a);
    return dmem[a >> 2][(a & 3) * 8 +: 8];
  endfunction
  function automatic logic [7:0] in_b(int a);   // input data, same in both memories
    return rmem_b(a);
  endfunction
  function automatic logic [31:0] sx8(int a); return 32'($signed(in_b(a))); endfunction
  function automatic logic [31:0] rd16(int a); return {dmem_b(a + 1), dmem_b(a)}; endfunction
  function automatic logic [31:0] rd32(int a); return {dmem_b(a + 3), dmem_b(a + 2), dmem_b(a + 1), dmem_b(a)}; endfunction

  // measures utilisation of unit f between two snapshots
  longint snap_cyc, snap_go [NFU];
  task automatic snap();
    snap_cyc = cycle;
    for (int f = 0; f < NFU; f++) snap_go[f] = n_go[f];
  endtask
  task automatic util(int f, longint exp_num, longint exp_cyc, string what);
    longint dc = cycle - snap_cyc, dg = n_go[f] - snap_go[f];
    $display("%s: %0d cycles, unit %0d busy %0d", what, dc, f, dg);
    check(dc == exp_cyc, $sformatf("%s: %0d cycles, expected %0d", what, dc, exp_cyc));
    check(dg == exp_num, $sformatf("%s: unit %0d busy %0d cycles, expected %0d", what, f, dg, exp_num));
  endtask

  // ---------------- test data layout (byte addresses) ---------------------
  localparam int A_MAT = 32'h0000;   // GEMM A: 2 x K bytes, rows of 64
  localparam int B_MAT = 32'h0100;   // GEMM B: K rows of 16 bytes
  localparam int C_MAT = 32'h0400;   // GEMM C: 2 x 16 halfwords
  localparam int X_VEC = 32'h0800;   // 16-bit vectors for accumulation/dot product
  localparam int Y_VEC = 32'h0A00;
  localparam int R_OUT = 32'h0C00;
  localparam int M_MAT = 32'h1000;   // GEMV matrix, rows of 128 bytes
  localparam int V_IN  = 32'h1C00;   // GEMV input vector (bytes)
  localparam int DUMP  = 32'h3000;   // register dump
  localparam int RND   = 32'h2000;   // random-test area

  localparam int K  = 12;   // GEMM depth / loop trip counts
  localparam int NA = 10;   // accumulation iterations
  localparam int ND = 10;   // dot-product iterations
  localparam int NM = 10;   // GEMV rows

  // zero accumulators v0..v7 (e16, LMUL 4)
  task automatic zero_acc(int sew_l2, int lmul_code, int r0, int r1);
    issue(e_vsetvli(1, 0, vt(sew_l2, lmul_code)));
    issue(e_opv(6'b010111, 0, 0, 3'b011, r0));
    if (r1 >= 0) issue(e_opv(6'b010111, 0, 0, 3'b011, r1));
  endtask

  task automatic gemm(bit single_ptr, int lm);
    // C[2][N] += A[2][K] * B[K][N], N = 8 * 2^lm
    // lm = 1: Table 1 (9 cycles) or Table 2 (8 cycles); lm = 0: Table 3
    int n = 8 << lm;
    string name = (lm == 0) ? "GEMM LMUL1 (Table 3)" :
                  single_ptr ? "GEMM LMUL2 single pointer (Table 2)" : "GEMM LMUL2 (Table 1)";
    zero_acc(1, lm + 1, 0, 4);                  // e16, LMUL 2*lm
    issue(e_vsetvli(1, 0, vt(0, lm)));          // e8, vl = n
    idle(4);
    for (int k = 0; k < K; k++) begin
      if (k == 2) snap();
      issue(e_vle(0, 2, 28), B_MAT + 16 * k);     // 0  vle8.v v2,(x28)
      idle(2);                                    // 1-2 c.addi, lb
      issue(e_opv(6'b111101, 2, 7, 3'b110, 0), sx8(A_MAT + k));       // 3 vwmacc.vx v0
      idle(single_ptr ? 2 : 3);
      issue(e_opv(6'b111101, 2, 8, 3'b110, 4), sx8(A_MAT + 64 + k)); // vwmacc.vx v4
      idle(1);                                    // bne
    end
    util(FU_MAC, 4 * (lm + 1) * (K - 2), (single_ptr ? 8 : 9) * (K - 2), name);
    issue(e_vsetvli(1, 0, vt(1, lm + 1)));      // e16
    issue(e_vse(1, 0, 10), C_MAT);
    issue(e_vse(1, 4, 10), C_MAT + 32);
    drain();
    for (int r = 0; r < 2; r++)
      for (int j = 0; j < n; j++) begin
        logic [15:0] acc = '0;
        for (int k = 0; k < K; k++)
          acc += 16'($signed(in_b(A_MAT + 64 * r + k)) * $signed(in_b(B_MAT + 16 * k + j)));
        check(rd16(C_MAT + 32 * r + 2 * j) == 32'(acc), $sformatf("%s C[%0d][%0d]", name, r, j));
      end
  endtask

  task automatic accumulation();
    // Table 5: v4..v7 (e32) += v0..v1 (e16), 4-cycle loop
    zero_acc(2, 2, 4, -1);
    issue(e_vsetvli(1, 0, vt(1, 1)));           // e16, LMUL 2, vl = 8
    idle(4);
    for (int n = 0; n < NA; n++) begin
      if (n == 2) snap();
      issue(e_vle(1, 0, 10), X_VEC + 16 * n);     // vle16.v v0,(a0)
      issue(e_opv(6'b110101, 4, 0, 3'b010, 4));   // vwadd.wv v4,v4,v0
      idle(2);
    end
    util(FU_ALU, 4 * (NA - 2), 4 * (NA - 2), "accumulation ALU (Table 5)");
    check(n_go[FU_LSU] - snap_go[FU_LSU] == 4 * (NA - 2), "accumulation load unit 100 %");
    issue(e_vsetvli(1, 0, vt(2, 2)));
    issue(e_vse(2, 4, 10), R_OUT);
    drain();
    for (int j = 0; j < 8; j++) begin
      logic [31:0] s = '0;
      for (int n = 0; n < NA; n++) s += 32'($signed({in_b(X_VEC + 16 * n + 2 * j + 1), in_b(X_VEC + 16 * n + 2 * j)}));
      check(rd32(R_OUT + 4 * j) == s, $sformatf("accumulation lane %0d", j));
    end
  endtask

  task automatic dot_product();
    // Table 6: v4..v7 (e32) += v0..v1 * v2..v3 (e16), 8-cycle loop
    zero_acc(2, 2, 4, -1);
    issue(e_vsetvli(1, 0, vt(1, 1)));
    idle(4);
    for (int n = 0; n < ND; n++) begin
      if (n == 2) snap();
      issue(e_vle(1, 0, 10), X_VEC + 16 * n);     // 0 vle16.v v0,(x10)
      idle(3);
      issue(e_vle(1, 2, 11), Y_VEC + 16 * n);     // 4 vle16.v v2,(x11)
      idle(1);
      issue(e_opv(6'b111101, 2, 0, 3'b010, 4));   // 6 vwmacc.vv v4,v0,v2
      idle(1);
    end
    util(FU_MAC, 4 * (ND - 2), 8 * (ND - 2), "dot product MAC (Table 6)");
    check(n_go[FU_LSU] - snap_go[FU_LSU] == 8 * (ND - 2), "dot product load unit 100 %");
    issue(e_vsetvli(1, 0, vt(2, 2)));
    issue(e_vse(2, 4, 10), R_OUT + 64);
    drain();
    for (int j = 0; j < 8; j++) begin
      logic [31:0] s = '0;
      for (int n = 0; n < ND; n++)
        s += 32'($signed({in_b(X_VEC + 16 * n + 2 * j + 1), in_b(X_VEC + 16 * n + 2 * j)}) *
                 $signed({in_b(Y_VEC + 16 * n + 2 * j + 1), in_b(Y_VEC + 16 * n + 2 * j)}));
      check(rd32(R_OUT + 64 + 4 * j) == s, $sformatf("dot product lane %0d", j));
    end
  endtask

  task automatic gemv();
    // Table 7: y[32] (e16, v8..v15) += M[n][0..31] * x[n], 9-cycle loop
    zero_acc(1, 3, 8, -1);                      // e16, LMUL 8
    issue(e_vsetvli(1, 0, vt(0, 2)));           // e8, LMUL 4, vl = 32
    idle(4);
    for (int n = 0; n < NM; n++) begin
      if (n == 2) snap();
      idle(1);                                    // 0 lbu a2
      issue(e_vle(0, 0, 14), M_MAT + 128 * n);    // 1 vle8.v v0,(a4)
      idle(4);                                    // 2-5
      issue(e_opv(6'b111101, 0, 12, 3'b110, 8), sx8(V_IN + n)); // 6 vwmacc.vx
      idle(2);                                    // 7-8
    end
    util(FU_MAC, 8 * (NM - 2), 9 * (NM - 2), "matrix x vector MAC (Table 7)");
    check(n_go[FU_LSU] - snap_go[FU_LSU] == 8 * (NM - 2), "matrix x vector load unit 8 of 9");
    issue(e_vsetvli(1, 0, vt(1, 3)));
    issue(e_vse(1, 8, 10), R_OUT + 128);
    drain();
    for (int j = 0; j < 32; j++) begin
      logic [15:0] s = '0;
      for (int n = 0; n < NM; n++) s += 16'($signed(in_b(M_MAT + 128 * n + j)) * $signed(in_b(V_IN + n)));
      check(rd16(R_OUT + 128 + 2 * j) == 32'(s), $sformatf("GEMV y[%0d]", j));
    end
  endtask

  // vl<n>re<eew>.v / vs<n>r.v
  function automatic logic [31:0] e_wr(bit store, int n, int eew_l2, int vd, int rs1f);
    logic [2:0] w = (eew_l2 == 0) ? 3'b000 : (eew_l2 == 1) ? 3'b101 : (eew_l2 == 2) ? 3'b110 : 3'b111;
    return {3'(n - 1), 1'b0, 2'b00, 1'b1, 5'b01000, 5'(rs1f), w, 5'(vd), store ? 7'b0100111 : 7'b0000111};
  endfunction

  task automatic whole_regs();
    issue(e_vsetvli(1, 0, vt(0, 0)));
    issue(e_vsetvli(1, 5, vt(1, 0)), 32'd1);              // e16, vl = 1
    issue(e_wr(0, 4, 1, 4, 10), X_VEC);                   // vl4re16.v v4
    issue(e_wr(0, 2, 0, 2, 10), B_MAT);                   // vl2re8.v v2
    issue(e_wr(1, 8, 0, 0, 10), RND + 256);               // vs8r.v v0
    issue(e_wr(0, 1, 3, 7, 10), RND + 260);               // vl1re64.v v7
    issue(e_wr(0, 8, 0, 4, 10), B_MAT, 1'b1);             // vl8re8.v v4: misaligned
    issue(e_wr(0, 2, 0, 7, 10), B_MAT, 1'b1);             // vl2re8.v v7: past v7
    issue(e_wr(0, 8, 0, 8, 10), B_MAT, 1'b1);             // vl8re8.v v8: past v7
    drain();
  endtask

  task automatic reduced_regs();
    // with 8 registers: the LMUL 2 GEMM's second accumulator, the matrix x
    // vector accumulator and every register from v8 up are illegal
    longint ill0 = n_illegal;
    issue(e_vsetvli(1, 0, vt(0, 1)));                        // e8, LMUL 2
    issue(e_opv(6'b111101, 2, 7, 3'b110, 4), 32'd3);         // vwmacc.vx v4 (EMUL 4): legal
    issue(e_opv(6'b111101, 2, 8, 3'b110, 8), 32'd3, 1'b1);   // second accumulator v8: illegal
    issue(e_vsetvli(1, 0, vt(0, 2)));                        // e8, LMUL 4
    issue(e_opv(6'b111101, 0, 12, 3'b110, 8), 32'd5, 1'b1);  // matrix x vector accumulator v8
    issue(e_vle(0, 4, 28), B_MAT, 1'b0);                     // v4..v7: legal
    issue(e_vsetvli(1, 0, vt(0, 0)));
    issue(e_vle(0, 8, 28), B_MAT, 1'b1);                     // v8
    issue(e_opv(6'b000000, 7, 8, 3'b000, 1), 0, 1'b1);       // vadd.vv v1,v7,v8
    issue(e_opv(6'b000000, 7, 6, 3'b000, 1));                // vadd.vv v1,v7,v6: legal
    issue(e_vse(0, 31, 28), RND, 1'b1);                      // v31
    idle(2);
    check(n_illegal - ill0 == 5, "five illegal instructions reported");
  endtask

  task automatic hazards();
    issue(e_vsetvli(1, 0, vt(0, 0)));           // e8, LMUL 1, vl = 8
    // RAW: consumer right behind its load
    issue(e_vle(0, 0, 10), RND);
    issue(e_opv(6'b000000, 0, 0, 3'b000, 1));   // vadd.vv v1,v0,v0
    // WAR: ALU waits on v2 while a load wants to overwrite v0 it still reads
    issue(e_vle(0, 2, 10), RND + 8);
    issue(e_opv(6'b000000, 0, 2, 3'b000, 4));   // vadd.vv v4,v0,v2
    issue(e_vle(0, 0, 10), RND + 16);
    // WAW: load to the accumulator of a running MAC
    issue(e_opv(6'b100101, 4, 1, 3'b010, 5));   // vmul.vv v5,v1,v4
    issue(e_vle(0, 5, 10), RND + 24);
    issue(e_opv(6'b101101, 5, 4, 3'b110, 6), 32'd7); // vmacc.vx v6,x,v5
    drain();
  endtask

  // OPI funct6 values of the non-widening ALU operations (.vv; .vx adds vrsub)
  localparam logic [5:0] OPI_VV [12] = '{6'b000000, 6'b000010, 6'b000100, 6'b000101, 6'b000110,
      6'b000111, 6'b001001, 6'b001010, 6'b001011, 6'b100101, 6'b101000, 6'b101001};
  localparam logic [5:0] OPI_VX [13] = '{6'b000000, 6'b000010, 6'b000011, 6'b000100, 6'b000101,
      6'b000110, 6'b000111, 6'b001001, 6'b001010, 6'b001011, 6'b100101, 6'b101000, 6'b101001};

  task automatic random_stream(int n);
    for (int t = 0; t < n; t++) begin
      int kind = $urandom_range(0, 9);
      int sew_l2 = $urandom_range(0, 2);
      int lm = $urandom_range(0, 2);
      int g = 1 << lm;
      int vd = g * $urandom_range(0, NUM_VREGS / g - 1);
      int vs1 = g * $urandom_range(0, NUM_VREGS / g - 1);
      int vs2 = g * $urandom_range(0, NUM_VREGS / g - 1);
      int vlmax = ((VLEN >> 3) >> sew_l2) << lm;
      issue(e_vsetvli(1, 5, vt(sew_l2, lm)), $urandom_range(1, vlmax + 2));
      unique case (kind)
        0: issue(e_vle(sew_l2, vd, 10), RND + 16 * $urandom_range(0, 31));
        1: issue(e_vse(sew_l2, vd, 10), RND + 1024 + 16 * $urandom_range(0, 31));
        2: issue(e_opv(OPI_VV[$urandom_range(0, 11)], vs2, vs1, 3'b000, vd));
        3: issue(e_opv(OPI_VX[$urandom_range(0, 12)], vs2, 5, 3'b100, vd), $urandom());
        4: issue(e_opv(6'b010111, 0, $urandom_range(0, 31), 3'b011, vd));
        5: issue(e_opv(6'b100101, vs2, vs1, 3'b010, vd));
        6: issue(e_opv(6'b101101, vs2, 5, 3'b110, vd), $urandom());
        default: begin
          // widening: destination group of 2*LMUL, sources outside it
          if (lm < 2) begin
            int wg = 2 * g, wvd = wg * $urandom_range(0, NUM_VREGS / wg - 1);
            int s1 = (wvd + wg + g * $urandom_range(0, 1)) % NUM_VREGS;
            int s2 = (wvd + wg + g * $urandom_range(0, 1)) % NUM_VREGS;
            unique case (kind)
              7: issue(e_opv(6'b111101, s2, s1, 3'b010, wvd));
              8: issue(e_opv(6'b111100, s2, 5, 3'b110, wvd), $urandom());
              default: begin
                // vwadd(u)/vwsub(u) in .vv/.vx/.wv/.wx forms
                logic [5:0] wf = 6'b110000 | 6'($urandom_range(0, 7));
                logic [2:0] wf3 = ($urandom_range(0, 1) == 0) ? 3'b010 : 3'b110;
                issue(e_opv(wf, wf[2] ? wvd : s2, s1, wf3, wvd), $urandom());
              end
            endcase
          end
        end
      endcase
      if ($urandom_range(0, 3) == 0) idle($urandom_range(1, 3));
    end
    drain();
  endtask

  task automatic compare_all();
    issue(e_vsetvli(1, 0, vt(0, 3)));           // e8, LMUL 8, vl = 64
    for (int r = 0; r < NUM_VREGS; r += 8) issue(e_vse(0, r, 10), DUMP + r * VLENB);
    drain();
    for (int w = 0; w < MEMW; w++) begin
      checks++;
      if (dmem[w] !== rmem[w]) begin
        failures++;
        if (failures < 20) $display("FAIL: memory word %0h = %h, reference %h", w * 4, dmem[w], rmem[w]);
      end
    end
  endtask

  initial begin
    // watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < NFU; f++) begin n_go[f] = 0; n_chained[f] = 0; end
    for (int w = 0; w < MEMW; w++) begin
      dmem[w] = $urandom();
      rmem[w] = dmem[w];
    end
    for (int b = 0; b < NUM_VREGS * VLENB; b++) rvr[b] = '0;
    mem_rdata = '0;
    insn_valid = 1'b0; insn = '0; rs1 = '0; rs2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    gemm(1'b0, 0);
    accumulation();
    dot_product();
    reduced_regs();
    whole_regs();
    hazards();
    random_stream(400);
    compare_all();

    $display("mechanisms: chained lsu/alu/mac=%0d/%0d/%0d raw=%0d war=%0d waw=%0d fu_busy=%0d illegal=%0d vset=%0d",
             n_chained[0], n_chained[1], n_chained[2], n_raw, n_war, n_waw, n_fustall, n_illegal, n_vset);
    check(n_chained[FU_MAC] > 0, "chaining load -> MAC happened");
    check(n_chained[FU_ALU] > 0, "chaining load -> ALU happened");
    check(n_raw > 0, "RAW stall happened");
    check(n_war > 0, "WAR stall happened");
    check(n_waw > 0, "WAW dispatch stall happened");
    check(n_fustall > 0, "busy-unit dispatch stall happened");
    check(n_illegal == exp_illegal, $sformatf("illegal count %0d, expected %0d", n_illegal, exp_illegal));
    check(n_illegal > 0, "illegal register use happened");
    check(n_vset > 0, "vset executed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
