// tb_vmac: self-checking test of the multiply-accumulate unit on its own.
//
// A small register-file model in the testbench serves the unit's read ports
// and takes its writes. Random uops (vmul, vmacc, vwmacc, vwmaccu in .vv and
// .vx forms, SEW 8/16/32, LMUL 1..4, random vl) are run one at a time with the
// chaining grant `go` randomly withheld; after each the whole register file is
// compared with a reference computed element by element in the testbench.
// The latency from a group's go to its register write must be 5 cycles, and
// a queued second instruction must be accepted while the first runs.
module tb_vmac;
  import rvv_pkg::*;

  localparam int unsigned NUM_VREGS = 16, VLEN = 64, DLEN = 32;
  localparam int unsigned CPR = VLEN / DLEN, NCH = NUM_VREGS * CPR, CW = $clog2(NCH), DB = DLEN / 8;
  localparam int unsigned VLENB = VLEN / 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, go, active, last, q_valid;
  uop_t uop_in;
  logic [NCH-1:0] rd_now, wr_now, rd_fut, wr_fut, wr_all, q_rd, q_wr, pipe_wr;
  logic [3:0][CW-1:0] raddr;
  logic [3:0][DLEN-1:0] rdata;
  logic [1:0] we;
  logic [1:0][CW-1:0] waddr;
  logic [1:0][DLEN-1:0] wdata;
  logic [1:0][DB-1:0] wbe;

  vmac #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN)) dut (
    .clk, .rst_n, .start, .uop_in, .go, .active, .last,
    .rd_now, .wr_now, .rd_fut, .wr_fut, .wr_all, .q_valid, .q_rd, .q_wr, .pipe_wr,
    .vrf_raddr(raddr), .vrf_rdata(rdata), .vrf_we(we), .vrf_waddr(waddr),
    .vrf_wdata(wdata), .vrf_wbe(wbe)
  );

  logic [7:0] rf [NUM_VREGS * VLENB];   // DUT-side register file
  logic [7:0] ex [NUM_VREGS * VLENB];   // expected contents

  always_comb
    for (int p = 0; p < 4; p++)
      for (int b = 0; b < DB; b++) rdata[p][b*8 +: 8] = rf[raddr[p] * DB + b];

  int checks = 0, failures = 0;
  longint cycle = 0, go_cyc [$], lat_err = 0, lat_n = 0;
  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (go && rst_n) go_cyc.push_back(cycle);
    if (we[0] && rst_n) begin
      longint g;
      g = go_cyc.pop_front();
      lat_n++;
      if (cycle - g != 5) lat_err++;
    end
    for (int p = 0; p < 2; p++)
      if (we[p])
        for (int b = 0; b < DB; b++) if (wbe[p][b]) rf[waddr[p] * DB + b] <= wdata[p][b*8 +: 8];
  end

  // grant withheld at random to exercise stalls
  logic go_en;
  always_ff @(posedge clk) go_en <= ($urandom_range(0, 3) != 0);
  assign go = active && go_en;

  function automatic logic [63:0] eget(int r, int i, int eb);
    logic [63:0] v = '0;
    for (int b = 0; b < eb; b++) v[b*8 +: 8] = rf[r * VLENB + i * eb + b];
    return v;
  endfunction
  task automatic eset(int r, int i, int eb, logic [63:0] v);
    for (int b = 0; b < eb; b++) ex[r * VLENB + i * eb + b] = v[b*8 +: 8];
  endtask
  function automatic logic [63:0] sx(logic [63:0] v, int bits, logic sgn);
    logic [63:0] m = (bits >= 64) ? '1 : (64'd1 << bits) - 1;
    return (sgn && v[bits-1]) ? (v | ~m) : (v & m);
  endfunction

  function automatic uop_t make(op_e op, int sew, int vd, int vs1, int vs2, bit scal,
                                bit wvs2, int vl, logic [31:0] x);
    uop_t u = '0;
    u.fu = FU_MAC; u.op = op; u.sew = 2'(sew);
    u.vd = 5'(vd); u.vs1 = 5'(vs1); u.vs2 = 5'(vs2);
    u.rd_vs1 = !scal; u.rd_vs2 = 1'b1; u.wr_vd = 1'b1; u.rd_vd = (op != OP_MUL);
    u.wide_vd = (op == OP_WMACC || op == OP_WMACCU); u.wide_vs2 = wvs2;
    u.use_scalar = scal; u.sign_ext = (op != OP_WMACCU); u.scalar = x;
    u.vl = 16'(vl); u.ngroups = 16'((vl * (1 << sew) + DB - 1) / DB);
    return u;
  endfunction

  task automatic reference(uop_t u);
    int eb = 1 << u.sew, sb = 8 << u.sew;
    for (int e = 0; e < int'(u.vl); e++) begin
      logic [63:0] x, y, r;
      x = u.use_scalar ? 64'(u.scalar) : eget(u.vs1, e, eb);
      y = eget(u.vs2, e, eb);
      unique case (u.op)
        OP_MUL:  eset(u.vd, e, eb, x * y);
        OP_MACC: eset(u.vd, e, eb, eget(u.vd, e, eb) + x * y);
        default: begin
          r = eget(u.vd, e, 2 * eb) + sx(x, sb, u.sign_ext) * sx(y, sb, u.sign_ext);
          eset(u.vd, e, 2 * eb, r);
        end
      endcase
    end
  endtask

  task automatic run(uop_t u);
    for (int b = 0; b < NUM_VREGS * VLENB; b++) ex[b] = rf[b];
    reference(u);
    @(negedge clk);
    start = 1'b1; uop_in = u;
    @(negedge clk);
    start = 1'b0;
    while (active || q_valid || |pipe_wr || |we) @(negedge clk);
    for (int b = 0; b < NUM_VREGS * VLENB; b++) begin
      checks++;
      if (rf[b] !== ex[b]) begin
        failures++;
        if (failures < 10) $display("FAIL: op %s sew %0d vl %0d byte %0d = %h, expected %h",
                                    u.op.name(), u.sew, u.vl, b, rf[b], ex[b]);
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b0; uop_in = '0;
    for (int b = 0; b < NUM_VREGS * VLENB; b++) rf[b] = 8'($urandom());
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      automatic int sew = $urandom_range(0, 2), lm = $urandom_range(0, 2), g = 1 << lm;
      automatic int vlmax = (VLENB >> sew) << lm, vl = $urandom_range(1, vlmax);
      automatic int k = $urandom_range(0, 5);
      automatic bit scal = $urandom_range(0, 1);
      int vd, vs1, vs2;
      op_e op;
      if (k >= 3 && lm < 2) begin
        automatic int wg = 2 * g;
        vd  = wg * $urandom_range(0, NUM_VREGS / wg - 1);
        vs1 = (vd + wg + g * $urandom_range(0, 1)) % NUM_VREGS;
        vs2 = (vd + wg + g * $urandom_range(0, 1)) % NUM_VREGS;
        op  = (k == 4) ? OP_WMACCU : OP_WMACC;
        run(make(op, sew, vd, vs1, vs2, scal, 1'b0, vl, $urandom()));
      end else begin
        vd  = g * $urandom_range(0, NUM_VREGS / g - 1);
        vs1 = g * $urandom_range(0, NUM_VREGS / g - 1);
        vs2 = g * $urandom_range(0, NUM_VREGS / g - 1);
        op  = (k == 0) ? OP_MUL : OP_MACC;
        run(make(op, sew, vd, vs1, vs2, scal, 1'b0, vl, $urandom()));
      end
    end
    checks++;
    if (lat_err != 0 || lat_n == 0) begin
      failures++;
      $display("FAIL: %0d of %0d results not written 5 cycles after their read", lat_err, lat_n);
    end
    // back-to-back: second instruction queued, first group one cycle after
    // the first instruction's last group
    begin
      longint t_last, t_first2;
      @(negedge clk);
      start = 1'b1; uop_in = make(OP_MUL, 0, 2, 4, 6, 1'b0, 1'b0, 8, 0);
      @(negedge clk);
      uop_in = make(OP_MUL, 0, 8, 10, 12, 1'b0, 1'b0, 8, 0);
      checks++;
      if (q_valid) begin failures++; $display("FAIL: queue busy too early"); end
      @(negedge clk);
      start = 1'b0;
      checks++;
      if (!q_valid) begin failures++; $display("FAIL: second instruction not queued"); end
      while (active) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
