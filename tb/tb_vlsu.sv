// tb_vlsu: self-checking test of the vector load/store unit on its own.
//
// The testbench provides a register-file model and a word memory with a
// one-cycle read. Random unit-stride loads and stores (EEW 8..64, register
// groups of 1..8, random vl and DLEN-aligned base addresses) run one at a
// time with the grant `go` randomly withheld. After each, register file and
// memory are compared with a byte-level reference; bytes past vl must be
// untouched. Each load beat must be written to the register file exactly one
// cycle after its memory request (the paper's 1-cycle load latency), and a
// 16-byte load with go always granted must issue its four 32-bit beats in
// four consecutive cycles.
module tb_vlsu;
  import rvv_pkg::*;

  localparam int unsigned NUM_VREGS = 16, VLEN = 64, DLEN = 32;
  localparam int unsigned CPR = VLEN / DLEN, NCH = NUM_VREGS * CPR, CW = $clog2(NCH), DB = DLEN / 8;
  localparam int unsigned VLENB = VLEN / 8, MEMW = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, go, active, last, q_valid;
  uop_t uop_in;
  logic [NCH-1:0] rd_now, wr_now, rd_fut, wr_fut, wr_all, q_rd, q_wr;
  logic [CW-1:0] raddr, waddr;
  logic [DLEN-1:0] rdata, wdata;
  logic we;
  logic [DB-1:0] wbe;
  logic mem_req, mem_we;
  logic [XLEN-1:0] mem_addr;
  logic [DLEN-1:0] mem_wdata, mem_rdata;
  logic [DB-1:0] mem_be;

  vlsu #(.NUM_VREGS(NUM_VREGS), .VLEN(VLEN), .DLEN(DLEN)) dut (
    .clk, .rst_n, .start, .uop_in, .go, .active, .last,
    .rd_now, .wr_now, .rd_fut, .wr_fut, .wr_all, .q_valid, .q_rd, .q_wr,
    .vrf_raddr(raddr), .vrf_rdata(rdata), .vrf_we(we), .vrf_waddr(waddr),
    .vrf_wdata(wdata), .vrf_wbe(wbe),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_be, .mem_rdata
  );

  logic [7:0] rf [NUM_VREGS * VLENB], ex_rf [NUM_VREGS * VLENB];
  logic [7:0] mem [MEMW * 4], ex_mem [MEMW * 4];

  always_comb for (int b = 0; b < DB; b++) rdata[b*8 +: 8] = rf[raddr * DB + b];

  int checks = 0, failures = 0;
  longint cycle = 0, req_cyc [$], lat_err = 0, lat_n = 0, nreq = 0, first_req = -1, last_req = -1;
  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (mem_req && rst_n) begin
      nreq <= nreq + 1;
      if (first_req < 0) first_req <= cycle;
      last_req <= cycle;
      if (mem_we) begin
        for (int b = 0; b < DB; b++) if (mem_be[b]) mem[mem_addr + b] <= mem_wdata[b*8 +: 8];
      end else begin
        req_cyc.push_back(cycle);
        for (int b = 0; b < DB; b++) mem_rdata[b*8 +: 8] <= mem[mem_addr + b];
      end
    end
    if (we && rst_n) begin
      longint g;
      g = req_cyc.pop_front();
      lat_n++;
      if (cycle - g != 1) lat_err++;
      for (int b = 0; b < DB; b++) if (wbe[b]) rf[waddr * DB + b] <= wdata[b*8 +: 8];
    end
  end

  logic go_en, always_go;
  always_ff @(posedge clk) go_en <= always_go || ($urandom_range(0, 3) != 0);
  assign go = active && go_en;

  task automatic run(bit store, int eew, int vd, int vl, int base);
    uop_t u = '0;
    int eb = 1 << eew;
    u.fu = FU_LSU; u.op = store ? OP_STORE : OP_LOAD; u.sew = 2'(eew);
    u.vd = 5'(vd); u.wr_vd = !store; u.rd_vd = store; u.scalar = 32'(base);
    u.vl = 16'(vl); u.ngroups = 16'((vl * eb + DB - 1) / DB);
    for (int b = 0; b < NUM_VREGS * VLENB; b++) ex_rf[b] = rf[b];
    for (int b = 0; b < MEMW * 4; b++) ex_mem[b] = mem[b];
    for (int b = 0; b < vl * eb; b++)
      if (store) ex_mem[base + b] = rf[vd * VLENB + b];
      else       ex_rf[vd * VLENB + b] = mem[base + b];
    @(negedge clk);
    start = 1'b1; uop_in = u;
    @(negedge clk);
    start = 1'b0;
    while (active || we) @(negedge clk);
    @(negedge clk);
    for (int b = 0; b < NUM_VREGS * VLENB; b++) begin
      checks++;
      if (rf[b] !== ex_rf[b]) begin
        failures++;
        if (failures < 10) $display("FAIL: load eew %0d vl %0d: reg byte %0d = %h, expected %h", eew, vl, b, rf[b], ex_rf[b]);
      end
    end
    for (int b = 0; b < MEMW * 4; b++) begin
      checks++;
      if (mem[b] !== ex_mem[b]) begin
        failures++;
        if (failures < 10) $display("FAIL: store eew %0d vl %0d: mem byte %0d = %h, expected %h", eew, vl, b, mem[b], ex_mem[b]);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b0; uop_in = '0; always_go = 1'b0; mem_rdata = '0;
    for (int b = 0; b < NUM_VREGS * VLENB; b++) rf[b] = 8'($urandom());
    for (int b = 0; b < MEMW * 4; b++) mem[b] = 8'($urandom());
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      automatic int eew = $urandom_range(0, 3), lm = $urandom_range(0, 3), g = 1 << lm;
      automatic int vl = $urandom_range(1, (VLENB >> eew) << lm);
      automatic int vd = g * $urandom_range(0, NUM_VREGS / g - 1);
      run($urandom_range(0, 1), eew, vd, vl, DB * $urandom_range(0, MEMW - 17));
    end
    checks++;
    if (lat_err != 0 || lat_n == 0) begin
      failures++;
      $display("FAIL: %0d of %0d load beats not written one cycle after the request", lat_err, lat_n);
    end
    // bandwidth: a 16-byte load (vle8, vl=16) issues one 32-bit beat per cycle
    always_go = 1'b1;
    begin
      longint c0, n0;
      @(negedge clk);
      c0 = cycle; n0 = nreq; first_req = -1;
      run(1'b0, 0, 2, 16, 64);
      checks++;
      if (nreq - n0 != 4) begin failures++; $display("FAIL: %0d beats for 16 bytes", nreq - n0); end
      checks++;
      if (last_req - first_req != 3) begin failures++; $display("FAIL: beats spread over %0d cycles", last_req - first_req + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
