// tb_vrf: self-checking test of the chunked vector register file.
//
// Checks reset clearing, byte-enable writes from all write ports, the
// combinational read ports, and the write-through bypass (a read of a chunk
// written in the same cycle returns the new bytes) against a byte-level
// model kept in the testbench. Runs with 16 registers (the default) and a
// second instance with 8 registers, the smaller size the paper proposes.
module tb_vrf;

  localparam int unsigned VLEN = 64, DLEN = 32, NRP = 8, NWP = 5, DB = DLEN / 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  for (genvar k = 0; k < 2; k++) begin : g_size
    localparam int unsigned NV = (k == 0) ? 16 : 8;
    localparam int unsigned NCH = NV * VLEN / DLEN, CW = $clog2(NCH);

    logic [NRP-1:0][CW-1:0]   raddr;
    logic [NRP-1:0][DLEN-1:0] rdata;
    logic [NWP-1:0]           we;
    logic [NWP-1:0][CW-1:0]   waddr;
    logic [NWP-1:0][DLEN-1:0] wdata;
    logic [NWP-1:0][DB-1:0]   wbe;
    logic [DLEN-1:0]          model [NCH];

    vrf #(.NUM_VREGS(NV), .VLEN(VLEN), .DLEN(DLEN), .NRP(NRP), .NWP(NWP)) dut (
      .clk, .rst_n, .raddr, .rdata, .we, .waddr, .wdata, .wbe
    );

    initial begin
      we = '0; raddr = '0; waddr = '0; wdata = '0; wbe = '0;
      for (int c = 0; c < NCH; c++) model[c] = '0;
      wait (rst_n);
      // reset clears every chunk: sweep them through read port 0
      for (int c = 0; c < NCH; c++) begin
        raddr[0] = CW'(c);
        #1;
        checks++;
        if (rdata[0] !== '0) begin
          failures++;
          $display("FAIL: %0d regs: chunk %0d not cleared by reset", NV, c);
        end
      end
      for (int t = 0; t < 2000; t++) begin
        logic [NCH-1:0] used;
        logic [DLEN-1:0] exp_r;
        @(negedge clk);
        used = '0;
        for (int p = 0; p < NWP; p++) begin
          int unsigned a;
          a = $urandom_range(0, NCH - 1);
          we[p] = ($urandom_range(0, 1) == 1) && !used[a];
          if (we[p]) used[a] = 1'b1;
          waddr[p] = CW'(a);
          wdata[p] = $urandom();
          wbe[p]   = DB'($urandom());
        end
        for (int p = 0; p < NRP; p++)
          raddr[p] = ($urandom_range(0, 1) == 1) ? waddr[$urandom_range(0, NWP - 1)] : CW'($urandom_range(0, NCH - 1));
        #1;
        for (int p = 0; p < NRP; p++) begin
          exp_r = model[raddr[p]];
          for (int w = 0; w < NWP; w++)
            if (we[w] && waddr[w] == raddr[p])
              for (int b = 0; b < DB; b++) if (wbe[w][b]) exp_r[b*8 +: 8] = wdata[w][b*8 +: 8];
          checks++;
          if (rdata[p] !== exp_r) begin
            failures++;
            if (failures < 10) $display("FAIL: %0d regs: port %0d chunk %0d = %h, expected %h", NV, p, raddr[p], rdata[p], exp_r);
          end
        end
        for (int w = 0; w < NWP; w++)
          if (we[w])
            for (int b = 0; b < DB; b++) if (wbe[w][b]) model[waddr[w]][b*8 +: 8] = wdata[w][b*8 +: 8];
      end
      @(negedge clk);
      we = '0;
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (2010) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
