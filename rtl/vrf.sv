// vrf: vector register file with a reduced number of architectural registers.
//
// The file holds NUM_VREGS registers of VLEN bits. The default of 16 registers
// of 64 bits (1024 bits) is half of what RVV 1.0 requires; NUM_VREGS=8 gives
// the quarter-size option (512 bits, the size of an RV32E scalar register
// file). The register count, VLEN=64 and DLEN=32 come from the paper.
//
// Storage is organised in DLEN-wide chunks: register r consists of chunks
// r*CPR .. r*CPR+CPR-1 with CPR = VLEN/DLEN, chunk 0 holding the low bits.
// The functional units read and write one chunk per port per cycle, which is
// what lets a consumer start on chunk 0 of a register while the producer is
// still working on chunk 1 (chaining).
//
// Ports (this design's choice): NRP combinational read ports and NWP write
// ports with byte enables, written at the rising clock edge. Reads are
// write-through: a read of a chunk being written in the same cycle returns
// the new bytes (a bypass), so a result is usable in the cycle it is written.
// This is what gives the paper's 1-cycle load-to-use latency. The
// hazard logic guarantees that no two ports write one chunk in the same
// cycle; an assertion checks it. Contents are cleared at reset.
module vrf #(
  parameter int unsigned NUM_VREGS = 16,
  parameter int unsigned VLEN      = 64,
  parameter int unsigned DLEN      = 32,
  parameter int unsigned NRP       = 8,
  parameter int unsigned NWP       = 5,
  localparam int unsigned NCH      = NUM_VREGS * VLEN / DLEN,
  localparam int unsigned CW       = $clog2(NCH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NRP-1:0][CW-1:0]    raddr,
  output logic [NRP-1:0][DLEN-1:0]  rdata,
  input  logic [NWP-1:0]            we,
  input  logic [NWP-1:0][CW-1:0]    waddr,
  input  logic [NWP-1:0][DLEN-1:0]  wdata,
  input  logic [NWP-1:0][DLEN/8-1:0] wbe
);

  logic [DLEN-1:0] mem [NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) mem[c] <= '0;
    end else begin
      for (int p = 0; p < NWP; p++) begin
        if (we[p]) begin
          for (int b = 0; b < DLEN/8; b++)
            if (wbe[p][b]) mem[waddr[p]][b*8 +: 8] <= wdata[p][b*8 +: 8];
        end
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NRP; p++) begin
      rdata[p] = mem[raddr[p]];
      for (int w = 0; w < NWP; w++)
        if (we[w] && waddr[w] == raddr[p])
          for (int b = 0; b < DLEN/8; b++)
            if (wbe[w][b]) rdata[p][b*8 +: 8] = wdata[w][b*8 +: 8];
    end
  end

  // No two write ports may target the same chunk in one cycle.
  for (genvar i = 0; i < NWP; i++) begin : g_wchk_i
    for (genvar j = i + 1; j < NWP; j++) begin : g_wchk_j
      a_no_wr_conflict: assert property (@(posedge clk) disable iff (!rst_n)
        !(we[i] && we[j] && waddr[i] == waddr[j]));
    end
  end

endmodule
