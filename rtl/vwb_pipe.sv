// vwb_pipe: fixed-latency result pipeline of an arithmetic unit.
//
// Carries one group result (one chunk, or a chunk pair for a double-wide
// result) through LAT register stages and writes it to the register file
// from the last stage. A result entering in cycle t is written in cycle
// t+LAT, so LAT is the unit's latency from operand read to write-back
// (3 for the ALU and 5 for the MAC, as in the paper).
//
// pipe_wr marks every chunk that has a result in flight in stages 0..LAT-2;
// the chaining controller keeps readers away from those chunks. The result in
// the last stage is already visible to readers through the register-file
// bypass, so a consumer can read it in the cycle it is written.
// Write port 0 carries the (low) chunk, port 1 the high chunk of a wide
// result. Pair results always start at an even chunk.
module vwb_pipe #(
  parameter int unsigned LAT = 3,
  parameter int unsigned NCH = 32,
  parameter int unsigned DLEN = 32,
  localparam int unsigned CW = $clog2(NCH),
  localparam int unsigned DB = DLEN / 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_wide,
  input  logic [CW-1:0]          in_addr,
  input  logic [2*DLEN-1:0]      in_data,
  input  logic [2*DB-1:0]        in_be,
  output logic [1:0]             we,
  output logic [1:0][CW-1:0]     waddr,
  output logic [1:0][DLEN-1:0]   wdata,
  output logic [1:0][DB-1:0]     wbe,
  output logic [NCH-1:0]         pipe_wr
);

  typedef struct packed {
    logic              valid;
    logic              wide;
    logic [CW-1:0]     addr;
    logic [2*DLEN-1:0] data;
    logic [2*DB-1:0]   be;
  } stage_t;

  stage_t st [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LAT; s++) st[s] <= '0;
    end else begin
      st[0] <= '{valid: in_valid, wide: in_wide, addr: in_addr, data: in_data, be: in_be};
      for (int s = 1; s < LAT; s++) st[s] <= st[s-1];
    end
  end

  always_comb begin
    we[0]    = st[LAT-1].valid;
    we[1]    = st[LAT-1].valid && st[LAT-1].wide;
    waddr[0] = st[LAT-1].addr;
    waddr[1] = st[LAT-1].addr + 1'b1;
    wdata[0] = st[LAT-1].data[DLEN-1:0];
    wdata[1] = st[LAT-1].data[2*DLEN-1:DLEN];
    wbe[0]   = st[LAT-1].be[DB-1:0];
    wbe[1]   = st[LAT-1].be[2*DB-1:DB];
    pipe_wr  = '0;
    for (int s = 0; s < LAT - 1; s++) begin
      if (st[s].valid) begin
        pipe_wr[st[s].addr] = 1'b1;
        if (st[s].wide) pipe_wr[st[s].addr + 1'b1] = 1'b1;
      end
    end
  end

endmodule
