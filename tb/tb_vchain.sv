// tb_vchain: self-checking test of the chaining and hazard controller.
//
// The testbench plays the part of the three functional units: it drives the
// chunk masks (what each unit reads and writes now, later, in its pipeline
// and in its queue) and the dispatch signals directly, cycle by cycle, and
// checks the controller's decisions:
//   - RAW on a chunk still in some pipeline stalls the reader;
//   - RAW on a chunk an OLDER instruction has still to write stalls, and the
//     reader starts (chained) as soon as that chunk is no longer pending;
//   - the same masks from a YOUNGER instruction do not stall;
//   - an older instruction's "done" (last group) releases the dependence;
//   - WAR: a writer waits for an older reader of the chunk;
//   - queued instructions count as older (counter value 2);
//   - waw_hazard at dispatch against other units' pending writes only;
//   - fu_free follows the per-unit queue.
module tb_vchain;
  import rvv_pkg::*;

  localparam int NCH = 32;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [NFU-1:0]           active, q_valid, last;
  logic [NFU-1:0][NCH-1:0]  rd_now, wr_now, rd_fut, wr_fut, wr_all, pipe_wr, q_rd, q_wr;
  logic                     disp_valid;
  fu_e                      disp_fu;
  logic [NCH-1:0]           disp_dst;
  logic                     waw_hazard;
  logic [NFU-1:0]           fu_free, go, chained, raw_stall, war_stall;

  vchain #(.NCH(NCH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s (go=%b raw=%b war=%b ch=%b)", $time, what, go, raw_stall, war_stall, chained);
    end
  endtask

  task automatic clear();
    active = '0; q_valid = '0; last = '0;
    rd_now = '0; wr_now = '0; rd_fut = '0; wr_fut = '0; wr_all = '0; pipe_wr = '0; q_rd = '0; q_wr = '0;
    disp_valid = 0; disp_fu = FU_LSU; disp_dst = '0;
  endtask

  function automatic logic [NCH-1:0] rng(int lo, int hi);
    logic [NCH-1:0] m = '0;
    for (int c = lo; c <= hi; c++) m[c] = 1'b1;
    return m;
  endfunction

  // dispatch one instruction to unit f at the next clock edge
  task automatic dispatch(fu_e f);
    disp_valid = 1; disp_fu = f;
    @(posedge clk); #1;
    disp_valid = 0;
  endtask

  initial begin
    #100_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // --- A: RAW against a pipeline ----------------------------------------
    active[FU_ALU] = 1; rd_now[FU_ALU] = rng(5, 5);
    pipe_wr[FU_MAC] = rng(5, 5); #1;
    chk("A: in-flight chunk stalls reader", !go[FU_ALU] && raw_stall[FU_ALU]);
    pipe_wr[FU_MAC] = rng(6, 6); #1;
    chk("A: other chunk in flight does not", go[FU_ALU] && !raw_stall[FU_ALU]);
    clear(); @(posedge clk); #1;

    // --- B: chaining behind an older load ---------------------------------
    dispatch(FU_LSU);                        // load v0 (chunks 0..3), older
    active[FU_LSU] = 1; wr_fut[FU_LSU] = rng(0, 3); wr_all[FU_LSU] = rng(0, 3);
    wr_now[FU_LSU] = rng(0, 0);
    dispatch(FU_ALU);                        // ALU reads v0, younger
    active[FU_ALU] = 1; rd_now[FU_ALU] = rng(0, 0); rd_fut[FU_ALU] = rng(0, 3); #1;
    chk("B: reader waits for older writer", !go[FU_ALU] && raw_stall[FU_ALU]);
    chk("B: writer goes", go[FU_LSU]);
    @(posedge clk); #1;
    wr_fut[FU_LSU] = rng(1, 3); wr_now[FU_LSU] = rng(1, 1);
    pipe_wr[FU_LSU] = '0; #1;
    chk("B: chunk written -> reader chains", go[FU_ALU] && chained[FU_ALU]);
    rd_now[FU_ALU] = rng(1, 1); #1;
    chk("B: next chunk still pending -> stall", !go[FU_ALU]);
    // the load finishes its last group
    wr_fut[FU_LSU] = rng(3, 3); wr_now[FU_LSU] = rng(3, 3); last[FU_LSU] = 1;
    rd_now[FU_ALU] = rng(3, 3); #1;
    chk("B: reader waits on last chunk", !go[FU_ALU]);
    @(posedge clk); #1;
    // load retired: a stale mask from the load unit (now a younger instruction) must not block
    last = '0; active[FU_LSU] = 1; wr_fut[FU_LSU] = rng(3, 3); wr_now[FU_LSU] = '0; #1;
    chk("B: after older done, younger writer masks ignored", go[FU_ALU] && !chained[FU_ALU]);
    clear(); @(posedge clk); #1;

    // --- C: WAR -----------------------------------------------------------
    dispatch(FU_ALU);                        // ALU reads chunks 8..9 (older)
    active[FU_ALU] = 1; rd_now[FU_ALU] = rng(8, 8); rd_fut[FU_ALU] = rng(8, 9);
    pipe_wr[FU_ALU] = '0;
    dispatch(FU_LSU);                        // load overwrites chunk 9 (younger)
    active[FU_LSU] = 1; wr_now[FU_LSU] = rng(9, 9); wr_fut[FU_LSU] = rng(9, 9); wr_all[FU_LSU] = rng(9, 9);
    #1;
    chk("C: writer waits for older reader", !go[FU_LSU] && war_stall[FU_LSU]);
    chk("C: older reader not blocked by younger writer", go[FU_ALU]);
    rd_now[FU_ALU] = rng(9, 9); rd_fut[FU_ALU] = rng(9, 9); last[FU_ALU] = 1; #1;
    chk("C: still waits while chunk 9 read this cycle", !go[FU_LSU]);
    @(posedge clk); #1;
    last = '0; active[FU_ALU] = 0; rd_now[FU_ALU] = '0; rd_fut[FU_ALU] = '0; #1;
    chk("C: writer proceeds after read", go[FU_LSU] && !war_stall[FU_LSU]);
    clear(); @(posedge clk); #1;

    // --- D: queued older instruction counts as older (counter 2) ----------
    active[FU_MAC] = 1; q_valid[FU_MAC] = 1;
    wr_fut[FU_MAC] = rng(20, 21); q_wr[FU_MAC] = rng(24, 25); #1;
    chk("D: fu_free clear with queue", !fu_free[FU_MAC] && fu_free[FU_ALU] && fu_free[FU_LSU]);
    dispatch(FU_ALU);
    active[FU_ALU] = 1; rd_now[FU_ALU] = rng(24, 24); #1;
    chk("D: reader waits for queued older writer", !go[FU_ALU]);
    last[FU_MAC] = 1; @(posedge clk); #1;   // MAC finishes current, queued one becomes current
    last = '0; q_valid[FU_MAC] = 0; wr_fut[FU_MAC] = rng(24, 25); wr_all[FU_MAC] = rng(24, 25); q_wr[FU_MAC] = '0; #1;
    chk("D: still waits on promoted writer", !go[FU_ALU]);
    last[FU_MAC] = 1; wr_fut[FU_MAC] = rng(25, 25); #1;
    chk("D: chunk 24 written", go[FU_ALU] && chained[FU_ALU]);
    @(posedge clk); #1;
    last = '0; wr_fut[FU_MAC] = rng(24, 25); #1;
    chk("D: both older done -> counters zero", go[FU_ALU]);
    clear(); @(posedge clk); #1;

    // --- E: WAW at dispatch -----------------------------------------------
    disp_fu = FU_ALU; disp_dst = rng(10, 11);
    wr_fut[FU_LSU] = rng(11, 12); #1;
    chk("E: overlap with other unit's pending write", waw_hazard);
    wr_fut[FU_LSU] = '0; wr_fut[FU_ALU] = rng(10, 11); #1;
    chk("E: same unit is ordered by its pipeline", !waw_hazard);
    pipe_wr[FU_MAC] = rng(10, 10); #1;
    chk("E: in-flight write of other unit", waw_hazard);
    pipe_wr[FU_MAC] = '0; q_wr[FU_MAC] = rng(11, 11); #1;
    chk("E: queued write of other unit", waw_hazard);
    q_wr[FU_MAC] = rng(12, 12); #1;
    chk("E: no overlap", !waw_hazard);
    clear(); @(posedge clk); #1;

    // --- F: dispatch into an idle unit sees no older instruction -----------
    dispatch(FU_MAC);
    active[FU_MAC] = 1; rd_now[FU_MAC] = rng(2, 2);
    wr_fut[FU_LSU] = rng(2, 2); active[FU_LSU] = 1; #1;
    chk("F: younger load's pending write ignored", go[FU_MAC]);
    wr_fut[FU_LSU] = '0; pipe_wr[FU_LSU] = rng(2, 2); #1;
    chk("F: but any in-flight write of the chunk stalls", !go[FU_MAC]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
