// tb_feto_switch_alloc: arbitration, stall/go, wormhole locking and the PCR
// phase sequence of the switch allocator.
//   * phases cycle FIRST -> REDUN with commits only in REDUN (2 cycles)
//   * inputs competing for one output are served round-robin
//   * a stopped output grants nobody (stall counted), a held output too
//   * a head flit locks its output to its input until the tail
//   * an SA soft error (seu_sa) in either computation is detected, costs one
//     RECOV cycle, and the voted grants equal the fault-free ones
//   * an NPC mismatch reported by an input port also forces RECOV
module tb_feto_switch_alloc;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              req_valid [7];
  logic [2:0]        req_port  [7];
  logic              req_tail  [7];
  logic [6:0]        stop_in, out_hold, out_fault, npc_mismatch, commit, stalled;
  logic              seu_sa, sa_mismatch;
  phase_e            phase;
  int checks = 0, failures = 0;

  feto_switch_alloc dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // wait for the next commit opportunity; return the commit vector
  task automatic next_commit(output logic [6:0] c, output int cycles);
    cycles = 0;
    do begin
      @(negedge clk);
      cycles++;
    end while (!(phase == PH_RECOV || (phase == PH_REDUN && !sa_mismatch && npc_mismatch == 0)));
    #1 c = commit;
  endtask

  task automatic align();   // stop at the negedge where phase is FIRST
    do @(negedge clk); while (phase != PH_FIRST);
  endtask

  initial begin
    logic [6:0] c;
    int cyc, winners [int];
    for (int i = 0; i < 7; i++) begin req_valid[i] = 0; req_port[i] = 0; req_tail[i] = 1; end
    stop_in = 0; out_hold = 0; out_fault = 0; npc_mismatch = 0; seu_sa = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // single flit requests (tail = single), inputs 1,3,5 all to output 2
    align();
    for (int i = 1; i < 7; i += 2) begin req_valid[i] = 1; req_port[i] = 3'd2; end
    for (int k = 0; k < 6; k++) begin
      next_commit(c, cyc);
      check($onehot(c), "one winner for output 2");
      check(cyc == 1, "commit one cycle after FIRST (2-cycle stage)");
      winners[k] = $clog2(int'(c));
      align();
    end
    check(winners[0] != winners[1] && winners[1] != winners[2] && winners[0] != winners[2],
          "round robin: three different winners in a row");
    check(winners[3] == winners[0], "round robin repeats");
    // stall: output 2 stopped
    stop_in[2] = 1;
    #1 check(stalled[1] || stalled[3] || stalled[5], "stall reported");
    next_commit(c, cyc);
    check(c == 0, "stopped output grants nobody");
    stop_in[2] = 0;
    align();
    out_hold[2] = 1;
    next_commit(c, cyc);
    check(c == 0, "held output (ARQ) grants nobody");
    out_hold[2] = 0;
    // wormhole lock: input 3 sends head to output 4; input 5 also wants 4
    for (int i = 0; i < 7; i++) req_valid[i] = 0;
    align();
    req_valid[3] = 1; req_port[3] = 3'd4; req_tail[3] = 0;
    next_commit(c, cyc);
    check(c == 7'b0001000, "head of input 3 wins output 4");
    align();
    req_valid[5] = 1; req_port[5] = 3'd4; req_tail[5] = 1;
    for (int k = 0; k < 3; k++) begin
      next_commit(c, cyc);
      check(c == 7'b0001000, "output 4 locked to input 3");
      align();
    end
    req_tail[3] = 1;
    next_commit(c, cyc);
    check(c == 7'b0001000, "tail of input 3 passes");
    align();
    req_valid[3] = 0;
    next_commit(c, cyc);
    check(c == 7'b0100000, "after the tail input 5 gets output 4");
    // soft error in the first SA computation: input 0 has no request
    req_valid[5] = 0;
    align();
    req_valid[2] = 1; req_port[2] = 3'd1; req_tail[2] = 1;
    seu_sa = 1;
    @(negedge clk); seu_sa = 0;
    #1 check(phase == PH_REDUN && sa_mismatch, "SA soft error detected");
    @(negedge clk);
    #1 check(phase == PH_RECOV && commit == 7'b0000100, "recovery: voted grants fault-free");
    // soft error in the redundant computation
    align();
    @(negedge clk); seu_sa = 1;
    #1 check(sa_mismatch, "redundant SA upset detected");
    @(negedge clk); seu_sa = 0;
    #1 check(phase == PH_RECOV && commit == 7'b0000100, "voted grants after redundant upset");
    // NPC mismatch forces recovery
    align();
    @(negedge clk); npc_mismatch[2] = 1;
    #1 check(commit == 0, "no traversal while NPC mismatch");
    @(negedge clk); npc_mismatch = 0;
    #1 check(phase == PH_RECOV && commit == 7'b0000100, "traversal in recovery cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
