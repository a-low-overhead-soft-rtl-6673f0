// feto_pcr: Pipeline Computation Redundancy for one result of the NPC/SA stage.
//
// The NPC/SA logic recomputes its result from the same inputs in consecutive
// cycles (design's PCR algorithm). This block keeps the results and decides:
//   PH_FIRST : result 1 is stored.
//   PH_REDUN : result 2 is compared with result 1; 'mismatch' is raised on a
//              difference (a soft error). Without a mismatch 'final_res' is
//              result 1 and crossbar traversal may happen in this cycle.
//   PH_RECOV : only entered after a mismatch; result 3 is computed and
//              'final_res' is the bitwise majority of results 1, 2 and 3.
// Bitwise majority is this implementation's reading of "majority voting".
// The phase itself is sequenced by the switch allocator's soft-error monitor.
module feto_pcr
  import feto_pkg::*;
#(
  parameter int unsigned W = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  phase_e       phase,
  input  logic [W-1:0] result,     // this cycle's computation
  output logic         mismatch,   // valid in PH_REDUN
  output logic [W-1:0] final_res   // valid in PH_REDUN (no mismatch) and PH_RECOV
);
  logic [W-1:0] r1, r2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0;
      r2 <= '0;
    end else begin
      if (phase == PH_FIRST) r1 <= result;
      if (phase == PH_REDUN) r2 <= result;
    end
  end

  always_comb begin
    mismatch  = (phase == PH_REDUN) && (result != r1);
    final_res = r1;
    if (phase == PH_RECOV)
      final_res = (r1 & r2) | (r1 & result) | (r2 & result);
  end
endmodule
