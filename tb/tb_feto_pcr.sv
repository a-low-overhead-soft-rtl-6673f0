// tb_feto_pcr: Pipeline Computation Redundancy bookkeeping. Runs the phase
// sequence FIRST, REDUN (and RECOV) with chosen results: equal results give
// no mismatch and the first result; a differing redundant result raises the
// mismatch and the vote of the three results (bitwise majority) is final.
module tb_feto_pcr;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  phase_e     phase;
  logic [6:0] result, final_res;
  logic       mismatch;
  int checks = 0, failures = 0;

  feto_pcr #(.W(7)) dut (.clk, .rst_n, .phase, .result, .mismatch, .final_res);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [6:0] a, b, c, maj;
    phase = PH_FIRST; result = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      a = 7'($urandom());
      b = (t % 3 == 0) ? a ^ 7'(1 << $urandom_range(0, 6)) : a;
      c = (t % 3 == 0) ? a : 7'($urandom());
      maj = (a & b) | (a & c) | (b & c);
      @(negedge clk); phase = PH_FIRST; result = a;
      @(negedge clk); phase = PH_REDUN; result = b; #1;
      check(mismatch == (a != b), "compare of first and redundant result");
      if (a == b) check(final_res == a, "no error: first result final");
      else begin
        @(negedge clk); phase = PH_RECOV; result = c; #1;
        check(!mismatch, "no compare in recovery");
        check(final_res == maj, "recovery: majority vote");
        check(final_res == a, "single upset outvoted");
      end
    end
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
