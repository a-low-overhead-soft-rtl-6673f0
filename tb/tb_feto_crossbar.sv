// tb_feto_crossbar: crossbar traversal into the ARQ buffers, retransmission
// on ARQ, drop, and Bypass-Link-on-Demand. A committed flit must appear on
// its output one cycle later with its source recorded; an ARQ keeps it there
// for another cycle; 'drop' discards it; a crossbar-link fault mask corrupts
// the output until a bypass link is switched in for that output, after which
// only the bypass's own fault mask applies.
module tb_feto_crossbar;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [6:0] commit, arq_in, drop, out_valid, out_hold, retx;
  logic [2:0] commit_port [7];
  flit_t      in_flit [7];
  logic [1:0] in_slot [7];
  logic [1:0] byp_en;
  logic [2:0] byp_out [2];
  flit_t      xbar_fault [7];
  flit_t      byp_fault [2];
  link_t      out [7];
  logic [2:0] out_src [7];
  logic [1:0] out_src_slot [7];
  int checks = 0, failures = 0;

  feto_crossbar #(.DEPTH(4), .NBYPASS(2)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int perm [7];
    commit = 0; arq_in = 0; drop = 0; byp_en = 0;
    for (int i = 0; i < 7; i++) begin
      commit_port[i] = 0; in_flit[i] = '0; in_slot[i] = 0; xbar_fault[i] = '0;
    end
    for (int b = 0; b < 2; b++) begin byp_out[b] = 0; byp_fault[b] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // random permutations
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 7; i++) perm[i] = i;
      perm.shuffle();
      @(negedge clk);
      for (int i = 0; i < 7; i++) begin
        commit[i] = 1'b1; commit_port[i] = 3'(perm[i]);
        in_flit[i] = flit_t'({$urandom(), $urandom()}); in_slot[i] = 2'(i);
      end
      @(negedge clk);
      commit = 0;
      for (int i = 0; i < 7; i++) begin
        check(out[perm[i]].valid && out[perm[i]].flit == in_flit[i], "flit on its output");
        check(out_src[perm[i]] == 3'(i) && out_src_slot[perm[i]] == 2'(i), "source recorded");
      end
      @(negedge clk);
      for (int o = 0; o < 7; o++) check(!out[o].valid, "released after one cycle");
    end
    // ARQ: retransmit, then drop
    commit[3] = 1; commit_port[3] = 3'd5; in_flit[3] = flit_t'(44'h5a5a5);
    @(negedge clk); commit = 0; arq_in[5] = 1; #1;
    check(out_hold[5] && retx[5], "ARQ holds the flit");
    @(negedge clk);
    check(out[5].valid && out[5].flit == flit_t'(44'h5a5a5), "retransmitted");
    drop[5] = 1; #1;
    check(!out_hold[5], "drop overrides hold");
    @(negedge clk); arq_in = 0; drop = 0;
    check(!out[5].valid, "dropped flit gone");
    // crossbar-link fault and bypass
    xbar_fault[2] = flit_t'(44'h30);
    commit[0] = 1; commit_port[0] = 3'd2; in_flit[0] = flit_t'(44'h1000);
    @(negedge clk); commit = 0;
    check(out[2].flit == flit_t'(44'h1030), "crossbar-link fault corrupts");
    byp_en[1] = 1; byp_out[1] = 3'd2; byp_fault[1] = flit_t'(44'h1); #1;
    check(out[2].flit == flit_t'(44'h1001), "bypass path replaces the crossbar link");
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
