// tb_feto_router: one SHER-3DR router at (1,1,1) of a 3x3x3 mesh.
//   * a flit entering west with look-ahead port east leaves east 3 or 4
//     cycles after it arrived (BW, NPC/SA, redundant NPC/SA + CT, link; 4
//     when it arrives in the PH_FIRST cycle and misses the phase), with its
//     payload intact, clean check bits and the next-port for (2,1,1) merged
//   * an NPC soft error adds exactly one recovery cycle and the result is
//     still right
//   * an ARQ from downstream makes the same flit appear again the next cycle
//   * a flit with a double error is refused with arq_out in the same cycle
//   * stop_out rises when the buffer has fewer than two free slots
//   * several inputs to several outputs: every flit arrives where expected
module tb_feto_router;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  link_t      in  [7];
  link_t      out [7];
  logic [6:0] stop_out, arq_out, stop_in, arq_in, seu_npc, overflow;
  nstat_t     nbr_stat [7];
  nstat_t     own_stat;
  flit_t      slot_fault [7][4];
  flit_t      xbar_fault [7];
  flit_t      byp_fault [2];
  logic       seu_sa;
  rev_t       ev;
  coord_t     here;
  int checks = 0, failures = 0;

  feto_router #(.X(3), .Y(3), .Z(3)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic flit_t mk(ftype_e t, int x, int y, int z, port_e nxt, int pay);
    flit_t f;
    f = '0;
    f.ftype = t; f.next = nxt; f.dest = '{x: 3'(x), y: 3'(y), z: 3'(z)}; f.payload = 18'(pay);
    return ecc_encode(f);
  endfunction

  // drive a flit for one cycle on input p, return the cycles until it shows
  // on output o (0 if it never does)
  task automatic through(int p, flit_t f, int o, bit seu, output int lat, output flit_t got);
    bit applied;
    @(negedge clk);
    in[p].valid = 1'b1; in[p].flit = f;
    lat = 0;
    @(negedge clk);
    in[p].valid = 1'b0;
    lat = 1;
    applied = 1'b0;
    while (!out[o].valid && lat < 10) begin
      // upset the first NPC computation of this flit
      if (seu && !applied && dut.u_sa.phase == PH_FIRST) begin
        seu_npc[p] = 1'b1;
        applied = 1'b1;
      end
      @(negedge clk);
      seu_npc = '0;
      lat++;
    end
    got = out[o].flit;
    if (!out[o].valid) lat = 0;
  endtask

  initial begin
    int lat;
    flit_t f, g;
    here = '{x: 3'd1, y: 3'd1, z: 3'd1};
    for (int p = 0; p < 7; p++) begin
      in[p] = '0; nbr_stat[p] = '0; xbar_fault[p] = '0;
      for (int s = 0; s < 4; s++) slot_fault[p][s] = '0;
    end
    byp_fault[0] = '0; byp_fault[1] = '0;
    stop_in = 0; arq_in = 0; seu_npc = 0; seu_sa = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // latency, both phase alignments
    for (int k = 0; k < 4; k++) begin
      f = mk(FT_SINGLE, 2, 1, 1, P_E, 100 + k);
      if (k % 2 == 1) @(negedge clk);
      through(P_W, f, P_E, 1'b0, lat, g);
      check(lat == 3 || lat == 4, $sformatf("latency 3..4 cycles (got %0d)", lat));
      check(g.payload == f.payload && g.dest == f.dest && g.next == P_L, "flit intact, next = local");
      check(g == ecc_encode(g), "clean check bits");
    end
    // soft error costs one cycle
    for (int k = 0; k < 4; k++) begin
      int base;
      f = mk(FT_SINGLE, 2, 2, 1, P_E, 200 + k);
      repeat (3) @(negedge clk);
      if (k % 2 == 1) @(negedge clk);
      through(P_W, f, P_E, 1'b0, base, g);
      repeat (3) @(negedge clk);
      if (k % 2 == 1) @(negedge clk);
      through(P_W, f, P_E, 1'b1, lat, g);
      check(lat == base + 1, $sformatf("NPC soft error adds one cycle (%0d vs %0d)", lat, base));
      check(g.next == P_N && g.payload == f.payload, "voted next port correct");
    end
    check(ev.npc_se == 0, "events return to idle");
    // ARQ from downstream: the flit appears again
    f = mk(FT_SINGLE, 2, 1, 1, P_E, 300);
    through(P_W, f, P_E, 1'b0, lat, g);
    arq_in[P_E] = 1'b1;
    @(negedge clk);
    arq_in[P_E] = 1'b0;
    check(out[P_E].valid && out[P_E].flit == g, "retransmitted on ARQ");
    @(negedge clk);
    check(!out[P_E].valid, "released after acceptance");
    // double error refused
    f = mk(FT_SINGLE, 2, 1, 1, P_E, 400);
    f.payload[1:0] = ~f.payload[1:0];
    @(negedge clk);
    in[P_S].valid = 1'b1; in[P_S].flit = f; #1;
    check(arq_out[P_S], "double error: ARQ to sender");
    @(negedge clk);
    in[P_S].valid = 1'b0;
    // stop_out with east stopped
    stop_in[P_E] = 1'b1;
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      check(!stop_out[P_W] == (k < 3), "stop low while two or more free");
      in[P_W].valid = 1'b1; in[P_W].flit = mk(FT_SINGLE, 2, 1, 1, P_E, 500 + k);
    end
    @(negedge clk);
    in[P_W].valid = 1'b0;
    check(stop_out[P_W], "stop high with one slot free");
    repeat (4) @(negedge clk);
    check(!out[P_E].valid, "nothing sent while stopped");
    stop_in[P_E] = 1'b0;
    repeat (12) @(negedge clk);
    check(!stop_out[P_W], "buffer drained after go");
    // many to many: north->south... each input one flit to a different output
    begin
      int seen [7];
      for (int o = 0; o < 7; o++) seen[o] = 0;
      @(negedge clk);
      in[P_L] = '{1'b1, mk(FT_SINGLE, 1, 2, 1, P_N, 600)};
      in[P_N] = '{1'b1, mk(FT_SINGLE, 1, 0, 1, P_S, 601)};
      in[P_E] = '{1'b1, mk(FT_SINGLE, 0, 1, 1, P_W, 602)};
      in[P_S] = '{1'b1, mk(FT_SINGLE, 1, 1, 2, P_U, 603)};
      in[P_W] = '{1'b1, mk(FT_SINGLE, 1, 1, 0, P_D, 604)};
      in[P_U] = '{1'b1, mk(FT_SINGLE, 2, 1, 1, P_E, 605)};
      in[P_D] = '{1'b1, mk(FT_SINGLE, 1, 1, 1, P_L, 606)};
      @(negedge clk);
      for (int p = 0; p < 7; p++) in[p].valid = 1'b0;
      repeat (6) begin
        for (int o = 0; o < 7; o++) if (out[o].valid) seen[o] = int'(out[o].flit.payload);
        @(negedge clk);
      end
      check(seen[P_N] == 600 && seen[P_S] == 601 && seen[P_W] == 602 && seen[P_U] == 603 &&
            seen[P_D] == 604 && seen[P_E] == 605 && seen[P_L] == 606, "all seven flits routed");
    end
    check(overflow == 0, "no overflow");
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
