// tb_feto_ni: network interface of node (0,0,0) in a 4x4x4 mesh.
//   * a PE flit appears on the router link the next cycle with valid check
//     bits and the first-hop port of the LAFT rule (east toward (2,0,0),
//     north when east is marked faulty); body flits keep the head's port
//   * an ARQ from the router repeats the same flit and holds the PE
//   * stop from the router holds the PE
//   * received flits are checked: clean/corrected ones go to the PE, a
//     double error is refused with ARQ
module tb_feto_ni;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  coord_t     here, tx_dest;
  logic       tx_valid, tx_ready, rx_valid, r_stop, r_arq, arq_out, stop_out, retx;
  ftype_e     tx_ftype;
  logic [17:0] tx_payload;
  flit_t      rx_flit;
  link_t      to_router, from_router;
  nstat_t     r_stat;
  int checks = 0, failures = 0;

  feto_ni #(.X(4), .Y(4), .Z(4)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic give(ftype_e t, int x, int y, int z, int pay);
    @(negedge clk);
    tx_valid = 1'b1; tx_ftype = t; tx_dest = '{x: 3'(x), y: 3'(y), z: 3'(z)}; tx_payload = 18'(pay);
    #1 check(tx_ready, "NI ready");
    @(negedge clk);
    tx_valid = 1'b0;
  endtask

  initial begin
    flit_t f;
    here = '0; tx_valid = 0; tx_ftype = FT_SINGLE; tx_dest = '0; tx_payload = 0;
    r_stop = 0; r_arq = 0; r_stat = '0; from_router = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    give(FT_HEAD, 2, 0, 0, 7);
    check(to_router.valid && to_router.flit.next == P_E && to_router.flit.payload == 7, "head: first hop east");
    check(to_router.flit == ecc_encode(to_router.flit), "check bits added");
    // ARQ
    f = to_router.flit;
    r_arq = 1'b1; #1;
    check(!tx_ready && retx, "ARQ holds the PE");
    @(negedge clk); r_arq = 1'b0;
    check(to_router.valid && to_router.flit == f, "same flit retransmitted");
    @(negedge clk);
    check(!to_router.valid, "released after acceptance");
    // east now faulty: body still follows head, a new head goes north
    r_stat.fault[P_E] = 1'b1;
    give(FT_BODY, 2, 0, 0, 8);
    check(to_router.flit.next == P_E, "body keeps head's port");
    give(FT_TAIL, 2, 0, 0, 9);
    give(FT_SINGLE, 2, 0, 0, 10);
    check(to_router.flit.next != P_E && to_router.flit.next != P_L, "new packet avoids faulty east");
    r_stat = '0;
    // stop
    r_stop = 1'b1; #1;
    check(!tx_ready, "stop holds the PE");
    r_stop = 1'b0;
    // receive path
    f = '0; f.dest = '0; f.payload = 18'h155; f = ecc_encode(f);
    from_router.valid = 1'b1; from_router.flit = f; #1;
    check(rx_valid && rx_flit == f && !arq_out, "clean flit delivered");
    from_router.flit.payload[0] = ~f.payload[0]; #1;
    check(rx_valid && rx_flit == f, "single error corrected");
    from_router.flit.payload[1] = ~f.payload[1]; #1;
    check(!rx_valid && arq_out, "double error refused");
    from_router.valid = 1'b0; #1;
    check(!stop_out, "PE never stops the router");
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
