// tb_feto_fault_manager: DDRM sequences on single outputs, driven as the
// crossbar would present them (out_valid, source position) with chosen ARQ
// answers from downstream:
//   transient: one ARQ then acceptance -> no action
//   slot: two ARQs (drop), next flit from another slot accepted -> flag slot
//   crossbar: two ARQs, next flit from another slot refused -> bypass on,
//             retransmission accepted -> bypass kept, link healthy
//   channel: as crossbar but the bypassed retransmission is refused -> bypass
//            released, link marked faulty
//   no bypass left: a third crossbar-type fault marks the link faulty at once
module tb_feto_fault_manager;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [6:0] out_valid, arq_in, drop, link_fault, flag_valid;
  logic [6:0] ev_perm, ev_slot, ev_blod, ev_dead;
  logic [2:0] out_src [7];
  logic [1:0] out_src_slot [7];
  logic [1:0] byp_en;
  logic [2:0] byp_out [2];
  logic [1:0] flag_slot [7];
  int checks = 0, failures = 0;

  feto_fault_manager #(.DEPTH(4), .NBYPASS(2)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // present one flit on output o from (port, slot); answer with 'arq'
  task automatic send(int o, int port, int slot, bit arq, output bit dropped);
    @(negedge clk);
    out_valid = '0; arq_in = '0;
    out_valid[o] = 1'b1; arq_in[o] = arq;
    out_src[o] = 3'(port); out_src_slot[o] = 2'(slot);
    #1 dropped = drop[o];
    @(posedge clk); #1;
    out_valid = '0; arq_in = '0;
  endtask

  initial begin
    bit d;
    out_valid = 0; arq_in = 0;
    for (int o = 0; o < 7; o++) begin out_src[o] = 0; out_src_slot[o] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // transient on output 1
    send(1, 2, 0, 1, d); check(!d, "first ARQ: retransmit, no drop");
    send(1, 2, 0, 0, d); check(!d && ev_perm == 0, "transient: no permanent fault");
    // buffer slot on output 1: flits from port 2 slot 3
    send(1, 2, 3, 1, d); check(!d, "slot: first ARQ");
    send(1, 2, 3, 1, d); check(d && ev_perm[1], "slot: second ARQ drops, permanent");
    send(1, 4, 0, 0, d); check(flag_valid[2] && flag_slot[2] == 2'd3 && ev_slot[1], "slot: flag port 2 slot 3");
    check(byp_en == 0 && link_fault == 0, "slot: no bypass, link healthy");
    // crossbar on output 2
    send(2, 0, 1, 1, d);
    send(2, 0, 1, 1, d); check(d, "xbar: dropped after two ARQs");
    send(2, 5, 2, 1, d); check(!d && ev_blod[2], "xbar: bypass switched in");
    check(byp_en[0] && byp_out[0] == 3'd2, "xbar: bypass 0 serves output 2");
    send(2, 5, 2, 0, d); check(byp_en[0] && !link_fault[2], "xbar: bypass kept");
    // channel on output 3
    send(3, 1, 0, 1, d);
    send(3, 1, 0, 1, d);
    send(3, 6, 1, 1, d); check(byp_en[1] && byp_out[1] == 3'd3, "chan: bypass 1 tried");
    send(3, 6, 1, 1, d); check(d && ev_dead[3], "chan: bypass failed, flit dropped");
    check(!byp_en[1] && link_fault[3], "chan: bypass released, link faulty");
    // output 4 takes the released bypass 1 and keeps it
    send(4, 1, 0, 1, d);
    send(4, 1, 0, 1, d);
    send(4, 2, 1, 1, d); check(byp_en[1] && byp_out[1] == 3'd4, "bypass reused");
    send(4, 2, 1, 0, d);
    // output 5: no bypass left -> faulty at once
    send(5, 1, 0, 1, d);
    send(5, 1, 0, 1, d);
    send(5, 3, 2, 1, d); check(d && link_fault[5] && ev_dead[5], "no bypass left: link faulty");
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
