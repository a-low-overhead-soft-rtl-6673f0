// tb_feto_input_port: one input port (west port of node (1,1,1), 4x4x4 mesh)
// driven with a hand-made phase sequence.
//   * a clean flit is buffered and requests the output in its next field
//   * the NPC result for the neighbour is merged on commit, the check bits
//     stay consistent and the slot is freed
//   * a double-error flit is refused with ARQ and not buffered
//   * a body flit follows its head's route even if its own next field differs
//   * when the requested local output is marked faulty, the port reroutes
//   * an NPC upset in the redundant phase raises npc_mismatch and the voted
//     result is still the fault-free one
//   * a slot flagged by the fault manager is skipped
module tb_feto_input_port;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  coord_t     here;
  link_t      in;
  logic       arq_out, stop_out, req_valid, req_tail, commit, npc_mismatch;
  logic       flag_valid, seu_npc, ecc_fixed, rerouted, overflow;
  logic [1:0] flag_slot, out_slot;
  logic [2:0] req_port;
  phase_e     phase;
  nstat_t     own_stat;
  nstat_t     nbr_stat [7];
  flit_t      out_flit;
  flit_t      slot_fault [4];
  int checks = 0, failures = 0;

  feto_input_port #(.X(4), .Y(4), .Z(4), .PORT(4), .DEPTH(4)) dut (.*);

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

  task automatic put(flit_t f);
    @(negedge clk);
    in.valid = 1'b1; in.flit = f;
    @(negedge clk);
    in.valid = 1'b0;
  endtask

  // FIRST then REDUN with commit; returns the flit sent
  task automatic traverse(bit upset, output flit_t sent, output logic [2:0] port, output bit mm);
    @(negedge clk);
    phase = PH_FIRST;
    @(negedge clk);
    phase = PH_REDUN;
    seu_npc = upset;
    #1 mm = npc_mismatch;
    port = req_port;
    if (mm) begin
      @(negedge clk);
      seu_npc = 1'b0;
      phase = PH_RECOV;
    end
    commit = 1'b1;
    #1 sent = out_flit;
    @(negedge clk);
    commit = 1'b0;
    seu_npc = 1'b0;
    phase = PH_FIRST;
  endtask

  initial begin
    flit_t f, s;
    logic [2:0] p;
    bit mm;
    here = '{x: 3'd1, y: 3'd1, z: 3'd1};
    in = '0; commit = 0; flag_valid = 0; flag_slot = 0; seu_npc = 0; phase = PH_FIRST;
    own_stat = '0;
    for (int i = 0; i < 7; i++) nbr_stat[i] = '0;
    for (int i = 0; i < 4; i++) slot_fault[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // clean flit west->east, destination (3,1,1): at (2,1,1) go east
    f = mk(FT_SINGLE, 3, 1, 1, P_E, 11);
    put(f);
    check(req_valid && req_port == P_E, "request for the flit's next port");
    traverse(0, s, p, mm);
    check(!mm && s.next == P_E && s.payload == 11, "next port for (2,1,1) merged");
    check(s == ecc_encode(s), "check bits consistent after merge");
    #1 check(!req_valid, "slot freed");
    // double error refused
    f = mk(FT_SINGLE, 3, 1, 1, P_E, 12);
    f.payload[3:2] = ~f.payload[3:2];
    @(negedge clk); in.valid = 1'b1; in.flit = f; #1;
    check(arq_out, "double error: ARQ");
    @(negedge clk); in.valid = 1'b0;
    check(!req_valid, "refused flit not buffered");
    // single error corrected
    f = mk(FT_SINGLE, 1, 3, 1, P_N, 13);
    f.payload[5] = ~f.payload[5];
    @(negedge clk); in.valid = 1'b1; in.flit = f; #1;
    check(!arq_out && ecc_fixed, "single error corrected");
    @(negedge clk); in.valid = 1'b0;
    traverse(0, s, p, mm);
    check(p == P_N && s.payload == 13 && s.next == P_N, "corrected flit routed north");
    // head + body: body follows head
    put(mk(FT_HEAD, 1, 1, 3, P_U, 20));
    put(mk(FT_BODY, 1, 1, 3, P_D, 21));    // wrong next field on purpose
    traverse(0, s, p, mm);
    check(p == P_U && s.next == P_U, "head routed up, next up");
    traverse(0, s, p, mm);
    check(p == P_U && s.next == P_U && s.payload == 21, "body follows the head");
    put(mk(FT_TAIL, 1, 1, 3, P_D, 22));
    traverse(0, s, p, mm);
    check(p == P_U, "tail follows the head");
    // reroute around a faulty own output
    own_stat.fault[P_E] = 1'b1;
    put(mk(FT_SINGLE, 3, 1, 1, P_E, 30));
    #1 check(rerouted && req_port != P_E && req_port != P_W, "rerouted, not back west");
    traverse(0, s, p, mm);
    check(p != P_E && s.payload == 30, "rerouted flit leaves");
    own_stat.fault = '0;
    // NPC upset in the redundant phase
    put(mk(FT_SINGLE, 3, 2, 1, P_E, 40));
    traverse(1, s, p, mm);
    check(mm, "NPC upset detected");
    check(s.next == P_E || s.next == P_N, "voted result is a fault-free choice");
    begin
      flit_t ref_s;
      put(mk(FT_SINGLE, 3, 2, 1, P_E, 41));
      traverse(0, ref_s, p, mm);
      check(s.next == ref_s.next, "voted result equals the fault-free one");
    end
    // flag slot 0 and check it is skipped
    @(negedge clk); flag_valid = 1'b1; flag_slot = 2'd0;
    @(negedge clk); flag_valid = 1'b0;
    for (int k = 0; k < 3; k++) begin
      put(mk(FT_SINGLE, 3, 1, 1, P_E, 50 + k));
      check(out_slot != 2'd0, "flagged slot skipped");
      traverse(0, s, p, mm);
      check(s.payload == 18'(50 + k), "flit through healthy slots");
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
