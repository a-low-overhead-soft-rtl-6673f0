// tb_feto_laft_npc: look-ahead routing decisions in a 4x4x4 mesh, against
// hand-worked expectations: no computation for the local port, minimal
// direction, ranking by path diversity, congestion as tie breaker, detour
// around faulty links without turning back, and the soft-error flip.
module tb_feto_laft_npc;
  import feto_pkg::*;
  coord_t            here, dest;
  logic [PORT_W-1:0] out_port, next_port;
  nstat_t            nbr;
  logic              seu;
  int checks = 0, failures = 0;

  feto_laft_npc #(.X(4), .Y(4), .Z(4)) dut (.here, .out_port, .dest, .nbr, .seu, .next_port);

  task automatic t(coord_t h, port_e o, coord_t d, logic [6:0] flt, logic [6:0] cg,
                   port_e expect_p, string what);
    here = h; out_port = o; dest = d; nbr.fault = flt; nbr.cong = cg; seu = 1'b0;
    #1;
    checks++;
    if (next_port != expect_p) begin
      failures++;
      $display("FAIL: %s: got %0d expected %0d", what, next_port, expect_p);
    end
  endtask

  function automatic coord_t c(int x, int y, int z);
    return '{x: 3'(x), y: 3'(y), z: 3'(z)};
  endfunction

  initial begin
    t(c(0,0,0), P_L, c(0,0,0), '0, '0, P_L, "local: no computation");
    t(c(0,0,0), P_E, c(1,0,0), '0, '0, P_L, "next node is the destination");
    t(c(0,0,0), P_E, c(3,0,0), '0, '0, P_E, "straight on");
    t(c(0,0,0), P_E, c(1,2,0), '0, '0, P_N, "turn north");
    t(c(0,0,0), P_E, c(3,1,2), '0, '0, P_E, "max diversity, first in port order");
    t(c(0,0,0), P_E, c(3,1,2), 7'(1 << P_E), '0, P_U, "faulty east: other diverse way");
    t(c(0,0,0), P_E, c(2,1,0), '0, '0, P_N, "tie: first in port order");
    t(c(0,0,0), P_E, c(2,1,0), '0, 7'(1 << P_N), P_E, "tie broken by congestion");
    t(c(0,0,0), P_E, c(1,2,0), 7'(1 << P_N), '0, P_E, "no minimal: detour, not back west");
    t(c(0,0,0), P_E, c(1,2,0), 7'((1 << P_N) | (1 << P_E)), '0, P_U, "detour up");
    t(c(1,1,2), P_D, c(1,1,0), '0, '0, P_D, "down");
    t(c(2,2,2), P_W, c(0,3,2), '0, '0, P_N, "equal diversity: north first");
    // soft-error flip
    here = c(0,0,0); out_port = P_E; dest = c(3,0,0); nbr = '0; seu = 1'b1; #1;
    checks++;
    if (next_port != 3'(P_E ^ 1)) begin failures++; $display("FAIL: seu flip"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
