// feto_laft_npc: Next-Port Computation of the look-ahead fault-tolerant
// (LAFT) routing.
//
// A flit leaving this router through 'out_port' arrives at the neighbour
// next = step(here, out_port). Look-ahead routing decides here which output
// the flit will take at that neighbour, using the neighbour's published
// status: its faulty output links and its congested outputs. The decision
// (feto_pkg::laft_route) removes faulty directions, prefers minimal
// directions ranked by path diversity and then congestion, and falls back to
// non-minimal directions. A flit going to the local port needs no
// computation (result 0). The result is merged into the flit's 'next' field.
//
// 'seu' flips bit 0 of the result; it models a soft error in this stage and
// exists for fault injection. Combinational.
module feto_laft_npc
  import feto_pkg::*;
#(
  parameter int unsigned X = 4,
  parameter int unsigned Y = 4,
  parameter int unsigned Z = 4
) (
  input  coord_t            here,
  input  logic [PORT_W-1:0] out_port,
  input  coord_t            dest,
  input  nstat_t            nbr,        // status of the neighbour behind out_port
  input  logic              seu,
  output logic [PORT_W-1:0] next_port
);
  always_comb begin
    if (out_port == P_L)
      next_port = P_L;
    else
      next_port = laft_route(step(here, out_port), dest, opposite(out_port),
                             nbr.fault, nbr.cong, X, Y, Z);
    next_port[0] = next_port[0] ^ seu;
  end
endmodule
