// feto_router: SHER-3DR, the soft-error and hard-fault tolerant 3D router.
//
// Seven ports (local, north, east, south, west, up, down), each with an input
// port (SECDED check, RAB input buffer, LAFT next-port computation with PCR),
// a switch allocator (round-robin arbiter, stall/go, soft-error monitor that
// sequences the PCR phases), a crossbar with two bypass links and a per-
// output ARQ buffer, and a fault manager running the detection, diagnosis
// and recovery mechanism (DDRM). The structure follows the design's router
// block diagram; the wiring of status between routers (each router publishes
// its faulty and congested outputs for its neighbours' look-ahead routing) is
// this implementation's reading of "the fault link information of all
// neighbouring nodes is read by each input port".
//
// Timing of a flit without faults: written into the input buffer in the
// cycle it arrives (BW), first NPC/SA computation in the next PH_FIRST cycle,
// redundant computation, comparison and crossbar traversal in the PH_REDUN
// cycle after it; the flit is on the output link the cycle after that. A
// detected soft error adds one PH_RECOV cycle. Each output carries at most
// one new flit per two cycles.
//
// Fault-injection inputs ('slot_fault', 'xbar_fault', 'byp_fault',
// 'seu_npc', 'seu_sa') are XOR masks or bit flips at the points named in the
// sub-blocks; tie them to zero for normal use.
module feto_router
  import feto_pkg::*;
#(
  parameter int unsigned X       = 4,
  parameter int unsigned Y       = 4,
  parameter int unsigned Z       = 4,
  parameter int unsigned DEPTH   = feto_pkg::BUF_DEPTH,
  parameter int unsigned NBYPASS = feto_pkg::N_BYPASS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            here,
  // inputs
  input  link_t             in        [NPORTS],
  output logic [NPORTS-1:0] stop_out,
  output logic [NPORTS-1:0] arq_out,
  // outputs
  output link_t             out       [NPORTS],
  input  logic [NPORTS-1:0] stop_in,
  input  logic [NPORTS-1:0] arq_in,
  // look-ahead status
  input  nstat_t            nbr_stat  [NPORTS],
  output nstat_t            own_stat,
  // fault injection
  input  flit_t             slot_fault[NPORTS][DEPTH],
  input  flit_t             xbar_fault[NPORTS],
  input  flit_t             byp_fault [NBYPASS],
  input  logic [NPORTS-1:0] seu_npc,
  input  logic              seu_sa,
  // observation
  output rev_t              ev,
  output logic [NPORTS-1:0] overflow
);
  localparam int unsigned SW = $clog2(DEPTH);

  phase_e            phase;
  logic              req_valid [NPORTS];
  logic [PORT_W-1:0] req_port  [NPORTS];
  logic              req_tail  [NPORTS];
  logic [NPORTS-1:0] commit, npc_mm, stalled, ecc_fix, rerouted;
  flit_t             ip_flit   [NPORTS];
  logic [SW-1:0]     ip_slot   [NPORTS];
  logic [NPORTS-1:0] flag_valid;
  logic [SW-1:0]     flag_slot [NPORTS];
  logic              sa_mm;

  logic [NPORTS-1:0] out_valid, out_hold, retx, drop, link_fault;
  logic [PORT_W-1:0] out_src   [NPORTS];
  logic [SW-1:0]     out_slot  [NPORTS];
  logic [NBYPASS-1:0] byp_en;
  logic [PORT_W-1:0] byp_out   [NBYPASS];
  logic [NPORTS-1:0] ev_perm, ev_slot, ev_blod, ev_dead;

  assign own_stat.fault = link_fault;
  assign own_stat.cong  = stop_in;

  for (genvar p = 0; p < NPORTS; p++) begin : g_ip
    feto_input_port #(.X(X), .Y(Y), .Z(Z), .PORT(p), .DEPTH(DEPTH)) u_ip (
      .clk, .rst_n, .here,
      .in(in[p]), .arq_out(arq_out[p]), .stop_out(stop_out[p]),
      .phase, .own_stat, .nbr_stat,
      .req_valid(req_valid[p]), .req_port(req_port[p]), .req_tail(req_tail[p]),
      .commit(commit[p]), .out_flit(ip_flit[p]), .out_slot(ip_slot[p]),
      .npc_mismatch(npc_mm[p]),
      .flag_valid(flag_valid[p]), .flag_slot(flag_slot[p]),
      .slot_fault(slot_fault[p]), .seu_npc(seu_npc[p]),
      .ecc_fixed(ecc_fix[p]), .rerouted(rerouted[p]), .overflow(overflow[p])
    );
  end

  feto_switch_alloc u_sa (
    .clk, .rst_n,
    .req_valid, .req_port, .req_tail,
    .stop_in, .out_hold, .out_fault(link_fault),
    .npc_mismatch(npc_mm), .seu_sa,
    .phase, .commit, .sa_mismatch(sa_mm), .stalled
  );

  feto_crossbar #(.DEPTH(DEPTH), .NBYPASS(NBYPASS)) u_xbar (
    .clk, .rst_n,
    .commit, .commit_port(req_port), .in_flit(ip_flit), .in_slot(ip_slot),
    .arq_in, .drop, .byp_en, .byp_out, .xbar_fault, .byp_fault,
    .out, .out_valid, .out_src, .out_src_slot(out_slot), .out_hold, .retx
  );

  feto_fault_manager #(.DEPTH(DEPTH), .NBYPASS(NBYPASS)) u_fm (
    .clk, .rst_n,
    .out_valid, .arq_in, .out_src, .out_src_slot(out_slot),
    .drop, .byp_en, .byp_out, .link_fault, .flag_valid, .flag_slot,
    .ev_perm, .ev_slot, .ev_blod, .ev_dead
  );

  always_comb begin
    ev.ecc_fix   = ecc_fix;
    ev.arq_req   = arq_out;
    ev.npc_se    = npc_mm;
    ev.sa_se     = sa_mm;
    ev.retx      = retx;
    ev.perm      = ev_perm;
    ev.slot_flag = ev_slot;
    ev.blod_on   = ev_blod;
    ev.link_dead = ev_dead;
    ev.stall     = (phase == PH_FIRST) ? stalled : '0;
    ev.reroute   = rerouted & commit;
  end
endmodule
