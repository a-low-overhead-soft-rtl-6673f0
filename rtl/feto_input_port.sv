// feto_input_port: one of the seven input ports of the SHER-3DR router.
//
// Pipeline (design): Buffer Writing (BW), then Next-Port-Computing and Switch
// Allocation (NPC/SA) in parallel, then Crossbar Traversal (CT).
//  * BW: the arriving flit is checked by the SECDED decoder (feto_ecc). A
//    correctable flit is written into the RAB input buffer; an uncorrectable
//    one is refused and 'arq_out' asks the sender to retransmit.
//  * Request: the head flit asks for output 'req_port'. That is the look-ahead
//    port carried in the flit, or, for the body of a packet, the port its head
//    took (wormhole). If the local output it names has been marked faulty by
//    the fault manager, the port is recomputed here with the LAFT rule
//    (reroute around the dead link).
//  * NPC: feto_laft_npc computes the output to take at the next router; it is
//    run again in the redundant phase and compared by feto_pcr (the input
//    port's PCR manager). After a mismatch a third run is voted.
//  * On 'commit' (the switch allocator's final grant) the head leaves: the
//    next-port is merged into the flit, its check bits are updated for the
//    changed bits only, and the flit goes to the crossbar; the slot is freed.
// Inputs to NPC/SA are sampled in PH_FIRST and held for the redundant and
// recovery computations, so that the compared runs see the same inputs.
// Route locking per packet and the sampling are this implementation's choice.
module feto_input_port
  import feto_pkg::*;
#(
  parameter int unsigned X     = 4,
  parameter int unsigned Y     = 4,
  parameter int unsigned Z     = 4,
  parameter int unsigned PORT  = 0,
  parameter int unsigned DEPTH = feto_pkg::BUF_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  coord_t                   here,
  // upstream link
  input  link_t                    in,
  output logic                     arq_out,
  output logic                     stop_out,
  // router state
  input  phase_e                   phase,
  input  nstat_t                   own_stat,          // this router's outputs
  input  nstat_t                   nbr_stat [NPORTS], // neighbours, by port
  // switch allocation
  output logic                     req_valid,
  output logic [PORT_W-1:0]        req_port,
  output logic                     req_tail,
  input  logic                     commit,
  output flit_t                    out_flit,
  output logic [$clog2(DEPTH)-1:0] out_slot,
  output logic                     npc_mismatch,
  // fault management and injection
  input  logic                     flag_valid,
  input  logic [$clog2(DEPTH)-1:0] flag_slot,
  input  flit_t                    slot_fault [DEPTH],
  input  logic                     seu_npc,
  output logic                     ecc_fixed,
  output logic                     rerouted,
  output logic                     overflow
);
  flit_t in_fixed, head;
  logic  wr, head_valid;
  logic [$clog2(DEPTH)-1:0] head_slot;
  logic [DEPTH-1:0] unused_faulty;

  feto_ecc u_ecc (
    .in(in), .out_flit(in_fixed), .write(wr), .arq(arq_out), .fixed(ecc_fixed)
  );

  feto_rab_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .rst_n,
    .wr_en(wr), .wr_flit(in_fixed), .slot_fault,
    .flag_valid, .flag_slot,
    .pop(commit), .head_valid, .head_flit(head), .head_slot,
    .stop(stop_out), .faulty(unused_faulty), .overflow
  );

  // ---- route of the head flit in this router
  logic              lock_v;
  logic [PORT_W-1:0] lock_out, lock_next;
  logic [PORT_W-1:0] live_port;

  always_comb begin
    rerouted  = 1'b0;
    live_port = lock_v ? lock_out : head.next;
    if (head_valid && live_port != P_L && own_stat.fault[live_port]) begin
      live_port = laft_route(here, head.dest, 3'(PORT), own_stat.fault, own_stat.cong,
                             X, Y, Z);
      rerouted  = 1'b1;
    end
  end

  // ---- sample at PH_FIRST, hold for the redundant phases
  logic              s_valid;
  logic [PORT_W-1:0] s_port;
  nstat_t            s_nbr;
  nstat_t            nbr_live;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_port  <= '0;
      s_nbr   <= '0;
    end else if (phase == PH_FIRST) begin
      s_valid <= head_valid;
      s_port  <= live_port;
      s_nbr   <= nbr_live;
    end
  end

  assign nbr_live  = nbr_stat[live_port];
  assign req_valid = (phase == PH_FIRST) ? head_valid : s_valid;
  assign req_port  = (phase == PH_FIRST) ? live_port  : s_port;
  assign req_tail  = is_tail(head.ftype);

  // ---- NPC with PCR
  logic [PORT_W-1:0] npc_res, npc_final, next_sel;
  logic              pcr_mm;

  feto_laft_npc #(.X(X), .Y(Y), .Z(Z)) u_npc (
    .here, .out_port(req_port), .dest(head.dest),
    .nbr((phase == PH_FIRST) ? nbr_live : s_nbr),
    .seu(seu_npc), .next_port(npc_res)
  );

  feto_pcr #(.W(PORT_W)) u_pcr (
    .clk, .rst_n, .phase, .result(npc_res), .mismatch(pcr_mm), .final_res(npc_final)
  );

  assign npc_mismatch = pcr_mm && s_valid;
  assign next_sel     = lock_v ? lock_next : npc_final;

  // Merge the next-port field. The code is linear, so the check bits are
  // updated by the change only: an error picked up in the buffer stays
  // visible to the downstream ECC.
  always_comb begin
    logic [15:0] w_old;
    out_flit      = head;
    w_old         = head[31:16];
    out_flit.next = next_sel;
    out_flit.chk1 = head.chk1 ^ hsiao_chk(w_old ^ out_flit[31:16]);
    out_slot      = head_slot;
  end

  // ---- wormhole route lock: body and tail follow the head
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_v    <= 1'b0;
      lock_out  <= '0;
      lock_next <= '0;
    end else if (commit) begin
      lock_v    <= !is_tail(head.ftype);
      lock_out  <= req_port;
      lock_next <= next_sel;
    end else if (lock_v && lock_out != P_L && own_stat.fault[lock_out]) begin
      lock_v    <= 1'b0;   // the packet's output died: route the rest anew
    end
  end
endmodule
