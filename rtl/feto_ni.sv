// feto_ni: network interface between a processing element (PE) and the local
// port of its router.
//
// Transmit: the PE hands over one flit per cycle (type, destination,
// 18-bit payload; valid/ready handshake). The NI computes the look-ahead
// port the flit must take in its own router (LAFT rule at this node, with the
// router's published fault and congestion status; body and tail flits follow
// their head), adds the SECDED check bits and drives the flit from its ARQ
// buffer onto the router's local input. It honours the router's stop signal
// and retransmits the flit when the router's ECC asks for it (ARQ).
// Receive: flits from the router's local output are checked by SECDED; a
// correctable flit is delivered to the PE (which is always ready), an
// uncorrectable one is refused with an ARQ.
// The design only names the NI; this interface and its behaviour are this
// implementation's choice, built from the router's own link protocol.
module feto_ni
  import feto_pkg::*;
#(
  parameter int unsigned X = 4,
  parameter int unsigned Y = 4,
  parameter int unsigned Z = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  coord_t           here,
  // PE transmit side
  input  logic             tx_valid,
  output logic             tx_ready,
  input  ftype_e           tx_ftype,
  input  coord_t           tx_dest,
  input  logic [PAY_W-1:0] tx_payload,
  // PE receive side
  output logic             rx_valid,
  output flit_t            rx_flit,
  // router local input
  output link_t            to_router,
  input  logic             r_stop,
  input  logic             r_arq,
  input  nstat_t           r_stat,
  // router local output
  input  link_t            from_router,
  output logic             arq_out,
  output logic             stop_out,
  output logic             retx
);
  logic              busy;
  flit_t             obuf;
  logic              lock_v;
  logic [PORT_W-1:0] lock_port, first_hop;
  logic              hold;

  assign hold     = busy && r_arq;
  assign retx     = hold;
  assign tx_ready = !hold && !r_stop;
  assign to_router.valid = busy;
  assign to_router.flit  = obuf;

  always_comb begin
    if (lock_v && !is_head(tx_ftype))
      first_hop = lock_port;
    else
      first_hop = laft_route(here, tx_dest, P_L, r_stat.fault, r_stat.cong, X, Y, Z);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      obuf      <= '0;
      lock_v    <= 1'b0;
      lock_port <= '0;
    end else if (!hold) begin
      busy <= tx_valid && tx_ready;
      if (tx_valid && tx_ready) begin
        obuf <= ecc_encode('{chk1: '0, chk0: '0, ftype: tx_ftype, next: first_hop,
                             dest: tx_dest, payload: tx_payload});
        lock_v    <= !is_tail(tx_ftype);
        lock_port <= first_hop;
      end
    end
  end

  logic wr, unused_fixed;
  feto_ecc u_ecc (
    .in(from_router), .out_flit(rx_flit), .write(wr), .arq(arq_out), .fixed(unused_fixed)
  );
  assign rx_valid = wr;
  assign stop_out = 1'b0;
endmodule
