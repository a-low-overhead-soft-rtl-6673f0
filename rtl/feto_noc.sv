// feto_noc: the 3D-mesh network of SHER-3DR routers, one network interface
// per node (the design's 3D-FETO system).
//
// Nodes are numbered n = x + X*(y + Y*z). Router n's output on port p feeds
// the opposite input port of the neighbour in direction p (North +y, East +x,
// Up +z). Vertical links stand for the through-silicon vias and are plain
// wires here. Each router receives, per port, the fault/congestion status of
// the neighbour behind it for look-ahead routing; a port on the mesh edge
// sees an all-faulty, all-stopped neighbour and is never used.
//
// 'chan_fault[n][p]' is an XOR mask on the inter-router channel leaving
// router n through port p (channel fault injection); the other fault inputs
// are passed to the routers. The PEs sit outside: their NI-side signals are
// the ports of this module. Default size 4x4x4, the mesh used for the
// transpose, uniform and hotspot evaluations and drawn in the design's
// system figure.
module feto_noc
  import feto_pkg::*;
#(
  parameter int unsigned X = 4,
  parameter int unsigned Y = 4,
  parameter int unsigned Z = 4,
  localparam int unsigned N = X * Y * Z
) (
  input  logic             clk,
  input  logic             rst_n,
  // PE side of every NI
  input  logic             tx_valid   [N],
  output logic             tx_ready   [N],
  input  ftype_e           tx_ftype   [N],
  input  coord_t           tx_dest    [N],
  input  logic [PAY_W-1:0] tx_payload [N],
  output logic             rx_valid   [N],
  output flit_t            rx_flit    [N],
  // fault injection
  input  flit_t            slot_fault [N][NPORTS][BUF_DEPTH],
  input  flit_t            xbar_fault [N][NPORTS],
  input  flit_t            byp_fault  [N][N_BYPASS],
  input  flit_t            chan_fault [N][NPORTS],
  input  logic [NPORTS-1:0] seu_npc   [N],
  input  logic             seu_sa     [N],
  // observation
  output rev_t             ev         [N],
  output nstat_t           stat       [N],
  output logic [NPORTS-1:0] overflow  [N],
  output logic             ni_retx    [N]
);
  link_t             r_in   [N][NPORTS];
  link_t             r_out  [N][NPORTS];
  logic [NPORTS-1:0] r_stop_out [N], r_arq_out [N], r_stop_in [N], r_arq_in [N];
  nstat_t            r_nbr  [N][NPORTS];
  link_t             ni_out [N];
  logic              ni_arq [N], ni_stop [N];

  function automatic int nbr_index(int n, int p);
    int x, y, z;
    x = n % X;
    y = (n / X) % Y;
    z = n / (X * Y);
    case (p)
      1: y++;
      2: x++;
      3: y--;
      4: x--;
      5: z++;
      6: z--;
      default: ;
    endcase
    if (x < 0 || y < 0 || z < 0 || x >= X || y >= Y || z >= Z) return -1;
    return x + X * (y + Y * z);
  endfunction

  function automatic int opp(int p);
    case (p)
      1: return 3;
      3: return 1;
      2: return 4;
      4: return 2;
      5: return 6;
      6: return 5;
      default: return 0;
    endcase
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_node
    coord_t here;
    assign here = '{x: COORD_W'(n % X), y: COORD_W'((n / X) % Y), z: COORD_W'(n / (X * Y))};

    // local port
    assign r_in[n][0]       = ni_out[n];
    assign r_stop_in[n][0]  = ni_stop[n];
    assign r_arq_in[n][0]   = ni_arq[n];
    assign r_nbr[n][0]      = '0;

    for (genvar p = 1; p < NPORTS; p++) begin : g_port
      localparam int M = nbr_index(n, p);
      if (M < 0) begin : g_edge
        assign r_in[n][p]      = '0;
        assign r_stop_in[n][p] = 1'b1;
        assign r_arq_in[n][p]  = 1'b0;
        assign r_nbr[n][p]     = '1;
      end else begin : g_link
        localparam int Q = opp(p);
        assign r_in[n][p].valid = r_out[M][Q].valid;
        assign r_in[n][p].flit  = r_out[M][Q].flit ^ chan_fault[M][Q];
        assign r_stop_in[n][p]  = r_stop_out[M][Q];
        assign r_arq_in[n][p]   = r_arq_out[M][Q];
        assign r_nbr[n][p]      = stat[M];
      end
    end

    feto_router #(.X(X), .Y(Y), .Z(Z)) u_router (
      .clk, .rst_n, .here,
      .in(r_in[n]), .stop_out(r_stop_out[n]), .arq_out(r_arq_out[n]),
      .out(r_out[n]), .stop_in(r_stop_in[n]), .arq_in(r_arq_in[n]),
      .nbr_stat(r_nbr[n]), .own_stat(stat[n]),
      .slot_fault(slot_fault[n]), .xbar_fault(xbar_fault[n]), .byp_fault(byp_fault[n]),
      .seu_npc(seu_npc[n]), .seu_sa(seu_sa[n]),
      .ev(ev[n]), .overflow(overflow[n])
    );

    feto_ni #(.X(X), .Y(Y), .Z(Z)) u_ni (
      .clk, .rst_n, .here,
      .tx_valid(tx_valid[n]), .tx_ready(tx_ready[n]), .tx_ftype(tx_ftype[n]),
      .tx_dest(tx_dest[n]), .tx_payload(tx_payload[n]),
      .rx_valid(rx_valid[n]), .rx_flit(rx_flit[n]),
      .to_router(ni_out[n]), .r_stop(r_stop_out[n][0]), .r_arq(r_arq_out[n][0]),
      .r_stat(stat[n]),
      .from_router(r_out[n][0]), .arq_out(ni_arq[n]), .stop_out(ni_stop[n]),
      .retx(ni_retx[n])
    );
  end
endmodule
