// feto_pkg: types, constants and shared functions of the soft/hard fault
// tolerant 3D-NoC (SHER-3DR router, 3D mesh).
//
// Flit format. The 44-bit flit, its 14-bit header, 18-bit payload and the 12
// check bits of two SECDED(22,16) words follow the simulation configuration
// of the design. The split of the header into fields and the bit positions are
// this implementation's choice:
//   [43:38] chk1  Hsiao check bits of data word 1 (data[31:16])
//   [37:32] chk0  Hsiao check bits of data word 0 (data[15:0])
//   [31:30] ftype flit type (single/head/body/tail)
//   [29:27] next  look-ahead output port to take in the router receiving the flit
//   [26:18] dest  destination x, y, z (3 bits each)
//   [17:0]  payload
// Port numbering (also the crossbar order): L, N, E, S, W, U, D = 0..6.
// North is +y, East is +x, Up is +z.
//
// The SECDED code is a Hsiao code: the 16 data columns of the parity check
// matrix are the first 16 six-bit words of weight 3 in ascending order, the 6
// check columns are the unit vectors. The columns are computed by a function.
//
// laft_route() is the routing decision of the look-ahead fault-tolerant
// algorithm as far as the design describes it: drop faulty directions, prefer
// minimal directions, rank them by path diversity and then by congestion,
// fall back to non-minimal directions when no minimal one is left.
package feto_pkg;

  localparam int unsigned NPORTS  = 7;
  localparam int unsigned PORT_W  = 3;
  localparam int unsigned DATA_W  = 32;
  localparam int unsigned PAY_W   = 18;
  localparam int unsigned CHK_W   = 6;
  localparam int unsigned COORD_W = 3;
  localparam int unsigned N_BYPASS = 2;   // bypass links per crossbar
  localparam int unsigned BUF_DEPTH = 4;   // input buffer slots

  typedef enum logic [PORT_W-1:0] {
    P_L = 3'd0, P_N = 3'd1, P_E = 3'd2, P_S = 3'd3, P_W = 3'd4, P_U = 3'd5, P_D = 3'd6
  } port_e;

  typedef enum logic [1:0] {
    FT_SINGLE = 2'b00, FT_HEAD = 2'b01, FT_BODY = 2'b10, FT_TAIL = 2'b11
  } ftype_e;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] z;
  } coord_t;

  typedef struct packed {
    logic [CHK_W-1:0]  chk1;
    logic [CHK_W-1:0]  chk0;
    ftype_e            ftype;
    logic [PORT_W-1:0] next;
    coord_t            dest;
    logic [PAY_W-1:0]  payload;
  } flit_t;

  // Status a router publishes to its neighbours for their look-ahead routing.
  typedef struct packed {
    logic [NPORTS-1:0] fault;  // output link marked faulty by DDRM
    logic [NPORTS-1:0] cong;   // stop received on that output (congested)
  } nstat_t;

  // One forward channel between routers (or router and NI).
  typedef struct packed {
    logic  valid;
    flit_t flit;
  } link_t;

  // Phase of the NPC/SA pipeline stage under Pipeline Computation Redundancy:
  // first computation, redundant computation + compare, recovery + vote.
  typedef enum logic [1:0] {
    PH_FIRST = 2'd0, PH_REDUN = 2'd1, PH_RECOV = 2'd2
  } phase_e;

  // Per-cycle event pulses of one router, for observation and statistics.
  typedef struct packed {
    logic [NPORTS-1:0] ecc_fix;     // input flit corrected by SECDED
    logic [NPORTS-1:0] arq_req;     // input flit refused, retransmission requested
    logic [NPORTS-1:0] npc_se;      // NPC soft error detected (redundant result differs)
    logic              sa_se;       // SA soft error detected
    logic [NPORTS-1:0] retx;        // output retransmitting from its ARQ buffer
    logic [NPORTS-1:0] perm;        // permanent fault declared on an output (2 ARQs)
    logic [NPORTS-1:0] slot_flag;   // input buffer slot handed to RAB as faulty
    logic [NPORTS-1:0] blod_on;     // bypass link switched in for an output
    logic [NPORTS-1:0] link_dead;   // output link handed to LAFT as faulty
    logic [NPORTS-1:0] stall;       // request held back by stop (stall/go)
    logic [NPORTS-1:0] reroute;     // flit rerouted around a faulty local output
  } rev_t;

  function automatic logic is_tail(ftype_e t);
    return (t == FT_TAIL) || (t == FT_SINGLE);
  endfunction

  function automatic logic is_head(ftype_e t);
    return (t == FT_HEAD) || (t == FT_SINGLE);
  endfunction

  // ---------------------------------------------------------------- SECDED
  // Column j (0..15) of the Hsiao matrix: j-th 6-bit value of weight 3.
  // Data column j of the check matrix is the j-th 6-bit value of weight 3 in
  // ascending order (000111, 001011, 001101, ...); the first 16 of the 20
  // such values are used.
  localparam logic [CHK_W-1:0] HSIAO_H [16] = '{
    6'b000111, 6'b001011, 6'b001101, 6'b001110, 6'b010011, 6'b010101, 6'b010110, 6'b011001, 6'b011010, 6'b011100, 6'b100011, 6'b100101, 6'b100110, 6'b101001, 6'b101010, 6'b101100
  };

  function automatic logic [CHK_W-1:0] hsiao_col(logic [3:0] j);
    return HSIAO_H[j];
  endfunction

  function automatic logic [CHK_W-1:0] hsiao_chk(logic [15:0] d);
    logic [CHK_W-1:0] c;
    c = '0;
    for (int unsigned j = 0; j < 16; j++)
      if (d[j]) c ^= hsiao_col(4'(j));
    return c;
  endfunction

  // Fill in both check words of a flit.
  function automatic flit_t ecc_encode(flit_t f);
    logic [DATA_W-1:0] d;
    d = f[DATA_W-1:0];
    f.chk0 = hsiao_chk(d[15:0]);
    f.chk1 = hsiao_chk(d[31:16]);
    return f;
  endfunction

  typedef struct packed {
    logic [15:0] data;
    logic        corrected;
    logic        uncorrectable;
  } sec_res_t;

  function automatic sec_res_t hsiao_decode(logic [15:0] d, logic [CHK_W-1:0] c);
    sec_res_t r;
    logic [CHK_W-1:0] s;
    s = c ^ hsiao_chk(d);
    r.data = d;
    r.corrected = 1'b0;
    r.uncorrectable = 1'b0;
    if (s != '0) begin
      if ($countones(s) == 1) begin
        r.corrected = 1'b1;             // error in a check bit only
      end else if ($countones(s) == 3) begin
        r.uncorrectable = 1'b1;         // unless a data column matches
        for (int unsigned j = 0; j < 16; j++)
          if (hsiao_col(4'(j)) == s) begin
            r.data[j] = ~r.data[j];
            r.corrected = 1'b1;
            r.uncorrectable = 1'b0;
          end
      end else begin
        r.uncorrectable = 1'b1;         // even weight: double error
      end
    end
    return r;
  endfunction

  // ---------------------------------------------------------------- routing
  function automatic logic [PORT_W-1:0] opposite(logic [PORT_W-1:0] p);
    case (p)
      P_N: return P_S;
      P_S: return P_N;
      P_E: return P_W;
      P_W: return P_E;
      P_U: return P_D;
      P_D: return P_U;
      default: return P_L;
    endcase
  endfunction

  // Coordinates of the neighbour reached through port p.
  function automatic coord_t step(coord_t c, logic [PORT_W-1:0] p);
    coord_t n;
    n = c;
    case (p)
      P_N: n.y = c.y + 1'b1;
      P_S: n.y = c.y - 1'b1;
      P_E: n.x = c.x + 1'b1;
      P_W: n.x = c.x - 1'b1;
      P_U: n.z = c.z + 1'b1;
      P_D: n.z = c.z - 1'b1;
      default: ;
    endcase
    return n;
  endfunction

  // Does port p of node c lead to a node inside an X*Y*Z mesh?
  function automatic logic in_mesh(coord_t c, logic [PORT_W-1:0] p,
                                   int unsigned X, int unsigned Y, int unsigned Z);
    case (p)
      P_N: return 32'(c.y) + 1 < Y;
      P_S: return c.y != 0;
      P_E: return 32'(c.x) + 1 < X;
      P_W: return c.x != 0;
      P_U: return 32'(c.z) + 1 < Z;
      P_D: return c.z != 0;
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic [1:0] diversity(coord_t c, coord_t d);
    return 2'(c.x != d.x) + 2'(c.y != d.y) + 2'(c.z != d.z);
  endfunction

  // Routing decision at node 'here' for a flit to 'dest' that entered 'here'
  // through port 'in_port'. 'fault' and 'cong' are the status of the outputs
  // of 'here'.
  function automatic logic [PORT_W-1:0] laft_route(
      coord_t here, coord_t dest, logic [PORT_W-1:0] in_port,
      logic [NPORTS-1:0] fault, logic [NPORTS-1:0] cong,
      int unsigned X, int unsigned Y, int unsigned Z);
    logic [NPORTS-1:0] minimal;
    logic [PORT_W-1:0] best;
    logic              found;
    int                score, best_score;
    if (here == dest) return P_L;
    minimal = '0;
    if (dest.x > here.x) minimal[P_E] = 1'b1;
    if (dest.x < here.x) minimal[P_W] = 1'b1;
    if (dest.y > here.y) minimal[P_N] = 1'b1;
    if (dest.y < here.y) minimal[P_S] = 1'b1;
    if (dest.z > here.z) minimal[P_U] = 1'b1;
    if (dest.z < here.z) minimal[P_D] = 1'b1;
    found = 1'b0;
    best = P_L;
    best_score = -1;
    // minimal directions first (never straight back, which can only follow a
    // detour): score = 2*diversity + not congested
    for (int unsigned p = 1; p < NPORTS; p++) begin
      if (minimal[p] && !fault[p] && 3'(p) != in_port) begin
        score = 2 * int'(diversity(step(here, 3'(p)), dest)) + int'(!cong[p]);
        if (score > best_score) begin
          best_score = score;
          best = 3'(p);
          found = 1'b1;
        end
      end
    end
    if (found) return best;
    // no minimal path left: non-minimal, never straight back
    for (int unsigned p = 1; p < NPORTS; p++) begin
      if (!minimal[p] && !fault[p] && in_mesh(here, 3'(p), X, Y, Z) &&
          3'(p) != in_port) begin
        score = int'(!cong[p]);
        if (score > best_score) begin
          best_score = score;
          best = 3'(p);
          found = 1'b1;
        end
      end
    end
    if (found) return best;
    // every way out is faulty: keep the first minimal direction
    for (int p = NPORTS - 1; p >= 1; p--)
      if (minimal[p]) best = 3'(p);
    return best;
  endfunction

endpackage
