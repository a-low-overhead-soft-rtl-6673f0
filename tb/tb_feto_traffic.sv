// tb_feto_traffic: the synthetic traffic patterns of the evaluation, run on a
// 2x2x2 mesh (the size of the PIP application graph) with 10-flit packets.
//
// Three patterns are offered in turn, each first fault-free and then with
// random single-cycle soft errors in the next-port computations and switch
// allocators of every router:
//   transpose   node (x,y,z) sends to (y,x,z); nodes on the diagonal x == y
//               stay silent
//   uniform     every node sends to destinations drawn uniformly at random
//   hotspot 10% as uniform, but one packet in ten goes to node 0
// For every flit the bench checks delivery to the right node, exactly once,
// and a latency of at least two cycles per router passed (the first and the
// redundant allocation cycle). It reports the average flit latency from NI
// entry to delivery for each run, and checks that soft errors cost no flit
// and are all caught without being mistaken for permanent faults. Packet
// counts are scaled down from the evaluation (8 packets per node instead of
// 128 for uniform traffic) to keep the run short. The pattern definitions
// for three dimensions are this bench's own.
module tb_feto_traffic;
  import feto_pkg::*;
  localparam int X = 2, Y = 2, Z = 2, N = X * Y * Z, PKT = 10;
  localparam int NPK = 8;           // packets per node and run
  localparam int MAXCYC = 400000;

  int   cyc = 0;
  int   t_inj [int];
  int   src_of [int];
  longint lat_sum = 0;
  int   lat_n = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             tx_valid [N];
  logic             tx_ready [N];
  ftype_e           tx_ftype [N];
  coord_t           tx_dest  [N];
  logic [PAY_W-1:0] tx_payload [N];
  logic             rx_valid [N];
  flit_t            rx_flit  [N];
  flit_t            slot_fault [N][NPORTS][BUF_DEPTH];
  flit_t            xbar_fault [N][NPORTS];
  flit_t            byp_fault  [N][N_BYPASS];
  flit_t            chan_fault [N][NPORTS];
  logic [NPORTS-1:0] seu_npc [N];
  logic             seu_sa  [N];
  rev_t             ev      [N];
  nstat_t           stat    [N];
  logic [NPORTS-1:0] overflow [N];
  logic             ni_retx [N];

  feto_noc #(.X(X), .Y(Y), .Z(Z)) dut (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_ftype, .tx_dest, .tx_payload,
    .rx_valid, .rx_flit, .slot_fault, .xbar_fault, .byp_fault, .chan_fault,
    .seu_npc, .seu_sa, .ev, .stat, .overflow, .ni_retx
  );

  typedef struct packed {
    ftype_e           t;
    coord_t           d;
    logic [PAY_W-1:0] p;
  } txf_t;

  txf_t q [N][$];
  int   seqn [N];
  int   exp_dest [int];
  int   checks = 0, failures = 0;
  int   c_ecc = 0, c_arq = 0, c_npc = 0, c_sa = 0, c_retx = 0, c_perm = 0, c_slot = 0;
  int   c_blod = 0, c_dead = 0, c_stall = 0, c_rr = 0, c_deliv = 0, c_ovf = 0;
  bit   inject_seu = 0;

  function automatic coord_t xyz(int n);
    return '{x: COORD_W'(n % X), y: COORD_W'((n / X) % Y), z: COORD_W'(n / (X * Y))};
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // PE transmit models
  always @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (tx_valid[n] && tx_ready[n]) begin
        t_inj[int'(tx_payload[n])] = cyc;
        void'(q[n].pop_front());
      end
      if (q[n].size() > 0) begin
        tx_valid[n]   <= 1'b1;
        tx_ftype[n]   <= q[n][0].t;
        tx_dest[n]    <= q[n][0].d;
        tx_payload[n] <= q[n][0].p;
      end else begin
        tx_valid[n] <= 1'b0;
      end
    end
  end

  // PE receive models and scoreboard
  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < N; n++) begin
        if (rx_valid[n]) begin
          int key;
          key = int'(rx_flit[n].payload);
          checks++;
          if (!exp_dest.exists(key)) begin
            failures++;
            $display("FAIL: node %0d got unexpected payload %h", n, key);
          end else begin
            if (exp_dest[key] != n || rx_flit[n].dest != xyz(n)) begin
              failures++;
              $display("FAIL: payload %h for node %0d arrived at %0d", key, exp_dest[key], n);
            end
            if (t_inj.exists(key)) begin
              int lat, hops;
              lat  = cyc - t_inj[key];
              hops = hop_count(src_of[key], n);
              lat_sum += lat;
              lat_n++;
              if (lat < 2 * (hops + 1)) begin
                failures++;
                $display("FAIL: flit %h took %0d cycles over %0d hops", key, lat, hops);
              end
              t_inj.delete(key);
            end
            exp_dest.delete(key);
            c_deliv++;
          end
        end
        c_ecc   += $countones(ev[n].ecc_fix);
        c_arq   += $countones(ev[n].arq_req);
        c_npc   += $countones(ev[n].npc_se);
        c_sa    += int'(ev[n].sa_se);
        c_retx  += $countones(ev[n].retx);
        c_perm  += $countones(ev[n].perm);
        c_slot  += $countones(ev[n].slot_flag);
        c_blod  += $countones(ev[n].blod_on);
        c_dead  += $countones(ev[n].link_dead);
        c_stall += $countones(ev[n].stall);
        c_rr    += $countones(ev[n].reroute);
        c_ovf   += $countones(overflow[n]);
      end
    end
  end

  // soft error injection: occasional single-cycle upsets
  always @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      seu_npc[n] <= '0;
      seu_sa[n]  <= 1'b0;
      if (inject_seu) begin
        if ($urandom_range(0, 15 * N) == 0) seu_npc[n][$urandom_range(0, NPORTS - 1)] <= 1'b1;
        if ($urandom_range(0, 15 * N) == 0) seu_sa[n] <= 1'b1;
      end
    end
  end

  task automatic send(int src, int dst, int npk);
    for (int k = 0; k < npk; k++)
      for (int i = 0; i < PKT; i++) begin
        txf_t f;
        f.t = (i == 0) ? FT_HEAD : (i == PKT - 1) ? FT_TAIL : FT_BODY;
        f.d = xyz(dst);
        f.p = {6'(src), 12'(seqn[src])};
        exp_dest[int'(f.p)] = dst;
        src_of[int'(f.p)] = src;
        seqn[src]++;
        q[src].push_back(f);
      end
  endtask

  // wait until all queues are empty and nothing is outstanding (or limit)
  task automatic drain(int limit, output int left);
    int c;
    c = 0;
    forever begin
      bit busy;
      @(posedge clk);
      busy = exp_dest.size() != 0;
      for (int n = 0; n < N; n++) if (q[n].size() != 0) busy = 1;
      c++;
      if (!busy || c >= limit) break;
    end
    repeat (20) @(posedge clk);
    left = exp_dest.size();
  endtask

  task automatic clear_faults();
    for (int n = 0; n < N; n++) begin
      for (int p = 0; p < NPORTS; p++) begin
        xbar_fault[n][p] = '0;
        chan_fault[n][p] = '0;
        for (int s = 0; s < BUF_DEPTH; s++) slot_fault[n][p][s] = '0;
      end
      for (int b = 0; b < N_BYPASS; b++) byp_fault[n][b] = '0;
    end
  endtask

  task automatic restart();
    int unused;
    drain(2000, unused);
    exp_dest.delete();
    for (int n = 0; n < N; n++) q[n].delete();
    clear_faults();
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  function automatic int hop_count(int a, int b);
    coord_t ca, cb;
    int dx, dy, dz;
    ca = xyz(a);
    cb = xyz(b);
    dx = int'(ca.x) - int'(cb.x);
    dy = int'(ca.y) - int'(cb.y);
    dz = int'(ca.z) - int'(cb.z);
    return (dx < 0 ? -dx : dx) + (dy < 0 ? -dy : dy) + (dz < 0 ? -dz : dz);
  endfunction

  function automatic int transpose_of(int n);
    coord_t c;
    c = xyz(n);
    return int'(c.y) + X * (int'(c.x) + Y * int'(c.z));
  endfunction

  // offer one pattern; returns the average flit latency (x100)
  task automatic run(string name, int pattern, bit seu, output int avg100);
    int left, sent;
    lat_sum = 0;
    lat_n = 0;
    sent = 0;
    inject_seu = seu;
    for (int k = 0; k < NPK; k++)
      for (int n = 0; n < N; n++) begin
        int d;
        case (pattern)
          0: d = transpose_of(n);
          1: do d = $urandom_range(0, N - 1); while (d == n);
          default: begin
            if (n != 0 && $urandom_range(0, 9) == 0) d = 0;
            else do d = $urandom_range(0, N - 1); while (d == n);
          end
        endcase
        if (d != n) begin
          send(n, d, 1);
          sent++;
        end
      end
    drain(MAXCYC / 8, left);
    inject_seu = 0;
    check(left == 0, $sformatf("%s%s: all %0d packets delivered", name, seu ? " with soft errors" : "", sent));
    check(lat_n == sent * PKT, $sformatf("%s: every flit's latency measured", name));
    avg100 = lat_n ? int'(lat_sum * 100 / lat_n) : 0;
    $display("%-12s soft errors %0d: %0d packets, average flit latency %0d.%02d cycles",
             name, seu, sent, avg100 / 100, avg100 % 100);
  endtask

  initial begin
    int a0, a1, npc0, sa0;  // a0/a1: average latency x100 without/with soft errors
    string names [3];
    names = '{"transpose", "uniform", "hotspot10"};
    for (int n = 0; n < N; n++) begin
      tx_valid[n] = 1'b0;
      seqn[n] = 0;
      seu_npc[n] = '0;
      seu_sa[n] = 1'b0;
    end
    clear_faults();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int p = 0; p < 3; p++) begin
      run(names[p], p, 1'b0, a0);
      npc0 = c_npc;
      sa0  = c_sa;
      run(names[p], p, 1'b1, a1);
      check(c_npc + c_sa > npc0 + sa0, $sformatf("%s: soft errors were injected and caught", names[p]));
    end
    check(c_perm == 0 && c_dead == 0, "soft errors never taken for permanent faults");
    check(c_ovf == 0, "no buffer overflow");
    check(c_stall > 0, "stall/go occurred");
    $display("events: npc_se=%0d sa_se=%0d stall=%0d delivered=%0d", c_npc, c_sa, c_stall, c_deliv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
