// tb_feto_noc: end-to-end test of the 3D-FETO network, reduced to a 2x2x2 mesh.
//
// Every node's PE model sends 10-flit packets through its NI; each payload
// carries (source, sequence number) and the receiving side checks that every
// flit reaches the right node exactly once. The test walks through the
// mechanisms of the design, resetting the network between fault scenarios:
//   1 uniform random and hotspot traffic (stall/go must occur)
//   2 soft errors injected into NPC and SA (PCR detection and voting)
//   3 permanent single-bit channel fault (SECDED correction)
//   4 one-cycle double-bit channel faults (ARQ retransmission)
//   5 permanent crossbar-link fault (DDRM -> Bypass-Link-on-Demand)
//   6 permanent channel fault (DDRM -> bypass fails -> LAFT reroute)
//   7 permanent input-buffer slot fault (DDRM -> Random Access Buffer)
// A flit corrupted by a permanent fault before it is diagnosed is dropped by
// the design; scenarios 5-7 allow a few such losses and then require loss-
// free delivery once the fault has been handled. Every mechanism must have
// been seen at least once.
module tb_feto_noc;
  import feto_pkg::*;
  localparam int X = 2, Y = 2, Z = 2, N = X * Y * Z, PKT = 10;
  localparam int NPK = 4;           // packets per node in random traffic
  localparam int MAXCYC = 200000;

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
      if (tx_valid[n] && tx_ready[n]) void'(q[n].pop_front());
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

  // a packet stream from node 0 to its east neighbour (node 1)
  localparam int SRC = 0, DST = 1, PE = 2;   // PE = east port

  initial begin
    int left, perm0, arq0, blod0, dead0, slot0;
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

    // 1: uniform random traffic, then a hotspot burst
    for (int n = 0; n < N; n++)
      for (int k = 0; k < NPK; k++) begin
        int d;
        do d = $urandom_range(0, N - 1); while (d == n);
        send(n, d, 1);
      end
    drain(MAXCYC / 8, left);
    check(left == 0, "uniform traffic: all flits delivered");
    for (int n = 1; n < N; n++) send(n, 0, 1);
    drain(MAXCYC / 8, left);
    check(left == 0, "hotspot traffic: all flits delivered");
    check(c_stall > 0, "stall/go occurred");

    // 2: soft errors in NPC and SA
    inject_seu = 1;
    for (int n = 0; n < N; n++) begin
      int d;
      do d = $urandom_range(0, N - 1); while (d == n);
      send(n, d, NPK);
    end
    drain(MAXCYC / 8, left);
    inject_seu = 0;
    check(left == 0, "soft errors: all flits delivered");
    check(c_npc > 0, "NPC soft error detected");
    check(c_sa > 0, "SA soft error detected");
    check(c_perm == 0, "soft errors never taken for permanent faults");

    // 3: permanent single-bit channel fault, corrected by SECDED
    restart();
    chan_fault[SRC][PE] = '0;
    chan_fault[SRC][PE].payload[3] = 1'b1;
    send(SRC, DST, 3);
    drain(2000, left);
    check(left == 0, "single-bit channel fault: all flits delivered");
    check(c_ecc >= 30, "SECDED corrected every flit on the faulty channel");
    check(c_arq == 0, "no ARQ for a correctable fault");

    // 4: one-cycle double-bit channel faults, recovered by ARQ
    restart();
    arq0 = c_arq;
    perm0 = c_perm;
    send(SRC, DST, 4);
    repeat (10) @(posedge clk);
    for (int k = 0; k < 8; k++) begin
      chan_fault[SRC][PE].payload[1:0] = 2'b11;
      @(posedge clk);
      chan_fault[SRC][PE] = '0;
      repeat (6) @(posedge clk);
    end
    drain(2000, left);
    check(left == 0, "transient channel faults: all flits delivered");
    check(c_arq > arq0, "ARQ requested");
    check(c_perm == perm0, "transient faults not taken as permanent");

    // 5: permanent crossbar-link fault -> bypass link
    restart();
    perm0 = c_perm; blod0 = c_blod; dead0 = c_dead;
    xbar_fault[SRC][PE].payload[5:4] = 2'b11;
    send(SRC, DST, 2);
    drain(2000, left);
    check(c_perm > perm0, "crossbar fault: permanent fault detected");
    check(c_blod > blod0, "crossbar fault: bypass link switched in");
    check(c_dead == dead0, "crossbar fault: link kept in use");
    check(left <= 2, "crossbar fault: at most two flits lost before recovery");
    exp_dest.delete();
    send(SRC, DST, 2);
    drain(2000, left);
    check(left == 0, "crossbar fault: delivery over the bypass");

    // 6: permanent channel fault -> bypass does not help -> LAFT reroutes
    restart();
    perm0 = c_perm; dead0 = c_dead;
    chan_fault[SRC][PE].payload[7:6] = 2'b11;
    send(SRC, DST, 2);
    drain(3000, left);
    check(c_perm > perm0, "channel fault: permanent fault detected");
    check(c_dead > dead0, "channel fault: link handed to LAFT");
    check(stat[SRC].fault[PE], "channel fault: link published as faulty");
    check(left <= 3, "channel fault: at most three flits lost before recovery");
    exp_dest.delete();
    send(SRC, DST, 2);
    drain(3000, left);
    check(left == 0, "channel fault: delivery around the dead link");
    check(c_rr > 0, "LAFT rerouted flits around the dead link");

    // 7: permanent fault in input-buffer slot 0 of node 1's west port -> RAB
    restart();
    slot0 = c_slot;
    slot_fault[DST][PE + 2][0].payload[9:8] = 2'b11;
    send(SRC, DST, 2);
    drain(3000, left);
    check(c_slot > slot0, "slot fault: slot handed to RAB");
    check(left <= 6, "slot fault: few flits lost before recovery");
    exp_dest.delete();
    send(SRC, DST, 2);
    drain(3000, left);
    check(left == 0, "slot fault: delivery with the slot skipped");

    check(c_ovf == 0, "no input buffer overflow");
    $display("mechanisms: ecc_fix=%0d arq=%0d npc_se=%0d sa_se=%0d retx=%0d perm=%0d slot_flag=%0d blod=%0d link_dead=%0d stall=%0d reroute=%0d delivered=%0d",
             c_ecc, c_arq, c_npc, c_sa, c_retx, c_perm, c_slot, c_blod, c_dead, c_stall, c_rr, c_deliv);
    check(c_retx > 0, "retransmission from ARQ buffer occurred");
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
