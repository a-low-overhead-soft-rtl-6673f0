// feto_switch_alloc: switch allocator of the SHER-3DR router with its
// Stall/Go controller and soft-error monitor.
//
// Arbiter: for every output, one requesting input wins, round-robin from the
// input after the last winner. Wormhole-like switching: once an output has
// passed a head flit it stays with that input until the tail has passed.
// Stall/Go: an output whose downstream buffer raises 'stop_in', or whose
// ARQ buffer still holds a flit to retransmit, grants nobody.
//
// Soft-error monitor: the allocator owns the phase of the NPC/SA stage. In
// PH_FIRST the grants are computed from the live requests, and the requests
// are sampled; in PH_REDUN they are recomputed from the samples and compared
// (feto_pcr); the input ports' NPC comparisons come in as 'npc_mismatch'. No
// mismatch: the first grants are final and crossbar traversal happens in this
// cycle (2 cycles per allocation). Any mismatch halts the stage for PH_RECOV,
// in which a third computation is voted (3 cycles). This follows the design's
// PCR algorithm and its timing chart; the round-robin arbiter, the sampling
// and the squashing of a grant whose output got an ARQ meanwhile ('out_hold')
// are this implementation's choices.
//
// Outputs: 'commit[i]' (input i traverses now, to port 'commit_port[i]').
module feto_switch_alloc
  import feto_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid   [NPORTS],
  input  logic [PORT_W-1:0] req_port    [NPORTS],
  input  logic              req_tail    [NPORTS],
  input  logic [NPORTS-1:0] stop_in,
  input  logic [NPORTS-1:0] out_hold,
  input  logic [NPORTS-1:0] out_fault,
  input  logic [NPORTS-1:0] npc_mismatch,
  input  logic              seu_sa,
  output phase_e            phase,
  output logic [NPORTS-1:0] commit,
  output logic              sa_mismatch,
  output logic [NPORTS-1:0] stalled
);
  localparam int unsigned IW = PORT_W;

  logic [NPORTS-1:0] lock_v;
  logic [IW-1:0]     lock_own [NPORTS];
  logic [IW-1:0]     rr       [NPORTS];
  logic [NPORTS-1:0] hit_o    [NPORTS];

  logic [NPORTS-1:0] s_valid, s_stop;
  logic [IW-1:0]     s_port [NPORTS];

  logic [NPORTS-1:0] cur_valid, cur_stop;
  logic [IW-1:0]     cur_port [NPORTS];
  logic [NPORTS-1:0] grants, final_g;
  logic              mm_any;

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      cur_valid[i] = (phase == PH_FIRST) ? req_valid[i] : s_valid[i];
      cur_port[i]  = (phase == PH_FIRST) ? req_port[i]  : s_port[i];
    end
    cur_stop = (phase == PH_FIRST) ? (stop_in | out_fault) : s_stop;
  end

  // arbitration of all outputs
  always_comb begin
    logic [IW-1:0] idx;
    logic        taken;
    grants  = '0;
    stalled = '0;
    for (int o = 0; o < NPORTS; o++) begin
      taken = 1'b0;
      for (int k = 0; k < NPORTS; k++) begin
        idx = IW'((int'(rr[o]) + k) % NPORTS);
        if (!taken && cur_valid[idx] && cur_port[idx] == IW'(o) &&
            (!lock_v[o] || lock_own[o] == IW'(idx))) begin
          taken = 1'b1;
          if (cur_stop[o]) stalled[idx] = 1'b1;
          else             grants[idx]  = 1'b1;
        end
      end
    end
    grants[0] = grants[0] ^ seu_sa;    // soft error injection point
  end

  logic [NPORTS-1:0] pcr_final;

  feto_pcr #(.W(NPORTS)) u_monitor (
    .clk, .rst_n, .phase, .result(grants), .mismatch(sa_mismatch), .final_res(pcr_final)
  );

  assign mm_any = sa_mismatch || (|npc_mismatch);

  always_comb begin
    final_g = '0;
    if ((phase == PH_REDUN && !mm_any) || phase == PH_RECOV) final_g = pcr_final;
    for (int i = 0; i < NPORTS; i++)
      commit[i] = final_g[i] && s_valid[i] && !out_hold[s_port[i]] && !s_stop[s_port[i]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= PH_FIRST;
      s_valid <= '0;
      s_stop  <= '0;
      lock_v  <= '0;
      for (int i = 0; i < NPORTS; i++) begin
        s_port[i]   <= '0;
        lock_own[i] <= '0;
        rr[i]       <= '0;
      end
    end else begin
      for (int o = 0; o < NPORTS; o++)
        assert ($onehot0(hit_o[o]))
          else $error("feto_switch_alloc: two inputs traverse to output %0d", o);
      case (phase)
        PH_FIRST: phase <= PH_REDUN;
        PH_REDUN: phase <= mm_any ? PH_RECOV : PH_FIRST;
        default:  phase <= PH_FIRST;
      endcase
      if (phase == PH_FIRST) begin
        s_stop <= stop_in | out_fault;
        for (int i = 0; i < NPORTS; i++) begin
          s_valid[i] <= req_valid[i];
          s_port[i]  <= req_port[i];
        end
      end
      for (int i = 0; i < NPORTS; i++) begin
        if (commit[i]) begin
          lock_v[s_port[i]]   <= !req_tail[i];
          lock_own[s_port[i]] <= IW'(i);
          rr[s_port[i]]       <= IW'((i + 1) % NPORTS);
        end
      end
      for (int o = 0; o < NPORTS; o++)
        if (out_fault[o]) lock_v[o] <= 1'b0;
    end
  end

  // one input per output per traversal (checked in the clocked block above)
  always_comb
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++) hit_o[o][i] = commit[i] && s_port[i] == IW'(o);
endmodule
