// feto_fault_manager: Detection, Diagnosis and Recovery Mechanism (DDRM) of
// one router, one state machine per output.
//
// Detection: the downstream ECC answers a flit it cannot correct with an
// ARQ. A transient fault lasts one cycle, so one retransmission from the ARQ
// buffer clears it. When the retransmission is refused too (ARQ counter
// reaches 2) the fault is taken as permanent: the flit is dropped from the
// ARQ buffer and the buffer position it came from (input port, slot) is
// remembered. The fault lies on the path input-buffer slot -> crossbar link ->
// inter-router channel.
// Diagnosis / recovery, following the design's algorithm:
//   CHECK  the next flit sent on that output is watched. Refused again while
//          coming from another buffer position: the fault is in the crossbar
//          link or the channel -> BLOD. Accepted while coming from another
//          position, or refused again from the same position: the slot is
//          faulty -> the slot is handed to the input port's RAB
//          ('flag_*'). Accepted from the same position: transient, no action.
//   BLOD   a free bypass link is switched in for the output and the refused
//          flit is retransmitted over it. Accepted: the crossbar link was the
//          culprit and the bypass stays (BYPASSED). Refused: the channel is
//          broken; the bypass is released and the output is marked faulty for
//          LAFT routing (FAULTY), which the router publishes to its
//          neighbours. With no bypass free the output is marked faulty at once.
//   BYPASSED a later permanent fault marks the output faulty.
// The choice of 'the next flit' as the monitored window, and dropping the
// flit that a permanent fault corrupted, are this implementation's choices.
module feto_fault_manager
  import feto_pkg::*;
#(
  parameter int unsigned DEPTH   = feto_pkg::BUF_DEPTH,
  parameter int unsigned NBYPASS = feto_pkg::N_BYPASS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NPORTS-1:0]        out_valid,
  input  logic [NPORTS-1:0]        arq_in,
  input  logic [PORT_W-1:0]        out_src      [NPORTS],
  input  logic [$clog2(DEPTH)-1:0] out_src_slot [NPORTS],
  output logic [NPORTS-1:0]        drop,
  output logic [NBYPASS-1:0]       byp_en,
  output logic [PORT_W-1:0]        byp_out      [NBYPASS],
  output logic [NPORTS-1:0]        link_fault,
  output logic [NPORTS-1:0]        flag_valid,                 // by input port
  output logic [$clog2(DEPTH)-1:0] flag_slot    [NPORTS],
  output logic [NPORTS-1:0]        ev_perm,
  output logic [NPORTS-1:0]        ev_slot,
  output logic [NPORTS-1:0]        ev_blod,
  output logic [NPORTS-1:0]        ev_dead
);
  typedef enum logic [2:0] {
    S_NORMAL, S_CHECK, S_BLOD, S_BYPASSED, S_FAULTY
  } ddrm_e;

  localparam int unsigned SW = $clog2(DEPTH);
  localparam int unsigned BW = (NBYPASS > 1) ? $clog2(NBYPASS) : 1;

  ddrm_e             st      [NPORTS];
  logic [NPORTS-1:0] cnt;                 // one ARQ seen for the current flit
  logic [PORT_W-1:0] pos_port[NPORTS];
  logic [SW-1:0]     pos_slot[NPORTS];
  logic [BW-1:0]     byp_idx [NPORTS];

  logic [NPORTS-1:0] refused, same_pos, perm;

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      refused[o]  = out_valid[o] && arq_in[o];
      same_pos[o] = out_src[o] == pos_port[o] && out_src_slot[o] == pos_slot[o];
      perm[o]     = refused[o] && cnt[o];
      drop[o]     = 1'b0;
      case (st[o])
        S_NORMAL, S_BYPASSED: drop[o] = perm[o];
        S_BLOD:               drop[o] = refused[o];
        S_FAULTY:             drop[o] = refused[o];
        default:              drop[o] = refused[o] && !same_pos[o] && (&byp_en);  // S_CHECK, no bypass left
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    logic [NBYPASS-1:0] busy;
    logic               got;
    if (!rst_n) begin
      cnt        <= '0;
      byp_en     <= '0;
      link_fault <= '0;
      flag_valid <= '0;
      ev_perm    <= '0;
      ev_slot    <= '0;
      ev_blod    <= '0;
      ev_dead    <= '0;
      for (int o = 0; o < NPORTS; o++) begin
        st[o]       <= S_NORMAL;
        pos_port[o] <= '0;
        pos_slot[o] <= '0;
        byp_idx[o]  <= '0;
        flag_slot[o] <= '0;
      end
      for (int b = 0; b < NBYPASS; b++) byp_out[b] <= '0;
    end else begin
      busy = byp_en;
      flag_valid <= '0;
      ev_perm    <= '0;
      ev_slot    <= '0;
      ev_blod    <= '0;
      ev_dead    <= '0;
      for (int o = 0; o < NPORTS; o++) begin
        if (out_valid[o] && !arq_in[o]) cnt[o] <= 1'b0;
        case (st[o])
          S_NORMAL, S_BYPASSED: begin
            if (refused[o] && !cnt[o]) cnt[o] <= 1'b1;
            if (perm[o]) begin
              cnt[o]     <= 1'b0;
              ev_perm[o] <= 1'b1;
              if (st[o] == S_NORMAL) begin
                st[o]       <= S_CHECK;
                pos_port[o] <= out_src[o];
                pos_slot[o] <= out_src_slot[o];
              end else begin
                byp_en[byp_idx[o]] <= 1'b0;
                busy[byp_idx[o]]    = 1'b0;
                link_fault[o] <= 1'b1;
                ev_dead[o]    <= 1'b1;
                st[o]         <= S_FAULTY;
              end
            end
          end
          S_CHECK: begin
            if (out_valid[o]) begin
              if (refused[o] && !same_pos[o]) begin
                // crossbar link or channel: try a bypass link
                got = 1'b0;
                for (int b = 0; b < NBYPASS; b++) begin
                  if (!got && !busy[b]) begin
                    got        = 1'b1;
                    busy[b]    = 1'b1;
                    byp_en[b]  <= 1'b1;
                    byp_out[b] <= PORT_W'(o);
                    byp_idx[o] <= BW'(b);
                  end
                end
                if (got) begin
                  cnt[o]     <= 1'b1;
                  ev_blod[o] <= 1'b1;
                  st[o]      <= S_BLOD;
                end else begin
                  cnt[o]        <= 1'b0;
                  link_fault[o] <= 1'b1;
                  ev_dead[o]    <= 1'b1;
                  st[o]         <= S_FAULTY;
                end
              end else if (refused[o] || !same_pos[o]) begin
                // the error follows the buffer position: faulty slot
                flag_valid[pos_port[o]] <= 1'b1;
                flag_slot[pos_port[o]]  <= pos_slot[o];
                ev_slot[o] <= 1'b1;
                cnt[o]     <= refused[o];
                st[o]      <= S_NORMAL;
              end else begin
                st[o] <= S_NORMAL;     // same position, accepted: transient
              end
            end
          end
          S_BLOD: begin
            if (out_valid[o]) begin
              cnt[o] <= 1'b0;
              if (refused[o]) begin
                byp_en[byp_idx[o]] <= 1'b0;
                busy[byp_idx[o]]    = 1'b0;
                link_fault[o] <= 1'b1;
                ev_dead[o]    <= 1'b1;
                st[o]         <= S_FAULTY;
              end else begin
                st[o] <= S_BYPASSED;
              end
            end
          end
          default: cnt[o] <= 1'b0;   // S_FAULTY: terminal
        endcase
      end
    end
  end
endmodule
