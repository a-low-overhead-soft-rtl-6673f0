// feto_crossbar: 7x7 crossbar of the SHER-3DR router with Bypass-Link-on-
// Demand (BLoD) and one ARQ buffer per output.
//
// Crossbar traversal: in a commit cycle each granted input's flit is selected
// for its output and stored in that output's ARQ buffer, which drives the
// outgoing link in the next cycle. If the downstream ECC answers with an ARQ
// ('arq_in') the buffer keeps the flit and sends it again; otherwise it is
// released. 'drop' (from the fault manager) discards a flit that a permanent
// fault keeps corrupting.
//
// Path faults and BLoD: the way from the ARQ buffer to the output pin is the
// output's crossbar link, modelled with the fault-injection mask
// 'xbar_fault[o]'. The fault manager can switch one of the NBYPASS bypass
// links (2, as drawn for this router) in for an output whose crossbar link is
// defective ('byp_en[b]', 'byp_out[b]'); the flit then takes the bypass,
// whose own defects are modelled by 'byp_fault[b]'. Putting the ARQ buffer
// ahead of the faultable path, so that a retransmission takes the repaired
// path, is this implementation's choice.
//
// Outputs for the fault manager: the buffered flit's source input and slot.
module feto_crossbar
  import feto_pkg::*;
#(
  parameter int unsigned DEPTH   = feto_pkg::BUF_DEPTH,
  parameter int unsigned NBYPASS = feto_pkg::N_BYPASS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NPORTS-1:0]        commit,
  input  logic [PORT_W-1:0]        commit_port [NPORTS],
  input  flit_t                    in_flit     [NPORTS],
  input  logic [$clog2(DEPTH)-1:0] in_slot     [NPORTS],
  input  logic [NPORTS-1:0]        arq_in,
  input  logic [NPORTS-1:0]        drop,
  input  logic [NBYPASS-1:0]       byp_en,
  input  logic [PORT_W-1:0]        byp_out     [NBYPASS],
  input  flit_t                    xbar_fault  [NPORTS],
  input  flit_t                    byp_fault   [NBYPASS],
  output link_t                    out         [NPORTS],
  output logic [NPORTS-1:0]        out_valid,
  output logic [PORT_W-1:0]        out_src     [NPORTS],
  output logic [$clog2(DEPTH)-1:0] out_src_slot[NPORTS],
  output logic [NPORTS-1:0]        out_hold,
  output logic [NPORTS-1:0]        retx
);
  flit_t abuf [NPORTS];

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      out_hold[o] = out_valid[o] && arq_in[o] && !drop[o];
      retx[o]     = out_hold[o];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= '0;
      for (int o = 0; o < NPORTS; o++) begin
        abuf[o]         <= '0;
        out_src[o]      <= '0;
        out_src_slot[o] <= '0;
      end
    end else begin
      for (int o = 0; o < NPORTS; o++) begin
        if (!out_hold[o]) out_valid[o] <= 1'b0;
        for (int i = 0; i < NPORTS; i++) begin
          if (commit[i] && commit_port[i] == PORT_W'(o) && !out_hold[o]) begin
            out_valid[o]    <= 1'b1;
            abuf[o]         <= in_flit[i];
            out_src[o]      <= PORT_W'(i);
            out_src_slot[o] <= in_slot[i];
          end
        end
      end
    end
  end

  // crossbar link or bypass link to the output pin
  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      out[o].valid = out_valid[o];
      out[o].flit  = abuf[o] ^ xbar_fault[o];
      for (int b = 0; b < NBYPASS; b++)
        if (byp_en[b] && byp_out[b] == PORT_W'(o)) out[o].flit = abuf[o] ^ byp_fault[b];
    end
  end
endmodule
