// feto_rab_buffer: input buffer with Random Access Buffer (RAB) control.
//
// DEPTH slots (4 in the design's configuration). Any free, healthy slot may
// be written; each write stamps the slot with a sequence tag and reads take
// the slot whose tag is next in order, so the buffer stays first-in first-out
// whatever slots are skipped. When the fault manager flags a slot as faulty
// ('flag_valid', 'flag_slot'), the write side never uses it again; a flit
// already in it is still read out. Capacity therefore shrinks gracefully.
// Tag-based ordering is this implementation's choice of how RAB assigns
// write and read addresses around flagged slots; the deadlock-recovery read
// path of the original RAB (timer, out-of-order read) is not included.
//
// 'slot_fault' is a fault-injection mask per slot: a bit set there flips the
// stored bit on write (a permanent defect in that slot's storage).
//
// Timing: a write in cycle t is visible at the head in t+1; 'pop' removes the
// head at the clock edge. 'stop' (Stop-Go flow control) is raised while fewer
// than two healthy slots are free, which covers the one flit that can be in
// flight on the registered link.
module feto_rab_buffer
  import feto_pkg::*;
#(
  parameter int unsigned DEPTH = feto_pkg::BUF_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  flit_t                    wr_flit,
  input  flit_t                    slot_fault [DEPTH],
  input  logic                     flag_valid,
  input  logic [$clog2(DEPTH)-1:0] flag_slot,
  input  logic                     pop,
  output logic                     head_valid,
  output flit_t                    head_flit,
  output logic [$clog2(DEPTH)-1:0] head_slot,
  output logic                     stop,
  output logic [DEPTH-1:0]         faulty,
  output logic                     overflow     // write with no healthy free slot
);
  localparam int unsigned SW = $clog2(DEPTH);
  localparam int unsigned TW = $clog2(DEPTH) + 1;

  flit_t          mem   [DEPTH];
  logic [TW-1:0]  tag   [DEPTH];
  logic [DEPTH-1:0] used;
  logic [TW-1:0]  wtag, rtag;

  logic [SW-1:0]  wslot;
  logic           wfree;
  int unsigned    nfree;

  always_comb begin
    wfree = 1'b0;
    wslot = '0;
    nfree = 0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!used[i] && !faulty[i]) begin
        wfree = 1'b1;
        wslot = SW'(i);
        nfree++;
      end
    end
    head_valid = 1'b0;
    head_slot  = '0;
    for (int i = 0; i < DEPTH; i++)
      if (used[i] && tag[i] == rtag) begin
        head_valid = 1'b1;
        head_slot  = SW'(i);
      end
    head_flit = mem[head_slot];
    stop      = nfree < 2;
    overflow  = wr_en && !wfree;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used   <= '0;
      faulty <= '0;
      wtag   <= '0;
      rtag   <= '0;
      for (int i = 0; i < DEPTH; i++) tag[i] <= '0;
    end else begin
      if (pop && head_valid) begin
        used[head_slot] <= 1'b0;
        rtag <= rtag + 1'b1;
      end
      if (wr_en && wfree) begin
        used[wslot] <= 1'b1;
        tag[wslot]  <= wtag;
        wtag <= wtag + 1'b1;
      end
      if (flag_valid) faulty[flag_slot] <= 1'b1;
      assert (!overflow) else $error("feto_rab_buffer: write into a full buffer");
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && wfree) mem[wslot] <= wr_flit ^ slot_fault[wslot];
  end
endmodule
