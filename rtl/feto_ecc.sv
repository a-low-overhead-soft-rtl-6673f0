// feto_ecc: SECDED check of a flit arriving at an input port.
//
// The 44-bit flit carries two Hsiao SECDED(22,16) words: data[15:0] with
// chk0 and data[31:16] with chk1 (code size from the design's configuration,
// Hsiao construction and bit placement are this implementation's choice, see
// feto_pkg). A single-bit error in either word is corrected and the flit is
// passed on for buffer writing; a double error, or a syndrome that matches no
// column, makes the flit unusable: it is refused and an ARQ (automatic
// retransmission request) is raised to the upstream sender in the same cycle.
//
// Purely combinational. Interface: in (valid + flit), out_flit (corrected),
// write (valid and usable), arq (valid and uncorrectable), fixed (a bit was
// corrected).
module feto_ecc
  import feto_pkg::*;
(
  input  link_t in,
  output flit_t out_flit,
  output logic  write,
  output logic  arq,
  output logic  fixed
);
  sec_res_t w0, w1;

  always_comb begin
    w0 = hsiao_decode(in.flit[15:0],  in.flit.chk0);
    w1 = hsiao_decode(in.flit[31:16], in.flit.chk1);
    out_flit = in.flit;
    out_flit[15:0]  = w0.data;
    out_flit[31:16] = w1.data;
    out_flit = ecc_encode(out_flit);   // clean check bits after correction
    arq   = in.valid && (w0.uncorrectable || w1.uncorrectable);
    write = in.valid && !arq;
    fixed = write && (w0.corrected || w1.corrected);
  end
endmodule
