// tb_feto_ecc: SECDED check of single flits. Random flits are encoded, then
// zero, one or two bits are flipped; the decoder must pass clean flits,
// restore the sent flit after any single-bit error (in data or check bits,
// in either word, or one in each word) and refuse with ARQ any flit with two
// errors in one word. An invalid input must never raise ARQ.
module tb_feto_ecc;
  import feto_pkg::*;
  link_t in;
  flit_t out_flit;
  logic  write, arq, fixed;
  int checks = 0, failures = 0;

  feto_ecc dut (.in, .out_flit, .write, .arq, .fixed);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // bit positions of word 0: data 0..15 and chk0 32..37; word 1: 16..31, 38..43
  function automatic int w0bit(int k); return (k < 16) ? k : 32 + (k - 16); endfunction
  function automatic int w1bit(int k); return (k < 16) ? 16 + k : 38 + (k - 16); endfunction

  initial begin
    flit_t f, e;
    int k0, k1;
    for (int t = 0; t < 400; t++) begin
      f = flit_t'({$urandom(), $urandom()});
      f = ecc_encode(f);
      in.valid = 1'b1;
      in.flit  = f;
      #1;
      check(write && !arq && !fixed && out_flit == f, "clean flit passes");
      e = f;
      k0 = w0bit($urandom_range(0, 21));
      e[k0] = ~e[k0];
      in.flit = e; #1;
      check(write && !arq && fixed && out_flit == f, "single error in word 0 corrected");
      e = f;
      k0 = w0bit($urandom_range(0, 21));
      k1 = w1bit($urandom_range(0, 21));
      e[k0] = ~e[k0];
      e[k1] = ~e[k1];
      in.flit = e; #1;
      check(write && !arq && out_flit == f, "one error in each word corrected");
      begin
        int a, b;
        a = $urandom_range(0, 21);
        do b = $urandom_range(0, 21); while (b == a);
        e = f;
        if (t % 2 == 0) begin e[w0bit(a)] ^= 1'b1; e[w0bit(b)] ^= 1'b1; end
        else            begin e[w1bit(a)] ^= 1'b1; e[w1bit(b)] ^= 1'b1; end
      end
      in.flit = e; #1;
      check(arq && !write, "double error refused with ARQ");
      in.valid = 1'b0; #1;
      check(!arq && !write, "no valid flit, no action");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
