// tb_feto_rab_buffer: Random Access Buffer input buffer. Random writes and
// pops against a reference FIFO model; stop must rise exactly when fewer than
// two healthy slots are free; after slots are flagged faulty they are never
// written again, capacity shrinks and FIFO order still holds; a fault mask on
// a slot corrupts what is stored there.
module tb_feto_rab_buffer;
  import feto_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       wr_en, flag_valid, pop, head_valid, stop, overflow;
  flit_t      wr_flit, head_flit;
  flit_t      slot_fault [4];
  logic [1:0] flag_slot, head_slot;
  logic [3:0] faulty;
  int checks = 0, failures = 0;

  feto_rab_buffer #(.DEPTH(4)) dut (
    .clk, .rst_n, .wr_en, .wr_flit, .slot_fault, .flag_valid, .flag_slot,
    .pop, .head_valid, .head_flit, .head_slot, .stop, .faulty, .overflow
  );

  flit_t model [$];
  int    healthy = 4;
  logic [3:0] written;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int cycles, int pop_pct);
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      check(head_valid == (model.size() != 0), "head valid matches model");
      if (model.size() != 0) check(head_flit == model[0], "head flit in FIFO order");
      check(stop == (healthy - model.size() < 2), "stop when fewer than 2 free");
      pop   = head_valid && ($urandom_range(0, 99) < pop_pct);
      wr_en = (healthy - model.size() > 0) && ($urandom_range(0, 1) == 1);
      wr_flit = flit_t'({$urandom(), $urandom()});
      @(posedge clk);
      if (wr_en) written[dut.wslot] = 1'b1;
      if (pop) void'(model.pop_front());
      if (wr_en) model.push_back(wr_flit);
    end
    @(negedge clk);
    wr_en = 1'b0;
    pop   = 1'b0;
  endtask

  initial begin
    wr_en = 0; pop = 0; flag_valid = 0; flag_slot = 0; wr_flit = '0;
    for (int i = 0; i < 4; i++) slot_fault[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(300, 50);
    // flag slot 2, then slot 0
    @(negedge clk); wr_en = 0; pop = 0; flag_valid = 1; flag_slot = 2;
    @(posedge clk); healthy = 3;
    @(negedge clk); flag_valid = 0;
    check(faulty == 4'b0100, "slot 2 flagged");
    // drain so that the old content of slot 2 is gone
    while (model.size() != 0) begin
      pop = 1; @(posedge clk); void'(model.pop_front()); @(negedge clk);
    end
    pop = 0;
    written = '0;
    run(300, 40);
    check(written[2] == 1'b0, "flagged slot never written");
    @(negedge clk); wr_en = 0; pop = 0; flag_valid = 1; flag_slot = 0;
    @(posedge clk); healthy = 2;
    @(negedge clk); flag_valid = 0;
    while (model.size() != 0) begin
      pop = 1; @(posedge clk); void'(model.pop_front()); @(negedge clk);
    end
    pop = 0;
    written = '0;
    run(200, 60);
    check(written[0] == 1'b0 && written[2] == 1'b0, "two flagged slots never written");
    // corruption injected into slot 1 (lowest healthy slot)
    while (model.size() != 0) begin
      pop = 1; @(posedge clk); void'(model.pop_front()); @(negedge clk);
    end
    pop = 0;
    slot_fault[1] = flit_t'(44'h3);
    wr_en = 1; wr_flit = flit_t'(44'h100);
    @(negedge clk); wr_en = 0;
    check(head_valid && head_slot == 1 && head_flit == flit_t'(44'h103), "slot fault corrupts stored flit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
