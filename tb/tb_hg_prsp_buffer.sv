// tb_hg_prsp_buffer -- checks the pending response buffer: insertion, the
// cancellation of ncr-destined answers by a cr-destined answer for the same
// line, duplicate dropping, the full flag and the flush of a line once one of
// its answers has been carried by the bus.
module tb_hg_prsp_buffer;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  prsp_ent_t push = '0;
  logic push_ready, done = 0, cancel, full;
  laddr_t done_addr = '0;
  prsp_ent_t ent [NCORES];
  int checks = 0, failures = 0;

  hg_prsp_buffer dut (.clk, .rst_n, .push, .push_ready, .done, .done_addr, .ent, .cancel, .full);

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  function automatic int count_valid();
    int n = 0;
    for (int i = 0; i < NCORES; i++) n += int'(ent[i].valid);
    return n;
  endfunction
  function automatic int has(laddr_t a, cid_t d);
    for (int i = 0; i < NCORES; i++) if (ent[i].valid && ent[i].addr == a && ent[i].dest == d) return 1;
    return 0;
  endfunction

  task automatic do_push(msg_e m, cid_t d, logic dcr, laddr_t a);
    push = '{valid: 1'b1, msg: m, dest: d, dest_cr: dcr, addr: a};
    @(negedge clk);
    push = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("empty", count_valid(), 0);
    chk("ready when empty", int'(push_ready), 1);
    // ncr answer for line A, then a cr answer for A cancels it
    do_push(MSG_SENDDATA, 2, 1'b0, 26'h10);
    chk("ncr entry stored", has(26'h10, 2), 1);
    do_push(MSG_SELFINV, 3, 1'b0, 26'h20);
    do_push(MSG_SENDDATA, 0, 1'b1, 26'h10);
    chk("cancel pulse", int'(cancel), 1);
    chk("ncr entry cancelled", has(26'h10, 2), 0);
    chk("cr entry stored", has(26'h10, 0), 1);
    chk("other line untouched", has(26'h20, 3), 1);
    chk("two valid", count_valid(), 2);
    // duplicate is dropped
    do_push(MSG_SELFINV, 3, 1'b0, 26'h20);
    chk("duplicate dropped", count_valid(), 2);
    // fill up
    do_push(MSG_PUTM, 1, 1'b1, 26'h30);
    do_push(MSG_SELFINV, 1, 1'b1, 26'h40);
    chk("four valid", count_valid(), 4);
    chk("full", int'(full), 1);
    push = '{valid: 1'b1, msg: MSG_SELFINV, dest: 1, dest_cr: 1'b1, addr: 26'h50};
    #0.1;
    chk("not ready when full", int'(push_ready), 0);
    @(negedge clk); push = '0;
    chk("no overwrite when full", has(26'h50, 1), 0);
    // done flushes every entry of a line
    do_push(MSG_SENDDATA, 2, 1'b0, 26'h30);   // full: dropped
    done = 1; done_addr = 26'h30; @(negedge clk); done = 0;
    chk("flush line", has(26'h30, 1), 0);
    chk("three valid", count_valid(), 3);
    // a cr answer does not cancel cr answers
    do_push(MSG_SELFINV, 0, 1'b1, 26'h40);
    chk("cr entries kept", has(26'h40, 1) + has(26'h40, 0), 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
