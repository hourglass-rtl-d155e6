// tb_hg_pr_lut -- checks the PR LUT: oldest-first choice within a
// criticality, cr before ncr regardless of age, cancellation of ncr entries
// of a line by a cr request, removal, and lookup by core.
module tb_hg_pr_lut;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic ins = 0, ins_cr = 0, rm = 0, cancel_ncr = 0;
  cid_t ins_cid = '0, rm_cid = '0, c_cid = '0;
  msg_e ins_msg = MSG_GETS;
  laddr_t ins_addr = '0, cancel_addr = '0, q_addr = '0;
  logic q_any, q_best_v, c_valid;
  cid_t q_best_cid;
  msg_e q_best_msg, c_msg;
  logic [NCORES-1:0] cancelled;
  int checks = 0, failures = 0;

  hg_pr_lut dut (.*);

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask
  task automatic put(cid_t c, logic cr, msg_e m, laddr_t a);
    ins = 1; ins_cid = c; ins_cr = cr; ins_msg = m; ins_addr = a;
    @(negedge clk); ins = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1; @(negedge clk);
    q_addr = 26'hA; #0.1;
    chk("empty", int'(q_any), 0);
    put(3, 0, MSG_GETM, 26'hA);          // ncr c3 first (Fig. 2 example)
    put(2, 0, MSG_GETS, 26'hA);
    #0.1;
    chk("oldest ncr", int'(q_best_cid), 3);
    put(1, 1, MSG_GETS, 26'hA);          // cr c1, younger
    put(0, 1, MSG_GETM, 26'hB);          // other line
    #0.1;
    chk("cr first", int'(q_best_cid), 1);
    chk("cr msg", int'(q_best_msg), int'(MSG_GETS));
    q_addr = 26'hB; #0.1;
    chk("line B", int'(q_best_cid), 0);
    // lookup by core
    c_cid = 3; #0.1;
    chk("c3 valid", int'(c_valid), 1);
    chk("c3 msg", int'(c_msg), int'(MSG_GETM));
    // cancel ncr entries of line A
    q_addr = 26'hA;
    cancel_ncr = 1; cancel_addr = 26'hA; #0.1;
    chk("query sees cancel at once", int'(q_best_cid), 1);
    @(negedge clk); cancel_ncr = 0;
    chk("cancel pulse c3,c2", int'(cancelled), 4'b1100);
    c_cid = 3; #0.1;
    chk("c3 gone", int'(c_valid), 0);
    // remove c1, line A now empty
    rm = 1; rm_cid = 1; @(negedge clk); rm = 0;
    #0.1; chk("A empty", int'(q_any), 0);
    // age order among cr
    put(1, 1, MSG_GETM, 26'hC);
    put(0, 1, MSG_GETS, 26'hC);
    put(2, 0, MSG_GETM, 26'hC);
    q_addr = 26'hC; #0.1;
    chk("oldest cr c1", int'(q_best_cid), 1);
    rm = 1; rm_cid = 1; @(negedge clk); rm = 0; #0.1;
    chk("then c0", int'(q_best_cid), 0);
    rm = 1; rm_cid = 0; @(negedge clk); rm = 0; #0.1;
    chk("then ncr c2", int'(q_best_cid), 2);
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
