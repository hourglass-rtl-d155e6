// tb_hg_tdm_arbiter -- checks the criticality-aware TDM arbitration:
// cr slot owners alternate (c0, c1, c0, ...), a PRSP answer addressed to the
// owner beats the owner's own request, the owner's request beats slack use,
// idle cr slots become slack slots granted round-robin to the ncr cores, and
// an answer addressed to an ncr core travels only in a slack slot.
module tb_hg_tdm_arbiter;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic slot_start = 0;
  logic [NCORES-1:0] crit = 4'b0011, req_valid = '0;
  msg_e req_msg [NCORES];
  laddr_t req_addr [NCORES];
  prsp_ent_t prsp [NCORES][NCORES];
  bus_msg_t grant;
  logic grant_prsp, slack, owner_valid;
  logic [1:0] grant_eidx;
  cid_t owner;
  int checks = 0, failures = 0;

  hg_tdm_arbiter dut (.clk, .rst_n, .slot_start, .crit, .req_valid, .req_msg, .req_addr, .prsp,
                      .grant, .grant_prsp, .grant_eidx, .slack, .owner_valid, .owner);

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // one slot: pulse slot_start, sample the decision
  task automatic slot(output bus_msg_t g, output logic from_prsp, output logic sl, output cid_t own);
    @(negedge clk);
    slot_start = 1;
    #0.5;
    g = grant; from_prsp = grant_prsp; sl = slack; own = owner;
    @(negedge clk);
    slot_start = 0;
  endtask

  initial begin
    bus_msg_t g; logic fp, sl; cid_t own;
    for (int i = 0; i < NCORES; i++) begin
      req_msg[i] = MSG_GETS; req_addr[i] = laddr_t'(i);
      for (int e = 0; e < NCORES; e++) prsp[i][e] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. cr owners alternate; empty slots grant nothing
    slot(g, fp, sl, own); chk("owner c0", int'(own), 0); chk("idle", int'(g.valid), 0);
    slot(g, fp, sl, own); chk("owner c1", int'(own), 1);
    slot(g, fp, sl, own); chk("owner c0 again", int'(own), 0);
    // 2. owner c1 request granted in its slot
    req_valid = 4'b0010;
    slot(g, fp, sl, own); chk("c1 granted", int'(g.valid && g.src == 1 && !sl), 1);
    req_valid = 4'b0000;
    // 3. slack round-robin among ncr cores c2, c3
    req_valid = 4'b1100;
    slot(g, fp, sl, own); chk("slack c2", int'(g.valid && sl && g.src == 2), 1);
    slot(g, fp, sl, own); chk("slack c3", int'(g.valid && sl && g.src == 3), 1);
    slot(g, fp, sl, own); chk("slack c2 again", int'(g.valid && sl && g.src == 2), 1);
    // 4. owner (c0 next? find owner) request beats slack
    req_valid = 4'b1111;
    slot(g, fp, sl, own); chk("owner request beats slack", int'(g.valid && !sl && g.src == own), 1);
    // 5. PRSP answer to the owner beats the owner's request
    slot(g, fp, sl, own);  // advance; now decide for the next owner
    prsp[3][1] = '{valid: 1'b1, msg: MSG_SENDDATA, dest: 0, dest_cr: 1'b1, addr: 26'h77};
    prsp[2][0] = '{valid: 1'b1, msg: MSG_SELFINV, dest: 2, dest_cr: 1'b0, addr: 26'h55};
    // run slots until the c0 slot
    do slot(g, fp, sl, own); while (own != 0);
    chk("answer for c0 in c0 slot", int'(g.valid && fp && g.src == 3 && g.dest == 0 && g.msg == MSG_SENDDATA), 1);
    chk("answer addr", int'(g.addr), 'h77);
    prsp[3][1] = '0;
    // 6. answer to ncr c2 only in a slack slot: cr cores idle
    req_valid = 4'b0000;
    slot(g, fp, sl, own); chk("ncr answer in slack", int'(g.valid && fp && sl && g.dest == 2 && g.src == 2), 1);
    prsp[2][0] = '0;
    // 7. with c0 requesting and an ncr answer pending, c0's slot serves c0
    req_valid = 4'b0001;
    prsp[1][2] = '{valid: 1'b1, msg: MSG_SENDDATA, dest: 3, dest_cr: 1'b0, addr: 26'h9};
    do slot(g, fp, sl, own); while (own != 0);
    chk("cr request before ncr answer", int'(g.valid && !fp && g.src == 0), 1);
    req_valid = 4'b0000;
    slot(g, fp, sl, own); chk("ncr answer in c1 idle slot", int'(g.valid && fp && sl && g.dest == 3), 1);
    // 8. no cr cores: every slot is slack
    crit = 4'b0000; prsp[1][2] = '0; req_valid = 4'b0001;
    slot(g, fp, sl, own); chk("all slack", int'(g.valid && sl && g.src == 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
