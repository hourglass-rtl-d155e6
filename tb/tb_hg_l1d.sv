// tb_hg_l1d -- checks the private cache controller with the test acting as
// bus, memory and PRSP buffer. Two instances share the bus: u0 is core 0 (cr)
// and u2 is core 2 (ncr); timers are shortened (v(cr,cr)=20, v(cr,ncr)=40,
// v(ncr,cr)=10, v(ncr,ncr)=20 cycles).
// Covered: read miss -> GetS -> data -> load; the 3-cycle hit latency; a
// store to a shared line waiting for its own timer, self-invalidating and
// issuing GetM; a remote cr GetM deferred until the cr timer expires (hits
// meanwhile) and then answered by SendData to that core with the stored
// data; an ncr holder's answer queued to an ncr requester followed by a
// second answer to a later cr requester; and an ncr requester re-issuing
// its request when a cr request to the same line appears.
module tb_hg_l1d;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int VCC = 20, VCN = 40, VNC = 10, VNN = 20;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [NCORES-1:0] crit = 4'b0011;
  core_req_t req0 = '0, req2 = '0;
  core_rsp_t rsp0, rsp2;
  logic bv0, bv2;
  msg_e bm0, bm2;
  laddr_t ba0, ba2;
  bus_msg_t bus = '0;
  prsp_ent_t pp0, pp2;
  line_t c2c0, c2c2;
  data_dlv_t dlv = '0;
  logic allinv_valid = 0;
  laddr_t allinv_addr = '0;
  logic h0, m0, r0, d0, h2, m2, r2, d2;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  hg_l1d #(.ID(0), .V_CRCR(VCC), .V_CRNCR(VCN), .V_NCRCR(VNC), .V_NCRNCR(VNN)) u0 (
    .clk, .rst_n, .crit, .core_req(req0), .core_rsp(rsp0), .breq_valid(bv0), .breq_msg(bm0),
    .breq_addr(ba0), .bus, .prsp_push(pp0), .prsp_ready(1'b1), .c2c_data(c2c0), .dlv,
    .allinv_valid, .allinv_addr, .ev_hit(h0), .ev_miss(m0), .ev_reissue(r0), .ev_defer(d0));
  hg_l1d #(.ID(2), .V_CRCR(VCC), .V_CRNCR(VCN), .V_NCRCR(VNC), .V_NCRNCR(VNN)) u2 (
    .clk, .rst_n, .crit, .core_req(req2), .core_rsp(rsp2), .breq_valid(bv2), .breq_msg(bm2),
    .breq_addr(ba2), .bus, .prsp_push(pp2), .prsp_ready(1'b1), .c2c_data(c2c2), .dlv,
    .allinv_valid, .allinv_addr, .ev_hit(h2), .ev_miss(m2), .ev_reissue(r2), .ev_defer(d2));

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0h exp %0h (cycle %0d)", what, got, exp, cyc); end
  endtask

  // PRSP pushes seen (prsp_ready is always 1, so every valid push is taken)
  prsp_ent_t push0 [$], push2 [$];
  int push0_t [$];
  int reissue2 = 0, defer0 = 0;
  always @(posedge clk) begin
    if (rst_n && pp0.valid) begin push0.push_back(pp0); push0_t.push_back(cyc); end
    if (rst_n && pp2.valid) push2.push_back(pp2);
    if (rst_n) reissue2 += int'(r2);
    if (rst_n) defer0   += int'(d0);
  end

  task automatic send(msg_e m, cid_t s, cid_t d, laddr_t a);
    bus = '{valid: 1'b1, msg: m, src: s, dest: d, addr: a};
    @(negedge clk);
    bus = '0;
  endtask
  task automatic deliver(cid_t d, laddr_t a, line_t data);
    dlv = '{valid: 1'b1, dest: d, addr: a, data: data};
    @(negedge clk);
    dlv = '0;
  endtask
  // wait for core 0's response; lat counts from the falling edge the request
  // was driven on, so it is one more than the cycles after acceptance
  task automatic wait_rsp0(output word_t data, output int lat);
    int t0 = cyc;
    do @(negedge clk); while (!rsp0.valid);
    data = rsp0.rdata; lat = cyc - t0;
    req0 = '0;
  endtask

  localparam laddr_t A = 26'h10, B = 26'h20, C = 26'h30;
  line_t LA, LC;
  initial begin
    word_t rd; int lat, t_dlv, t_push;
    LA = '0; for (int w = 0; w < 8; w++) LA[w*64 +: 64] = 64'hA000 + 64'(w);
    LC = '0; for (int w = 0; w < 8; w++) LC[w*64 +: 64] = 64'hC000 + 64'(w);
    repeat (2) @(negedge clk);
    rst_n = 1; @(negedge clk);
    // ---- 1. read miss on A ----
    req0 = '{valid: 1'b1, we: 1'b0, addr: {A, 6'h08}, wdata: '0};
    repeat (5) @(negedge clk);
    chk("GetS raised", {bv0, 3'(bm0)}, {1'b1, 3'(MSG_GETS)});
    chk("GetS addr", ba0, A);
    send(MSG_GETS, 0, 0, A);
    chk("request taken", bv0, 0);
    repeat (3) @(negedge clk);
    deliver(0, A, LA);
    wait_rsp0(rd, lat);
    chk("load data", rd, 64'hA001);
    // ---- 2. hit latency ----
    @(negedge clk);
    req0 = '{valid: 1'b1, we: 1'b0, addr: {A, 6'h10}, wdata: '0};
    wait_rsp0(rd, lat);
    chk("hit data", rd, 64'hA002);
    chk("hit answered 3 cycles after acceptance", lat - 1, 3);
    // ---- 3. store to S: own timer, SelfInv, GetM ----
    @(negedge clk);
    push0.delete(); push0_t.delete();
    req0 = '{valid: 1'b1, we: 1'b1, addr: {A, 6'h18}, wdata: 64'h5555};
    wait (push0.size() > 0); @(negedge clk);
    chk("own SelfInv queued", {3'(push0[0].msg), 2'(push0[0].dest)}, {3'(MSG_SELFINV), 2'd0});
    send(MSG_SELFINV, 0, 0, A);
    repeat (2) @(negedge clk);
    chk("GetM after SelfInv", {bv0, 3'(bm0)}, {1'b1, 3'(MSG_GETM)});
    send(MSG_GETM, 0, 0, A);
    repeat (3) @(negedge clk);
    t_dlv = cyc;
    deliver(0, A, LA);
    wait_rsp0(rd, lat);
    chk("store done", rd, 64'h5555);
    // ---- 4. remote cr GetM is deferred by the cr timer ----
    push0.delete(); push0_t.delete();
    send(MSG_GETM, 1, 1, A);
    @(negedge clk);
    chk("deferred", defer0, 1);
    req0 = '{valid: 1'b1, we: 1'b0, addr: {A, 6'h18}, wdata: '0};
    wait_rsp0(rd, lat);
    chk("hit while deferring", rd, 64'h5555);
    chk("no answer before the timer", push0.size(), 0);
    wait (push0.size() > 0);
    t_push = push0_t[0];
    chk("answer is SendData to c1", {3'(push0[0].msg), 2'(push0[0].dest), push0[0].dest_cr},
        {3'(MSG_SENDDATA), 2'd1, 1'b1});
    chk("answer after v(cr,cr)", (t_push - t_dlv >= VCC && t_push - t_dlv <= VCC + 3) ? 1 : 0, 1);
    @(negedge clk);
    send(MSG_SENDDATA, 0, 1, A);
    @(negedge clk);
    chk("c2c data carries the store", c2c0[3*64 +: 64], 64'h5555);
    req0 = '{valid: 1'b1, we: 1'b0, addr: {A, 6'h00}, wdata: '0};
    repeat (6) @(negedge clk);
    chk("line gone: miss", {bv0, 3'(bm0)}, {1'b1, 3'(MSG_GETS)});
    send(MSG_GETS, 0, 0, A);
    deliver(0, A, LA);
    wait_rsp0(rd, lat);
    // ---- 5. ncr holder: answer to ncr, then extra answer to a cr requester ----
    req2 = '{valid: 1'b1, we: 1'b1, addr: {C, 6'h00}, wdata: 64'h77};
    repeat (5) @(negedge clk);
    send(MSG_GETM, 2, 2, C);
    deliver(2, C, LC);
    do @(negedge clk); while (!rsp2.valid);
    req2 = '0;
    push2.delete();
    send(MSG_GETM, 3, 3, C);                 // ncr requester
    wait (push2.size() > 0); @(negedge clk);
    chk("ncr holder answers ncr c3", {3'(push2[0].msg), 2'(push2[0].dest), push2[0].dest_cr},
        {3'(MSG_SENDDATA), 2'd3, 1'b0});
    send(MSG_GETM, 1, 1, C);                 // cr requester arrives later
    repeat (3) @(negedge clk);
    chk("second answer to cr c1", (push2.size() == 2) ? {2'(push2[1].dest), push2[1].dest_cr} : 3'b0,
        {2'd1, 1'b1});
    // ---- 6. ncr requester re-issues on a cr request ----
    req2 = '{valid: 1'b1, we: 1'b0, addr: {B, 6'h00}, wdata: '0};
    repeat (5) @(negedge clk);
    send(MSG_GETS, 2, 2, B);
    chk("ncr request taken", bv2, 0);
    send(MSG_GETM, 0, 0, B);                 // cr c0 writes B
    @(negedge clk);
    chk("reissue counted", reissue2, 1);
    chk("GetS raised again", {bv2, 3'(bm2)}, {1'b1, 3'(MSG_GETS)});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
