// tb_hg_shared_bus -- checks the TDM bus with the caches and the memory
// replaced by the test: slot period SW, a cr core's request in its own slot,
// a cache-to-cache SendData queued in a PRSP buffer and carried in the
// requester's slot with the line delivered (and written back) in the slot's
// last cycle, a memory reply delivered in the last cycle, slack slots for ncr
// cores, and cancellation of an ncr answer by a cr answer.
module tb_hg_shared_bus;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int SW = 8;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic en = 0;
  logic [NCORES-1:0] crit = 4'b0011;
  logic breq_valid [NCORES];
  msg_e breq_msg [NCORES];
  laddr_t breq_addr [NCORES];
  prsp_ent_t prsp_push [NCORES];
  logic prsp_ready [NCORES];
  line_t c2c_data [NCORES];
  bus_msg_t bus;
  data_dlv_t dlv;
  logic mem_resp_valid = 0, mem_resp_from_wb = 0;
  cid_t mem_resp_dest = '0;
  line_t mem_resp_data = '0;
  logic wb_valid, slot_start, slack_slot, prsp_cancel;
  laddr_t wb_addr;
  line_t wb_data;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  hg_shared_bus #(.SW(SW)) dut (.*);

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // the memory model: answers a GetS on the bus with a line, from next cycle
  always @(posedge clk) begin
    if (bus.valid) begin
      mem_resp_valid <= (bus.msg == MSG_GETS);
      mem_resp_dest  <= bus.src;
      mem_resp_data  <= {16{32'hFEED_0000 | 32'(bus.addr)}};
    end
  end

  // record bus and delivery events
  bus_msg_t seen [$];
  int       seen_t [$];
  int       slack_t [$];
  data_dlv_t dl [$];
  int       dl_t [$];
  int       first_ss = -1;
  int       wb_n = 0, ss_n = 0, last_ss = -1, period_bad = 0, canc_n = 0;
  always @(posedge clk) begin
    if (slot_start) begin
      if (last_ss >= 0 && cyc - last_ss != SW) period_bad++;
      if (first_ss < 0) first_ss = cyc;
      last_ss = cyc; ss_n++;
    end
    if (bus.valid) begin seen.push_back(bus); seen_t.push_back(cyc); end
    if (slack_slot) slack_t.push_back(cyc);
    if (dlv.valid) begin dl.push_back(dlv); dl_t.push_back(cyc); end
    if (wb_valid && wb_data == c2c_data[3]) wb_n++;
    if (prsp_cancel) canc_n++;
    // a granted request leaves the core
    if (bus.valid && bus.msg inside {MSG_GETS, MSG_GETM}) breq_valid[bus.src] <= 1'b0;
  end

  initial begin
    for (int i = 0; i < NCORES; i++) begin
      breq_valid[i] = 0; breq_msg[i] = MSG_GETS; breq_addr[i] = '0;
      prsp_push[i] = '0; c2c_data[i] = {16{32'(i) + 32'hC2C0_0000}};
    end
    repeat (2) @(negedge clk);
    rst_n = 1; en = 1;
    // c1 read request and ncr c2 read request
    breq_valid[1] = 1; breq_addr[1] = 26'h11;
    breq_valid[2] = 1; breq_addr[2] = 26'h22;
    // core 3 queues an answer for ncr c2 and then one for cr c0 on the same line
    @(negedge clk);
    prsp_push[3] = '{valid: 1'b1, msg: MSG_SENDDATA, dest: 2, dest_cr: 1'b0, addr: 26'h33};
    @(negedge clk);
    prsp_push[3] = '{valid: 1'b1, msg: MSG_SENDDATA, dest: 0, dest_cr: 1'b1, addr: 26'h33};
    @(negedge clk);
    prsp_push[3] = '0;
    repeat (8 * SW) @(negedge clk);
    chk("slot period", period_bad, 0);
    chk("slots seen", (ss_n >= 8) ? 1 : 0, 1);
    chk("ncr answer cancelled", canc_n, 1);
    // expected order: slot0 (c0): nothing queued yet at cycle 0 -> slack to c2;
    // then c1's request in c1 slot; then SendData 3->0 in c0's slot
    begin
      int i_c1 = -1, i_sd = -1, i_c2 = -1;
      foreach (seen[i]) begin
        if (seen[i].msg == MSG_GETS && seen[i].src == 1) i_c1 = i;
        if (seen[i].msg == MSG_SENDDATA && seen[i].src == 3) i_sd = i;
        if (seen[i].msg == MSG_GETS && seen[i].src == 2) i_c2 = i;
      end
      chk("c1 request carried", int'(i_c1 >= 0), 1);
      chk("ncr c2 request carried in a slack slot", int'(i_c2 >= 0), 1);
      chk("SendData carried", int'(i_sd >= 0), 1);
      if (i_sd >= 0) chk("SendData to c0", int'(seen[i_sd].dest), 0);
      // slots alternate c0, c1, c0, ... from the first slot
      if (i_c1 >= 0) chk("c1 request in a c1 slot", ((seen_t[i_c1] - first_ss) / SW) % 2, 1);
      if (i_sd >= 0) chk("SendData in a c0 slot", ((seen_t[i_sd] - first_ss) / SW) % 2, 0);
      chk("slack slot pulse", int'(slack_t.size() >= 1), 1);
      chk("only one SendData (ncr one cancelled)", int'(seen.size()), 3);
    end
    // deliveries: each at the last cycle of the slot
    chk("three deliveries", int'(dl.size()), 3);
    foreach (dl[i]) begin
      int k = -1;
      foreach (seen_t[j]) if (dl_t[i] - seen_t[j] == SW - 1) k = j;
      chk("delivery at slot end", int'(k >= 0), 1);
      if (k >= 0) begin
        if (seen[k].msg == MSG_SENDDATA)
          chk("c2c data", int'(dl[i].data == c2c_data[3] && dl[i].dest == 0), 1);
        else
          chk("memory data", int'(dl[i].data == {16{32'hFEED_0000 | 32'(seen[k].addr)}} &&
                                  dl[i].dest == seen[k].src), 1);
      end
    end
    chk("SendData written back", wb_n, 1);
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
