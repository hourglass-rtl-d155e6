// tb_hg_shared_mem -- checks the shared memory's directory behaviour with the
// bus driven directly: the reset sweep, replies from I and S lines, requests
// recorded while sharers must self-invalidate, cancellation of a pending ncr
// request by a cr request, AllInv after the last SelfInv with the line handed
// to the cr requester, SendData moving ownership and writing the data back,
// PutM write-back and PutM forwarding to a pending requester.
module tb_hg_shared_mem;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  localparam int ML = 64;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [NCORES-1:0] crit = 4'b0011;
  bus_msg_t bus = '0;
  logic wb_valid = 0;
  laddr_t wb_addr = '0;
  line_t wb_data = '0;
  logic resp_valid, resp_from_wb, allinv_valid, lut_cancel, init_done;
  cid_t resp_dest;
  line_t resp_data;
  laddr_t allinv_addr;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  hg_shared_mem #(.MEM_LINES(ML)) dut (.*);

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  // one slot: message, reply visible next cycle, optional write-back at the end
  logic saw_cancel;
  task automatic msg(msg_e m, cid_t s, cid_t d, laddr_t a, logic wb = 0, line_t wd = '0);
    bus = '{valid: 1'b1, msg: m, src: s, dest: d, addr: a};
    @(negedge clk);
    bus = '0;
    saw_cancel = lut_cancel;
    if (wb) begin
      wb_valid = 1; wb_addr = a; wb_data = wd;
      @(negedge clk);
      wb_valid = 0;
    end
  endtask

  initial begin
    int t0;
    line_t X, Y, Z, W;
    X = {16{32'h1111_0001}}; Y = {16{32'h2222_0002}}; Z = {16{32'h3333_0003}}; W = {16{32'h4444_0004}};
    repeat (2) @(negedge clk);
    rst_n = 1; t0 = cyc;
    wait (init_done); @(negedge clk);
    chk("init sweep length", (cyc - t0 >= ML) ? 1 : 0, 1);
    // read from I, then a second sharer
    msg(MSG_GETS, 0, 0, 26'h5);
    chk("GetS I reply", int'(resp_valid && resp_dest == 0 && resp_data == '0), 1);
    msg(MSG_GETS, 2, 2, 26'h5);
    chk("GetS S reply", int'(resp_valid && resp_dest == 2), 1);
    // ncr write request recorded, then a cr write request cancels it
    msg(MSG_GETM, 3, 3, 26'h5);
    chk("GetM on S waits", int'(resp_valid), 0);
    msg(MSG_GETM, 1, 1, 26'h5);
    chk("cr GetM waits", int'(resp_valid), 0);
    chk("ncr entry cancelled", int'(saw_cancel), 1);
    msg(MSG_SELFINV, 0, 1, 26'h5);
    chk("one sharer left: no AllInv", int'(allinv_valid || resp_valid), 0);
    msg(MSG_SELFINV, 2, 1, 26'h5);
    chk("AllInv", int'(allinv_valid && allinv_addr == 26'h5), 1);
    chk("line to cr c1", int'(resp_valid && resp_dest == 1), 1);
    // c1 owns the line; ncr c3 re-issues; c1 sends it
    msg(MSG_GETM, 3, 3, 26'h5);
    chk("GetM on M waits", int'(resp_valid), 0);
    msg(MSG_SENDDATA, 1, 3, 26'h5, 1, X);
    chk("SendData: no memory reply", int'(resp_valid), 0);
    // c3 writes back with PutM; line becomes I with data Y
    msg(MSG_PUTM, 3, 3, 26'h5, 1, Y);
    chk("PutM, nothing pending", int'(resp_valid), 0);
    msg(MSG_GETS, 2, 2, 26'h5);
    chk("GetS after PutM", int'(resp_valid && resp_dest == 2), 1);
    chk("written-back data", int'(resp_data == Y), 1);
    // PutM forwarded to a pending requester
    msg(MSG_GETM, 0, 0, 26'h6);
    chk("GetM I reply", int'(resp_valid && resp_dest == 0), 1);
    msg(MSG_GETS, 1, 1, 26'h6);
    chk("GetS on M waits", int'(resp_valid), 0);
    msg(MSG_PUTM, 0, 0, 26'h6, 1, Z);
    chk("PutM forwarded", int'(resp_valid && resp_dest == 1 && resp_from_wb), 1);
    // SendData for a GetS leaves the line S with the receiver as sharer
    msg(MSG_GETM, 2, 2, 26'h7);
    msg(MSG_GETS, 0, 0, 26'h7);
    msg(MSG_SENDDATA, 2, 0, 26'h7, 1, W);
    msg(MSG_GETS, 1, 1, 26'h7);
    chk("S after SendData: direct read", int'(resp_valid && resp_dest == 1 && resp_data == W), 1);
    msg(MSG_GETM, 3, 3, 26'h7);
    msg(MSG_SELFINV, 1, 3, 26'h7);
    chk("c0 still sharer", int'(allinv_valid), 0);
    msg(MSG_SELFINV, 0, 3, 26'h7);
    chk("AllInv to ncr c3", int'(allinv_valid && resp_valid && resp_dest == 3 && resp_data == W), 1);
    // a SelfInv from a non-sharer changes nothing
    msg(MSG_SELFINV, 2, 2, 26'h7);
    chk("stray SelfInv ignored", int'(allinv_valid || resp_valid), 0);
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
