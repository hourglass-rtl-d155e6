// tb_hourglass_top -- end-to-end test of the four-core HourGlass system at its
// default (paper) configuration: c0,c1 cr, c2,c3 ncr, SW = 50, 256-line L1-D,
// 1 MB shared memory, timers (2,4,1,2) TDM periods.
//
// Each core runs a random stream of 64-bit loads and stores over a few shared
// lines, two of which map to the same L1 set so that replacements (PutM and
// SelfInv evictions) occur. The check is independent of the design: a
// reference memory is updated when a store completes, and every load must
// return the reference value at the cycle it completes. With single-writer /
// multiple-reader coherence this holds exactly.
// The test also counts every protocol mechanism (slack slots, deferred
// requests, ncr re-issues, PRSP cancellation, PR LUT cancellation, AllInv,
// SendData, SelfInv, PutM, L1 hits) and fails if any never happened, and it
// reports the largest observed miss latency of the cr cores.
module tb_hourglass_top;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;

  localparam int NOPS  = 120;     // operations per core
  localparam int NLINE = 5;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  core_req_t req [NCORES];
  core_rsp_t rsp [NCORES];
  logic ready;
  logic [NCORES-1:0] ev_hit, ev_miss, ev_reissue, ev_defer;
  logic ev_slack, ev_prsp_cancel, ev_lut_cancel, ev_allinv;
  bus_msg_t bus_mon;

  hourglass_top dut (
    .clk, .rst_n,
    .cfg_we(1'b0), .cfg_crit('0), .cfg_lock(1'b1),
    .core_req(req), .core_rsp(rsp), .ready,
    .ev_hit, .ev_miss, .ev_reissue, .ev_defer,
    .ev_slack, .ev_prsp_cancel, .ev_lut_cancel, .ev_allinv, .bus_mon
  );

  int checks = 0, failures = 0;
  // line addresses used: 0..3 and 256 (same L1 set as line 0)
  function automatic logic [ADDR_W-1:0] line_byte(int k);
    return (k == 4) ? 32'(256 * 64) : 32'(k * 64);
  endfunction

  word_t golden [NLINE][8];
  int    done_ops [NCORES];
  int    n_hit, n_miss, n_reissue, n_defer, n_slack, n_pc, n_lc, n_allinv;
  int    n_send, n_selfinv, n_putm;
  int    cyc = 0;
  bit    trace = $test$plusargs("trace");
  int    max_lat [NCORES];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    n_hit     += $countones(ev_hit);
    n_miss    += $countones(ev_miss);
    n_reissue += $countones(ev_reissue);
    n_defer   += $countones(ev_defer);
    n_slack   += int'(ev_slack);
    n_pc      += int'(ev_prsp_cancel);
    n_lc      += int'(ev_lut_cancel);
    n_allinv  += int'(ev_allinv);
    if (trace && bus_mon.valid)
      $display("%0d BUS %s src=%0d dest=%0d addr=%0h", cyc, bus_mon.msg.name(), bus_mon.src, bus_mon.dest, bus_mon.addr);
    if (trace && dut.dlv.valid)
      $display("%0d DLV dest=%0d addr=%0h w1=%h", cyc, dut.dlv.dest, dut.dlv.addr, dut.dlv.data[127:64]);
    if (trace && ev_allinv) $display("%0d ALLINV %0h", cyc, dut.allinv_addr);
    if (bus_mon.valid) begin
      n_send    += int'(bus_mon.msg == MSG_SENDDATA);
      n_selfinv += int'(bus_mon.msg == MSG_SELFINV);
      n_putm    += int'(bus_mon.msg == MSG_PUTM);
    end
  end

  // one driver per core
  for (genvar g = 0; g < NCORES; g++) begin : g_drv
    initial begin
      int k, w, think, t0;
      logic we;
      word_t v;
      req[g] = '0;
      done_ops[g] = 0;
      max_lat[g] = 0;
      @(posedge rst_n);
      repeat (2) @(posedge clk);
      for (int n = 0; n < NOPS; n++) begin
        // ncr cores and c0 favour line 0 to create contention
        k  = ($urandom % 3 == 0) ? 0 : int'($urandom % NLINE);
        w  = int'($urandom % 8);
        we = ($urandom % 2) == 1;
        v  = {$urandom, $urandom};
        // drive and sample on the falling edge, away from the design's clock edge
        @(negedge clk);
        req[g] = '{valid: 1'b1, we: we, addr: line_byte(k) + 32'(w * 8), wdata: v};
        wait (ready);
        t0 = cyc;
        do @(negedge clk); while (!rsp[g].valid);
        if (cyc - t0 > max_lat[g]) max_lat[g] = cyc - t0;
        if (trace) $display("%0d CORE %0d %s line %0d w%0d %h", cyc, g, we ? "ST" : "LD", k, w, we ? v : rsp[g].rdata);
        if (we) golden[k][w] = v;
        else begin
          checks++;
          if (rsp[g].rdata !== golden[k][w]) begin
            failures++;
            if (failures < 10)
              $display("FAIL core %0d load line %0d word %0d got %h exp %h at %0d",
                       g, k, w, rsp[g].rdata, golden[k][w], cyc);
          end
        end
        req[g] = '0;
        done_ops[g]++;
        think = int'($urandom % 40);
        repeat (think + 1) @(posedge clk);
      end
    end
  end

  function automatic void need(string name, int cnt);
    checks++;
    if (cnt == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", name);
    end
  endfunction

  initial begin
    int all;
    for (int k = 0; k < NLINE; k++) for (int w = 0; w < 8; w++) golden[k][w] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // wait for memory init
    wait (ready);
    checks++;
    do begin
      @(posedge clk);
      all = 0;
      for (int g = 0; g < NCORES; g++) all += done_ops[g];
    end while (all < NCORES * NOPS);
    repeat (10) @(posedge clk);
    need("l1 hit", n_hit);
    need("l1 miss", n_miss);
    need("slack slot", n_slack);
    need("timer defer", n_defer);
    need("ncr reissue", n_reissue);
    need("PRSP cancel", n_pc);
    need("PR LUT cancel", n_lc);
    need("AllInv", n_allinv);
    need("SendData", n_send);
    need("SelfInv", n_selfinv);
    need("PutM", n_putm);
    $display("mechanisms: hit=%0d miss=%0d slack=%0d defer=%0d reissue=%0d prsp_cancel=%0d lut_cancel=%0d allinv=%0d senddata=%0d selfinv=%0d putm=%0d",
             n_hit, n_miss, n_slack, n_defer, n_reissue, n_pc, n_lc, n_allinv, n_send, n_selfinv, n_putm);
    $display("max request latency per core (cycles): %0d %0d %0d %0d", max_lat[0], max_lat[1], max_lat[2], max_lat[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog, ops done %0d %0d %0d %0d", done_ops[0], done_ops[1], done_ops[2], done_ops[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
