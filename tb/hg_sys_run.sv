// hg_sys_run -- one HourGlass system under a random shared-data load, used by
// tb_hourglass_configs to run the configurations the paper evaluates.
//
// It instantiates hourglass_top with the given criticality vector and timer
// multiples, lets every core issue NOPS random 64-bit loads and stores over a
// handful of shared lines (two of them in the same L1 set, so replacements
// happen) and checks every load against a reference memory updated by
// completed stores. Drive and sample happen on the falling clock edge.
// When all cores are done it raises `done` and reports its check and failure
// counts, the number of slack slots and timer deferrals, the largest latency
// seen by any cr core, and the analytic bound for the configuration:
//   arb = Ncr*SW,
//   coh = v(cr,cr) + (v(ncr,cr) + (Ncr-1)SW) + (Ncr-1)(v(cr,cr) + (Ncr-1)SW) - Ncr*SW,
//   acc = SW.
// The observed latency covers whole requests, including evictions, so it is
// reported beside the bound, not checked against it.
module hg_sys_run
  import hg_pkg::*;
#(
  parameter string             NAME      = "cfg",
  parameter logic [NCORES-1:0] CRIT      = 4'b0011,
  parameter int unsigned       K_CRCR    = 2,
  parameter int unsigned       K_CRNCR   = 4,
  parameter int unsigned       K_NCRCR   = 1,
  parameter int unsigned       K_NCRNCR  = 2,
  parameter int unsigned       MEM_LINES = 1024,
  parameter int                NOPS      = 60
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_slack,
  output int   n_defer,
  output int   max_cr_lat
);
  localparam int SW    = 50;
  localparam int NLINE = 5;
  localparam int NCR   = $countones(CRIT);
  localparam int P     = (NCR == 0 ? 1 : NCR) * SW;
  localparam int BOUND = NCR * SW
                       + (K_CRCR * P + (K_NCRCR * P + (NCR - 1) * SW)
                          + (NCR - 1) * (K_CRCR * P + (NCR - 1) * SW) - NCR * SW)
                       + SW;

  core_req_t req [NCORES];
  core_rsp_t rsp [NCORES];
  logic ready;
  logic [NCORES-1:0] ev_hit, ev_miss, ev_reissue, ev_defer;
  logic ev_slack, ev_prsp_cancel, ev_lut_cancel, ev_allinv;
  bus_msg_t bus_mon;

  hourglass_top #(.CRIT(CRIT), .MEM_LINES(MEM_LINES), .K_CRCR(K_CRCR), .K_CRNCR(K_CRNCR),
                  .K_NCRCR(K_NCRCR), .K_NCRNCR(K_NCRNCR)) dut (
    .clk, .rst_n,
    .cfg_we(1'b0), .cfg_crit('0), .cfg_lock(1'b1),
    .core_req(req), .core_rsp(rsp), .ready,
    .ev_hit, .ev_miss, .ev_reissue, .ev_defer,
    .ev_slack, .ev_prsp_cancel, .ev_lut_cancel, .ev_allinv, .bus_mon
  );

  function automatic logic [ADDR_W-1:0] line_byte(int k);
    return (k == 4) ? 32'(256 * 64) : 32'(k * 64);
  endfunction

  word_t golden [NLINE][8];
  int    done_ops [NCORES];
  int    cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      n_slack += int'(ev_slack);
      n_defer += $countones(ev_defer);
    end
  end

  for (genvar g = 0; g < NCORES; g++) begin : g_drv
    initial begin
      int k, w, t0;
      logic we;
      word_t v;
      req[g] = '0;
      done_ops[g] = 0;
      @(posedge rst_n);
      repeat (2) @(posedge clk);
      for (int n = 0; n < NOPS; n++) begin
        k  = ($urandom % 3 == 0) ? 0 : int'($urandom % NLINE);
        w  = int'($urandom % 8);
        we = ($urandom % 2) == 1;
        v  = {$urandom, $urandom};
        @(negedge clk);
        req[g] = '{valid: 1'b1, we: we, addr: line_byte(k) + 32'(w * 8), wdata: v};
        wait (ready);
        t0 = cyc;
        do @(negedge clk); while (!rsp[g].valid);
        if (CRIT[g] && cyc - t0 > max_cr_lat) max_cr_lat = cyc - t0;
        if (we) golden[k][w] = v;
        else begin
          checks++;
          if (rsp[g].rdata !== golden[k][w]) begin
            failures++;
            if (failures < 5)
              $display("FAIL %s core %0d load line %0d word %0d got %h exp %h", NAME, g, k, w,
                       rsp[g].rdata, golden[k][w]);
          end
        end
        req[g] = '0;
        done_ops[g]++;
        repeat (int'($urandom % 40) + 1) @(posedge clk);
      end
    end
  end

  initial begin
    int all;
    done = 1'b0; checks = 0; failures = 0; n_slack = 0; n_defer = 0; max_cr_lat = 0;
    for (int k = 0; k < NLINE; k++) for (int w = 0; w < 8; w++) golden[k][w] = '0;
    @(posedge rst_n);
    do begin
      @(posedge clk);
      all = 0;
      for (int g = 0; g < NCORES; g++) all += done_ops[g];
    end while (all < NCORES * NOPS);
    $display("%-22s cr=%0d slack=%0d defer=%0d max cr latency=%0d bound=%0d loads checked=%0d",
             NAME, NCR, n_slack, n_defer, max_cr_lat, BOUND, checks);
    done = 1'b1;
  end
endmodule
