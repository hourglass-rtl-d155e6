// tb_hourglass_configs -- runs the HourGlass system in the configurations the
// paper evaluates, side by side, each under the same kind of random
// shared-data load (see hg_sys_run):
//   * 1, 2, 3 and 4 cr cores out of 4 with timers (2,4,1,2) TDM periods --
//     the scalability sweep of the worst-case latency;
//   * HourGlass(1,1,1,1): all four timer values one TDM period;
//   * timers all zero;
//   * HourGlass(1): every core cr, timers one TDM period.
// Checks: every load returns the last stored value in every configuration;
// a system with no ncr core never has a slack slot; a system with ncr cores
// and cr cores does use slack slots; non-zero timers defer some remote
// requests. Slot width 50 and the paper's L1 sizes are kept; the shared
// memory is cut to 1024 lines to shorten its clearing after reset, which
// the few lines used do not notice.
module tb_hourglass_configs;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam int NCFG = 7;
  logic done [NCFG];
  int   c [NCFG], f [NCFG], sl [NCFG], df [NCFG], lat [NCFG];

  hg_sys_run #(.NAME("cr=1 (2,4,1,2)"), .CRIT(4'b0001)) r0 (.clk, .rst_n, .done(done[0]), .checks(c[0]), .failures(f[0]), .n_slack(sl[0]), .n_defer(df[0]), .max_cr_lat(lat[0]));
  hg_sys_run #(.NAME("cr=2 (2,4,1,2)"), .CRIT(4'b0011)) r1 (.clk, .rst_n, .done(done[1]), .checks(c[1]), .failures(f[1]), .n_slack(sl[1]), .n_defer(df[1]), .max_cr_lat(lat[1]));
  hg_sys_run #(.NAME("cr=3 (2,4,1,2)"), .CRIT(4'b0111)) r2 (.clk, .rst_n, .done(done[2]), .checks(c[2]), .failures(f[2]), .n_slack(sl[2]), .n_defer(df[2]), .max_cr_lat(lat[2]));
  hg_sys_run #(.NAME("cr=4 (2,4,1,2)"), .CRIT(4'b1111)) r3 (.clk, .rst_n, .done(done[3]), .checks(c[3]), .failures(f[3]), .n_slack(sl[3]), .n_defer(df[3]), .max_cr_lat(lat[3]));
  hg_sys_run #(.NAME("HourGlass(1,1,1,1)"), .CRIT(4'b0011), .K_CRCR(1), .K_CRNCR(1), .K_NCRCR(1), .K_NCRNCR(1))
    r4 (.clk, .rst_n, .done(done[4]), .checks(c[4]), .failures(f[4]), .n_slack(sl[4]), .n_defer(df[4]), .max_cr_lat(lat[4]));
  hg_sys_run #(.NAME("HourGlass(0,0,0,0)"), .CRIT(4'b0011), .K_CRCR(0), .K_CRNCR(0), .K_NCRCR(0), .K_NCRNCR(0))
    r5 (.clk, .rst_n, .done(done[5]), .checks(c[5]), .failures(f[5]), .n_slack(sl[5]), .n_defer(df[5]), .max_cr_lat(lat[5]));
  hg_sys_run #(.NAME("HourGlass(1) all cr"), .CRIT(4'b1111), .K_CRCR(1), .K_CRNCR(1), .K_NCRCR(1), .K_NCRNCR(1))
    r6 (.clk, .rst_n, .done(done[6]), .checks(c[6]), .failures(f[6]), .n_slack(sl[6]), .n_defer(df[6]), .max_cr_lat(lat[6]));

  int checks = 0, failures = 0;
  task automatic need(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    bit all_done;
    repeat (4) @(posedge clk);
    rst_n = 1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int i = 0; i < NCFG; i++) all_done &= done[i];
    end while (!all_done);
    for (int i = 0; i < NCFG; i++) begin
      checks += c[i];
      failures += f[i];
    end
    need("no slack slots with 4 cr cores", sl[3] == 0 && sl[6] == 0);
    need("slack slots used with 1 cr core", sl[0] > 0);
    need("slack slots used with 3 cr cores", sl[2] > 0);
    need("timers defer requests (2,4,1,2)", df[1] > 0);
    need("timers defer requests (1,1,1,1)", df[4] > 0);
    need("all-cr system makes progress", c[6] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
