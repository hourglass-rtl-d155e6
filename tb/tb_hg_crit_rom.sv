// tb_hg_crit_rom -- checks the criticality table: reset value, boot-time
// write, lock, writes ignored after lock, and the cr-core count.
module tb_hg_crit_rom;
  import hg_pkg::*;
  timeunit 1ns; timeprecision 100ps;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic cfg_we = 0, lock = 0, locked;
  logic [NCORES-1:0] cfg_crit = '0, crit;
  logic [CID_W:0] n_cr;
  int checks = 0, failures = 0;

  hg_crit_rom dut (.clk, .rst_n, .cfg_we, .cfg_crit, .lock, .crit, .n_cr, .locked);

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("reset crit", 32'(crit), 32'b0011);
    chk("reset n_cr", 32'(n_cr), 2);
    chk("unlocked", 32'(locked), 0);
    cfg_we = 1; cfg_crit = 4'b0111; @(negedge clk); cfg_we = 0;
    chk("boot write", 32'(crit), 32'b0111);
    chk("n_cr 3", 32'(n_cr), 3);
    lock = 1; @(negedge clk); lock = 0;
    chk("locked", 32'(locked), 1);
    cfg_we = 1; cfg_crit = 4'b1000; @(negedge clk); cfg_we = 0;
    chk("write after lock ignored", 32'(crit), 32'b0111);
    // same-cycle write and lock: lock wins
    rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
    cfg_we = 1; lock = 1; cfg_crit = 4'b1111; @(negedge clk); cfg_we = 0; lock = 0;
    chk("lock beats write", 32'(crit), 32'b0011);
    cfg_we = 1; cfg_crit = 4'b0000; @(negedge clk); cfg_we = 0;
    chk("still locked", 32'(crit), 32'b0011);
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
