// hg_crit_rom -- criticality table of all cores.
//
// Every cache controller, the bus arbiter and the shared memory need to know
// whether a core is critical (cr) or non-critical (ncr). The paper keeps this
// in a small on-chip read-only memory that is configured at boot time. This
// module is that table: after reset it holds the parameter CRIT_DEFAULT; while
// `lock` is low a boot agent may overwrite it with `cfg_we`/`cfg_crit`. The
// first cycle `lock` is seen high the table becomes read-only until the next
// reset, matching the paper's rule that the configuration does not change
// while applications run. The number of cr cores (N_cr, which sets the TDM
// period) is derived combinationally.
//
// Interface: crit[i] = 1 means core i is cr. Writes take effect the cycle after
// cfg_we. The boot-write/lock mechanism is this design's own choice; the paper
// only says "configured at boot time, and stored in a dedicated on-chip ROM".
module hg_crit_rom
  import hg_pkg::*;
#(
  parameter logic [NCORES-1:0] CRIT_DEFAULT = 4'b0011  // c0,c1 cr; c2,c3 ncr
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [NCORES-1:0] cfg_crit,
  input  logic              lock,
  output logic [NCORES-1:0] crit,
  output logic [CID_W:0]    n_cr,
  output logic              locked
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crit   <= CRIT_DEFAULT;
      locked <= 1'b0;
    end else begin
      if (cfg_we && !locked && !lock) crit <= cfg_crit;
      if (lock) locked <= 1'b1;
    end
  end

  always_comb begin
    n_cr = '0;
    for (int i = 0; i < NCORES; i++) n_cr = n_cr + (CID_W+1)'(crit[i]);
  end

endmodule
