// hourglass_top -- four-core HourGlass coherent memory system.
//
// Connects, as in the paper's architecture figure: one private L1 data cache
// with the HourGlass controller per core (hg_l1d), the TDM snooping bus with
// its PRSP buffers and criticality-aware arbiter (hg_shared_bus), the shared
// memory with sharer bits and PR LUT (hg_shared_mem) and the criticality
// table (hg_crit_rom). The cores themselves are outside: each core's
// load/store port is a top-level port (core_req / core_rsp).
//
// Configuration follows the paper's evaluated system: cores c0 and c1 are cr,
// c2 and c3 ncr; 16 kB direct-mapped L1-D with 64 B lines and 3-cycle hits;
// 1 MB shared memory; timer values v(cr,cr)=2P, v(cr,ncr)=4P, v(ncr,cr)=1P,
// v(ncr,ncr)=2P where the TDM period P = N_cr * SW. The timer values are fixed
// at build time from CRIT; if the criticality table is reprogrammed at boot
// the timer parameters should be rebuilt to match. SW = 50 is this design's
// choice (the paper gives no slot width; 50 cycles is its LLC latency).
//
// After reset the shared memory clears itself (MEM_LINES cycles, `ready`
// low); requests may be presented earlier and are served once the bus runs.
module hourglass_top
  import hg_pkg::*;
#(
  parameter logic [NCORES-1:0] CRIT      = 4'b0011,
  parameter int unsigned       SW        = 50,
  parameter int unsigned       L1_LINES  = 256,
  parameter int unsigned       L1_LAT    = 3,
  parameter int unsigned       MEM_LINES = 16384,
  parameter int unsigned       K_CRCR    = 2,   // timer values in TDM periods
  parameter int unsigned       K_CRNCR   = 4,
  parameter int unsigned       K_NCRCR   = 1,
  parameter int unsigned       K_NCRNCR  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // boot-time criticality configuration
  input  logic              cfg_we,
  input  logic [NCORES-1:0] cfg_crit,
  input  logic              cfg_lock,
  // core ports
  input  core_req_t         core_req [NCORES],
  output core_rsp_t         core_rsp [NCORES],
  output logic              ready,
  // event pulses for monitoring
  output logic [NCORES-1:0] ev_hit,
  output logic [NCORES-1:0] ev_miss,
  output logic [NCORES-1:0] ev_reissue,
  output logic [NCORES-1:0] ev_defer,
  output logic              ev_slack,
  output logic              ev_prsp_cancel,
  output logic              ev_lut_cancel,
  output logic              ev_allinv,
  output bus_msg_t          bus_mon
);

  localparam int unsigned NCR = $countones(CRIT);
  localparam int unsigned P   = (NCR == 0 ? 1 : NCR) * SW;

  logic [NCORES-1:0] crit;
  logic [CID_W:0]    n_cr;
  logic              locked;

  logic      breq_valid [NCORES];
  msg_e      breq_msg   [NCORES];
  laddr_t    breq_addr  [NCORES];
  prsp_ent_t prsp_push  [NCORES];
  logic      prsp_ready [NCORES];
  line_t     c2c_data   [NCORES];
  bus_msg_t  bus;
  data_dlv_t dlv;
  logic      mem_resp_valid, mem_resp_from_wb;
  cid_t      mem_resp_dest;
  line_t     mem_resp_data;
  logic      wb_valid;
  laddr_t    wb_addr;
  line_t     wb_data;
  logic      allinv_valid;
  laddr_t    allinv_addr;
  logic      slot_start;

  hg_crit_rom #(.CRIT_DEFAULT(CRIT)) u_rom (
    .clk, .rst_n, .cfg_we, .cfg_crit, .lock(cfg_lock), .crit, .n_cr, .locked
  );

  for (genvar g = 0; g < NCORES; g++) begin : g_core
    hg_l1d #(
      .ID      (cid_t'(g)),
      .LINES   (L1_LINES),
      .L1_LAT  (L1_LAT),
      .V_CRCR  (timer_t'(K_CRCR   * P)),
      .V_CRNCR (timer_t'(K_CRNCR  * P)),
      .V_NCRCR (timer_t'(K_NCRCR  * P)),
      .V_NCRNCR(timer_t'(K_NCRNCR * P))
    ) u_l1d (
      .clk, .rst_n, .crit,
      .core_req  (core_req[g]),
      .core_rsp  (core_rsp[g]),
      .breq_valid(breq_valid[g]),
      .breq_msg  (breq_msg[g]),
      .breq_addr (breq_addr[g]),
      .bus,
      .prsp_push (prsp_push[g]),
      .prsp_ready(prsp_ready[g]),
      .c2c_data  (c2c_data[g]),
      .dlv,
      .allinv_valid, .allinv_addr,
      .ev_hit    (ev_hit[g]),
      .ev_miss   (ev_miss[g]),
      .ev_reissue(ev_reissue[g]),
      .ev_defer  (ev_defer[g])
    );
  end

  hg_shared_bus #(.SW(SW)) u_bus (
    .clk, .rst_n,
    .en(ready),
    .crit,
    .breq_valid, .breq_msg, .breq_addr,
    .prsp_push, .prsp_ready, .c2c_data,
    .bus, .dlv,
    .mem_resp_valid, .mem_resp_dest, .mem_resp_from_wb, .mem_resp_data,
    .wb_valid, .wb_addr, .wb_data,
    .slot_start,
    .slack_slot (ev_slack),
    .prsp_cancel(ev_prsp_cancel)
  );

  hg_shared_mem #(.MEM_LINES(MEM_LINES)) u_mem (
    .clk, .rst_n, .crit, .bus,
    .wb_valid, .wb_addr, .wb_data,
    .resp_valid(mem_resp_valid), .resp_dest(mem_resp_dest),
    .resp_from_wb(mem_resp_from_wb), .resp_data(mem_resp_data),
    .allinv_valid, .allinv_addr,
    .lut_cancel(ev_lut_cancel),
    .init_done(ready)
  );

  assign ev_allinv = allinv_valid;
  assign bus_mon   = bus;

endmodule
