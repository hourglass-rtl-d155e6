// hg_shared_bus -- the TDM snooping bus of HourGlass, with the cache data bus
// and one pending response (PRSP) buffer per core.
//
// Time is cut into slots of SW cycles; the slot counter runs once `en` is
// high (the shared memory has finished its initialisation). In the first
// cycle of a slot the arbiter (hg_tdm_arbiter) picks one transaction and it
// is broadcast on `bus` to every cache and to the shared memory. A
// transaction taken from a PRSP buffer removes every entry of that buffer for
// the same line. For SendData and PutM the source cache captures its line on
// the broadcast edge; the bus copies it from c2c_data one cycle later. In the
// last cycle of the slot the data is delivered (`dlv`): from the source cache
// for SendData, otherwise the shared memory's reply (for PutM the memory may
// forward the written-back line to a pending requester). SendData and PutM
// data is also written back into the shared memory (`wb_*`) in that cycle.
// One slot therefore carries one request or response and at most one line
// transfer, as the paper assumes ("SW large enough to complete one data
// transfer ... and the transfer of any necessary coherence messages").
//
// Interface timing: `bus.valid` and `slot_start` are one-cycle pulses at slot
// start; `dlv.valid` and `wb_valid` are one-cycle pulses at the slot's last
// cycle. Broadcast in cycle 0 and delivery in cycle SW-1 are this design's own
// slot layout. SW defaults to 50 cycles, the paper's LLC access latency; the
// paper does not print a slot width.
module hg_shared_bus
  import hg_pkg::*;
#(
  parameter int unsigned SW    = 50,
  parameter int unsigned DEPTH = NCORES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [NCORES-1:0] crit,
  // cache controllers
  input  logic              breq_valid [NCORES],
  input  msg_e              breq_msg   [NCORES],
  input  laddr_t            breq_addr  [NCORES],
  input  prsp_ent_t         prsp_push  [NCORES],
  output logic              prsp_ready [NCORES],
  input  line_t             c2c_data   [NCORES],
  output bus_msg_t          bus,
  output data_dlv_t         dlv,
  // shared memory
  input  logic              mem_resp_valid,
  input  cid_t              mem_resp_dest,
  input  logic              mem_resp_from_wb,
  input  line_t             mem_resp_data,
  output logic              wb_valid,
  output laddr_t            wb_addr,
  output line_t             wb_data,
  // statistics
  output logic              slot_start,
  output logic              slack_slot,   // pulse: a slack slot was given to an ncr core
  output logic              prsp_cancel   // pulse: a queued ncr answer was cancelled
);

  localparam int unsigned CNT_W = $clog2(SW);

  logic [CNT_W-1:0] cnt;
  bus_msg_t         cur;
  line_t            slot_data;
  prsp_ent_t        ent [NCORES][DEPTH];
  logic [NCORES-1:0] canc, req_v;
  msg_e             req_m [NCORES];
  laddr_t           req_a [NCORES];
  bus_msg_t         grant;
  logic             grant_prsp, slack, owner_valid;
  logic [$clog2(DEPTH > 1 ? DEPTH : 2)-1:0] grant_eidx;
  cid_t             owner;
  logic             last;

  assign slot_start = en && cnt == '0;
  assign last       = en && cnt == CNT_W'(SW-1);

  always_comb begin
    for (int i = 0; i < NCORES; i++) begin
      req_v[i] = breq_valid[i];
      req_m[i] = breq_msg[i];
      req_a[i] = breq_addr[i];
    end
  end

  for (genvar g = 0; g < NCORES; g++) begin : g_prsp
    hg_prsp_buffer #(.DEPTH(DEPTH)) u_prsp (
      .clk, .rst_n,
      .push      (prsp_push[g]),
      .push_ready(prsp_ready[g]),
      .done      (bus.valid && grant_prsp && bus.src == cid_t'(g)),
      .done_addr (bus.addr),
      .ent       (ent[g]),
      .cancel    (canc[g]),
      .full      ()
    );
  end

  hg_tdm_arbiter #(.DEPTH(DEPTH)) u_arb (
    .clk, .rst_n,
    .slot_start,
    .crit,
    .req_valid (req_v),
    .req_msg   (req_m),
    .req_addr  (req_a),
    .prsp      (ent),
    .grant,
    .grant_prsp,
    .grant_eidx,
    .slack,
    .owner_valid,
    .owner
  );

  assign bus         = grant;
  assign slack_slot  = slot_start && slack && grant.valid;
  assign prsp_cancel = |canc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      cur <= '0;
    end else if (en) begin
      cnt <= last ? '0 : cnt + 1'b1;
      if (slot_start) cur <= grant;
    end
  end

  always_ff @(posedge clk)
    if (en && cnt == CNT_W'(1)) slot_data <= c2c_data[cur.src];

  always_comb begin
    dlv      = '0;
    wb_valid = 1'b0;
    wb_addr  = cur.addr;
    wb_data  = slot_data;
    if (last && cur.valid) begin
      if (cur.msg == MSG_SENDDATA) begin
        dlv      = '{valid: 1'b1, dest: cur.dest, addr: cur.addr, data: slot_data};
        wb_valid = 1'b1;
      end else if (cur.msg == MSG_PUTM) begin
        wb_valid = 1'b1;
        if (mem_resp_valid)
          dlv = '{valid: 1'b1, dest: mem_resp_dest, addr: cur.addr, data: slot_data};
      end else if (mem_resp_valid) begin
        dlv = '{valid: 1'b1, dest: mem_resp_dest, addr: cur.addr,
                data: mem_resp_from_wb ? slot_data : mem_resp_data};
      end
    end
  end

  // a slot must fit broadcast, capture and delivery
  initial assert (SW >= 3) else $error("SW must be at least 3 cycles");

endmodule
