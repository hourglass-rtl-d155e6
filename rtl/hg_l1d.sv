// hg_l1d -- private L1 data cache with the HourGlass coherence controller.
//
// A direct-mapped write-back cache (16 kB, 64 B lines = 256 lines by default)
// whose tag entry is extended, as in the paper, by
//   * two 64-bit countdown timers per line: the "cr timer" bounds how long the
//     line is kept once a cr core asks for it, the "ncr timer" once an ncr core
//     asks. Both are loaded when the line arrives (with v(me,cr) and v(me,ncr)
//     chosen by this core's criticality) and count down every cycle to zero;
//   * a cr-destination and an ncr-destination field, each written only when
//     empty, naming the first remote cr / ncr requester seen for the line.
// A holder that sees a remote request keeps the line (states S^TI / M^TI) and
// keeps hitting on it until the relevant timer expires: the cr timer if a cr
// requester is recorded, else the ncr timer. It then queues SelfInv (shared
// line) or SendData (modified line) for the recorded cr requester if any,
// else the ncr one, into its PRSP buffer in the bus (states SI^A / MI^A). If
// a cr request arrives after an answer to an ncr core was queued, an answer
// to the cr core is queued too and the bus cancels the ncr one.
//
// Requesters in IS^D / IM^D waiting for data record later requesters in their
// own destination fields (IS^DI / IM^DI), which chains successive writers.
// An ncr requester that sees a cr request to the same line while waiting
// drops its place and re-issues its request (Table I of the paper). A store
// to a shared line waits for the core's own-criticality timer, self-
// invalidates and then issues GetM (no S->M upgrade, as in the paper).
// Timers of an S or M line with no pending remote request restart when both
// reach zero (the paper's "restart timer").
//
// Interfaces
//   core_req/core_rsp: one outstanding load/store of a 64-bit word; the
//     request is held until core_rsp.valid (one-cycle pulse). A hit answers
//     L1_LAT cycles after acceptance (paper: 3-cycle L1).
//   breq_*: the one pending GetS/GetM; it is removed when this core's request
//     appears on `bus` (the arbiter granted it).
//   bus: the broadcast bus message (first cycle of a slot).
//   prsp_push/prsp_ready: answers queued into this core's PRSP buffer.
//   c2c_data: the line captured when this core's SendData/PutM is on the bus;
//     valid from the next cycle until the next such message.
//   dlv: line delivered to a requester at the end of a slot.
//   allinv_*: AllInv from the shared memory; SI lines of that address drop.
//
// Departures from the paper's Table A1 (own choices): an M line is replaced
// with PutM only from M (other states wait until the line resolves); a
// replaced S line goes S -> SI^A -> SI -> I; ncr requesters also re-issue on a
// cr GetS while in IS^D (Table I marks that cell "-"); a cr requester in IS^D
// also records a cr GetS in its cr-destination field (Table I leaves that
// cell empty). See the README for the reasons.
module hg_l1d
  import hg_pkg::*;
#(
  parameter cid_t        ID       = '0,
  parameter int unsigned LINES    = 256,     // 16 kB direct mapped, 64 B lines
  parameter int unsigned L1_LAT   = 3,       // hit latency in cycles
  parameter timer_t      V_CRCR   = 64'd200, // v(cr,cr)   = 2 TDM periods
  parameter timer_t      V_CRNCR  = 64'd400, // v(cr,ncr)  = 4 TDM periods
  parameter timer_t      V_NCRCR  = 64'd100, // v(ncr,cr)  = 1 TDM period
  parameter timer_t      V_NCRNCR = 64'd200  // v(ncr,ncr) = 2 TDM periods
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCORES-1:0] crit,
  input  core_req_t         core_req,
  output core_rsp_t         core_rsp,
  output logic              breq_valid,
  output msg_e              breq_msg,
  output laddr_t            breq_addr,
  input  bus_msg_t          bus,
  output prsp_ent_t         prsp_push,
  input  logic              prsp_ready,
  output line_t             c2c_data,
  input  data_dlv_t         dlv,
  input  logic              allinv_valid,
  input  laddr_t            allinv_addr,
  output logic              ev_hit,       // event pulses for statistics
  output logic              ev_miss,
  output logic              ev_reissue,
  output logic              ev_defer      // remote request deferred by a timer
);

  localparam int unsigned IDX_W = $clog2(LINES);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;

  typedef struct packed {
    tag_t    tag;
    lstate_e st;
    logic    crd_v;
    cid_t    crd;
    logic    ncrd_v;
    cid_t    ncrd;
    logic    pushed_cr;   // an answer to crd is already queued
  } meta_t;

  meta_t  meta [LINES];
  line_t  data [LINES];
  timer_t crt  [LINES];
  timer_t ncrt [LINES];

  function automatic idx_t idx_of(laddr_t a);
    return a[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(laddr_t a);
    return a[LADDR_W-1:IDX_W];
  endfunction

  logic   me_cr;
  timer_t v_cr, v_ncr;
  assign me_cr = crit[ID];
  assign v_cr  = me_cr ? V_CRCR  : V_NCRCR;
  assign v_ncr = me_cr ? V_CRNCR : V_NCRNCR;

  // ---------------- lines touched by bus events this cycle ----------------
  idx_t sidx, didx, aidx;
  logic s_hit, d_hit, a_hit;
  assign sidx  = idx_of(bus.addr);
  assign didx  = idx_of(dlv.addr);
  assign aidx  = idx_of(allinv_addr);
  assign s_hit = bus.valid && meta[sidx].tag == tag_of(bus.addr) && meta[sidx].st != ST_I;
  assign d_hit = dlv.valid && dlv.dest == ID && meta[didx].tag == tag_of(dlv.addr);
  assign a_hit = allinv_valid && meta[aidx].tag == tag_of(allinv_addr);

  function automatic logic blocked(idx_t i);
    return (bus.valid && sidx == i) || (dlv.valid && didx == i) ||
           (allinv_valid && aidx == i);
  endfunction

  // ---------------- core request ----------------
  typedef enum logic {C_IDLE, C_BUSY} cstate_e;
  cstate_e          cst;
  logic             r_we;
  laddr_t           r_laddr;
  logic [WSEL_W-1:0] r_wsel;
  word_t            r_wdata;
  logic [3:0]       r_cnt;
  logic             r_missed;
  idx_t             ridx;
  meta_t            rm;
  logic             r_tagok, r_can_read, r_can_write, r_evict;
  assign ridx    = idx_of(r_laddr);
  assign rm      = meta[ridx];
  assign r_tagok = rm.tag == tag_of(r_laddr);
  always_comb begin
    r_can_read  = rm.st inside {ST_S, ST_STI, ST_SIA, ST_SI, ST_STM, ST_SMA,
                                ST_M, ST_MTI, ST_MIR, ST_MIA};
    r_can_write = rm.st inside {ST_M, ST_MTI, ST_MIR, ST_MIA};
    // the request's line holds another valid line that must be replaced
    r_evict     = (cst == C_BUSY) && !r_tagok && (rm.st == ST_S || rm.st == ST_M);
  end

  // ---------------- answers to queue (PRSP push) ----------------
  logic      p_found;
  idx_t      p_idx;
  prsp_ent_t p_ent;
  lstate_e   p_next;

  always_comb begin
    meta_t m;
    logic  need;
    p_found = 1'b0;
    p_idx   = '0;
    p_ent   = '0;
    p_next  = ST_I;
    for (int i = LINES-1; i >= 0; i--) begin
      m    = meta[i];
      need = 1'b0;
      if (!blocked(idx_t'(i))) begin
        if ((m.st == ST_STI || m.st == ST_MTI) &&
            (m.crd_v ? crt[i] == '0 : (m.ncrd_v && ncrt[i] == '0))) need = 1'b1;
        if ((m.st == ST_SIA || m.st == ST_MIA) && m.crd_v && !m.pushed_cr) need = 1'b1;
        if (m.st == ST_STM && (me_cr ? crt[i] : ncrt[i]) == '0) need = 1'b1;
        if (r_evict && idx_t'(i) == ridx) need = 1'b1;
      end
      if (need) begin
        p_found = 1'b1;
        p_idx   = idx_t'(i);
        p_ent.valid = 1'b1;
        p_ent.addr  = {m.tag, idx_t'(i)};
        unique case (m.st)
          ST_S:   begin p_ent.msg = MSG_SELFINV;  p_ent.dest = ID; p_next = ST_SIA; end
          ST_M:   begin p_ent.msg = MSG_PUTM;     p_ent.dest = ID; p_next = ST_MIR; end
          ST_STM: begin p_ent.msg = MSG_SELFINV;  p_ent.dest = ID; p_next = ST_SMA; end
          ST_STI, ST_SIA: begin
            p_ent.msg = MSG_SELFINV;  p_ent.dest = m.crd_v ? m.crd : m.ncrd; p_next = ST_SIA;
          end
          default: begin
            p_ent.msg = MSG_SENDDATA; p_ent.dest = m.crd_v ? m.crd : m.ncrd; p_next = ST_MIA;
          end
        endcase
        p_ent.dest_cr = crit[p_ent.dest];
      end
    end
    prsp_push = p_ent;
  end

  logic p_fire;
  assign p_fire = p_found && prsp_ready;

  // ---------------- sequential part ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LINES; i++) begin
        meta[i] <= '{tag: '0, st: ST_I, crd_v: 1'b0, crd: '0, ncrd_v: 1'b0, ncrd: '0,
                     pushed_cr: 1'b0};
        crt[i]  <= '0;
        ncrt[i] <= '0;
      end
      cst        <= C_IDLE;
      core_rsp   <= '0;
      breq_valid <= 1'b0;
      breq_msg   <= MSG_NONE;
      breq_addr  <= '0;
      r_we       <= 1'b0;
      r_laddr    <= '0;
      r_wsel     <= '0;
      r_wdata    <= '0;
      r_cnt      <= '0;
      r_missed   <= 1'b0;
      ev_hit     <= 1'b0;
      ev_miss    <= 1'b0;
      ev_reissue <= 1'b0;
      ev_defer   <= 1'b0;
    end else begin
      core_rsp   <= '0;
      ev_hit     <= 1'b0;
      ev_miss    <= 1'b0;
      ev_reissue <= 1'b0;
      ev_defer   <= 1'b0;

      // timers count down; restart when both expired on an unrequested line
      for (int i = 0; i < LINES; i++) begin
        if ((meta[i].st == ST_S || meta[i].st == ST_M) && crt[i] == '0 && ncrt[i] == '0) begin
          crt[i]  <= v_cr;
          ncrt[i] <= v_ncr;
        end else begin
          if (crt[i]  != '0) crt[i]  <= crt[i]  - 1'b1;
          if (ncrt[i] != '0) ncrt[i] <= ncrt[i] - 1'b1;
        end
      end

      // queue an answer
      if (p_fire) begin
        meta[p_idx].st <= p_next;
        if (p_next == ST_SIA || p_next == ST_MIA || p_next == ST_SMA || p_next == ST_MIR)
          meta[p_idx].pushed_cr <= meta[p_idx].pushed_cr |
                                   (prsp_push.dest_cr && prsp_push.dest != ID) |
                                   (prsp_push.dest == ID);
      end

      // core side
      if (cst == C_IDLE) begin
        if (core_req.valid) begin
          cst      <= C_BUSY;
          r_we     <= core_req.we;
          r_laddr  <= core_req.addr[ADDR_W-1:OFS_W];
          r_wsel   <= core_req.addr[OFS_W-1:3];
          r_wdata  <= core_req.wdata;
          r_cnt    <= 4'd1;
          r_missed <= 1'b0;
        end
      end else if (r_cnt < 4'(L1_LAT)) begin
        r_cnt <= r_cnt + 1'b1;
      end else if (!blocked(ridx) && !(p_fire && p_idx == ridx)) begin
        if (r_tagok && !r_we && r_can_read) begin
          core_rsp <= '{valid: 1'b1, rdata: data[ridx][r_wsel*WORD_W +: WORD_W]};
          ev_hit   <= !r_missed;
          cst      <= C_IDLE;
        end else if (r_tagok && r_we && r_can_write) begin
          core_rsp <= '{valid: 1'b1, rdata: r_wdata};
          ev_hit   <= !r_missed;
          cst      <= C_IDLE;
        end else if (r_tagok && r_we && (rm.st == ST_S || rm.st == ST_STI)) begin
          meta[ridx].st <= ST_STM;          // wait for own timer
          r_missed      <= 1'b1;
        end else if (r_tagok && r_we && rm.st == ST_SIA) begin
          meta[ridx].st <= ST_SMA;
          r_missed      <= 1'b1;
        end else if (r_tagok && r_we && rm.st == ST_SI) begin
          // the copy is already given up: requesters recorded for it are
          // served by the memory, so the destination fields start empty
          meta[ridx].st        <= ST_IMAD;
          meta[ridx].crd_v     <= 1'b0;
          meta[ridx].ncrd_v    <= 1'b0;
          meta[ridx].pushed_cr <= 1'b0;
          breq_valid    <= 1'b1;
          breq_msg      <= MSG_GETM;
          breq_addr     <= r_laddr;
          r_missed      <= 1'b1;
          ev_miss       <= 1'b1;
        end else if (rm.st == ST_I) begin
          meta[ridx] <= '{tag: tag_of(r_laddr), st: r_we ? ST_IMAD : ST_ISAD,
                          crd_v: 1'b0, crd: '0, ncrd_v: 1'b0, ncrd: '0, pushed_cr: 1'b0};
          breq_valid <= 1'b1;
          breq_msg   <= r_we ? MSG_GETM : MSG_GETS;
          breq_addr  <= r_laddr;
          r_missed   <= 1'b1;
          ev_miss    <= 1'b1;
        end else if (!r_tagok && rm.st == ST_SI) begin
          meta[ridx].st <= ST_I;            // replacement of a self-invalidated line
        end
      end

      // snooped bus message
      if (s_hit) begin
        if (bus.src == ID) begin
          unique case (bus.msg)
            MSG_GETS: if (meta[sidx].st == ST_ISAD) begin
              meta[sidx].st <= ST_ISD; breq_valid <= 1'b0;
            end
            MSG_GETM: if (meta[sidx].st == ST_IMAD) begin
              meta[sidx].st <= ST_IMD; breq_valid <= 1'b0;
            end
            MSG_SENDDATA, MSG_PUTM: if (meta[sidx].st == ST_MIA || meta[sidx].st == ST_MIR) begin
              meta[sidx].st   <= ST_I;
              meta[sidx].crd_v  <= 1'b0;
              meta[sidx].ncrd_v <= 1'b0;
            end
            MSG_SELFINV: begin
              if (meta[sidx].st == ST_SIA) meta[sidx].st <= ST_SI;
              else if (meta[sidx].st == ST_SMA) begin
                meta[sidx].st        <= ST_IMAD;
                meta[sidx].crd_v     <= 1'b0;
                meta[sidx].ncrd_v    <= 1'b0;
                meta[sidx].pushed_cr <= 1'b0;
                breq_valid           <= 1'b1;
                breq_msg          <= MSG_GETM;
                breq_addr         <= bus.addr;
              end
            end
            default: ;
          endcase
        end else if (bus.msg == MSG_GETS || bus.msg == MSG_GETM) begin
          automatic logic    rcr  = crit[bus.src];
          automatic logic    getm = (bus.msg == MSG_GETM);
          automatic lstate_e s    = meta[sidx].st;
          automatic logic    setd = 1'b0;
          if (s inside {ST_ISD, ST_ISDI, ST_IMD, ST_IMDI}) begin
            if (!me_cr && rcr) begin
              // ncr requester loses its place to a cr request: re-issue
              meta[sidx].st     <= (s == ST_ISD || s == ST_ISDI) ? ST_ISAD : ST_IMAD;
              meta[sidx].crd_v  <= 1'b0;
              meta[sidx].ncrd_v <= 1'b0;
              breq_valid        <= 1'b1;
              breq_msg          <= (s == ST_ISD || s == ST_ISDI) ? MSG_GETS : MSG_GETM;
              breq_addr         <= bus.addr;
              ev_reissue        <= 1'b1;
            end else begin
              setd = 1'b1;
              meta[sidx].st <= (s == ST_ISD || s == ST_ISDI) ? ST_ISDI : ST_IMDI;
            end
          end else if (s == ST_S && getm) begin
            setd = 1'b1; meta[sidx].st <= ST_STI; ev_defer <= 1'b1;
          end else if (s == ST_M) begin
            setd = 1'b1; meta[sidx].st <= ST_MTI; ev_defer <= 1'b1;
          end else if (s == ST_MTI || s == ST_MIA || ((s == ST_STI || s == ST_STM ||
                       s == ST_SIA || s == ST_SMA) && getm)) begin
            setd = 1'b1;
          end
          if (setd) begin
            if (rcr && !meta[sidx].crd_v) begin
              meta[sidx].crd_v <= 1'b1; meta[sidx].crd <= bus.src;
            end
            if (!rcr && !meta[sidx].ncrd_v) begin
              meta[sidx].ncrd_v <= 1'b1; meta[sidx].ncrd <= bus.src;
            end
          end
        end
      end

      // data delivered at the end of a slot
      if (d_hit) begin
        unique case (meta[didx].st)
          ST_ISD:  meta[didx].st <= ST_S;
          ST_ISDI: meta[didx].st <= ST_STI;
          ST_IMD:  meta[didx].st <= ST_M;
          ST_IMDI: meta[didx].st <= ST_MTI;
          default: ;
        endcase
        if (meta[didx].st inside {ST_ISD, ST_ISDI, ST_IMD, ST_IMDI}) begin
          crt[didx]               <= v_cr;
          ncrt[didx]              <= v_ncr;
          meta[didx].pushed_cr    <= 1'b0;
        end
      end

      // AllInv: self-invalidated copies are dropped
      if (a_hit && meta[aidx].st == ST_SI) meta[aidx].st <= ST_I;
    end
  end

  // data array and cache-to-cache capture register (not reset)
  logic core_go, w_store, w_dlv, w_cap;
  assign core_go = (cst == C_BUSY) && (r_cnt >= 4'(L1_LAT)) && !blocked(ridx) &&
                   !(p_fire && p_idx == ridx);
  assign w_store = core_go && r_tagok && r_we && r_can_write;
  assign w_dlv   = d_hit && (meta[didx].st inside {ST_ISD, ST_ISDI, ST_IMD, ST_IMDI});
  assign w_cap   = s_hit && bus.src == ID && (bus.msg == MSG_SENDDATA || bus.msg == MSG_PUTM) &&
                   (meta[sidx].st == ST_MIA || meta[sidx].st == ST_MIR);

  always_ff @(posedge clk) begin
    if (w_store) data[ridx][r_wsel*WORD_W +: WORD_W] <= r_wdata;
    if (w_dlv)   data[didx] <= dlv.data;
    if (w_cap)   c2c_data   <= data[sidx];
  end

endmodule
