// hg_shared_mem -- shared memory (perfect last-level cache) with HourGlass
// directory information.
//
// Every line has data, a directory state (I, S or M), an owner and a sharer
// bit per core. The sharer bits are HourGlass's addition: shared copies
// time out independently, each sends a SelfInv, and only when the last
// sharer is gone may a waiting write proceed. The memory then broadcasts
// AllInv and hands the line to the best pending request of its PR LUT (cr
// first, oldest first).
//
// Bus message handling (in the first cycle of a slot, `bus.valid`):
//   GetS  line not M and no pending request for it -> reply with data, add
//         the requester to the sharers; else record in the PR LUT.
//   GetM  line I and nothing pending -> reply with data, requester becomes
//         owner; else record in the PR LUT (the holder or the sharers answer).
//   A cr GetS/GetM first cancels all pending ncr entries for the line.
//   SendData (holder -> requester): the requester's PR LUT entry gives its
//         new state (GetS -> S with one sharer, GetM -> M); entry removed.
//         The line data is written back at the end of the slot (wb_*).
//   SelfInv: clear the sender's sharer bit; when none is left the line goes
//         to I, AllInv is raised and the best pending request is answered.
//   PutM: write-back; if a request is pending it is answered with the
//         written-back data (resp_from_wb), else the line goes to I.
// Replies are registered: resp_* and allinv_* are valid from the cycle after
// the message and hold until the next message; the bus delivers the data at
// the end of the slot, so one slot covers the access latency.
//
// After reset the memory sweeps every line once (directory to I, data to 0)
// and raises init_done; this takes MEM_LINES cycles. The 1 MB size is the
// paper's LLC; since the paper treats the LLC as always hitting, lines are
// indexed directly by the low line-address bits and the 8-way organisation
// is not modelled. Reply rules, the init sweep and the PutM case are this
// design's own choices where the paper does not detail them.
module hg_shared_mem
  import hg_pkg::*;
#(
  parameter int unsigned MEM_LINES = 16384   // 1 MB / 64 B
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCORES-1:0] crit,
  input  bus_msg_t          bus,
  input  logic              wb_valid,      // end of a SendData/PutM slot
  input  laddr_t            wb_addr,
  input  line_t             wb_data,
  output logic              resp_valid,
  output cid_t              resp_dest,
  output logic              resp_from_wb,
  output line_t             resp_data,
  output logic              allinv_valid,
  output laddr_t            allinv_addr,
  output logic              lut_cancel,    // a pending ncr request was cancelled
  output logic              init_done
);

  localparam int unsigned IDX_W = $clog2(MEM_LINES);

  typedef struct packed {
    dstate_e           st;
    cid_t              owner;
    logic [NCORES-1:0] sharers;
  } dir_t;

  line_t              mem [MEM_LINES];
  dir_t               dir [MEM_LINES];
  logic [IDX_W-1:0]   init_idx;

  logic [IDX_W-1:0]   idx;
  dir_t               d;
  logic               req_cr;
  logic               is_req;

  // PR LUT interface
  logic   l_ins, l_rm, l_cancel;
  cid_t   l_ins_cid, l_rm_cid;
  logic   l_ins_cr;
  msg_e   l_ins_msg;
  logic   q_any, q_best_v, c_valid;
  cid_t   q_best_cid;
  msg_e   q_best_msg, c_msg;
  logic [NCORES-1:0] l_cancelled;

  assign idx    = bus.addr[IDX_W-1:0];
  assign d      = dir[idx];
  assign is_req = bus.valid && (bus.msg == MSG_GETS || bus.msg == MSG_GETM);
  assign req_cr = crit[bus.src];

  // what the memory does with this cycle's message
  typedef struct packed {
    logic  reply;           // memory sends the line
    cid_t  dest;
    logic  from_wb;
    logic  allinv;
    dir_t  nd;              // new directory entry
    logic  wr_dir;
  } act_t;
  act_t act;

  always_comb begin
    act       = '0;
    act.nd    = d;
    l_ins     = 1'b0;
    l_ins_cid = bus.src;
    l_ins_cr  = req_cr;
    l_ins_msg = bus.msg;
    l_rm      = 1'b0;
    l_rm_cid  = bus.dest;
    l_cancel  = is_req && req_cr && init_done;
    if (bus.valid && init_done) begin
      unique case (bus.msg)
        MSG_GETS: begin
          if (d.st != DIR_M && !q_any) begin
            act.reply = 1'b1; act.dest = bus.src; act.wr_dir = 1'b1;
            act.nd.st = DIR_S;
            act.nd.sharers = d.sharers | (NCORES'(1) << bus.src);
          end else l_ins = 1'b1;
        end
        MSG_GETM: begin
          if (d.st == DIR_I && !q_any) begin
            act.reply = 1'b1; act.dest = bus.src; act.wr_dir = 1'b1;
            act.nd = '{st: DIR_M, owner: bus.src, sharers: '0};
          end else l_ins = 1'b1;
        end
        MSG_SENDDATA: begin
          l_rm = 1'b1; l_rm_cid = bus.dest; act.wr_dir = 1'b1;
          if (c_valid && c_msg == MSG_GETS)
            act.nd = '{st: DIR_S, owner: bus.dest, sharers: NCORES'(1) << bus.dest};
          else
            act.nd = '{st: DIR_M, owner: bus.dest, sharers: '0};
        end
        MSG_SELFINV: begin
          if (d.st == DIR_S && d.sharers[bus.src]) begin
            act.wr_dir = 1'b1;
            act.nd.sharers = d.sharers & ~(NCORES'(1) << bus.src);
            if (act.nd.sharers == '0) begin
              act.allinv = 1'b1;
              act.nd.st  = DIR_I;
              if (q_best_v) begin
                act.reply = 1'b1; act.dest = q_best_cid;
                l_rm = 1'b1; l_rm_cid = q_best_cid;
                if (q_best_msg == MSG_GETS)
                  act.nd = '{st: DIR_S, owner: q_best_cid, sharers: NCORES'(1) << q_best_cid};
                else
                  act.nd = '{st: DIR_M, owner: q_best_cid, sharers: '0};
              end
            end
          end
        end
        MSG_PUTM: begin
          act.wr_dir = 1'b1;
          act.nd     = '{st: DIR_I, owner: '0, sharers: '0};
          if (q_best_v) begin
            act.reply = 1'b1; act.dest = q_best_cid; act.from_wb = 1'b1;
            l_rm = 1'b1; l_rm_cid = q_best_cid;
            if (q_best_msg == MSG_GETS)
              act.nd = '{st: DIR_S, owner: q_best_cid, sharers: NCORES'(1) << q_best_cid};
            else
              act.nd = '{st: DIR_M, owner: q_best_cid, sharers: '0};
          end
        end
        default: ;
      endcase
    end
  end

  hg_pr_lut u_lut (
    .clk, .rst_n,
    .ins(l_ins), .ins_cid(l_ins_cid), .ins_cr(l_ins_cr), .ins_msg(l_ins_msg),
    .ins_addr(bus.addr),
    .rm(l_rm), .rm_cid(l_rm_cid),
    .cancel_ncr(l_cancel), .cancel_addr(bus.addr),
    .q_addr(bus.addr), .q_any, .q_best_v, .q_best_cid, .q_best_msg,
    .c_cid(bus.dest), .c_valid, .c_msg,
    .cancelled(l_cancelled)
  );

  assign lut_cancel = |l_cancelled;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_idx     <= '0;
      init_done    <= 1'b0;
      resp_valid   <= 1'b0;
      resp_dest    <= '0;
      resp_from_wb <= 1'b0;
      allinv_valid <= 1'b0;
      allinv_addr  <= '0;
    end else if (!init_done) begin
      dir[init_idx] <= '{st: DIR_I, owner: '0, sharers: '0};
      mem[init_idx] <= '0;
      init_idx      <= init_idx + 1'b1;
      if (init_idx == IDX_W'(MEM_LINES-1)) init_done <= 1'b1;
    end else begin
      if (bus.valid) begin
        resp_valid   <= act.reply;
        resp_dest    <= act.dest;
        resp_from_wb <= act.from_wb;
        allinv_valid <= act.allinv;
        allinv_addr  <= bus.addr;
        if (act.wr_dir) dir[idx] <= act.nd;
      end else begin
        allinv_valid <= 1'b0;
      end
      if (wb_valid) mem[wb_addr[IDX_W-1:0]] <= wb_data;
    end
  end

  // read port: the line addressed by this slot's message
  always_ff @(posedge clk) if (bus.valid) resp_data <= mem[idx];

endmodule
