// hg_pr_lut -- pending request lookup table (PR LUT) of the shared memory.
//
// The shared memory records here every request that it cannot answer at
// once (the line is modified in some cache, or shared copies still have to
// self-invalidate). Each row holds the line address, the requesting core
// (CID), its criticality and the message (GetS/GetM) -- the four columns the
// paper draws for this table. HourGlass adds the criticality column so that:
//   * the entry chosen for a line (`q_best_*`) is the oldest cr request, and
//     only when there is none the oldest ncr request;
//   * a new cr request to a line cancels (removes) all ncr entries for it
//     (`cancel_ncr`); those ncr cores re-issue their requests themselves.
// Since a core has at most one outstanding bus request, the table has one
// row per core, indexed by CID. Age is kept as a pairwise "older-than"
// matrix, updated on insertion. Row-per-core layout and the age matrix are
// this design's own choices.
//
// Timing: queries are combinational; insert/remove/cancel take effect on the
// next clock edge. When several happen in one cycle: cancel, then remove,
// then insert.
module hg_pr_lut
  import hg_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // insert a pending request
  input  logic   ins,
  input  cid_t   ins_cid,
  input  logic   ins_cr,
  input  msg_e   ins_msg,
  input  laddr_t ins_addr,
  // remove the entry of a core (request served)
  input  logic   rm,
  input  cid_t   rm_cid,
  // cancel every ncr entry for a line
  input  logic   cancel_ncr,
  input  laddr_t cancel_addr,
  // query by line
  input  laddr_t q_addr,
  output logic   q_any,        // any entry for q_addr left after cancel_ncr
  output logic   q_best_v,
  output cid_t   q_best_cid,
  output msg_e   q_best_msg,
  // query by core
  input  cid_t   c_cid,
  output logic   c_valid,
  output msg_e   c_msg,
  output logic [NCORES-1:0] cancelled  // pulses: entries removed by cancel_ncr
);

  typedef struct packed {
    logic   valid;
    logic   cr;
    msg_e   msg;
    laddr_t addr;
  } row_t;

  row_t              row   [NCORES];
  logic [NCORES-1:0] older [NCORES];   // older[a][b]: row a is older than row b
  logic [NCORES-1:0] live;             // valid after this cycle's cancel

  always_comb begin
    for (int i = 0; i < NCORES; i++)
      live[i] = row[i].valid &&
                !(cancel_ncr && !row[i].cr && row[i].addr == cancel_addr);
  end

  always_comb begin
    logic best_cr;
    q_any      = 1'b0;
    q_best_v   = 1'b0;
    q_best_cid = '0;
    q_best_msg = MSG_NONE;
    best_cr    = 1'b0;
    for (int i = 0; i < NCORES; i++) begin
      if (live[i] && row[i].addr == q_addr) begin
        q_any = 1'b1;
        // take i if nothing chosen yet, or i beats the current choice
        if (!q_best_v ||
            (row[i].cr && !best_cr) ||
            (row[i].cr == best_cr && older[i][q_best_cid])) begin
          q_best_v   = 1'b1;
          q_best_cid = cid_t'(i);
          q_best_msg = row[i].msg;
          best_cr    = row[i].cr;
        end
      end
    end
    c_valid = row[c_cid].valid;
    c_msg   = row[c_cid].msg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NCORES; i++) begin
        row[i]   <= '0;
        older[i] <= '0;
      end
      cancelled <= '0;
    end else begin
      for (int i = 0; i < NCORES; i++) begin
        cancelled[i] <= row[i].valid && !live[i];
        if (!live[i]) row[i].valid <= 1'b0;
      end
      if (rm) row[rm_cid].valid <= 1'b0;
      if (ins) begin
        row[ins_cid] <= '{valid: 1'b1, cr: ins_cr, msg: ins_msg, addr: ins_addr};
        for (int j = 0; j < NCORES; j++) begin
          older[j][ins_cid] <= live[j] && (cid_t'(j) != ins_cid) &&
                               !(rm && rm_cid == cid_t'(j));
          older[ins_cid][j] <= 1'b0;
        end
      end
    end
  end

endmodule
