// hg_tdm_arbiter -- criticality-aware TDM arbiter of the HourGlass bus.
//
// Only cr cores own TDM slots, taken in core-index order. In the first cycle
// of each slot (slot_start) the arbiter picks exactly one transaction:
//   1. a pending response (SendData / SelfInv / PutM) held in any core's PRSP
//      buffer whose destination is the slot owner -- responses travel in the
//      slot of the core that asked for them;
//   2. otherwise the slot owner's own pending request (GetS / GetM);
//   3. otherwise the slot is a slack slot: the ncr cores are polled
//      round-robin, starting after the one last served, and the first that
//      has a PRSP response addressed to it or a pending request gets the slot
//      (its response first).
// With no cr core at all every slot is a slack slot. Among PRSP entries the
// lowest source core, then the lowest entry index, wins -- this tie-break is
// this design's choice; the paper only states the three-way priority above.
//
// Timing: all decisions are combinational in the slot_start cycle; `grant`
// is valid only then. The round-robin pointers update on that clock edge.
module hg_tdm_arbiter
  import hg_pkg::*;
#(
  parameter int unsigned DEPTH = NCORES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              slot_start,
  input  logic [NCORES-1:0] crit,
  input  logic [NCORES-1:0] req_valid,
  input  msg_e              req_msg  [NCORES],
  input  laddr_t            req_addr [NCORES],
  input  prsp_ent_t         prsp     [NCORES][DEPTH],
  output bus_msg_t          grant,
  output logic              grant_prsp,   // grant comes from a PRSP buffer
  output logic [$clog2(DEPTH > 1 ? DEPTH : 2)-1:0] grant_eidx,
  output logic              slack,        // this slot is a slack slot
  output logic              owner_valid,
  output cid_t              owner
);

  cid_t cr_ptr, ncr_last;
  cid_t nxt_ncr;
  logic nxt_ncr_v;

  // find a PRSP entry for destination d; returns found, src, index
  function automatic logic find_rsp(input prsp_ent_t p [NCORES][DEPTH], input cid_t d,
                                    output cid_t s, output int e);
    s = '0; e = 0;
    for (int si = NCORES-1; si >= 0; si--)
      for (int ei = DEPTH-1; ei >= 0; ei--)
        if (p[si][ei].valid && p[si][ei].dest == d) begin
          s = cid_t'(si); e = ei;
        end
    for (int si = 0; si < NCORES; si++)
      for (int ei = 0; ei < DEPTH; ei++)
        if (p[si][ei].valid && p[si][ei].dest == d) return 1'b1;
    return 1'b0;
  endfunction

  always_comb begin
    cid_t s;
    int   e;
    cid_t j;
    logic found;
    grant       = '0;
    grant_prsp  = 1'b0;
    grant_eidx  = '0;
    slack       = 1'b0;
    owner_valid = 1'b0;
    owner       = '0;
    nxt_ncr     = ncr_last;
    nxt_ncr_v   = 1'b0;
    s = '0; e = 0; j = '0;
    found = 1'b0;
    // slot owner: first cr core at or after cr_ptr
    for (int n = NCORES-1; n >= 0; n--) begin
      j = cr_ptr + cid_t'(n);
      if (crit[j]) begin owner = j; owner_valid = 1'b1; end
    end
    if (slot_start) begin
      if (owner_valid) begin
        if (find_rsp(prsp, owner, s, e)) begin
          grant      = '{valid: 1'b1, msg: prsp[s][e].msg, src: s, dest: owner,
                         addr: prsp[s][e].addr};
          grant_prsp = 1'b1;
          grant_eidx = ($bits(grant_eidx))'(e);
          found      = 1'b1;
        end else if (req_valid[owner]) begin
          grant = '{valid: 1'b1, msg: req_msg[owner], src: owner, dest: owner,
                    addr: req_addr[owner]};
          found = 1'b1;
        end
      end
      if (!found) begin
        slack = 1'b1;
        for (int n = 1; n <= NCORES; n++) begin
          j = ncr_last + cid_t'(n);
          if (!found && !crit[j]) begin
            if (find_rsp(prsp, j, s, e)) begin
              grant      = '{valid: 1'b1, msg: prsp[s][e].msg, src: s, dest: j,
                             addr: prsp[s][e].addr};
              grant_prsp = 1'b1;
              grant_eidx = ($bits(grant_eidx))'(e);
              found      = 1'b1;
            end else if (req_valid[j]) begin
              grant = '{valid: 1'b1, msg: req_msg[j], src: j, dest: j, addr: req_addr[j]};
              found = 1'b1;
            end
            if (found) begin nxt_ncr = j; nxt_ncr_v = 1'b1; end
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cr_ptr   <= '0;
      ncr_last <= cid_t'(NCORES-1);
    end else if (slot_start) begin
      if (owner_valid) cr_ptr <= owner + 1'b1;
      if (nxt_ncr_v) ncr_last <= nxt_ncr;
    end
  end

endmodule
