// hg_prsp_buffer -- pending response (PRSP) buffer of one core, kept in the
// shared bus.
//
// When a holder's timer expires it does not answer the requester at once: the
// answer (SendData for a modified line, SelfInv for a shared one, PutM for a
// write-back) waits here until the arbiter reaches the TDM slot of the core
// the answer is for. The paper gives each buffer N entries with a valid bit,
// and uses the valid bit to cancel a queued answer to an ncr core when an
// answer for the same line to a cr core arrives: cr requesters are served
// first and the cancelled ncr requester re-issues its request.
//
// Behaviour
//   * push: an entry is written into the lowest free slot. If it targets a cr
//     core, every valid entry for the same line that targets an ncr core is
//     invalidated in the same cycle (`cancel` pulses). An exact duplicate of a
//     valid entry is accepted and dropped. push_ready is low when full.
//   * done: when the bus has carried an entry of this buffer for line `done_addr`
//     every entry for that line is removed; the line has left the cache.
//   * ent: all entries, read by the arbiter in the first cycle of each slot.
// Insertion order within the buffer, duplicate dropping and the done-flush are
// this design's own choices.
module hg_prsp_buffer
  import hg_pkg::*;
#(
  parameter int unsigned DEPTH = NCORES  // paper: "Each PRSP buffer is of size N"
) (
  input  logic      clk,
  input  logic      rst_n,
  input  prsp_ent_t push,
  output logic      push_ready,
  input  logic      done,
  input  laddr_t    done_addr,
  output prsp_ent_t ent [DEPTH],
  output logic      cancel,
  output logic      full
);

  logic             dup;
  logic [DEPTH-1:0] freev;
  int               free_idx;

  always_comb begin
    dup   = 1'b0;
    freev = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (ent[i].valid && ent[i].addr == push.addr && ent[i].dest == push.dest &&
          ent[i].msg == push.msg)
        dup = 1'b1;
      // a slot freed by this cycle's done is not reused until next cycle
      freev[i] = !ent[i].valid;
    end
    free_idx = -1;
    for (int i = DEPTH-1; i >= 0; i--) if (freev[i]) free_idx = i;
    full       = (free_idx < 0);
    push_ready = !full || dup;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) ent[i] <= '0;
      cancel <= 1'b0;
    end else begin
      cancel <= 1'b0;
      for (int i = 0; i < DEPTH; i++) begin
        if (done && ent[i].valid && ent[i].addr == done_addr) ent[i].valid <= 1'b0;
        if (push.valid && push.dest_cr && ent[i].valid && !ent[i].dest_cr &&
            ent[i].addr == push.addr) begin
          ent[i].valid <= 1'b0;
          cancel       <= 1'b1;
        end
      end
      if (push.valid && !dup && !full && !(done && done_addr == push.addr))
        ent[free_idx] <= push;
    end
  end

endmodule
