// hg_pkg -- shared types and constants of the HourGlass coherent memory system.
//
// HourGlass is a snooping, TDM-arbitrated MSI-derived coherence protocol for a
// dual-criticality multi-core: critical (cr) cores own TDM slots and get a
// bounded worst-case latency, non-critical (ncr) cores use the slots that the
// cr cores leave idle (slack slots). Every cache line carries two countdown
// timers that let a holder keep a line for a configured time before it answers
// a remote request.
//
// This package fixes the system size (four cores, 32-bit physical addresses,
// 64-byte lines, 64-bit timers as in the paper's configuration) and defines the
// bus message, the pending-response entry and the data-delivery records that
// the cache controllers, the shared bus and the shared memory exchange.
// The message encoding and the record layouts are this design's own choice.
package hg_pkg;

  // ---- system size (paper: four cores, 64 B lines, 4 GB physical space) ----
  localparam int unsigned NCORES  = 4;
  localparam int unsigned CID_W   = 2;      // log2(NCORES)
  localparam int unsigned ADDR_W  = 32;     // 4 GB physical address space
  localparam int unsigned LINE_B  = 64;     // cache line size in bytes
  localparam int unsigned OFS_W   = 6;      // log2(LINE_B)
  localparam int unsigned LINE_W  = LINE_B * 8;
  localparam int unsigned WORD_W  = 64;     // core load/store width (assumed)
  localparam int unsigned WSEL_W  = 3;      // words per line = 8
  localparam int unsigned TIMER_W = 64;     // paper: timers are 64-bit values
  localparam int unsigned LADDR_W = ADDR_W - OFS_W;  // line address width

  typedef logic [CID_W-1:0]   cid_t;
  typedef logic [LADDR_W-1:0] laddr_t;      // line address (byte address >> 6)
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [TIMER_W-1:0] timer_t;

  // ---- coherence messages carried on the snooping bus ----
  typedef enum logic [2:0] {
    MSG_NONE     = 3'd0,
    MSG_GETS     = 3'd1,   // read request
    MSG_GETM     = 3'd2,   // write request
    MSG_PUTM     = 3'd3,   // write-back of a modified line (replacement)
    MSG_SELFINV  = 3'd4,   // holder drops its shared copy
    MSG_SENDDATA = 3'd5    // holder transfers its modified copy to dest
  } msg_e;

  // One bus transaction, broadcast in the first cycle of a TDM slot.
  typedef struct packed {
    logic   valid;
    msg_e   msg;
    cid_t   src;       // core that issued the message
    cid_t   dest;      // core in whose interest the message is sent
    laddr_t addr;
  } bus_msg_t;

  // An entry of a pending-response (PRSP) buffer. The source core is the
  // buffer's owner and is not stored.
  typedef struct packed {
    logic   valid;
    msg_e   msg;       // MSG_SENDDATA, MSG_SELFINV or MSG_PUTM
    cid_t   dest;      // requesting core (own id for evictions)
    logic   dest_cr;   // criticality of dest
    laddr_t addr;
  } prsp_ent_t;

  // Data delivered to a cache at the end of a slot.
  typedef struct packed {
    logic   valid;
    cid_t   dest;
    laddr_t addr;
    line_t  data;
  } data_dlv_t;

  // Core-side load/store request and response.
  typedef struct packed {
    logic              valid;
    logic              we;
    logic [ADDR_W-1:0] addr;
    word_t             wdata;
  } core_req_t;

  typedef struct packed {
    logic  valid;
    word_t rdata;
  } core_rsp_t;

  // Private-cache line states (Table A1 of the protocol description).
  typedef enum logic [4:0] {
    ST_I     = 5'd0,
    ST_ISAD  = 5'd1,
    ST_ISD   = 5'd2,
    ST_ISDI  = 5'd3,
    ST_S     = 5'd4,
    ST_STI   = 5'd5,   // S, remote request seen, waiting for the timer
    ST_SIA   = 5'd6,   // SelfInv queued, waiting for it to be ordered
    ST_SI    = 5'd7,   // self-invalidated, readable until AllInv
    ST_STM   = 5'd8,   // store to S, waiting for own timer
    ST_SMA   = 5'd9,   // own SelfInv queued before GetM
    ST_IMAD  = 5'd10,
    ST_IMD   = 5'd11,
    ST_IMDI  = 5'd12,
    ST_M     = 5'd13,
    ST_MTI   = 5'd14,  // M, remote request seen, waiting for the timer
    ST_MIR   = 5'd15,  // PutM queued (replacement)
    ST_MIA   = 5'd16   // SendData queued, waiting for it to be ordered
  } lstate_e;

  // Directory state of a shared-memory line.
  typedef enum logic [1:0] {
    DIR_I = 2'd0,
    DIR_S = 2'd1,
    DIR_M = 2'd2
  } dstate_e;

endpackage
