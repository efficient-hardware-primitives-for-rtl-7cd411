// ca_pkg: types and constants shared by the Conditional Access (CA) L1 data
// cache, its tag tracker and the multi-core top.
//
// Conditional Access adds four instructions to an ordinary load/store core:
// cread (load that also tags the line and fails if the core's access has been
// revoked), cwrite (store that fails if access was revoked or the line is not
// tagged), untagOne and untagAll.  The core talks to its L1 through a single
// request/response pair (core_req_t / core_resp_t).  The L1 talks to a
// directory-based MSI coherence controller through three channels:
//   mem_req_t  L1 -> directory : GETS, GETM, PUTM (writeback)
//   mem_resp_t directory -> L1 : line data for GETS/GETM, ack for PUTM
//   fwd_t      directory -> L1 : INV (invalidate) or FWD_GETS (downgrade M->S)
//   fwd_ack_t  L1 -> directory : acknowledgement, with the line if it was M
//
// Geometry follows the evaluated configuration (32 KiB private L1, 64-byte
// lines).  The 4-way associativity, 32-bit byte addresses and 64-bit words are
// this design's own choices; the evaluation does not state them.
package ca_pkg;

  localparam int unsigned ADDR_W      = 32;               // byte address width
  localparam int unsigned WORD_W      = 64;               // one load/store word
  localparam int unsigned LINE_BYTES  = 64;               // cache line size
  localparam int unsigned LINE_W      = LINE_BYTES * 8;   // 512 bits
  localparam int unsigned WORDS_PER_LINE = LINE_W / WORD_W; // 8
  localparam int unsigned OFFSET_W    = $clog2(LINE_BYTES); // 6
  localparam int unsigned WORD_SEL_W  = $clog2(WORDS_PER_LINE); // 3
  localparam int unsigned LADDR_W     = ADDR_W - OFFSET_W; // line address width

  typedef logic [ADDR_W-1:0]  addr_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [LADDR_W-1:0] laddr_t;

  // Instructions a core can send to its L1.
  typedef enum logic [2:0] {
    OP_LOAD       = 3'd0,
    OP_STORE      = 3'd1,
    OP_CREAD      = 3'd2,
    OP_CWRITE     = 3'd3,
    OP_UNTAG_ONE  = 3'd4,
    OP_UNTAG_ALL  = 3'd5
  } ca_op_e;

  // MSI stable states of an L1 line.
  typedef enum logic [1:0] {
    MSI_I = 2'd0,
    MSI_S = 2'd1,
    MSI_M = 2'd2
  } msi_e;

  typedef enum logic [1:0] {
    REQ_GETS = 2'd0,
    REQ_GETM = 2'd1,
    REQ_PUTM = 2'd2
  } mem_req_e;

  typedef enum logic {
    FWD_INV  = 1'b0,
    FWD_GETS = 1'b1
  } fwd_e;

  typedef struct packed {
    ca_op_e op;
    addr_t  addr;     // byte address, word aligned
    word_t  wdata;    // store / cwrite data
  } core_req_t;

  typedef struct packed {
    word_t rdata;     // load / cread data (0 when the access failed)
    logic  ca_fail;   // CAFAIL: cread/cwrite did not access memory
  } core_resp_t;

  typedef struct packed {
    mem_req_e kind;
    laddr_t   laddr;
    line_t    data;   // PUTM only
  } mem_req_t;

  typedef struct packed {
    logic   is_put_ack; // 1: ack of a PUTM, no data
    laddr_t laddr;
    line_t  data;
  } mem_resp_t;

  typedef struct packed {
    fwd_e   kind;
    laddr_t laddr;
  } fwd_t;

  typedef struct packed {
    laddr_t laddr;
    logic   has_data; // line was Modified here (or in the writeback buffer)
    line_t  data;
  } fwd_ack_t;

endpackage
