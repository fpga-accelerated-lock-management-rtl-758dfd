// lock_pkg: types and constants shared by the lock agents, crossbars and
// transaction agents.
//
// Lock modes follow the three-signal S/I/X encoding of the design (bit 2 = S,
// bit 1 = I, bit 0 = X): NL=000, IS=110, IX=011, S=100, SIX=111, X=001.
// compatible() is the 6x6 granted/requested compatibility matrix. mode_join()
// is this design's choice for the mode a lock holds after a compatible grant:
// the least mode that covers both (IS+IX=IX, IX+S=SIX, ...).
//
// Field widths are upper bounds chosen for this implementation (up to 16 txn
// agents, 32 txns per agent, 511 locks per txn, 32-bit lock ids, 64K-entry
// waiting queues). AXI is a reduced AXI4 subset (address+length, data+last,
// write response) carried in structs.
package lock_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned LOCK_ID_W = 32;   // tuple / lock identifier
  localparam int unsigned AGENT_W   = 4;    // txn agent index
  localparam int unsigned SLOT_W    = 5;    // txn entry (context) index
  localparam int unsigned LIDX_W    = 9;    // lock index inside a txn (511 locks)
  localparam int unsigned OWN_W     = 8;    // owner counter in a lock table entry
  localparam int unsigned WQ_PTR_W  = 16;   // waiting-queue pointer

  localparam int unsigned AXI_ADDR_W = 34;  // 16 GiB HBM
  localparam int unsigned AXI_DATA_W = 512;
  localparam int unsigned AXI_LEN_W  = 8;

  // ---------------- lock modes ----------------
  typedef enum logic [2:0] {
    M_NL  = 3'b000,
    M_IS  = 3'b110,
    M_IX  = 3'b011,
    M_S   = 3'b100,
    M_SIX = 3'b111,
    M_X   = 3'b001
  } lock_mode_e;

  typedef enum logic {OP_GET = 1'b0, OP_REL = 1'b1} lock_op_e;

  typedef enum logic [1:0] {
    RSP_GRANT    = 2'd0,
    RSP_RELEASED = 2'd1,
    RSP_WAITING  = 2'd2,
    RSP_ABORTED  = 2'd3
  } lock_rsp_e;

  typedef struct packed {
    lock_op_e              op;
    logic                  timeout;   // release caused by abort/timeout: may still sit in waitQ
    lock_mode_e            mode;
    logic [LOCK_ID_W-1:0]  lock_id;
    logic [AGENT_W-1:0]    agent;
    logic [SLOT_W-1:0]     slot;
    logic [LIDX_W-1:0]     lidx;
  } lock_req_t;

  typedef struct packed {
    lock_rsp_e             rsp;
    logic                  queued;    // Grant popped from the waiting queue (a Waiting came first)
    lock_mode_e            mode;
    logic [LOCK_ID_W-1:0]  lock_id;
    logic [AGENT_W-1:0]    agent;
    logic [SLOT_W-1:0]     slot;
    logic [LIDX_W-1:0]     lidx;
  } lock_rsp_t;

  // Hash table entry: the lock id is implicit in the entry address.
  typedef struct packed {
    lock_mode_e            mode;
    logic [OWN_W-1:0]      owners;
    logic                  wq_valid;
    logic [WQ_PTR_W-1:0]   wq_head;
  } lt_entry_t;

  // Linked-list (waiting queue) entry.
  typedef struct packed {
    lock_mode_e            mode;
    logic [AGENT_W-1:0]    agent;
    logic [SLOT_W-1:0]     slot;
    logic [LIDX_W-1:0]     lidx;
    logic                  next_valid;
    logic [WQ_PTR_W-1:0]   next;
  } wq_entry_t;

  // ---------------- reduced AXI4 ----------------
  typedef struct packed {
    logic                  ar_valid;
    logic [AXI_ADDR_W-1:0] ar_addr;
    logic [AXI_LEN_W-1:0]  ar_len;     // beats - 1
    logic                  r_ready;
    logic                  aw_valid;
    logic [AXI_ADDR_W-1:0] aw_addr;
    logic [AXI_LEN_W-1:0]  aw_len;
    logic                  w_valid;
    logic [AXI_DATA_W-1:0] w_data;
    logic                  w_last;
    logic                  b_ready;
  } axi_req_t;

  typedef struct packed {
    logic                  ar_ready;
    logic                  r_valid;
    logic [AXI_DATA_W-1:0] r_data;
    logic                  r_last;
    logic                  aw_ready;
    logic                  w_ready;
    logic                  b_valid;
  } axi_rsp_t;

  // ---------------- lock mode functions ----------------
  // Requested mode r is compatible with granted mode g.
  function automatic logic compatible(lock_mode_e r, lock_mode_e g);
    case (g)
      M_NL:    return 1'b1;
      M_IS:    return r != M_X;
      M_IX:    return r == M_NL || r == M_IS || r == M_IX;
      M_S:     return r == M_NL || r == M_IS || r == M_S;
      M_SIX:   return r == M_NL || r == M_IS;
      default: return r == M_NL;              // X
    endcase
  endfunction

  function automatic int unsigned mode_rank(lock_mode_e m);
    case (m)
      M_NL:    return 0;
      M_IS:    return 1;
      M_IX:    return 2;
      M_S:     return 2;
      M_SIX:   return 3;
      default: return 4;
    endcase
  endfunction

  // Least mode covering both a and b.
  function automatic lock_mode_e mode_join(lock_mode_e a, lock_mode_e b);
    if (a == b) return a;
    if ((a == M_IX && b == M_S) || (a == M_S && b == M_IX)) return M_SIX;
    return (mode_rank(a) >= mode_rank(b)) ? a : b;
  endfunction

  // Phase of a txn entry in the txn agent (stage barriers of the pipeline).
  typedef enum logic [2:0] {
    PH_FREE,      // cleaned up, may be loaded
    PH_LOAD,      // task loader busy on it
    PH_GET,       // loaded: Get requests being sent
    PH_GRANT,     // all Gets sent, waiting for grants (or for all responses after abort)
    PH_COMMIT,    // all granted: data read/write
    PH_RELEASE,   // committed or aborted: Release requests being sent
    PH_RELWAIT    // all Releases sent, waiting for Released responses
  } txn_phase_e;

  // Last response recorded per lock of a txn.
  typedef enum logic [1:0] {
    LS_NONE = 2'd0, LS_GRANT = 2'd1, LS_WAIT = 2'd2, LS_ABORT = 2'd3
  } lock_stat_e;

  // Per txn agent statistics, as read through the CSRs.
  typedef struct packed {
    logic [31:0] n_commit;      // txns committed
    logic [31:0] n_abort;       // txns aborted (Abort response or timeout)
    logic [31:0] n_timeout;     // aborts caused by the timeout timer
    logic [31:0] n_loaded;      // txns loaded
    logic [31:0] cnt_grant;     // Grant responses
    logic [31:0] cnt_wait;      // Waiting responses
    logic [31:0] cnt_abort;     // Abort responses
    logic [31:0] cnt_released;  // Released responses
    logic [31:0] cnt_reads;     // tuple reads
    logic [31:0] cnt_writes;    // tuple writes
  } agent_stats_t;
  localparam int unsigned N_STATS = 10;

  // Modes whose locks read or write data in the commit stage.
  function automatic logic mode_reads(lock_mode_e m);
    return m == M_S || m == M_SIX;
  endfunction
  function automatic logic mode_writes(lock_mode_e m);
    return m == M_X;
  endfunction

endpackage
