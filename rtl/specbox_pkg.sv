// specbox_pkg: types and constants shared by the SpecBox cache system.
//
// Every cache in the hierarchy (L1-I, L1-D, shared L2) speaks one request
// and one response format. A request names a 64-byte cache line, the
// hardware thread it acts for, and what it does:
//   OP_ACCESS   an in-flight (speculative) fetch, load or store
//   OP_NONSPEC  a non-speculative access: a prefetch, a refill for a
//               committed line, or any access while protection is off
//   OP_COMMIT   the in-flight operation that touched the line committed
//   OP_SQUASH   the in-flight operation that touched the line was squashed
// The line size (64 B) and the two cache levels follow the evaluated
// configuration; the 48-bit physical address and the field encodings are
// this design's own choice.
package specbox_pkg;

  parameter int unsigned PADDR_W    = 48;              // physical address bits
  parameter int unsigned LINE_BYTES = 64;              // cache line size
  parameter int unsigned OFFSET_W   = $clog2(LINE_BYTES);
  parameter int unsigned LINE_W     = PADDR_W - OFFSET_W;
  parameter int unsigned TID_W      = 4;               // up to 16 hardware threads
  parameter int unsigned SRC_W      = 5;               // up to 32 requesters per cache
  parameter int unsigned LEVELS     = 2;               // L1 and L2 carry labels

  typedef logic [LINE_W-1:0] line_addr_t;
  typedef logic [TID_W-1:0]  tid_t;
  typedef logic [SRC_W-1:0]  src_t;
  typedef logic [LEVELS-1:0] hit_mask_t;               // bit k: level k hit

  typedef enum logic [1:0] {
    OP_ACCESS  = 2'd0,
    OP_NONSPEC = 2'd1,
    OP_COMMIT  = 2'd2,
    OP_SQUASH  = 2'd3
  } cache_op_e;

  // Kind of a core operation, as seen by the speculation delay gate.
  typedef enum logic [1:0] {
    KIND_NORMAL   = 2'd0,  // ordinary load/store/fetch
    KIND_CMO      = 2'd1,  // prefetch / clflush / INVD instruction
    KIND_COHERENT = 2'd2,  // would change another core's coherence state
    KIND_TLB_MISS = 2'd3   // missed in the TLB or paging cache
  } spec_kind_e;

  // Request into a cache (also the notification format on the Notifier Bus).
  typedef struct packed {
    cache_op_e  op;
    line_addr_t line;
    tid_t       tid;
    logic       fwd;   // notification: the level below was also accessed
    src_t       src;   // requester index, echoed in the response
  } cache_req_t;

  // Response out of a cache.
  typedef struct packed {
    src_t       src;
    line_addr_t line;
    logic       hit;      // hit at this level (an emulated miss reads 0)
    hit_mask_t  hit_mask; // hit at this level (bit 0) and below (bit 1..)
    logic       suspend;  // not served: its T-domain victim is owned by
                          // another thread; the requester retries later
  } cache_rsp_t;

  // One-cycle event pulses of a cache, for performance counters and tests.
  typedef struct packed {
    logic hit;              // request answered as a hit
    logic miss;             // access sent to the next level (real miss)
    logic emul_miss;        // TOS: emulated miss on a line owned by others
    logic t_install;        // line installed in the temporary domain
    logic t_replace;        // ... by replacing the LRU temporary line
    logic commit_switch;    // commit moved a line from T to P
    logic commit_reinstall; // commit found no line and reinstalled it in P
    logic squash_evict;     // squash evicted a temporary line
    logic tos_release;      // a thread's TOS bit was cleared, line kept
    logic suspend;          // refill not installed (victim owned by others)
  } cache_ev_t;

endpackage
