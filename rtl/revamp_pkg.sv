// revamp_pkg: types and constants shared by the blocks of the core-side
// additions for a logic-on-memory (monolithic 3D) processor: the
// memoization unit (MU) that replays recorded micro-op (uop) traces from
// main memory, and the register-file-level synchronization path.
//
// Numbers taken from the design description: 8-wide pipeline, 1.28 KB MU
// buffer (1280 bytes), two MU data ports (taken / not-taken path), 4 sync
// entries per register file, 64 GB of main memory (36-bit byte address),
// 64 cores as the main evaluated configuration, 256-entry reorder buffer,
// 32 KB 8-way L1 with 2-cycle hit latency.
// Own choices: a uop is an opaque 64-bit word, the all-zero word marks an
// empty slot, and one "row" is one 8-uop issue group (64 bytes), which is
// also the unit of every MU memory access.
package revamp_pkg;

  // ---- core width and uop rows -------------------------------------------
  localparam int unsigned ISSUE_W   = 8;                 // 8-wide pipeline
  localparam int unsigned UOP_W     = 64;                // own choice
  localparam int unsigned ROW_W     = ISSUE_W * UOP_W;   // 512 bits
  localparam int unsigned ROW_BYTES = ROW_W / 8;         // 64 bytes

  // ---- main memory ---------------------------------------------------------
  localparam int unsigned ADDR_W    = 36;                // 64 GB

  // ---- memoization unit ------------------------------------------------------
  localparam int unsigned MU_BUF_BYTES = 1280;           // 1.28 KB buffer
  localparam int unsigned MU_PATHS     = 2;              // taken / not-taken

  // ---- synchronization ------------------------------------------------------
  localparam int unsigned SYNC_ENTRIES = 4;              // RF entries with extra ports

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [UOP_W-1:0]  uop_t;
  typedef logic [ROW_W-1:0]  row_t;

  // Path index used by the MU memory ports and buffer halves.
  typedef enum logic {PATH_TAKEN = 1'b0, PATH_NOT_TAKEN = 1'b1} path_e;

  // One command on the MU address bus. 'port' names the data port the
  // write data comes from or the read data returns on.
  typedef struct packed {
    logic  we;
    path_e port;
    addr_t addr;
  } mu_cmd_t;

  // Lock message carried on the synchronization path.
  typedef enum logic [1:0] {
    SYNC_LOCK   = 2'd0,   // acquire: record address as locked by src
    SYNC_UNLOCK = 2'd1,   // release: clear address held by src
    SYNC_NOP    = 2'd3
  } sync_op_e;

  // A message leaving a core toward a router node. 'is_sync' is the class
  // bit the router's selection structure looks at.
  typedef struct packed {
    logic     is_sync;
    sync_op_e op;
    logic     we;        // base path: store (1) or load (0)
    addr_t    addr;
    logic [63:0] data;   // base path store data
  } core_msg_t;

  // What the synchronization path delivers to every register file.
  typedef struct packed {
    sync_op_e op;
    addr_t    addr;
    logic [7:0] src;     // sending core (up to 256 cores)
  } sync_msg_t;

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
