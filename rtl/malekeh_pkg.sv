// malekeh_pkg: constants and types shared by the register-file-cache blocks.
//
// An instruction arrives at the register file with its source and destination
// register identifiers and one reuse bit per operand (1 = near reuse, 0 = far),
// computed offline by the compiler against a reuse-distance threshold. Up to six
// sources and two destinations are carried so that tensor-core instructions fit.
// Register identifiers are 8 bits (256 architectural registers per thread).
//
// The widths of the opcode and target-EU fields, the 5-bit warp identifier
// (32 warps per SM) and the 4-bit CCU and cache-index fields of a bank read
// request are choices of this design; the source/destination counts, the 8-bit
// register tag and the 1-bit reuse hint follow the paper.
package malekeh_pkg;

  localparam int NUM_SRC   = 6;   // source operand slots per instruction (OCT size)
  localparam int NUM_DST   = 2;   // destinations per instruction
  localparam int REG_W     = 8;   // register identifier / cache tag width
  localparam int WARP_W    = 5;   // warp identifier within the SM (32 warps)
  localparam int OP_W      = 8;   // opaque opcode carried in the metadata
  localparam int EU_W      = 2;   // target execution unit
  localparam int CCU_ID_W  = 4;   // up to 16 collector units per sub-core
  localparam int IDX_W     = 4;   // cache-table index field, up to 16 entries

  typedef logic [REG_W-1:0]  reg_id_t;
  typedef logic [WARP_W-1:0] warp_id_t;

  // Instruction as handed from the issue stage to a CCU (metadata + reuse hints).
  typedef struct packed {
    logic [OP_W-1:0]              opcode;
    logic [EU_W-1:0]              eu;
    logic [NUM_SRC-1:0]           src_valid;
    reg_id_t [NUM_SRC-1:0]        src_reg;
    logic [NUM_SRC-1:0]           src_near;
    logic [NUM_DST-1:0]           dst_valid;
    reg_id_t [NUM_DST-1:0]        dst_reg;
    logic [NUM_DST-1:0]           dst_near;
  } instr_t;

  // What a CCU reports on its R port to the issue scheduler and CCU allocator.
  typedef struct packed {
    logic     busy;       // holds an instruction not yet dispatched
    logic     has_data;   // busy, or at least one valid cache-table entry
    logic     has_near;   // at least one valid entry whose reuse is near
    warp_id_t warp;       // warp whose registers the cache table holds
  } ccu_status_t;

  // Read request queued in a bank FIFO: which CCU, which cache-table entry.
  typedef struct packed {
    logic [CCU_ID_W-1:0] ccu;
    logic [IDX_W-1:0]    idx;
    warp_id_t            warp;
    reg_id_t             rid;
  } rd_req_t;

  // Write-back request (the data travels beside it).
  typedef struct packed {
    warp_id_t warp;
    reg_id_t  rid;
    logic     near_reuse;
  } wb_req_t;

  // Route of a bank read that completes in the next cycle.
  typedef struct packed {
    logic                valid;
    logic [CCU_ID_W-1:0] ccu;
    logic [IDX_W-1:0]    idx;
  } rd_route_t;

  // Selection of one write-back port for a CCU's D port.
  typedef struct packed {
    logic       valid;
    logic [3:0] port;
  } d_sel_t;

  // Per-cycle event counts of one CCU, for performance counters and tests.
  typedef struct packed {
    logic [3:0] src_hits;      // source operands found in the cache table
    logic [3:0] src_misses;    // source operands that need a bank read
    logic       flush;         // cache table flushed on allocation to a new warp
    logic       d_hit;         // D-port write updated a present entry
    logic       d_alloc;       // D-port write allocated an entry
    logic       invalidate;    // filtered write invalidated a stale entry
    logic [3:0] far_victims;   // replacements that picked a random far entry
    logic [3:0] lru_victims;   // replacements that fell back to LRU
  } ccu_events_t;

  // Outcome of the CCU allocation policy for one warp (numbers of the boxes in
  // the paper's Fig. 6): same CCU, its CCU busy, free far CCU, no free CCU,
  // wait (counter below STHLD), allocate a free CCU anyway (counter reached STHLD).
  typedef enum logic [2:0] {
    CASE_SAME_CCU = 3'd3,
    CASE_OWN_BUSY = 3'd4,
    CASE_FAR_CCU  = 3'd5,
    CASE_NO_FREE  = 3'd6,
    CASE_WAIT     = 3'd7,
    CASE_FORCED   = 3'd1
  } alloc_case_t;

  // Bank holding a warp register: (warp + register) modulo the bank count.
  function automatic int unsigned bank_of(warp_id_t w, reg_id_t r, int unsigned nbanks);
    return (int'(w) + int'(r)) % nbanks;
  endfunction

endpackage
