// squire_pkg: types and constants shared by the Squire accelerator blocks.
//
// Squire attaches a set of small in-order "worker" cores to a host core's
// private L2. The workers reach the L2 over one shared, arbitrated bus and
// coordinate through a synchronization module of 64-bit hardware counters.
// This package holds the bus request/response structures, the encoding of
// the synchronization primitives and the control register map. The 64-bit
// counter width and the 64-bit word size follow the paper (Armv8 workers,
// 64-bit counters); the 64-byte line, the register map and the operation
// encodings are this design's own choices, since the paper gives none.
package squire_pkg;

  localparam int unsigned XLEN       = 64;          // data word / counter width
  localparam int unsigned ADDR_W     = 64;          // virtual address width
  localparam int unsigned LINE_BYTES = 64;          // cache line size
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned WORD_SEL_W = OFF_W - 3;   // 64-bit word within a line

  // Synchronization primitives issued by a worker (Table of the Squire API).
  typedef enum logic [2:0] {
    SYNC_NONE   = 3'd0,
    SYNC_INC_L  = 3'd1,   // inc_lcounter(w)
    SYNC_INC_G  = 3'd2,   // inc_gcounter()
    SYNC_WAIT_L = 3'd3,   // wait_lcounter(w, s)
    SYNC_WAIT_G = 3'd4    // wait_gcounter(s)
  } sync_op_e;

  // Control register map (register index on the host port).
  typedef enum logic [3:0] {
    CR_FUNC   = 4'd0,     // entry point of the offloaded function
    CR_ARG0   = 4'd1,
    CR_ARG1   = 4'd2,
    CR_ARG2   = 4'd3,
    CR_ARG3   = 4'd4,
    CR_START  = 4'd8,     // write: start_squire
    CR_STATUS = 4'd9,     // read: bit mask of running workers
    CR_NUMW   = 4'd10     // read: num_workers()
  } creg_e;

  localparam int unsigned NUM_ARGS = 4;

  // Request placed on the shared L2 bus by an L1 cache.
  typedef struct packed {
    logic              write;   // 1: write-through store of one word
    logic [ADDR_W-1:0] addr;    // byte address (line address for reads)
    logic [XLEN-1:0]   wdata;
    logic [7:0]        be;      // byte enables of the stored word
  } bus_req_t;

endpackage
