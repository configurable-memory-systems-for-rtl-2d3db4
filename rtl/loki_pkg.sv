// loki_pkg: types and constants shared by the Loki tile memory system.
//
// A tile holds 8 cores and 8 memory banks. Cores reach banks, each other and
// other tiles through a channel map table (CMT) lookup; banks are 2 kB and can
// act as direct-mapped L1 cache, scratchpad or one way of an 8-way L2 cache.
// Cache lines are 8 words (the case study replaces "8 individual loads" by a
// whole-line fetch); bank size, tile size (8+8) and the 16-tile chip follow
// the paper. Field widths, encodings and the channel numbering below are this
// design's own choices.
package loki_pkg;

  localparam int unsigned WORD_W        = 32;
  localparam int unsigned ADDR_W        = 32;
  localparam int unsigned CORES         = 8;     // cores per tile
  localparam int unsigned BANKS         = 8;     // memory banks per tile
  localparam int unsigned LINE_WORDS    = 8;     // words per cache line
  localparam int unsigned BANK_BYTES    = 2048;  // 2 kB banks (evaluation setup)
  localparam int unsigned BANK_WORDS    = BANK_BYTES / 4;
  localparam int unsigned BANK_LINES    = BANK_WORDS / LINE_WORDS;
  localparam int unsigned LINE_OFF_W    = $clog2(LINE_WORDS*4);   // 5 byte-offset bits
  localparam int unsigned LINE_IDX_W    = $clog2(BANK_LINES);     // 6
  localparam int unsigned CMT_ENTRIES   = 16;
  localparam int unsigned CMT_IDX_W     = $clog2(CMT_ENTRIES);
  // Input channels of a core: 0 = primary instruction (IPK cache),
  // 1 = secondary instruction (uncached buffer), 2.. = data input buffers.
  localparam int unsigned DATA_CHANNELS = 4;
  localparam int unsigned IN_CHANNELS   = 2 + DATA_CHANNELS;
  localparam int unsigned CHAN_W        = $clog2(IN_CHANNELS);
  localparam int unsigned IN_BUF_DEPTH  = 4;     // spaces per input buffer
  localparam int unsigned CREDIT_W      = 4;
  localparam int unsigned COORD_W       = 3;     // mesh coordinate width
  localparam int unsigned CORE_W        = $clog2(CORES);
  localparam int unsigned BANK_W        = $clog2(BANKS);

  // Memory operation type (a sendconfig metadata field).
  typedef enum logic [2:0] {
    MEM_LOAD       = 3'd0,  // load one word
    MEM_STORE      = 3'd1,  // store one word
    MEM_FETCH_LINE = 3'd2,  // return a whole line (8 flits)
    MEM_STORE_LINE = 3'd3,  // one word of a whole-line store: allocates without fetching
    MEM_FLUSH_LINE = 3'd4,  // write line back if dirty
    MEM_INV_LINE   = 3'd5,  // drop line
    MEM_PREFETCH   = 3'd6   // bring line in, no response
  } mem_op_e;

  // Kind of CMT entry (Fig. 3).
  typedef enum logic [1:0] {
    DEST_NONE   = 2'd0,
    DEST_REMOTE = 2'd1,
    DEST_LOCAL  = 2'd2,
    DEST_MEMORY = 2'd3
  } dest_kind_e;

  typedef struct packed {
    dest_kind_e          kind;
    // remote core
    logic [COORD_W-1:0]  tile_x;
    logic [COORD_W-1:0]  tile_y;
    logic [CORE_W-1:0]   core;
    logic [CHAN_W-1:0]   channel;      // target input channel (remote and local)
    logic [CREDIT_W-1:0] credits;      // initial credit count for remote connection
    // local cores
    logic [CORES-1:0]    core_mask;
    // memory
    logic [BANK_W-1:0]   bank_base;    // first bank of the virtual group
    logic [1:0]          group_log2;   // group holds 2^group_log2 banks
    logic [CORE_W-1:0]   ret_core;     // return address: core ...
    logic [CHAN_W-1:0]   ret_channel;  // ... and its input channel
    logic                bypass_l1;
    logic                bypass_l2;
    logic                scratchpad;
  } cmt_entry_t;

  // What a core pushes onto the network (address or data, plus metadata).
  typedef struct packed {
    logic [CMT_IDX_W-1:0] chan;     // logical channel (CMT index)
    mem_op_e              op;       // memory operation for memory channels
    logic [ADDR_W-1:0]    addr;     // address (memory) or payload (cores)
    logic [WORD_W-1:0]    data;     // store data
    logic                 eop;      // end of packet
  } core_out_t;

  // Request from a core to a memory bank (request crossbar).
  typedef struct packed {
    mem_op_e             op;
    logic [ADDR_W-1:0]   addr;
    logic [WORD_W-1:0]   data;
    logic [1:0]          group_log2;
    logic                scratchpad;
    logic                bypass_l1;
    logic                bypass_l2;
    logic [CORE_W-1:0]   ret_core;
    logic [CHAN_W-1:0]   ret_channel;
    logic                eop;
  } mem_req_t;

  // Word returned by a bank to a core (data / instruction crossbars).
  typedef struct packed {
    logic [WORD_W-1:0]   data;
    logic [CORE_W-1:0]   ret_core;
    logic [CHAN_W-1:0]   ret_channel;
    logic                eop;
  } mem_resp_t;

  // Flit on the local core-to-core buses.
  typedef struct packed {
    logic [CORES-1:0]    mask;
    logic [CHAN_W-1:0]   channel;
    logic [WORD_W-1:0]   data;
    logic                remote;      // came from another tile (credit to return)
    logic                eop;
  } c2c_flit_t;

  // Bank <-> next level (miss handling logic).
  typedef enum logic [1:0] {
    NL_FETCH     = 2'd0,  // fetch a line (8 words come back)
    NL_WRITEBACK = 2'd1,  // write a line (8 flits, eop on last)
    NL_LOAD      = 2'd2,  // single word load (L1 bypassed)
    NL_STORE     = 2'd3   // single word store (L1 bypassed)
  } nl_op_e;

  typedef struct packed {
    nl_op_e            op;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] data;
    logic              bypass_l2;
    logic              eop;
  } nl_req_t;

  // Inter-tile flits. Coordinates: tile column c sits at x = c+1; x = 0, y = 0
  // is the memory controller, reached through the west port of tile (1,0).
  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
  } coord_t;

  // Core-to-core flit between tiles.
  typedef struct packed {
    coord_t               src;
    logic [CORE_W-1:0]    src_core;
    logic [CMT_IDX_W-1:0] src_entry;
    logic [CORE_W-1:0]    dst_core;
    logic [CHAN_W-1:0]    dst_channel;
    logic [WORD_W-1:0]    data;
  } core_net_t;

  // Credit returned to the sender of a remote connection.
  typedef struct packed {
    logic [CORE_W-1:0]    core;
    logic [CMT_IDX_W-1:0] entry;
  } credit_t;

  // Memory request between tiles (to an L2 tile or the memory controller).
  typedef struct packed {
    nl_op_e            op;
    coord_t            src;
    logic [ADDR_W-1:0] addr;
    logic [WORD_W-1:0] data;
  } net_mem_req_t;

  // Memory response between tiles.
  typedef struct packed {
    logic [WORD_W-1:0] data;
  } net_mem_resp_t;

  // Round-robin pick: first set bit of req at or after position ptr.
  function automatic int unsigned rr_pick(input logic [31:0] req, input int unsigned n,
                                          input int unsigned ptr);
    int unsigned idx;
    rr_pick = ptr;
    for (int unsigned k = 0; k < 32; k++) begin
      if (k < n) begin
        idx = (ptr + k) % n;
        if (req[idx]) return idx;
      end
    end
  endfunction

endpackage
