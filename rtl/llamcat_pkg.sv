// llamcat_pkg: constants and types shared by the LLC subsystem.
//
// The system is a last-level cache (LLC) of NUM_SLICES slices shared by
// NUM_CORES vector cores. Requests and responses move whole 64-byte lines,
// identified by their line address (byte address >> 6). The low
// SLICE_W bits of the line address pick the slice (the LLC is sliced across
// the set dimension), the next bits pick the set inside the slice.
//
// The core count, slice count, line size, capacity and associativity follow
// the evaluated system configuration (16 cores, 8 slices, 16 MB, 8 ways,
// 64 B lines). The 40-bit byte address and the struct layouts are this
// design's own choices.
package llamcat_pkg;

  localparam int NUM_CORES  = 16;
  localparam int NUM_SLICES = 8;
  localparam int LINE_BYTES = 64;
  localparam int LINE_BITS  = LINE_BYTES * 8;
  localparam int ADDR_W     = 40;                 // byte address width
  localparam int OFFSET_W   = $clog2(LINE_BYTES);
  localparam int LADDR_W    = ADDR_W - OFFSET_W;  // line address width
  localparam int CORE_W     = $clog2(NUM_CORES);
  localparam int SLICE_W    = $clog2(NUM_SLICES);

  localparam int L2_BYTES   = 16 * 1024 * 1024;
  localparam int L2_WAYS    = 8;
  localparam int SLICE_SETS = L2_BYTES / NUM_SLICES / LINE_BYTES / L2_WAYS; // 4096

  // LLC slice timing and queue sizes
  localparam int HIT_LAT      = 3;   // tag lookup
  localparam int MSHR_LAT     = 5;   // MSHR lookup after a cache miss
  localparam int DATA_LAT     = 25;  // data array to core, after a tag hit
  localparam int REQ_Q_SIZE   = 12;
  localparam int RESP_Q_SIZE  = 64;
  localparam int MSHR_ENTRIES = 6;   // numEntry
  localparam int MSHR_TARGETS = 8;   // numTarget

  // Throttling
  localparam int NUM_TB        = 4;    // instruction windows per core
  localparam int SAMPLE_PERIOD = 2000; // global sampling period, cycles
  localparam int SUB_PERIOD    = 400;  // in-core sub-period, cycles
  localparam int MAX_GEAR      = 4;
  localparam int CIDLE_HI      = 4;
  localparam int CMEM_HI       = 250;
  localparam int CMEM_LO       = 180;

  localparam int CNT_W = 32;           // progress counter width

  typedef logic [LADDR_W-1:0]   laddr_t;
  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [NUM_CORES-1:0] coremask_t;
  typedef logic [CORE_W-1:0]    core_id_t;
  typedef logic [CNT_W-1:0]     cnt_t;

  // Core -> LLC request. A write carries a full line.
  typedef struct packed {
    laddr_t   addr;
    core_id_t src;
    logic     write;
    line_t    data;
  } req_t;

  // LLC -> cores response, delivered to every core whose bit is set.
  typedef struct packed {
    laddr_t    addr;
    coremask_t mask;
    line_t     data;
  } resp_t;

  // LLC slice -> memory controller
  typedef struct packed {
    laddr_t addr;
    logic   write;
    line_t  data;
  } dram_req_t;

  // memory controller -> LLC slice (read data)
  typedef struct packed {
    laddr_t addr;
    line_t  data;
  } dram_resp_t;

  // Request-queue selection policy of the slice arbiter
  typedef enum logic [1:0] {
    POL_FCFS = 2'd0,  // oldest first
    POL_B    = 2'd1,  // balanced: smallest progress counter first
    POL_MA   = 2'd2,  // MSHR-aware, ties oldest first
    POL_BMA  = 2'd3   // MSHR-aware, ties balanced
  } arb_policy_e;

  typedef enum logic [1:0] {
    CON_LOW     = 2'd0,
    CON_NORMAL  = 2'd1,
    CON_HIGH    = 2'd2,
    CON_EXTREME = 2'd3
  } contention_e;


  // per-cycle event pulses of one LLC slice, for performance counting
  typedef struct packed {
    logic hit;          // read hit at the tag stage
    logic miss;         // read miss at the tag stage
    logic mshr_merge;   // miss merged into an existing MSHR entry
    logic mshr_alloc;   // miss opened a new MSHR entry
    logic writeback;    // dirty line evicted
    logic fill;         // response written into storage
    logic resp_first;   // a request waited for a response being written
    logic reorder;      // the request sent was not the oldest
    logic spec_hit_ok;  // a speculated cache hit did hit
  } slice_ev_t;
endpackage
