// reptfd_pkg: constants and types shared by the RepTFD record and replay hardware.
//
// The numbers that come from the design description are the 512-cycle sampling span,
// the 1024 x 27-bit access CAM, the 64-bit memory-instruction counters, the 8-bit
// sampling-time registers of the replay algorithm, the checksum period of 1024
// instructions and the 32-byte cache line. The field split of a CAM entry, the physical
// address width and the log record layout are this design's own choices.
package reptfd_pkg;

  // Sampling span of the first-run global clock, in cycles.
  localparam int unsigned SPAN      = 512;
  // Width of a sampling-time index (next_start, curr_end, next_end, grant index).
  localparam int unsigned IDX_W     = 8;
  // Memory-instruction counter width.
  localparam int unsigned SEQ_W     = 64;
  // Block size counter: a block holds at most SPAN memory instructions.
  localparam int unsigned BLK_W     = $clog2(SPAN) + 1;
  // Physical address width (assumed) and cache line offset (32-byte lines).
  localparam int unsigned PADDR_W   = 40;
  localparam int unsigned LINE_OFS  = 5;
  // Access CAM: 1024 entries of 27 bits = type(1) + L1 hit(1) + counter(10) + tag(15).
  localparam int unsigned CAM_DEPTH = 1024;
  localparam int unsigned CAM_CNT_W = $clog2(CAM_DEPTH);
  localparam int unsigned CAM_TAG_W = 15;
  // Core number field width in log records (up to 16 cores per group).
  localparam int unsigned CORE_W    = 4;
  // Instructions per exported checksum.
  localparam int unsigned CS_PERIOD = 1024;

  typedef struct packed {
    logic                 is_store;
    logic                 l1_hit;
    logic [CAM_CNT_W-1:0] cnt;
    logic [CAM_TAG_W-1:0] tag;
  } cam_entry_t;  // 27 bits

  typedef enum logic [1:0] {
    LOG_BLOCK    = 2'd0,  // data = number of memory instructions in one block
    LOG_ORDER    = 2'd1,  // peer/peer_seq (v) must precede core/seq (u)
    LOG_CHECKSUM = 2'd2   // data = checksum of 1024 instruction results
  } log_kind_e;

  typedef struct packed {
    log_kind_e         kind;
    logic [CORE_W-1:0] core;      // owner; for LOG_ORDER the waiting core (u)
    logic [CORE_W-1:0] peer;      // LOG_ORDER: core of the earlier access (v)
    logic [SEQ_W-1:0]  seq;       // LOG_ORDER: memory-instruction number of u
    logic [SEQ_W-1:0]  peer_seq;  // LOG_ORDER: memory-instruction number of v
    logic [31:0]       data;      // block size, checksum, or {.., v store, v L1 hit}
  } log_rec_t;

  // Cache-line tag kept in the CAM.
  function automatic logic [CAM_TAG_W-1:0] addr_tag(input logic [PADDR_W-1:0] a);
    return a[LINE_OFS +: CAM_TAG_W];
  endfunction

endpackage
