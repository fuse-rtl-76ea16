// fuse_pkg: constants and types shared by the FUSE hybrid SRAM/STT-MRAM L1 data cache.
//
// A cache line is 128 bytes (one warp of 32 threads x 4 bytes), addresses are 32 bits, so a
// line address is the upper 25 bits. Commands that wait for the STT-MRAM bank are R (read),
// F (fill: move the head of the swap buffer into STT-MRAM) and W (write update, only issued
// once the queue has drained). The read-level predictor sorts a PC into one of four classes.
// Line size, address width and the classes follow the paper; the request-ID width and the
// enum encodings are this design's own choice.
package fuse_pkg;

  localparam int unsigned ADDR_W     = 32;
  localparam int unsigned LINE_BYTES = 128;
  localparam int unsigned LINE_W     = LINE_BYTES * 8;        // 1024 data bits
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);    // 7
  localparam int unsigned LADDR_W    = ADDR_W - OFF_W;        // 25-bit line address
  localparam int unsigned RID_W      = 8;                     // request ID
  localparam int unsigned SIG_W      = 9;                     // PC signature
  localparam int unsigned WARP_W     = 6;                     // up to 48 warps

  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [RID_W-1:0]   rid_t;
  typedef logic [SIG_W-1:0]   sig_t;

  // Read level of a PC as judged by the prediction history table.
  typedef enum logic [1:0] {
    RL_NEUTRAL = 2'd0,  // no firm prediction (covers read-intensive blocks)
    RL_WORM    = 2'd1,  // write once, read multiple: belongs in STT-MRAM
    RL_WM      = 2'd2,  // write multiple: belongs in SRAM
    RL_WORO    = 2'd3   // write once, read once: evict straight to L2
  } rl_class_e;

  // Commands held by the tag queue.
  typedef enum logic [1:0] {
    TQ_R = 2'd0,        // read: search STT-MRAM, answer or miss to L2
    TQ_F = 2'd1,        // fill: head of swap buffer goes into STT-MRAM
    TQ_W = 2'd2         // write update from a core (queue drained first)
  } tq_cmd_e;

  typedef struct packed {
    tq_cmd_e   cmd;
    laddr_t    laddr;   // tag + index bits of the line
    rid_t      rid;     // request ID (R and W)
    sig_t      sig;     // PC signature of the request
    logic      dirty;   // F: line is dirty
    logic      mshr_rel;// F of a fill: rid holds the MSHR entry to free once written
    rl_class_e cls;     // predicted read level at enqueue time
  } tq_entry_t;

  // Bank IDs written into the MSHR destination bits.
  typedef enum logic {
    DST_SRAM = 1'b0,
    DST_STT  = 1'b1
  } bank_e;

  // Status held by the arbitrator for each module.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,
    ST_HIT  = 2'd1,
    ST_MISS = 2'd2,
    ST_BUSY = 2'd3
  } status_e;

  // Data-path choices of the arbitrator's decision tree.
  typedef enum logic [3:0] {
    A_NONE        = 4'd0,
    A_SRAM_READ   = 4'd1,   // SRAM hit, read: SRAM drives the data bus
    A_SRAM_WRITE  = 4'd2,   // SRAM hit, write: update SRAM line
    A_MERGE       = 4'd3,   // line already being fetched: attach to its MSHR entry
    A_QUEUE_R     = 4'd4,   // SRAM miss, read: queue an STT-MRAM search
    A_QUEUE_W     = 4'd5,   // SRAM miss, write, queue drained: queue an STT-MRAM write
    A_STALL       = 4'd6,   // resource busy (queue full, not drained, MSHR full)
    A_STT_READ    = 4'd7,   // STT-MRAM hit, read: STT-MRAM drives the data bus
    A_STT_WRITE   = 4'd8,   // STT-MRAM hit, write, not WM: write in place (slow)
    A_MIGRATE     = 4'd9,   // STT-MRAM hit, write, WM: move line to SRAM, invalidate
    A_MISS_L2     = 4'd10,  // miss in both banks: record in MSHR, send to L2
    A_REPLAY      = 4'd11,  // line is landing in STT-MRAM: queue the read again
    A_ALLOC_SRAM  = 4'd12,  // write miss in both banks: allocate in SRAM
    A_ALLOC_STT   = 4'd13   // write miss in both banks, WORM: allocate in STT-MRAM
  } action_e;

  // Where an SRAM victim goes.
  typedef enum logic [1:0] {
    V_DROP = 2'd0,          // clean WORO line: discard
    V_L2   = 2'd1,          // dirty WORO line: write back to L2
    V_STT  = 2'd2           // any other line: swap buffer + F command to STT-MRAM
  } vic_action_e;

  // Event counters of the cache, one per mechanism.
  typedef struct packed {
    logic [31:0] sram_hits;      // requests served by SRAM
    logic [31:0] stt_hits;       // reads served by STT-MRAM
    logic [31:0] l2_misses;      // lines requested from L2
    logic [31:0] mshr_merges;    // secondary misses merged into an MSHR entry
    logic [31:0] replays;        // reads re-queued behind a landing line
    logic [31:0] evict_to_stt;   // SRAM victims sent through the swap buffer
    logic [31:0] evict_to_l2;    // WORO SRAM victims written back or dropped
    logic [31:0] fills_to_stt;   // L2 fills placed in STT-MRAM (WORM)
    logic [31:0] fills_to_sram;  // L2 fills placed in SRAM
    logic [31:0] stt_writes;     // write updates done in place in STT-MRAM
    logic [31:0] migrations;     // WM lines moved from STT-MRAM to SRAM
    logic [31:0] stt_allocs;     // write misses allocated in STT-MRAM
    logic [31:0] stt_wbacks;     // dirty STT-MRAM victims written back to L2
    logic [31:0] drain_stalls;   // cycles a write waited for the tag queue to drain
    logic [31:0] queue_stalls;   // cycles the front end waited on a full queue/MSHR
    logic [31:0] extra_polls;    // tag-array rows polled beyond the first (CBF false positives)
  } perf_t;

endpackage
