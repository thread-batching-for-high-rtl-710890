// temp_pkg: constants and types shared by the thread-batching GPU memory design.
//
// The design has two halves. On the SM side every streaming multiprocessor takes
// its thread blocks from a private dispatch queue (serial dispatch), so that
// consecutive blocks, which tend to share pages, form a thread batch that runs on
// one SM. A thread-batch-aware warp scheduler (TBAS) then runs one batch at a
// time. On the memory side, page coloring places every page of a batch in banks
// that belong to its SM, and an open-page FR-FCFS controller per channel serves
// the requests, CPU requests first.
//
// From the paper: 8 SMs, 8 thread blocks and 1536 threads (48 warps of 32) per
// SM, 2 GDDR5 channels of 16 banks, 1 DDR3 channel of 8 banks (CPU memory), 64-entry request queue per controller, 4 KB
// pages. This design's own choices: a 32-bit physical address, 3 byte-offset and
// 9 column bits (column + byte offset = page offset, as page coloring requires),
// 16-bit thread block ids and batch ages, 12-bit request tags.
package temp_pkg;

  localparam int NUM_SM           = 8;
  localparam int MAX_TB_PER_SM    = 8;
  localparam int WARP_SIZE        = 32;
  localparam int MAX_THREADS      = 1536;
  localparam int MAX_WARPS_PER_SM = MAX_THREADS / WARP_SIZE;  // 48

  localparam int NUM_CH     = 2;
  localparam int NUM_BANKS  = 16;
  localparam int MCQ_DEPTH  = 64;
  localparam int DDR3_BANKS = 8;             // CPU-side DDR3 channel

  localparam int PA_W       = 32;
  localparam int PAGE_OFF_W = 12;            // 4 KB page
  localparam int BYTE_OFF_W = 3;
  localparam int COL_W      = PAGE_OFF_W - BYTE_OFF_W;  // 9
  localparam int CH_W       = $clog2(NUM_CH);
  localparam int BANK_W     = $clog2(NUM_BANKS);
  localparam int COLOR_W    = CH_W + BANK_W;            // 5: 32 colors
  localparam int ROW_W      = PA_W - PAGE_OFF_W - COLOR_W;  // 15

  localparam int TBID_W     = 16;
  localparam int AGE_W      = 16;
  localparam int TAG_W      = 12;
  localparam int SM_W       = $clog2(NUM_SM);

  // Request as seen by a channel's memory controller (after address mapping).
  typedef struct packed {
    logic              is_cpu;
    logic              is_write;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    logic [TAG_W-1:0]  tag;
  } dram_req_t;

  // Kind of row-buffer outcome of one access.
  typedef enum logic [1:0] {
    ROW_HIT      = 2'd0,   // the addressed row is already open
    ROW_CLOSED   = 2'd1,   // bank idle with no open row: activate, then access
    ROW_CONFLICT = 2'd2    // another row open: precharge, activate, access
  } row_outcome_e;

  // Access handed to the DRAM devices of a channel.
  typedef struct packed {
    row_outcome_e      outcome;
    logic              is_write;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
  } dram_cmd_t;

endpackage
