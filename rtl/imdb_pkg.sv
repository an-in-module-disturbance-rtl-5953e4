// imdb_pkg: types and constants shared by the in-module disturbance barrier.
//
// The barrier sits between a PCM media controller and the PCM devices and tracks,
// per bank, which line addresses are "aggressors" (lines whose cells keep flipping
// from 1 to 0 and so heat and disturb the neighbouring wordlines). Field widths
// follow the published table layout: Row&Col is 16+9 bits, RewriteCntr 8 bits,
// eight 9-bit ZeroFlipCntr sub-counters, a 3-bit MaxZFCIdx (108 bits per main
// table entry) and, in the barrier buffer, a 64-byte data field and an 8-bit
// FreqCntr. The rewrite threshold is WDE limitation / 2 - 1 = 511 for a WDE
// limitation of 1K. Command encodings and the channel structs are this design's
// own choice.
package imdb_pkg;

  // ---- address and line geometry --------------------------------------------
  localparam int unsigned ROW_W   = 16;             // row address bits
  localparam int unsigned COL_W   = 9;              // column (line) address bits
  localparam int unsigned TAG_W   = ROW_W + COL_W;  // Row&Col = 25 bits
  localparam int unsigned WORDS   = 8;              // 64-bit words per 64B line
  localparam int unsigned WORD_W  = 64;
  localparam int unsigned LINE_W  = WORDS * WORD_W; // 512 bits
  localparam int unsigned NBANKS  = 4;              // 2 ranks x 2 banks
  localparam int unsigned BANK_W  = 2;

  // ---- counters -------------------------------------------------------------
  localparam int unsigned ZFC_W   = 9;              // one ZeroFlipCntr sub-counter
  localparam int unsigned RWC_W   = 8;              // RewriteCntr
  localparam int unsigned FRQ_W   = 8;              // FreqCntr (barrier buffer)
  localparam int unsigned IDX_W   = 3;              // MaxZFCIdx
  localparam int unsigned CNT_W   = 7;              // 0..64 from one integrated counter
  localparam int unsigned WDE_LIMIT = 1024;         // WDE limitation number (1K)
  localparam int unsigned THRESHOLD = WDE_LIMIT / 2 - 1;  // 511

  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [COL_W-1:0]  col_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ZFC_W-1:0]  zfc_t;

  typedef struct packed {
    row_t row;
    col_t col;
  } addr_t;

  // One main table entry, without the Row&Col tag (that lives in the CAM).
  typedef struct packed {
    logic [RWC_W-1:0]         rwc;   // RewriteCntr
    zfc_t [WORDS-1:0]         zfc;   // ZeroFlipCntr sub-counters 7..0
    logic [IDX_W-1:0]         maxi;  // MaxZFCIdx
  } mt_entry_t;

  // ---- command channels -----------------------------------------------------
  typedef enum logic [1:0] {
    CMD_READ      = 2'd0,   // normal read from the host
    CMD_WRITE     = 2'd1,   // write, carrying the pre-write-read old data
    CMD_WRITEBACK = 2'd2    // barrier-buffer line written back to the media
  } cmd_op_e;

  // From the media controller into a plane (or into the top, with a bank).
  typedef struct packed {
    cmd_op_e            op;
    logic [BANK_W-1:0]  bank;
    addr_t              addr;
    line_t              wdata;   // new data (writes)
    line_t              odata;   // old data from the pre-write read (writes)
  } cmd_t;

  // From a plane to the media devices.
  typedef struct packed {
    cmd_op_e  op;      // CMD_READ, CMD_WRITE or CMD_WRITEBACK
    addr_t    addr;
    line_t    data;
  } media_cmd_t;

  // Read data served directly by the barrier buffer.
  typedef struct packed {
    addr_t  addr;
    line_t  data;
  } rd_rsp_t;

  // One-cycle event pulses of a plane, for statistics and testbenches.
  typedef struct packed {
    logic mt_hit;      // write hit in the main table (HIT state)
    logic mt_miss;     // write missed both tables (MISS state)
    logic insert;      // missed address inserted into the main table
    logic filtered;    // missed address not inserted (probabilistic filter)
    logic stall;       // insertion waiting for AppLE to finish its search
    logic rewrite;     // threshold passed: rewrites generated
    logic promote;     // main table entry moved to the barrier buffer
    logic demote;      // LFU barrier buffer entry moved back to the main table
    logic bb_wr_hit;   // write absorbed by the barrier buffer
    logic bb_rd_hit;   // read served by the barrier buffer
    logic flush_wb;    // barrier buffer line written back during a flush
  } plane_ev_t;

endpackage
