// hmtt_pkg -- types, widths and record formats shared by the memory-trace
// FPGA. The tracer snoops the command pins of one 64-bit DDR DIMM, so the
// address widths below describe that DIMM (13 row bits, 4 banks, 11 column
// bits: a 512 MB module of x8 512 Mb parts). The physical byte address inside
// the DIMM is taken as {row, bank, column, 3'b000}; with a burst of eight one
// READ/WRITE command moves one 64-byte cache line, so a trace address is the
// 23-bit line number {row, bank, column[10:3]}.
//
// Every trace word is 32 bits (four bytes per trace follows the paper; the
// exact bit layout is this design's own):
//   bit31 = 0  reference : [30] write, [29:23] duration low bits,
//                          [22:0] line address
//   bit31 = 1  special   : [30:28] type, [27:0] payload
//     SP_DUR_HI  duration high bits, to be added (<< DUR_W) to the next
//                timed record's duration
//     SP_TAG     configuration-space read: [27:21] duration low bits,
//                [20:0] line index inside the configuration space
//     SP_STAT_LO / SP_STAT_HI  statistics: [27:20] counter index,
//                [19:0] low 20 / high 12 bits of the counter
//     SP_HOT     hot page: [16:0] 4 KB page number
// The configuration space is the top 8 MB of the DIMM (rows 8064..8191).
// Inner commands sit at byte offsets 0x0, 0x40, 0x80 and 0xC0 of it and
// user-defined events start at 0x1000, as the paper defines them.
// Lint note: the helper functions take whole buses and ignore some bits
// (A10, A12, the low column bits, the low row bits), and not every module
// uses every constant; verilator reports these as unused.
package hmtt_pkg;

  localparam int ROW_W   = 13;
  localparam int BANK_W  = 2;
  localparam int COL_W   = 11;
  localparam int ABUS_W  = 13;              // DDR A[12:0]
  localparam int NUM_BANKS = 1 << BANK_W;
  localparam int BL_LOG2 = 3;               // burst of 8 x 8 bytes = 64 B line
  localparam int LINE_W  = ROW_W + BANK_W + COL_W - BL_LOG2;   // 23
  localparam int PAGE_W  = LINE_W - 6;      // 4 KB page = 64 lines -> 17

  localparam int TRACE_W = 32;
  localparam int DUR_W   = TRACE_W - 2 - LINE_W;               // 7
  localparam int DURHI_W = 28;
  localparam int DURCNT_W = DUR_W + DURHI_W;                    // 35

  // configuration space: top 8 MB = top 128 rows (one row = 64 KB)
  localparam int CFG_ROW_BITS = 7;
  localparam int CFG_IDX_W    = CFG_ROW_BITS + BANK_W + COL_W - BL_LOG2; // 17

  // inner commands, as line indices (byte offset / 64)
  localparam logic [CFG_IDX_W-1:0] IDX_BEGIN_TRACING = 17'h0;   // 0x0
  localparam logic [CFG_IDX_W-1:0] IDX_END_TRACING   = 17'h1;   // 0x40
  localparam logic [CFG_IDX_W-1:0] IDX_RESET_TRACING = 17'h2;   // 0x80
  localparam logic [CFG_IDX_W-1:0] IDX_OUTPUT_BW     = 17'h3;   // 0xC0
  localparam logic [CFG_IDX_W-1:0] IDX_USER_BASE     = 17'h40;  // 0x1000

  typedef enum logic [2:0] {
    SP_DUR_HI  = 3'd0,
    SP_TAG     = 3'd1,
    SP_STAT_LO = 3'd4,
    SP_STAT_HI = 3'd5,
    SP_HOT     = 3'd6
  } special_e;

  typedef enum logic [2:0] {
    CMD_NOP   = 3'd0,
    CMD_ACT   = 3'd1,
    CMD_READ  = 3'd2,
    CMD_WRITE = 3'd3,
    CMD_PRE   = 3'd4,
    CMD_REF   = 3'd5,
    CMD_MRS   = 3'd6,
    CMD_BST   = 3'd7
  } ddr_cmd_e;

  typedef struct packed {
    ddr_cmd_e            cmd;
    logic [BANK_W-1:0]   bank;
    logic [ABUS_W-1:0]   addr;
  } ddr_cmd_t;

  typedef enum logic [1:0] {
    MODE_OFF   = 2'd0,    // nothing recorded
    MODE_TRACE = 2'd1,    // references, tags, statistics, hot pages
    MODE_BW    = 2'd2     // tags, statistics and hot pages only
  } work_mode_e;

  // one reference as produced by the bank state machines
  typedef struct packed {
    logic              write;
    logic              cfg;       // falls in the configuration space
    logic [LINE_W-1:0] line;
  } ref_t;

  function automatic logic [COL_W-1:0] col_of(input logic [ABUS_W-1:0] a);
    return {a[11], a[9:0]};       // A10 is the auto-precharge flag
  endfunction

  function automatic logic is_cfg_row(input logic [ROW_W-1:0] row);
    return &row[ROW_W-1:CFG_ROW_BITS];
  endfunction

  function automatic logic [LINE_W-1:0] line_of(input logic [ROW_W-1:0] row,
                                                input logic [BANK_W-1:0] bank,
                                                input logic [COL_W-1:0] col);
    return {row, bank, col[COL_W-1:BL_LOG2]};
  endfunction

  function automatic logic [TRACE_W-1:0] ref_word(input logic write,
                                                  input logic [DUR_W-1:0] dur,
                                                  input logic [LINE_W-1:0] line);
    return {1'b0, write, dur, line};
  endfunction

  function automatic logic [TRACE_W-1:0] sp_word(input special_e t,
                                                 input logic [27:0] payload);
    return {1'b1, t, payload};
  endfunction

endpackage
