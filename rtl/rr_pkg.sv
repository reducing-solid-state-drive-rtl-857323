// rr_pkg: types and constants shared by the read-retry engine.
//
// The engine talks to one NAND flash die over a small command port. Each
// command is a flash_cmd_t: an opcode, the page (row) address, the read-retry
// step (which selects the read-reference voltage set) and a 32-bit feature
// value used by SET FEATURE. The opcodes reuse the ONFI confirm bytes of the
// corresponding commands (30h page read, 31h cache read, 3Fh end of cache
// read, EFh set features, FFh reset, 05h data output); that encoding is this
// design's choice, the paper only names the commands.
//
// Timing values are in nanoseconds. The default precharge time of 24 us is
// the paper's (Table 1); storing it in nanoseconds in a 32-bit word is this
// design's choice, which also gives the 4 bytes per table entry implied by
// the paper's 144-byte table of 36 entries.
package rr_pkg;

  // Page (row) address of one die: 2 planes x 1,888 blocks x 576 pages
  // = 2,174,976 pages, which needs 22 bits.
  localparam int PAGE_W = 22;
  // Read-retry step index: 0 is the first (regular) read, 1..MAX_RR retries.
  localparam int STEP_W = 5;
  // P/E-cycle count and retention age (days) of the block being read.
  localparam int PEC_W  = 16;
  localparam int RET_W  = 16;
  // One read-timing parameter table entry, and the SET FEATURE payload.
  localparam int TPRE_W = 32;

  localparam logic [TPRE_W-1:0] DEFAULT_TPRE_NS = 32'd24000;

  typedef enum logic [7:0] {
    OP_NOP         = 8'h00,
    OP_DATA_OUT    = 8'h05,
    OP_PAGE_READ   = 8'h30,
    OP_CACHE_READ  = 8'h31,
    OP_CACHE_END   = 8'h3F,
    OP_SET_FEATURE = 8'hEF,
    OP_RESET       = 8'hFF
  } flash_op_e;

  typedef struct packed {
    flash_op_e          op;
    logic [PAGE_W-1:0]  page;
    logic [STEP_W-1:0]  step;
    logic [TPRE_W-1:0]  feat;
  } flash_cmd_t;

endpackage
