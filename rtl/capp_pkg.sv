// capp_pkg: types and constants shared by the content addressable parallel
// processor (CAPP) and its host protocol controller.
//
// The control struct carries the level lines the controller drives into the
// CAPP core: SET and SELECT FIRST of the tag registers, Perform Search of the
// search registers, the write enable of the write lines, and the loads of the
// comparand and mask registers. The command bytes are the letters of the host
// protocol; the letter-to-command map follows the protocol diagram, the byte
// values are plain ASCII.
package capp_pkg;

  // Default sizes: 32-bit (4-byte) words and 16 cells (a 2-byte tag vector).
  localparam int unsigned DEFAULT_WIDTH = 32;
  localparam int unsigned DEFAULT_CELLS = 16;
  // Search pulse length in clock cycles.
  localparam int unsigned DEFAULT_SEARCH_DELAY = 5;

  // Source of a comparand load.
  typedef enum logic {
    CMP_FROM_HOST = 1'b0,  // word received from the host
    CMP_FROM_READ = 1'b1   // the read lines (Read command)
  } cmp_src_e;

  typedef struct packed {
    logic     set_tags;        // SET line, level
    logic     select_first;    // SELECT FIRST line, level
    logic     perform_search;  // Perform Search line, level
    logic     perform_write;   // write lines enabled, one cycle
    logic     load_comparand;  // load the comparand register
    cmp_src_e comparand_src;   // where the comparand comes from
    logic     load_mask;       // load the mask register
  } capp_ctrl_t;

  // Host command bytes.
  typedef enum logic [7:0] {
    CMD_SET_COMPARAND = 8'h61,  // "a"
    CMD_GET_COMPARAND = 8'h62,  // "b"
    CMD_SET_MASK      = 8'h63,  // "c"
    CMD_GET_MASK      = 8'h64,  // "d"
    CMD_SELECT_FIRST  = 8'h65,  // "e"
    CMD_GET_TAGS      = 8'h66,  // "f"
    CMD_SET_TAGS_HIGH = 8'h67,  // "g"
    CMD_SET_TAGS_LOW  = 8'h68,  // "h"
    CMD_WRITE         = 8'h69,  // "i"
    CMD_READ          = 8'h6A,  // "j"
    CMD_SEARCH        = 8'h6B   // "k"
  } capp_cmd_e;

endpackage
