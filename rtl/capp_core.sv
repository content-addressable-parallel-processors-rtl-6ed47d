// capp_core: the content addressable parallel processor itself.
//
// Three parts: the search registers (comparand and mask), the memory cells
// (storage with parallel write, parallel matching and parallel read) and the
// tag registers (the answer set). A search compares every cell against the
// unmasked comparand bits at once and clears the tags of the cells that
// differ; a write stores the unmasked comparand bits into every tagged cell at
// once; a read ORs all tagged words onto the read lines. SET makes every cell
// a responder, SELECT FIRST keeps only the first one.
//
// Interface: a capp_ctrl_t struct of control lines from the protocol
// controller (see capp_pkg) and the word last received from the host; the
// register contents and tags for the host, SOME/NONE and the read lines. A
// comparand load takes either the host word or, for the Read command, the read
// lines; a mask load takes the host word.
//
// Timing: every register changes on the rising clock edge. A search or select
// needs its line high for one cycle; a write needs one cycle. Tags and cells
// are visible the cycle after.
//
// The three parts and their lines follow the paper. Routing the read result
// into the comparand register is this design's choice: the paper's host
// protocol has no separate command to fetch it.
module capp_core
  import capp_pkg::*;
#(
  parameter int unsigned CELLS = DEFAULT_CELLS,
  parameter int unsigned WIDTH = DEFAULT_WIDTH
) (
  input  logic             clk,
  input  logic             rst,
  input  capp_ctrl_t       ctrl,
  input  logic [WIDTH-1:0] host_word,
  output logic [WIDTH-1:0] comparand,
  output logic [WIDTH-1:0] mask,
  output logic [CELLS-1:0] tags,
  output logic             some_none,
  output logic [WIDTH-1:0] read_lines
);

  logic [WIDTH-1:0]            m1, mz, w1, w0;
  logic [WIDTH-1:0]            comparand_in;
  logic [CELLS-1:0]            mismatch;

  assign comparand_in = (ctrl.comparand_src == CMP_FROM_READ) ? read_lines
                                                              : host_word;

  capp_search_registers #(.WIDTH(WIDTH)) u_search (
    .clk            (clk),
    .rst            (rst),
    .load_comparand (ctrl.load_comparand),
    .comparand_in   (comparand_in),
    .load_mask      (ctrl.load_mask),
    .mask_in        (host_word),
    .perform_search (ctrl.perform_search),
    .perform_write  (ctrl.perform_write),
    .comparand      (comparand),
    .mask           (mask),
    .m1             (m1),
    .mz             (mz),
    .w1             (w1),
    .w0             (w0)
  );

  capp_cells #(.CELLS(CELLS), .WIDTH(WIDTH)) u_cells (
    .clk        (clk),
    .rst        (rst),
    .w1         (w1),
    .w0         (w0),
    .m1         (m1),
    .mz         (mz),
    .tags       (tags),
    .mismatch   (mismatch),
    .read_lines (read_lines),
    .cells      ()
  );

  capp_tag_registers #(.CELLS(CELLS)) u_tags (
    .clk          (clk),
    .rst          (rst),
    .set_tags     (ctrl.set_tags),
    .select_first (ctrl.select_first),
    .mismatch     (mismatch),
    .tags         (tags),
    .some_none    (some_none)
  );

endmodule
