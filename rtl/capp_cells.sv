// capp_cells: the CAPP memory cells, CELLS words of WIDTH bits.
//
// Each bit position i has two write lines shared by all cells. On a clock
// edge, every bit i of every tagged cell is set when W1[i] is high and
// cleared when W0[i] is high; untagged cells and bits with neither line high
// keep their value. This is the parallel write: one cycle writes any number
// of cells. The cells also hold the parallel matching logic, which turns the
// search lines into one mismatch line per cell, and the parallel read logic,
// which ORs the tagged words onto the read lines.
//
// Timing: writes take effect at the rising edge; mismatch and read_lines are
// combinational from the stored bits, the search lines and the tags.
// Reset (synchronous) clears every bit.
//
// The two write lines per bit, the shared lines per bit position and the
// match and read logic follow the paper. Gating the write by the tag,
// write-1 winning over write-0 and clearing at reset are this design's
// choices.
module capp_cells #(
  parameter int unsigned CELLS = capp_pkg::DEFAULT_CELLS,
  parameter int unsigned WIDTH = capp_pkg::DEFAULT_WIDTH
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [WIDTH-1:0]            w1,
  input  logic [WIDTH-1:0]            w0,
  input  logic [WIDTH-1:0]            m1,
  input  logic [WIDTH-1:0]            mz,
  input  logic [CELLS-1:0]            tags,
  output logic [CELLS-1:0]            mismatch,
  output logic [WIDTH-1:0]            read_lines,
  output logic [CELLS-1:0][WIDTH-1:0] cells
);

  always_ff @(posedge clk) begin
    if (rst) begin
      cells <= '0;
    end else begin
      for (int j = 0; j < CELLS; j++)
        if (tags[j]) cells[j] <= (cells[j] & ~w0) | w1;
    end
  end

  capp_match_logic #(.CELLS(CELLS), .WIDTH(WIDTH)) u_match (
    .cells    (cells),
    .m1       (m1),
    .mz       (mz),
    .mismatch (mismatch)
  );

  capp_read_logic #(.CELLS(CELLS), .WIDTH(WIDTH)) u_read (
    .cells      (cells),
    .tags       (tags),
    .read_lines (read_lines)
  );

endmodule
