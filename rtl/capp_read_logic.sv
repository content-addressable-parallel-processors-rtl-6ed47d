// capp_read_logic: the parallel read logic of the CAPP memory cells.
//
// Read line R[i] is the OR, over every cell j, of (tag j and bit i of cell j).
// The read lines therefore carry the bitwise OR of all tagged words: the
// whole word when exactly one cell is tagged, a combined value when several
// are, and zero when none is.
//
// Timing: purely combinational.
//
// The AND of each bit with its cell's tag and the OR chain down each bit
// position follow the paper.
module capp_read_logic #(
  parameter int unsigned CELLS = capp_pkg::DEFAULT_CELLS,
  parameter int unsigned WIDTH = capp_pkg::DEFAULT_WIDTH
) (
  input  logic [CELLS-1:0][WIDTH-1:0] cells,
  input  logic [CELLS-1:0]            tags,
  output logic [WIDTH-1:0]            read_lines
);

  always_comb begin
    read_lines = '0;
    for (int j = 0; j < CELLS; j++)
      read_lines = read_lines | ({WIDTH{tags[j]}} & cells[j]);
  end

endmodule
