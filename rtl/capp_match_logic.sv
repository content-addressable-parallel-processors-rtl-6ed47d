// capp_match_logic: the parallel matching logic of the CAPP memory cells.
//
// Every bit S[j][i] of every cell j looks at the two search lines of its bit
// position. A bit mismatches when M1[i] asks for a 1 and the bit holds 0, or
// MZ[i] asks for a 0 and the bit holds 1. The mismatch line of a cell is the
// OR of its bits' mismatches and resets the cell's tag. With no search line
// high (no search running, or every position masked) no cell mismatches.
//
// Timing: purely combinational; all cells are compared at once.
//
// The per-bit pairing of search lines and stored bit and the per-cell OR
// follow the paper.
module capp_match_logic #(
  parameter int unsigned CELLS = capp_pkg::DEFAULT_CELLS,
  parameter int unsigned WIDTH = capp_pkg::DEFAULT_WIDTH
) (
  input  logic [CELLS-1:0][WIDTH-1:0] cells,
  input  logic [WIDTH-1:0]            m1,
  input  logic [WIDTH-1:0]            mz,
  output logic [CELLS-1:0]            mismatch
);

  always_comb begin
    for (int j = 0; j < CELLS; j++)
      mismatch[j] = |((m1 & ~cells[j]) | (mz & cells[j]));
  end

endmodule
