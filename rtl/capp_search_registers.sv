// capp_search_registers: the comparand and mask registers of the CAPP and the
// per-bit lines they drive into every memory cell.
//
// The comparand holds the word to search for (and to write); a mask bit of 1
// marks a bit position to ignore. While perform_search is high, each bit
// position i drives two search lines: M1[i] asks every cell for a 1 in bit i,
// MZ[i] asks for a 0. A masked (ignored) position drives neither. The same
// comparand and mask drive the two write lines per bit: while perform_write is
// high, W1[i] writes a 1 and W0[i] writes a 0 into bit i of every tagged
// cell, again only where the mask does not ignore the bit.
//
// Timing: the registers load on the rising clock edge when their load input
// is high; m1/mz/w1/w0 are combinational from the registers and the enables.
// Reset (synchronous, active high) clears both registers.
//
// The register pair, the M1/MZ line names and the Perform Search gating follow
// the paper. The mask polarity follows its text (mask = bits to ignore). The
// write lines and their drive from comparand and mask are this design's choice,
// after the classic CAPP the paper builds on.
module capp_search_registers #(
  parameter int unsigned WIDTH = capp_pkg::DEFAULT_WIDTH
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             load_comparand,
  input  logic [WIDTH-1:0] comparand_in,
  input  logic             load_mask,
  input  logic [WIDTH-1:0] mask_in,
  input  logic             perform_search,
  input  logic             perform_write,
  output logic [WIDTH-1:0] comparand,
  output logic [WIDTH-1:0] mask,
  output logic [WIDTH-1:0] m1,
  output logic [WIDTH-1:0] mz,
  output logic [WIDTH-1:0] w1,
  output logic [WIDTH-1:0] w0
);

  always_ff @(posedge clk) begin
    if (rst) begin
      comparand <= '0;
      mask      <= '0;
    end else begin
      if (load_comparand) comparand <= comparand_in;
      if (load_mask)      mask      <= mask_in;
    end
  end

  always_comb begin
    m1 = {WIDTH{perform_search}} & ~mask &  comparand;
    mz = {WIDTH{perform_search}} & ~mask & ~comparand;
    w1 = {WIDTH{perform_write}}  & ~mask &  comparand;
    w0 = {WIDTH{perform_write}}  & ~mask & ~comparand;
  end

endmodule
