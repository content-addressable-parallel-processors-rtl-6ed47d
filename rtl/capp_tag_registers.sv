// capp_tag_registers: one tag bit per memory cell, the CAPP's answer set.
//
// Each tag is a set/reset flip-flop. The SET line drives the S input of every
// tag, so holding SET high makes every cell a responder. The mismatch line of
// a cell drives its tag's R input, so a search clears the tags of the cells
// that do not match. SELECT FIRST adds a second reset term to tag k:
// SELECT FIRST and (any tag before k is set). Held high, it leaves only the
// first set tag (tag 1 is bit 0). SOME/NONE is the OR of all tags.
//
// Timing: the flip-flops are built as clocked registers updated on the rising
// edge, next = S ? 1 : (R ? 0 : T). All inputs are levels; holding any of
// them for more than one cycle gives the same result as one cycle, so the
// controller may stretch them. Reset (synchronous) clears every tag.
//
// The S/R structure, the SET, SELECT FIRST and SOME/NONE lines and the
// prefix-OR chain follow the paper. Building the SR flip-flops as clocked
// registers and letting S win over R are this design's choices.
module capp_tag_registers #(
  parameter int unsigned CELLS = capp_pkg::DEFAULT_CELLS
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             set_tags,
  input  logic             select_first,
  input  logic [CELLS-1:0] mismatch,
  output logic [CELLS-1:0] tags,
  output logic             some_none
);

  // any_before[k]: some tag with index below k is set (the OR chain of the tags).
  logic [CELLS-1:0] any_before;
  logic [CELLS-1:0] reset_line;

  always_comb begin
    logic acc;
    acc = 1'b0;
    for (int k = 0; k < CELLS; k++) begin
      any_before[k] = acc;
      acc           = acc | tags[k];
    end
    reset_line = mismatch | ({CELLS{select_first}} & any_before);
    some_none  = acc;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tags <= '0;
    end else begin
      for (int k = 0; k < CELLS; k++) begin
        if (set_tags)           tags[k] <= 1'b1;
        else if (reset_line[k]) tags[k] <= 1'b0;
      end
    end
  end

endmodule
