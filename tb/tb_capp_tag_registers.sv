// tb_capp_tag_registers: random test of the tag registers.
//
// Drives SET, SELECT FIRST and random mismatch lines, and keeps a reference
// copy of the tags: SET sets every tag; otherwise a tag is cleared by its own
// mismatch line or, under SELECT FIRST, by any earlier tag being set. Checks
// the tags and SOME/NONE after every edge, and checks that holding SELECT
// FIRST leaves exactly the lowest set tag.
module tb_capp_tag_registers;
  localparam int unsigned CELLS = 16;

  logic             clk = 1'b0;
  logic             rst;
  logic             set_tags, select_first;
  logic [CELLS-1:0] mismatch;
  logic [CELLS-1:0] tags;
  logic             some_none;

  int checks = 0, failures = 0;
  logic [CELLS-1:0] ref_t, nxt;
  int first;

  capp_tag_registers #(.CELLS(CELLS)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: tags=%h ref=%h", what, $time, tags, ref_t);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1;
    set_tags = 1'b0;
    select_first = 1'b0;
    mismatch = '0;
    @(posedge clk);
    @(posedge clk);
    #1 rst = 1'b0;
    ref_t = '0;
    check(tags == 0 && some_none == 0, "reset clears tags");
    for (int n = 0; n < 3000; n++) begin
      set_tags     = ($urandom_range(0, 5) == 0);
      select_first = ($urandom_range(0, 3) == 0);
      // Sparse mismatches so that tags survive for a while.
      mismatch     = CELLS'($urandom() & $urandom() & $urandom());
      @(posedge clk);
      nxt = ref_t;
      for (int k = 0; k < CELLS; k++) begin
        bit earlier;
        earlier = 1'b0;
        for (int e = 0; e < k; e++) earlier |= ref_t[e];
        if (set_tags) nxt[k] = 1'b1;
        else if (mismatch[k] || (select_first && earlier)) nxt[k] = 1'b0;
      end
      ref_t = nxt;
      #1;
      check(tags == ref_t, "tag update");
      check(some_none == (ref_t != 0), "SOME/NONE");
    end
    // Select first on random patterns: only the lowest set tag stays.
    for (int n = 0; n < 200; n++) begin
      set_tags = 1'b1;
      select_first = 1'b0;
      mismatch = '0;
      @(posedge clk);
      #1;
      set_tags = 1'b0;
      mismatch = CELLS'($urandom());
      @(posedge clk);
      #1;
      ref_t = ~mismatch;
      check(tags == ref_t, "set then mismatch");
      mismatch = '0;
      select_first = 1'b1;
      repeat (3) @(posedge clk);
      #1;
      first = -1;
      for (int k = CELLS - 1; k >= 0; k--) if (ref_t[k]) first = k;
      check(tags == ((first < 0) ? '0 : CELLS'(1) << first), "select first keeps lowest");
      check(some_none == (first >= 0), "SOME/NONE after select");
      select_first = 1'b0;
      ref_t = tags;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
