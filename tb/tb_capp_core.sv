// tb_capp_core: test of the CAPP core driven directly by its control lines.
//
// A reference model keeps the comparand, mask, memory words and tags and
// applies, per clock edge, the same rules the CAPP is specified by: SET sets
// all tags; a search clears the tags of cells that differ from the comparand
// on an unmasked bit; SELECT FIRST clears every tag after the first set one;
// a write copies the unmasked comparand bits into every tagged cell; Read
// loads the OR of the tagged words into the comparand.
//
// Phase 1 fills the cells with distinct words the way a host program does
// (search for a free cell by a flag bit, select the first, write the word with
// the flag set), then looks each word up. Phase 2 applies random control
// lines. After every edge the tags, SOME/NONE, registers and read lines are
// compared with the model.
module tb_capp_core
  import capp_pkg::*;
;
  localparam int unsigned CELLS = 16;
  localparam int unsigned WIDTH = 32;
  localparam logic [WIDTH-1:0] FLAG = WIDTH'(1) << (WIDTH - 1);

  logic             clk = 1'b0;
  logic             rst;
  capp_ctrl_t       ctrl;
  logic [WIDTH-1:0] host_word;
  logic [WIDTH-1:0] comparand, mask, read_lines;
  logic [CELLS-1:0] tags;
  logic             some_none;

  int checks = 0, failures = 0;
  int single_hits = 0, multi_writes = 0, multi_reads = 0;

  logic [WIDTH-1:0] m_comp, m_mask;
  logic [WIDTH-1:0] m_mem [CELLS];
  logic [CELLS-1:0] m_tags;
  logic [WIDTH-1:0] words [CELLS];

  capp_core #(.CELLS(CELLS), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: tags=%h model=%h", what, $time, tags, m_tags);
    end
  endtask

  function automatic logic [WIDTH-1:0] model_read();
    logic [WIDTH-1:0] r = '0;
    for (int j = 0; j < CELLS; j++) if (m_tags[j]) r |= m_mem[j];
    return r;
  endfunction

  // One clock edge: apply ctrl to the model and compare afterwards.
  task automatic step();
    logic [CELLS-1:0] nt;
    logic [WIDTH-1:0] rd;
    bit any;
    rd = model_read();
    check(read_lines == rd, "read lines");
    @(posedge clk);
    nt = m_tags;
    any = 1'b0;
    for (int j = 0; j < CELLS; j++) begin
      bit mm;
      mm = ctrl.perform_search && (((m_mem[j] ^ m_comp) & ~m_mask) != 0);
      if (ctrl.set_tags) nt[j] = 1'b1;
      else if (mm || (ctrl.select_first && any)) nt[j] = 1'b0;
      any |= m_tags[j];
    end
    if (ctrl.perform_write) begin
      if ($countones(m_tags) > 1 && (~m_mask != 0)) multi_writes++;
      for (int j = 0; j < CELLS; j++)
        if (m_tags[j]) m_mem[j] = (m_mem[j] & m_mask) | (m_comp & ~m_mask);
    end
    if (ctrl.load_comparand)
      m_comp = (ctrl.comparand_src == CMP_FROM_READ) ? rd : host_word;
    if (ctrl.load_comparand && ctrl.comparand_src == CMP_FROM_READ && $countones(m_tags) > 1)
      multi_reads++;
    if (ctrl.load_mask) m_mask = host_word;
    m_tags = nt;
    #1;
    check(tags == m_tags, "tags");
    check(some_none == (m_tags != 0), "SOME/NONE");
    check(comparand == m_comp, "comparand");
    check(mask == m_mask, "mask");
    ctrl = '0;
    host_word = $urandom();
  endtask

  task automatic load_comp(input logic [WIDTH-1:0] v);
    ctrl.load_comparand = 1'b1;
    ctrl.comparand_src  = CMP_FROM_HOST;
    host_word           = v;
    step();
  endtask

  task automatic load_mask(input logic [WIDTH-1:0] v);
    ctrl.load_mask = 1'b1;
    host_word      = v;
    step();
  endtask

  task automatic pulse_set();
    ctrl.set_tags = 1'b1;
    step();
  endtask

  task automatic search();
    repeat (3) begin
      ctrl.perform_search = 1'b1;
      step();
    end
  endtask

  task automatic select_first();
    repeat (3) begin
      ctrl.select_first = 1'b1;
      step();
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ctrl = '0;
    host_word = '0;
    rst = 1'b1;
    @(posedge clk);
    @(posedge clk);
    #1 rst = 1'b0;
    m_comp = '0;
    m_mask = '0;
    m_tags = '0;
    for (int j = 0; j < CELLS; j++) m_mem[j] = '0;

    // Phase 1: store distinct words, each with the flag bit set.
    for (int j = 0; j < CELLS; j++) begin
      words[j] = (WIDTH'($urandom()) & ~FLAG) ^ WIDTH'(j);
      load_mask(~FLAG);        // compare the flag bit only
      load_comp('0);           // free cells have flag 0
      pulse_set();
      search();
      select_first();
      check($countones(tags) == 1 && tags[j], "first free cell selected");
      load_mask('0);
      load_comp(words[j] | FLAG);
      ctrl.perform_write = 1'b1;
      step();
    end
    // Look every word up: exactly its cell must respond, and Read returns it.
    load_mask('0);
    for (int j = 0; j < CELLS; j++) begin
      load_comp(words[j] | FLAG);
      pulse_set();
      search();
      check(tags == CELLS'(1) << j, "exact search hits one cell");
      if (tags == CELLS'(1) << j) single_hits++;
      ctrl.load_comparand = 1'b1;
      ctrl.comparand_src  = CMP_FROM_READ;
      step();
      check(comparand == (words[j] | FLAG), "read returns the word");
    end

    // Phase 2: random control lines.
    for (int n = 0; n < 4000; n++) begin
      ctrl.set_tags       = ($urandom_range(0, 6) == 0);
      ctrl.select_first   = ($urandom_range(0, 6) == 0);
      ctrl.perform_search = !ctrl.set_tags && ($urandom_range(0, 3) == 0);
      ctrl.perform_write  = ($urandom_range(0, 5) == 0);
      ctrl.load_comparand = ($urandom_range(0, 3) == 0);
      ctrl.comparand_src  = cmp_src_e'($urandom_range(0, 1));
      ctrl.load_mask      = ($urandom_range(0, 4) == 0);
      host_word           = $urandom();
      if ($urandom_range(0, 1) == 0) host_word = WIDTH'($urandom() & $urandom() & $urandom());
      step();
    end

    check(single_hits == CELLS, "every stored word found");
    check(multi_writes > 0, "a write reached several cells");
    check(multi_reads > 0, "a read combined several cells");
    $display("single hits %0d, multi-cell writes %0d, multi-cell reads %0d",
             single_hits, multi_writes, multi_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
