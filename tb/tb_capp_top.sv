// tb_capp_top: end-to-end test of the CAPP device through its byte protocol,
// at the default size (16 cells of 32 bits).
//
// The testbench acts as the host program. It keeps its own model of the
// memory, tags, comparand and mask, updated by the meaning of each command,
// and checks every value the device sends back against it. The program:
//   1. fills all cells with distinct words: search for a free cell by a flag
//      bit, Select First, write the word with the flag set;
//   2. looks every word up (one responder each) and reads it back;
//   3. runs a masked search with several responders, reads their combined
//      OR, and reduces them with Select First;
//   4. writes one byte into several cells at once and checks each cell;
//   5. runs a search no cell matches, and sends an unknown command byte;
//   6. measures the Search and Select First latencies on the busy output.
// The host's receive side takes bytes with random back-pressure. Each
// mechanism is counted and a mechanism that never happened is a failure.
module tb_capp_top
  import capp_pkg::*;
;
  localparam int unsigned CELLS = DEFAULT_CELLS;
  localparam int unsigned WIDTH = DEFAULT_WIDTH;
  localparam int unsigned DELAY = DEFAULT_SEARCH_DELAY;
  localparam logic [WIDTH-1:0] FLAG = WIDTH'(1) << (WIDTH - 1);

  logic       clk = 1'b0;
  logic       rst;
  logic [7:0] rx_data, tx_data;
  logic       rx_valid, rx_ready, tx_valid, tx_ready;
  logic       some_none, busy;

  int checks = 0, failures = 0;
  // Mechanism counters.
  int n_receive = 0, n_send_word = 0, n_send_tags = 0, n_search = 0, n_select = 0;
  int n_select_reduced = 0, n_multi_write = 0, n_multi_read = 0, n_no_match = 0;
  int n_unknown = 0, n_tx_stall = 0, n_set_high = 0, n_set_low = 0;

  // Host-side model.
  logic [WIDTH-1:0] m_mem [CELLS];
  logic [CELLS-1:0] m_tags;
  logic [WIDTH-1:0] m_comp, m_mask;
  logic [WIDTH-1:0] words [CELLS];
  byte unsigned     got [$];
  bit               backpressure = 1'b0;

  capp_top dut (.*);

  always #5 clk = ~clk;

  always @(negedge clk) tx_ready <= backpressure ? ($urandom_range(0, 1) == 0) : 1'b1;
  always @(posedge clk) if (!rst) begin
    if (tx_valid && tx_ready) got.push_back(tx_data);
    if (tx_valid && !tx_ready) n_tx_stall++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic put(input byte unsigned b);
    rx_data  = b;
    rx_valid = 1'b1;
    do @(posedge clk); while (!rx_ready);
    #1 rx_valid = 1'b0;
  endtask

  task automatic wait_done();
    int guard = 0;
    @(posedge clk);
    #1;
    while (busy && guard < 1000) begin
      @(posedge clk);
      #1 guard++;
    end
  endtask

  task automatic cmd(input capp_cmd_e c);
    put(c);
    wait_done();
    case (c)
      CMD_SET_TAGS_HIGH: begin m_tags = '1; n_set_high++; end
      CMD_SET_TAGS_LOW:  n_set_low++;
      CMD_SEARCH: begin
        for (int j = 0; j < CELLS; j++)
          if (((m_mem[j] ^ m_comp) & ~m_mask) != 0) m_tags[j] = 1'b0;
        if (m_tags == 0) n_no_match++;
        n_search++;
      end
      CMD_SELECT_FIRST: begin
        logic [CELLS-1:0] t = '0;
        if ($countones(m_tags) > 1) n_select_reduced++;
        for (int j = CELLS - 1; j >= 0; j--) if (m_tags[j]) t = CELLS'(1) << j;
        m_tags = t;
        n_select++;
      end
      CMD_WRITE: begin
        if ($countones(m_tags) > 1) n_multi_write++;
        for (int j = 0; j < CELLS; j++)
          if (m_tags[j]) m_mem[j] = (m_mem[j] & m_mask) | (m_comp & ~m_mask);
      end
      CMD_READ: begin
        logic [WIDTH-1:0] r = '0;
        if ($countones(m_tags) > 1) n_multi_read++;
        for (int j = 0; j < CELLS; j++) if (m_tags[j]) r |= m_mem[j];
        m_comp = r;
      end
      default: ;
    endcase
  endtask

  task automatic set_word(input capp_cmd_e c, input logic [WIDTH-1:0] w);
    put(c);
    for (int b = WIDTH / 8 - 1; b >= 0; b--) put(w[b*8 +: 8]);
    wait_done();
    if (c == CMD_SET_COMPARAND) m_comp = w; else m_mask = w;
    n_receive++;
  endtask

  task automatic get_bytes(input capp_cmd_e c, input int nbytes, output logic [WIDTH-1:0] v);
    got.delete();
    put(c);
    wait_done();
    check(got.size() == nbytes, "byte count of a Get command");
    v = '0;
    foreach (got[i]) v = (v << 8) | WIDTH'(got[i]);
  endtask

  task automatic expect_tags(input string what);
    logic [WIDTH-1:0] v;
    get_bytes(CMD_GET_TAGS, (CELLS + 7) / 8, v);
    n_send_tags++;
    check(v[CELLS-1:0] == m_tags, what);
    check(some_none == (m_tags != 0), {what, " (SOME/NONE)"});
  endtask

  task automatic expect_comparand(input string what);
    logic [WIDTH-1:0] v;
    get_bytes(CMD_GET_COMPARAND, WIDTH / 8, v);
    n_send_word++;
    check(v == m_comp, what);
  endtask

  // Clear the tags to "all responders": SET high, then SET low.
  task automatic reset_tags();
    cmd(CMD_SET_TAGS_HIGH);
    cmd(CMD_SET_TAGS_LOW);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] v;
    int t0, lat;
    rst = 1'b1;
    rx_valid = 1'b0;
    rx_data = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int j = 0; j < CELLS; j++) m_mem[j] = '0;
    m_tags = '0;
    m_comp = '0;
    m_mask = '0;
    expect_tags("tags clear after reset");

    // 1. Fill every cell with a distinct word; its low 4 bits are its index.
    for (int j = 0; j < CELLS; j++) begin
      words[j] = (WIDTH'($urandom()) & ~FLAG & ~WIDTH'(15)) | WIDTH'(j % 16);
      set_word(CMD_SET_MASK, ~FLAG);
      set_word(CMD_SET_COMPARAND, '0);
      reset_tags();
      cmd(CMD_SEARCH);
      cmd(CMD_SELECT_FIRST);
      expect_tags("first free cell selected");
      set_word(CMD_SET_MASK, '0);
      set_word(CMD_SET_COMPARAND, words[j] | FLAG);
      cmd(CMD_WRITE);
    end
    // No free cell is left.
    set_word(CMD_SET_MASK, ~FLAG);
    set_word(CMD_SET_COMPARAND, '0);
    reset_tags();
    cmd(CMD_SEARCH);
    expect_tags("no free cell left");

    // 2. Look every word up and read it back.
    backpressure = 1'b1;
    set_word(CMD_SET_MASK, '0);
    for (int j = 0; j < CELLS; j++) begin
      set_word(CMD_SET_COMPARAND, words[j] | FLAG);
      reset_tags();
      cmd(CMD_SEARCH);
      expect_tags("exact search");
      check(m_tags == CELLS'(1) << j, "exact search has one responder");
      cmd(CMD_READ);
      expect_comparand("read of a single responder");
    end

    // 3. Masked search: compare bit 0 only, so the odd cells respond.
    set_word(CMD_SET_MASK, ~WIDTH'(1));
    set_word(CMD_SET_COMPARAND, WIDTH'(1));
    reset_tags();
    cmd(CMD_SEARCH);
    expect_tags("masked search");
    cmd(CMD_READ);
    expect_comparand("combined read of several responders");
    cmd(CMD_SELECT_FIRST);
    expect_tags("select first of several");

    // 4. Parallel write of bits 15:8 into every odd cell.
    set_word(CMD_SET_MASK, ~WIDTH'(1));
    set_word(CMD_SET_COMPARAND, WIDTH'(1));
    reset_tags();
    cmd(CMD_SEARCH);
    set_word(CMD_SET_MASK, ~WIDTH'(16'hFF00));
    set_word(CMD_SET_COMPARAND, WIDTH'(16'hA500));
    cmd(CMD_WRITE);
    set_word(CMD_SET_MASK, '0);
    for (int j = 0; j < CELLS; j++) begin
      set_word(CMD_SET_COMPARAND, m_mem[j]);
      reset_tags();
      cmd(CMD_SEARCH);
      expect_tags("cell after parallel write");
      check(m_tags == CELLS'(1) << j, "written cell found alone");
      check(((m_mem[j] >> 8) & 32'hFF) == ((j % 2) ? 32'hA5 : (words[j] >> 8) & 32'hFF),
            "parallel write reached the odd cells only");
    end

    // 5. A search no cell matches; an unknown command byte.
    set_word(CMD_SET_COMPARAND, 32'h0000_0000);
    reset_tags();
    cmd(CMD_SEARCH);
    expect_tags("search without responders");
    put(8'h7A);
    @(posedge clk);
    #1;
    check(!busy, "unknown byte ignored");
    n_unknown++;
    expect_tags("state unchanged by unknown byte");

    // 6. Latency of Search and Select First: busy for DELAY + 2 cycles.
    put(CMD_SEARCH);
    lat = 0;
    #0;
    while (busy) begin
      @(posedge clk);
      #1 lat++;
    end
    check(lat == DELAY + 2, "Search latency");
    n_search++;
    put(CMD_SELECT_FIRST);
    lat = 0;
    while (busy) begin
      @(posedge clk);
      #1 lat++;
    end
    check(lat == DELAY + 2, "Select First latency");
    n_select++;
    $display("search latency %0d cycles after the command byte", lat);

    // Every mechanism must have happened.
    check(n_receive > 0,        "RECEIVE of a word");
    check(n_send_word > 0,      "SEND of a word");
    check(n_send_tags > 0,      "SEND of the tags");
    check(n_search > 0,         "Search through IDLE");
    check(n_select > 0,         "Select First through IDLE");
    check(n_select_reduced > 0, "Select First among several responders");
    check(n_multi_write > 0,    "parallel write to several cells");
    check(n_multi_read > 0,     "combined read of several cells");
    check(n_no_match > 0,       "search without responders");
    check(n_unknown > 0,        "unknown command");
    check(n_tx_stall > 0,       "send stalled by the host");
    check(n_set_high > 0 && n_set_low > 0, "Set Tags High / Low");
    $display("receive %0d, send word %0d, send tags %0d, search %0d, select %0d, select-reduce %0d,",
             n_receive, n_send_word, n_send_tags, n_search, n_select, n_select_reduced);
    $display("multi-write %0d, multi-read %0d, no-match %0d, unknown %0d, tx stalls %0d",
             n_multi_write, n_multi_read, n_no_match, n_unknown, n_tx_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
