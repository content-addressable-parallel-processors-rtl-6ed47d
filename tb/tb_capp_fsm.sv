// tb_capp_fsm: test of the host protocol controller on its own.
//
// The testbench plays the host on the byte streams and stands in for the
// CAPP core: it supplies random comparand, mask and tag values and records
// the control lines the controller drives. For every command it checks the
// effect on the control lines (which load, with which word, for how many
// cycles a line is high), the bytes sent back (most significant first, under
// random back-pressure) and the number of cycles the controller is busy:
// SEARCH_DELAY + 2 for Search, SELECT_DELAY + 2 for Select First, 1 for the
// other commands without data.
module tb_capp_fsm
  import capp_pkg::*;
;
  localparam int unsigned CELLS        = 16;
  localparam int unsigned WIDTH        = 32;
  localparam int unsigned SEARCH_DELAY = 5;
  localparam int unsigned SELECT_DELAY = 5;

  logic             clk = 1'b0;
  logic             rst;
  logic [7:0]       rx_data, tx_data;
  logic             rx_valid, rx_ready, tx_valid, tx_ready;
  capp_ctrl_t       ctrl;
  logic [WIDTH-1:0] host_word;
  logic [WIDTH-1:0] comparand, mask;
  logic [CELLS-1:0] tags;
  logic             busy;

  int checks = 0, failures = 0;

  // Recorded from the control lines at each clock edge.
  int unsigned n_load_cmp, n_load_cmp_read, n_load_mask, n_write;
  int unsigned n_search_hi, n_select_hi, n_busy;
  logic [WIDTH-1:0] last_data;
  byte unsigned rx_bytes [$];
  bit backpressure;

  capp_fsm #(
    .CELLS(CELLS), .WIDTH(WIDTH),
    .SEARCH_DELAY(SEARCH_DELAY), .SELECT_DELAY(SELECT_DELAY)
  ) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (!rst) begin
    if (ctrl.load_comparand && ctrl.comparand_src == CMP_FROM_HOST) begin
      n_load_cmp++;
      last_data = host_word;
    end
    if (ctrl.load_comparand && ctrl.comparand_src == CMP_FROM_READ) n_load_cmp_read++;
    if (ctrl.load_mask) begin
      n_load_mask++;
      last_data = host_word;
    end
    if (ctrl.perform_write)  n_write++;
    if (ctrl.perform_search) n_search_hi++;
    if (ctrl.select_first)   n_select_hi++;
    if (busy)                n_busy++;
    if (tx_valid && tx_ready) rx_bytes.push_back(tx_data);
  end

  always @(negedge clk) tx_ready <= backpressure ? ($urandom_range(0, 2) == 0) : 1'b1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic clear_counts();
    n_load_cmp = 0; n_load_cmp_read = 0; n_load_mask = 0; n_write = 0;
    n_search_hi = 0; n_select_hi = 0; n_busy = 0;
    rx_bytes.delete();
  endtask

  task automatic send_byte(input byte unsigned b);
    rx_data  = b;
    rx_valid = 1'b1;
    do @(posedge clk); while (!rx_ready);
    #1 rx_valid = 1'b0;
  endtask

  task automatic wait_ready();
    int guard = 0;
    while (busy && guard < 1000) begin
      @(posedge clk);
      #1 guard++;
    end
    repeat (2) @(posedge clk);
    #1;
  endtask

  task automatic send_word(input logic [WIDTH-1:0] w);
    for (int b = WIDTH / 8 - 1; b >= 0; b--) begin
      send_byte(w[b*8 +: 8]);
      // Gaps between bytes, as a slow link leaves them.
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
    end
  endtask

  task automatic expect_bytes(input logic [63:0] v, input int nbytes, input string what);
    check(rx_bytes.size() == nbytes, {what, ": byte count"});
    for (int b = 0; b < nbytes && b < rx_bytes.size(); b++)
      check(rx_bytes[b] == v[(nbytes - 1 - b) * 8 +: 8], {what, ": byte value"});
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] w;
    rst = 1'b1;
    rx_valid = 1'b0;
    rx_data = '0;
    backpressure = 1'b0;
    comparand = '0;
    mask = '0;
    tags = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    check(!busy && rx_ready && !tx_valid, "idle after reset");

    for (int n = 0; n < 60; n++) begin
      backpressure = (n % 2 == 1);
      comparand = $urandom();
      mask      = $urandom();
      tags      = CELLS'($urandom());

      // Set Comparand: "a" then one word.
      w = $urandom();
      clear_counts();
      send_byte(CMD_SET_COMPARAND);
      send_word(w);
      wait_ready();
      check(n_load_cmp == 1 && n_load_mask == 0 && last_data == w, "Set Comparand loads the word");

      // Set Mask: "c" then one word.
      w = $urandom();
      clear_counts();
      send_byte(CMD_SET_MASK);
      send_word(w);
      wait_ready();
      check(n_load_mask == 1 && n_load_cmp == 0 && last_data == w, "Set Mask loads the word");

      // Get Comparand, Get Mask, Get Tags.
      clear_counts();
      send_byte(CMD_GET_COMPARAND);
      wait_ready();
      expect_bytes(64'(comparand), WIDTH / 8, "Get Comparand");
      clear_counts();
      send_byte(CMD_GET_MASK);
      wait_ready();
      expect_bytes(64'(mask), WIDTH / 8, "Get Mask");
      clear_counts();
      send_byte(CMD_GET_TAGS);
      wait_ready();
      expect_bytes(64'(tags), (CELLS + 7) / 8, "Get Tags");

      // Set Tags High / Low hold the SET line.
      clear_counts();
      send_byte(CMD_SET_TAGS_HIGH);
      wait_ready();
      check(ctrl.set_tags && n_busy == 1, "Set Tags High raises SET");
      clear_counts();
      send_byte(CMD_SET_TAGS_LOW);
      wait_ready();
      check(!ctrl.set_tags && n_busy == 1, "Set Tags Low lowers SET");

      // Search: SEARCH high for SEARCH_DELAY + 1 cycles, busy SEARCH_DELAY + 2.
      clear_counts();
      send_byte(CMD_SEARCH);
      wait_ready();
      check(n_search_hi == SEARCH_DELAY + 1, "Search line length");
      check(n_busy == SEARCH_DELAY + 2, "Search latency");
      check(!ctrl.perform_search, "Search line low afterwards");

      // Select First through the shared IDLE state.
      clear_counts();
      send_byte(CMD_SELECT_FIRST);
      wait_ready();
      check(n_select_hi == SELECT_DELAY + 1, "Select First line length");
      check(n_busy == SELECT_DELAY + 2, "Select First latency");
      check(n_search_hi == 0, "Select First does not search");

      // Write and Read.
      clear_counts();
      send_byte(CMD_WRITE);
      wait_ready();
      check(n_write == 1 && n_busy == 1, "Write is one cycle");
      clear_counts();
      send_byte(CMD_READ);
      wait_ready();
      check(n_load_cmp_read == 1 && n_load_cmp == 0 && n_busy == 1, "Read loads the read lines");

      // An unknown byte is dropped.
      clear_counts();
      send_byte(8'h7A);
      wait_ready();
      check(n_busy == 0 && n_load_cmp == 0 && n_load_mask == 0 && n_write == 0 && rx_bytes.size() == 0,
            "unknown byte ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
