// tb_capp_cells: random test of the memory cells.
//
// Drives random write lines (never both lines of one bit), random tags and
// random search lines, and keeps a reference copy of the memory: a tagged
// cell's bit becomes 1 under its write-1 line and 0 under its write-0 line.
// After every edge it checks the stored words, the mismatch lines and the
// read lines against values worked out from the reference copy.
module tb_capp_cells;
  localparam int unsigned CELLS = 16;
  localparam int unsigned WIDTH = 32;

  logic                        clk = 1'b0;
  logic                        rst;
  logic [WIDTH-1:0]            w1, w0, m1, mz;
  logic [CELLS-1:0]            tags;
  logic [CELLS-1:0]            mismatch;
  logic [WIDTH-1:0]            read_lines;
  logic [CELLS-1:0][WIDTH-1:0] cells;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] mem [CELLS];
  logic [WIDTH-1:0] wsel, wval, msk;

  capp_cells #(.CELLS(CELLS), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
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
    {w1, w0, m1, mz} = '0;
    tags = '0;
    @(posedge clk);
    @(posedge clk);
    #1 rst = 1'b0;
    for (int j = 0; j < CELLS; j++) mem[j] = '0;
    check(cells == '0, "reset clears cells");
    for (int n = 0; n < 3000; n++) begin
      wsel = ($urandom_range(0, 1) == 0) ? '0 : WIDTH'($urandom());
      wval = $urandom();
      w1   = wsel & wval;
      w0   = wsel & ~wval;
      tags = CELLS'($urandom());
      // Search lines from a comparand equal to a stored word, masked at random.
      msk  = WIDTH'($urandom() & $urandom());
      wval = mem[$urandom_range(0, CELLS - 1)];
      if ($urandom_range(0, 3) == 0) msk = '1;
      m1   = ~msk &  wval;
      mz   = ~msk & ~wval;
      #1;
      for (int j = 0; j < CELLS; j++) begin
        bit d;
        d = 1'b0;
        for (int i = 0; i < WIDTH; i++) if ((m1[i] && !mem[j][i]) || (mz[i] && mem[j][i])) d = 1'b1;
        check(mismatch[j] == d, "mismatch line");
      end
      for (int i = 0; i < WIDTH; i++) begin
        bit r;
        r = 1'b0;
        for (int j = 0; j < CELLS; j++) if (tags[j] && mem[j][i]) r = 1'b1;
        check(read_lines[i] == r, "read line");
      end
      @(posedge clk);
      for (int j = 0; j < CELLS; j++)
        if (tags[j])
          for (int i = 0; i < WIDTH; i++) begin
            if (w1[i]) mem[j][i] = 1'b1;
            else if (w0[i]) mem[j][i] = 1'b0;
          end
      #1;
      for (int j = 0; j < CELLS; j++) check(cells[j] == mem[j], "stored word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
