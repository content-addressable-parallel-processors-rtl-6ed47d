// tb_capp_match_logic: random test of the parallel matching logic.
//
// Search lines are derived from a random comparand and mask (a mask bit of 1
// ignores the position), and the expected mismatch of each cell is worked out
// by comparing the cell word with the comparand on the unmasked positions.
// Some cells are made equal to the comparand on those positions so that both
// outcomes occur.
module tb_capp_match_logic;
  localparam int unsigned CELLS = 16;
  localparam int unsigned WIDTH = 32;

  logic [CELLS-1:0][WIDTH-1:0] cells;
  logic [WIDTH-1:0]            m1, mz;
  logic [CELLS-1:0]            mismatch;

  int checks = 0, failures = 0, n_match = 0;
  logic [WIDTH-1:0] comp, msk;
  bit search;

  capp_match_logic #(.CELLS(CELLS), .WIDTH(WIDTH)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      comp   = $urandom();
      msk    = (n % 2) ? WIDTH'($urandom() & $urandom()) : WIDTH'($urandom());
      search = ($urandom_range(0, 7) != 0);
      for (int j = 0; j < CELLS; j++) begin
        cells[j] = $urandom();
        if ($urandom_range(0, 2) == 0) cells[j] = (comp & ~msk) | (cells[j] & msk);
        if ($urandom_range(0, 5) == 0) cells[j] = cells[j] ^ (WIDTH'(1) << $urandom_range(0, WIDTH - 1));
      end
      for (int i = 0; i < WIDTH; i++) begin
        m1[i] = search && !msk[i] && comp[i];
        mz[i] = search && !msk[i] && !comp[i];
      end
      #1;
      for (int j = 0; j < CELLS; j++) begin
        bit differs;
        differs = 1'b0;
        for (int i = 0; i < WIDTH; i++)
          if (!msk[i] && cells[j][i] != comp[i]) differs = 1'b1;
        checks++;
        if (mismatch[j] != (search && differs)) begin
          failures++;
          if (failures < 10) $display("FAIL cell %0d: mismatch=%b expected %b", j, mismatch[j], search && differs);
        end
        if (search && !differs) n_match++;
      end
    end
    checks++;
    if (n_match == 0) begin
      failures++;
      $display("FAIL no matching cell was ever produced");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
