// tb_capp_search_registers: random test of the comparand and mask registers
// and of the search and write lines they drive.
//
// Each cycle it loads random values (or not), raises perform_search and
// perform_write at random, and checks the registers against a reference copy
// and every line bit by bit against the rule: a line for bit i is active only
// when its enable is high and mask bit i is 0; M1/W1 follow comparand bit i,
// MZ/W0 its complement.
module tb_capp_search_registers;
  localparam int unsigned WIDTH = 32;

  logic             clk = 1'b0;
  logic             rst;
  logic             load_comparand, load_mask, perform_search, perform_write;
  logic [WIDTH-1:0] comparand_in, mask_in;
  logic [WIDTH-1:0] comparand, mask, m1, mz, w1, w0;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_c, ref_m;

  capp_search_registers #(.WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1;
    {load_comparand, load_mask, perform_search, perform_write} = '0;
    comparand_in = '0;
    mask_in      = '0;
    ref_c = '0;
    ref_m = '0;
    @(posedge clk);
    @(posedge clk);
    #1 rst = 1'b0;
    check(comparand == 0 && mask == 0, "reset clears registers");
    for (int n = 0; n < 2000; n++) begin
      load_comparand = ($urandom_range(0, 2) == 0);
      load_mask      = ($urandom_range(0, 2) == 0);
      perform_search = $urandom_range(0, 1);
      perform_write  = $urandom_range(0, 1);
      comparand_in   = $urandom();
      // Masks with long runs of ones and zeros, as well as random ones.
      mask_in        = (n % 3 == 0) ? WIDTH'($urandom()) : ~(WIDTH'(0)) << $urandom_range(0, WIDTH);
      @(posedge clk);
      if (load_comparand) ref_c = comparand_in;
      if (load_mask)      ref_m = mask_in;
      #1;
      check(comparand == ref_c, "comparand register");
      check(mask == ref_m, "mask register");
      for (int i = 0; i < WIDTH; i++) begin
        check(m1[i] == (perform_search && !ref_m[i] &&  ref_c[i]), "M1 line");
        check(mz[i] == (perform_search && !ref_m[i] && !ref_c[i]), "MZ line");
        check(w1[i] == (perform_write  && !ref_m[i] &&  ref_c[i]), "W1 line");
        check(w0[i] == (perform_write  && !ref_m[i] && !ref_c[i]), "W0 line");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
