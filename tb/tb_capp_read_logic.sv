// tb_capp_read_logic: random test of the parallel read logic.
//
// With random cell contents and random tags (none, one, several, all), the
// read lines must equal the bitwise OR of the tagged words, worked out bit by
// bit here.
module tb_capp_read_logic;
  localparam int unsigned CELLS = 16;
  localparam int unsigned WIDTH = 32;

  logic [CELLS-1:0][WIDTH-1:0] cells;
  logic [CELLS-1:0]            tags;
  logic [WIDTH-1:0]            read_lines;

  int checks = 0, failures = 0;

  capp_read_logic #(.CELLS(CELLS), .WIDTH(WIDTH)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int j = 0; j < CELLS; j++) cells[j] = $urandom();
      case (n % 4)
        0: tags = '0;
        1: tags = CELLS'(1) << $urandom_range(0, CELLS - 1);
        2: tags = CELLS'($urandom());
        default: tags = '1;
      endcase
      #1;
      for (int i = 0; i < WIDTH; i++) begin
        bit r;
        r = 1'b0;
        for (int j = 0; j < CELLS; j++) if (tags[j] && cells[j][i]) r = 1'b1;
        checks++;
        if (read_lines[i] != r) begin
          failures++;
          if (failures < 10) $display("FAIL R[%0d]=%b expected %b (tags %h)", i, read_lines[i], r, tags);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
