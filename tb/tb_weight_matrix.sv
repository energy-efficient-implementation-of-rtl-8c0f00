// tb_weight_matrix -- self-checking test of the register weight matrix (reduced 7 x 13 x 9).
//
// Writes every word with a value derived from its position, checks that all words are
// visible at once, overwrites a random subset and checks again, and checks that an
// out-of-range write address changes nothing.
module tb_weight_matrix;
  localparam int R = 7, C = 13, WB = 9;

  logic clk = 0, we = 0;
  logic [$clog2(R)-1:0] wr_row;
  logic [$clog2(C)-1:0] wr_col;
  logic [WB-1:0] wr_data;
  logic [WB-1:0] w [R][C];

  weight_matrix #(.ROWS(R), .COLS(C), .W_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [WB-1:0] model [R][C];

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(int r, int c, logic [WB-1:0] d);
    we <= 1; wr_row <= r[$clog2(R)-1:0]; wr_col <= c[$clog2(C)-1:0]; wr_data <= d;
    @(posedge clk);
  endtask

  task automatic compare_all();
    we <= 0;
    @(posedge clk);
    #1;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (w[r][c] !== model[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL w[%0d][%0d]=%0d exp %0d", r, c, w[r][c], model[r][c]);
        end
      end
  endtask

  initial begin
    @(posedge clk);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        model[r][c] = WB'(r * 37 + c * 5 + 1);
        write(r, c, model[r][c]);
      end
    compare_all();
    for (int k = 0; k < 40; k++) begin
      int r, c;
      r = $urandom_range(0, R - 1);
      c = $urandom_range(0, C - 1);
      model[r][c] = WB'($urandom);
      write(r, c, model[r][c]);
    end
    compare_all();
    write(R, 0, '1);        // out of range row: ignored
    write(0, C, '1);        // out of range column: ignored
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
