// tb_hub75_display -- self-checking test of the HUB75 panel driver (default timing).
//
// Acts as the LED panel: it shifts RGB0/RGB1 in on each rising HUB_CLK edge and, on LAT,
// compares the 64 captured pixels of rows ADDR and ADDR+16 with an independently built
// picture: the 28 x 28 image (white) at row 2, column 34, and a seven-segment glyph (green)
// of the digit in the left half. It also checks that exactly 64 pixels are shifted per row,
// that the rows are scanned 0..15 in turn, and that OE lights the row after the latch.
// Two frames are checked with different images and digits.
module tb_hub75_display;
  import snn_pkg::*;

  logic clk = 0, rst = 1;
  logic [N_PIX-1:0] img;
  logic [CLS_W-1:0] digit;
  logic hub_clk, hub_lat, hub_oe_n;
  logic [3:0] hub_addr;
  logic [2:0] rgb0, rgb1;

  hub75_display dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [2:0] sh0 [64], sh1 [64];
  int ncol = 0, rows_done = 0, exp_row = 0, n_oe = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // expected picture
  function automatic logic [2:0] expected(int y, int x);
    string segs [10] = '{"abcdef", "bc", "abdeg", "abcdg", "bcfg", "acdfg", "acdefg", "abc",
                         "abcdefg", "abcdfg"};
    string s;
    bit on;
    if (x >= 32) begin
      if (y >= 2 && y < 30 && x >= 34 && x < 62) return img[(y - 2) * 28 + (x - 34)] ? 3'b111 : 3'b000;
      return 3'b000;
    end
    s  = segs[digit];
    on = 0;
    for (int k = 0; k < s.len(); k++) begin
      case (s[k])
        "a": if (y >= 3 && y <= 5 && x >= 8 && x <= 23) on = 1;
        "b": if (y >= 3 && y <= 17 && x >= 21 && x <= 23) on = 1;
        "c": if (y >= 15 && y <= 28 && x >= 21 && x <= 23) on = 1;
        "d": if (y >= 26 && y <= 28 && x >= 8 && x <= 23) on = 1;
        "e": if (y >= 15 && y <= 28 && x >= 8 && x <= 10) on = 1;
        "f": if (y >= 3 && y <= 17 && x >= 8 && x <= 10) on = 1;
        "g": if (y >= 15 && y <= 17 && x >= 8 && x <= 23) on = 1;
        default: ;
      endcase
    end
    return on ? 3'b010 : 3'b000;
  endfunction

  logic hub_clk_q = 0, lat_pend = 0;
  always @(posedge clk) begin
    hub_clk_q <= hub_clk;
    if (!rst && hub_clk && !hub_clk_q) begin
      if (ncol < 64) begin sh0[ncol] = rgb0; sh1[ncol] = rgb1; end
      ncol++;
    end
    if (!rst && !hub_oe_n) n_oe++;
    if (!rst && hub_lat) lat_pend <= 1;
    if (lat_pend) begin
      lat_pend <= 0;
      check("pixels per row", ncol, 64);
      check("addr", int'(hub_addr), exp_row);
      for (int x = 0; x < 64; x++) begin
        check("rgb0", int'(sh0[x]), int'(expected(exp_row, x)));
        check("rgb1", int'(sh1[x]), int'(expected(exp_row + 16, x)));
      end
      ncol = 0;
      exp_row = (exp_row + 1) % 16;
      rows_done++;
    end
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_PIX; i++) img[i] = ($urandom_range(0, 3) == 0);
    digit = 4'd5;
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (rows_done == 16);
    // change image and digit only between frames, while the last row is lit
    for (int i = 0; i < N_PIX; i++) img[i] = ($urandom_range(0, 4) == 0);
    digit = 4'd8;
    wait (rows_done == 32);
    check("oe active", int'(n_oe > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
