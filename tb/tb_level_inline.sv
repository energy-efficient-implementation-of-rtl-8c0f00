// tb_level_inline -- self-checking test of the input level (reduced memory depth 32).
//
// Loads 32 random image words, starts a run of 20 images and issues 24 go steps: the first
// 20 must deliver the stored images in order (pixels and side band), the last 4 the all-zero
// flush image. A second start must restart from address 0. Also checks the go-to-ready
// latency of 2 clocks.
module tb_level_inline;
  import snn_pkg::*;
  localparam int D = 32;

  logic clk = 0, rst = 1, start = 0, go = 0, we = 0;
  logic [5:0] num_images;
  logic [4:0] waddr;
  spt_word_t wdata;
  logic [N_PIX-1:0] out_pix;
  ctrl_t out_ctrl;
  logic ready, resetok;

  level_inline #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_flush = 0;
  spt_word_t model [D];

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(output int lat);
    go <= 1;
    @(posedge clk);
    go <= 0;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!ready);
  endtask

  initial begin
    int lat;
    num_images = 6'd20;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int a = 0; a < D; a++) begin
      for (int b = 0; b < 25; b++) model[a][b*32 +: 32] = $urandom;
      we <= 1; waddr <= 5'(a); wdata <= model[a];
      @(posedge clk);
    end
    we <= 0;
    for (int run = 0; run < 2; run++) begin
      start <= 1;
      @(posedge clk);
      start <= 0;
      for (int k = 0; k < 24; k++) begin
        step(lat);
        check("latency", lat, 2);
        if (k < 20) begin
          checks++;
          if (out_pix !== model[k].pix) begin failures++; $display("FAIL pix %0d", k); end
          check("ctrl", int'(out_ctrl), int'(model[k].ctrl));
        end else begin
          n_flush++;
          check("flush pix", int'(out_pix != '0), 0);
          check("flush ctrl", int'(out_ctrl), 0);
        end
      end
    end
    if (n_flush == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
