// tb_spt_bram -- self-checking test of the SpT memory (reduced depth 64).
//
// Writes 64 random 790-bit image words, reads them back in random order and checks the data
// and the one-clock read latency (the output holds while `re` is low).
module tb_spt_bram;
  import snn_pkg::*;
  localparam int D = 64;

  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr, raddr;
  spt_word_t wdata, rdata;

  spt_bram #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  spt_word_t model [D];

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int a = 0; a < D; a++) begin
      for (int b = 0; b < SPT_W; b += 32) model[a][b +: 32] = $urandom;
      we <= 1; waddr <= 6'(a); wdata <= model[a];
      @(posedge clk);
    end
    we <= 0;
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(0, D - 1);
      re <= 1; raddr <= 6'(a);
      @(posedge clk);
      re <= 0;
      #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
