// tb_level_cmp -- self-checking test of the output level (argmax, scoring, counters).
//
// Applies 300 random sets of 10 signed values (with deliberate ties), some with u-CMP set,
// and checks the winning index (lowest index on a tie), the comparison and error counters
// against CMP_VAL, the `scored` pulse and the counter clear.
module tb_level_cmp;
  import snn_pkg::*;

  logic clk = 0, rst = 1, clr = 0, latch = 0, go = 0;
  logic signed [31:0] in_val [N_CLASS];
  ctrl_t in_ctrl;
  logic [CLS_W-1:0] digit;
  logic scored, mismatch, ready, resetok;
  logic [31:0] err_cnt, cmp_cnt;

  level_cmp dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_match = 0, n_miss = 0, n_tie = 0, n_scored = 0;

  always @(posedge clk) if (scored && !rst) n_scored++;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v [N_CLASS];
    int best, bi, e_err, e_cmp, lat;
    ctrl_t c;
    for (int i = 0; i < N_CLASS; i++) in_val[i] = 0;
    in_ctrl = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    e_err = 0; e_cmp = 0;
    for (int k = 0; k < 300; k++) begin
      for (int i = 0; i < N_CLASS; i++) v[i] = int'($urandom_range(0, 4000)) - 2000;
      if (k % 7 == 3) begin v[2] = 3000; v[6] = 3000; n_tie++; end
      best = v[0]; bi = 0;
      for (int i = 1; i < N_CLASS; i++) if (v[i] > best) begin best = v[i]; bi = i; end
      c.ucmp    = 1'($urandom_range(0, 1));
      c.ureset  = 1'b0;
      c.cmp_val = ($urandom_range(0, 1)) ? 4'(bi) : 4'($urandom_range(0, 9));
      if (c.ucmp) begin
        e_cmp++;
        if (c.cmp_val != 4'(bi)) begin e_err++; n_miss++; end else n_match++;
      end
      for (int i = 0; i < N_CLASS; i++) in_val[i] <= v[i];
      in_ctrl <= c; latch <= 1;
      @(posedge clk);
      latch <= 0; go <= 1;
      @(posedge clk);
      go <= 0;
      lat = 0;
      do begin @(posedge clk); #1; lat++; end while (!ready);
      check("latency", lat, 2);
      check("digit", int'(digit), bi);
      check("cmp_cnt", int'(cmp_cnt), e_cmp);
      check("err_cnt", int'(err_cnt), e_err);
      if (c.ucmp) check("mismatch", int'(mismatch), int'(c.cmp_val != 4'(bi)));
    end
    check("scored pulses", n_scored, e_cmp);
    clr <= 1;
    @(posedge clk);
    clr <= 0;
    #1;
    check("clear", int'(err_cnt) + int'(cmp_cnt), 0);
    if (n_match == 0 || n_miss == 0 || n_tie == 0) begin failures++; $display("mechanism missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
