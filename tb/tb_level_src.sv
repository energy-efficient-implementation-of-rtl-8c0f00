// tb_level_src -- self-checking test of an SRC NetWorkLevel (reduced: 40 inputs, 6 neurons).
//
// Loads a random weight matrix through the write port, then runs 150 latch/go steps with
// random input vectors and side bands. An integer reference model of every neuron predicts
// the spike vector in the output buffer; the side band must come out with its image, the
// level must be ready N_IN + 2 clocks after `go`, and u-RESET must clear the neurons.
module tb_level_src;
  import snn_pkg::*;
  localparam int N_IN = 40, N_NEUR = 6, WB = 9;

  logic clk = 0, rst = 1, latch = 0, go = 0;
  logic [N_IN-1:0] in_vec;
  ctrl_t in_ctrl, out_ctrl;
  logic [Z_W-1:0] zmax = 10'd900;
  logic w_we = 0;
  logic [$clog2(N_NEUR)-1:0] w_row;
  logic [$clog2(N_IN)-1:0] w_col;
  logic [WB-1:0] w_data;
  logic [N_NEUR-1:0] out_spk;
  logic ready, resetok;
  logic signed [H_W-1:0] mon_h, mon_hs;
  logic [Z_W-1:0] mon_z;

  level_src #(.N_IN(N_IN), .N_NEUR(N_NEUR), .W_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_spk = 0, n_ur = 0;
  int wv [N_NEUR][N_IN];
  int rh [N_NEUR], rhs [N_NEUR];

  function automatic int fdiv(int a, int b);
    int q;
    q = a / b;
    if ((a % b) != 0 && a < 0) q = q - 1;
    return q;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, cur, x, y, rz;
    bit [N_NEUR-1:0] exp_spk;
    bit [N_IN-1:0] v;
    ctrl_t c;
    in_vec = '0; in_ctrl = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    #1;
    check("resetok", int'(resetok), 1);
    for (int n = 0; n < N_NEUR; n++)
      for (int i = 0; i < N_IN; i++) begin
        wv[n][i] = int'($urandom_range(0, 511)) - 256;
        w_we <= 1; w_row <= 3'(n); w_col <= 6'(i); w_data <= WB'(wv[n][i]);
        @(posedge clk);
      end
    w_we <= 0;
    for (int n = 0; n < N_NEUR; n++) begin rh[n] = 0; rhs[n] = 0; end
    for (int img = 0; img < 150; img++) begin
      for (int i = 0; i < N_IN; i++) v[i] = ($urandom_range(0, 99) < 50);
      c = '{cmp_val: 4'($urandom_range(0, 9)), ucmp: 1'($urandom_range(0, 1)), ureset: (img % 40 == 0)};
      in_vec <= v; in_ctrl <= c; latch <= 1;
      @(posedge clk);
      latch <= 0;
      in_vec <= '0;
      if (c.ureset) n_ur++;
      for (int n = 0; n < N_NEUR; n++) begin
        if (c.ureset) begin rh[n] = 0; rhs[n] = 0; end
        cur = 0;
        for (int i = 0; i < N_IN; i++) if (v[i]) cur += wv[n][i];
        rz = (rh[n] < 500) ? 900 : 100;
        x  = cur + 2 * (rh[n] - 4 * rhs[n] - 3000);
        y  = fdiv(3 * x, 4);
        if (y > 1023) y = 1023;
        if (y < -1024) y = -1024;
        rhs[n] = fdiv(rz * (rhs[n] - rh[n]), 1024) + rh[n];
        rh[n]  = y;
        exp_spk[n] = (y >= 500);
      end
      go <= 1;
      @(posedge clk);
      go <= 0;
      lat = 0;
      do begin @(posedge clk); #1; lat++; end while (!ready);
      check("latency", lat, N_IN + 2);
      check("spikes", int'(out_spk), int'(exp_spk));
      check("ctrl", int'(out_ctrl), int'(c));
      check("mon_h", int'(mon_h), rh[0]);
      n_spk += $countones(exp_spk);
    end
    if (n_spk == 0 || n_ur == 0) begin failures++; $display("no spike or no u-RESET"); end
    $display("spikes=%0d ureset=%0d", n_spk, n_ur);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
