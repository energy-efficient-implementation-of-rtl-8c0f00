// tb_level_ir -- self-checking test of the IR NetWorkLevel (reduced: 24 inputs, 10 neurons).
//
// Loads random weight bits, then runs 80 latch/go steps with random spike vectors. Each
// expected output is the running sum of +10 (weight bit 1) or -1 (weight bit 0) over the
// input spikes, cleared by u-RESET. Also checks the side band and the N_IN + 1 latency.
module tb_level_ir;
  import snn_pkg::*;
  localparam int N_IN = 24, N_NEUR = 10;

  logic clk = 0, rst = 1, latch = 0, go = 0;
  logic [N_IN-1:0] in_vec;
  ctrl_t in_ctrl, out_ctrl;
  logic w_we = 0;
  logic [$clog2(N_NEUR)-1:0] w_row;
  logic [$clog2(N_IN)-1:0] w_col;
  logic w_data;
  logic signed [31:0] out_val [N_NEUR];
  logic ready, resetok;

  level_ir #(.N_IN(N_IN), .N_NEUR(N_NEUR)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_ur = 0;
  bit wb [N_NEUR][N_IN];
  int rs [N_NEUR];

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
    int lat;
    bit [N_IN-1:0] v;
    ctrl_t c;
    in_vec = '0; in_ctrl = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < N_NEUR; n++)
      for (int i = 0; i < N_IN; i++) begin
        wb[n][i] = 1'($urandom_range(0, 1));
        w_we <= 1; w_row <= 4'(n); w_col <= 5'(i); w_data <= wb[n][i];
        @(posedge clk);
      end
    w_we <= 0;
    for (int n = 0; n < N_NEUR; n++) rs[n] = 0;
    for (int img = 0; img < 80; img++) begin
      for (int i = 0; i < N_IN; i++) v[i] = ($urandom_range(0, 99) < 30);
      c = '{cmp_val: 4'($urandom_range(0, 9)), ucmp: 1'($urandom_range(0, 1)), ureset: (img % 25 == 0)};
      if (c.ureset) n_ur++;
      for (int n = 0; n < N_NEUR; n++) begin
        if (c.ureset) rs[n] = 0;
        for (int i = 0; i < N_IN; i++) if (v[i]) rs[n] += wb[n][i] ? 10 : -1;
      end
      in_vec <= v; in_ctrl <= c; latch <= 1;
      @(posedge clk);
      latch <= 0; go <= 1;
      @(posedge clk);
      go <= 0;
      lat = 0;
      do begin @(posedge clk); #1; lat++; end while (!ready);
      check("latency", lat, N_IN + 1);
      for (int n = 0; n < N_NEUR; n++) check("sum", int'(out_val[n]), rs[n]);
      check("ctrl", int'(out_ctrl), int'(c));
    end
    if (n_ur == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
