// tb_ir_neuron -- self-checking test of the IntegratoR neuron (100 inputs, 1-bit weights).
//
// Random weight bits and random spike vectors; the expected sum is computed with +10 for a
// set weight bit and -1 for a clear one, accumulated across images and cleared by u-RESET.
// Also checks that `ready` returns exactly N_IN clocks after `go`.
module tb_ir_neuron;
  import snn_pkg::*;

  localparam int N_IN = 100;

  logic clk = 0, rst = 1, go = 0, ureset = 0;
  logic [N_IN-1:0] in_vec;
  logic [0:0] w_row [N_IN];
  logic ready;
  logic signed [31:0] s_out;

  ir_neuron #(.N_IN(N_IN)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_neg = 0, n_pos = 0, n_ur = 0;

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
    int ref_s, lat;
    bit ur;
    for (int i = 0; i < N_IN; i++) w_row[i] = 1'($urandom_range(0, 1));
    in_vec = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    ref_s = 0;
    for (int img = 0; img < 200; img++) begin
      ur = (img % 50 == 0);
      for (int i = 0; i < N_IN; i++) in_vec[i] = ($urandom_range(0, 99) < 20);
      if (ur) begin ref_s = 0; n_ur++; end
      for (int i = 0; i < N_IN; i++)
        if (in_vec[i]) begin
          if (w_row[i][0]) begin ref_s += 10; n_pos++; end
          else begin ref_s -= 1; n_neg++; end
        end
      ureset <= ur;
      go     <= 1;
      @(posedge clk);
      go     <= 0;
      ureset <= 0;
      lat = 0;
      do begin @(posedge clk); #1; lat++; end while (!ready);
      check("latency", lat, N_IN);
      check("sum", int'(s_out), ref_s);
      @(posedge clk);
    end
    if (n_pos == 0 || n_neg == 0 || n_ur == 0) begin failures++; $display("mechanism missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
