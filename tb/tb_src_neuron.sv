// tb_src_neuron -- self-checking test of one SRC neuron at its full 784-input size.
//
// Random signed 9-bit weights and random input spike images of varying density are applied
// for 300 images. A reference model written with plain integer arithmetic (multiplications
// and floor divisions instead of shifts) predicts h, h_s, z_s and the spike after each image;
// the testbench also checks that `ready` returns exactly N_IN + 1 clocks after `go` and that
// u-RESET clears the state. It counts how often each mechanism occurred (positive and
// negative saturation, both z_s values, spikes, u-RESET) and fails if one never did.
module tb_src_neuron;
  import snn_pkg::*;

  localparam int N_IN = 784;
  localparam int WB   = 9;

  logic clk = 0, rst = 1, go = 0, ureset = 0;
  logic [N_IN-1:0] in_vec;
  logic [WB-1:0]   w_row [N_IN];
  logic [Z_W-1:0]  zmax;
  logic ready, spike;
  logic signed [H_W-1:0] h, hs;
  logic [Z_W-1:0] z;

  src_neuron #(.N_IN(N_IN), .W_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_sat_hi = 0, n_sat_lo = 0, n_zhyp = 0, n_zdeep = 0, n_spike = 0, n_ureset = 0;
  int wv [N_IN];

  function automatic int fdiv(int a, int b);   // floor division, b > 0
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
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rh, rhs, rz, cur, x, y, lat, dens;
    bit rspk, ur;
    zmax   = 10'd900;
    in_vec = '0;
    for (int i = 0; i < N_IN; i++) begin
      wv[i]    = $signed($urandom_range(0, 355)) - 100;   // -100 .. 255
      w_row[i] = WB'(wv[i]);
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    rh = 0; rhs = 0;
    for (int img = 0; img < 300; img++) begin
      ur = (img % 60 == 0);
      case ($urandom_range(0, 3))
        0: dens = 0;
        1: dens = 2;
        2: dens = 10;
        default: dens = 40;
      endcase
      for (int i = 0; i < N_IN; i++) in_vec[i] = ($urandom_range(0, 99) < dens);
      if (img % 97 == 50) zmax = 10'd980; else if (img % 97 == 0) zmax = 10'd900;
      // reference
      if (ur) begin rh = 0; rhs = 0; n_ureset++; end
      cur = 0;
      for (int i = 0; i < N_IN; i++) if (in_vec[i]) cur += wv[i];
      rz  = (rh < 500) ? int'(zmax) : 100;
      x   = cur + 2 * (rh - 4 * rhs - 3000);
      y   = fdiv(3 * x, 4);
      if (y > 1023) begin y = 1023; n_sat_hi++; end
      if (y < -1024) begin y = -1024; n_sat_lo++; end
      rhs = fdiv(rz * (rhs - rh), 1024) + rh;
      rh  = y;
      rspk = (rh >= 500);
      if (rz == 100) n_zdeep++; else n_zhyp++;
      if (rspk) n_spike++;
      // drive
      ureset <= ur;
      go     <= 1;
      @(posedge clk);
      go     <= 0;
      ureset <= 0;
      lat = 0;
      do begin
        @(posedge clk);
        #1;
        lat++;
      end while (!ready);
      check("latency", lat, N_IN + 1);
      check("h", int'(h), rh);
      check("hs", int'(hs), rhs);
      check("z", int'(z), rz);
      check("spike", int'(spike), int'(rspk));
      @(posedge clk);
    end
    if (n_sat_hi == 0) begin failures++; $display("no positive saturation"); end
    if (n_sat_lo == 0) begin failures++; $display("no negative saturation"); end
    if (n_zhyp == 0 || n_zdeep == 0) begin failures++; $display("z did not switch"); end
    if (n_spike == 0) begin failures++; $display("no spike"); end
    if (n_ureset == 0) begin failures++; $display("no u-RESET"); end
    $display("mechanisms: sat_hi=%0d sat_lo=%0d zhyp=%0d zdeep=%0d spikes=%0d ureset=%0d",
             n_sat_hi, n_sat_lo, n_zhyp, n_zdeep, n_spike, n_ureset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
