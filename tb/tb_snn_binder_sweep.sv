// tb_snn_binder_sweep -- the accuracy/energy sweeps of the design, run end to end: narrow
// synaptic weights, several values of z_s^hyp, and short spiking traces.
//
// The top is built with 5-bit weights (W_BITS = 5, one of the widths between 9 and 2 bits
// that the quantisation study covers); everything else keeps its default. The same synthetic
// ten-class task as tb_snn_binder is used, with weights that fit 5 bits: +15 minus a small
// jitter where pixel i is in the pattern of class n mod 10, -2 elsewhere. Pattern pixels spike
// with probability 0.5 (never in two consecutive images), so that the narrow weights still
// drive the neurons past threshold once h and h_s have settled low. Three 44-image traces
// (4 black + 40 active images) of classes 1, 2 and 8 are run three times, with z_s^hyp set
// to 880, 940 and 1000 through the zmax port; the second trace of every run carries a wrong
// label so that both scoring outcomes occur.
//
// Checks. An integer model, written independently of the RTL and taking z_s^hyp as an
// argument, predicts the SRC spike vector, h and z of SRC neuron 0, the ten IR sums at every
// Latch and the scores of every run. Every image step must take 792 clocks. The test fails if
// no image produced a spike, if the neuron-0 monitor never showed z = z_s^hyp or z = 100, or
// if no trace was scored as a match or none as a mismatch. With these short traces and 5-bit
// weights the larger z_s^hyp values make the neurons fire too slowly for any class sum to
// rise within 40 images, so every trace is then scored as digit 0: the same loss of accuracy
// at low spiking rates that the quantisation sweep shows for short traces.
module tb_snn_binder_sweep;
  import snn_pkg::*;

  localparam int NS = 100;
  localparam int WB = 5;
  localparam int PERIOD = N_PIX + 8;
  localparam int NZ = 3;
  localparam int ZVAL [NZ] = '{880, 940, 1000};

  logic clk = 0, sw_rst_n = 0, start = 0;
  logic [14:0] num_images;
  logic [Z_W-1:0] zmax = 10'd900;
  logic busy, done;
  logic spt_we = 0;
  logic [13:0] spt_waddr;
  spt_word_t spt_wdata;
  logic w_we = 0;
  logic [0:0] w_layer = '0;
  logic [6:0] w_row;
  logic [9:0] w_col;
  logic [WB-1:0] w_data;
  logic irw_we = 0;
  logic [3:0] irw_row;
  logic [6:0] irw_col;
  logic irw_data;
  logic [3:0] digit;
  logic scored, mismatch;
  logic [31:0] err_cnt, cmp_cnt;
  logic [N_PIX-1:0] l0_pix;
  logic [NS-1:0] src_spk;
  logic signed [31:0] ir_val [N_CLASS];
  logic signed [H_W-1:0] mon_h, mon_hs;
  logic [Z_W-1:0] mon_z;
  logic latch_o, go_o;
  logic hub_clk, hub_lat, hub_oe_n;
  logic [3:0] hub_addr;
  logic [2:0] hub_rgb0, hub_rgb1;

  snn_binder #(.W_BITS(WB)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #20_000_000_000;   // 2e6 clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus data ----------------
  localparam int MAXIMG = 160;
  int        cls_of [N_PIX];
  int        wv [NS][N_PIX];
  bit        irb [N_CLASS][NS];
  spt_word_t img [MAXIMG];
  int        n_img = 0;

  bit [NS-1:0] e_spk [MAXIMG];
  int          e_h0  [MAXIMG];
  int          e_z0  [MAXIMG];
  int          e_ir  [MAXIMG][N_CLASS];
  int          e_dig [MAXIMG];

  function automatic int fdiv(int a, int b);
    int q;
    q = a / b;
    if ((a % b) != 0 && a < 0) q = q - 1;
    return q;
  endfunction

  task automatic add_trace(int blank, int active, int cls, int label);
    bit prev [N_PIX];
    for (int i = 0; i < N_PIX; i++) prev[i] = 0;
    for (int t = 0; t < blank + active; t++) begin
      spt_word_t w;
      w = '0;
      if (t >= blank)
        for (int i = 0; i < N_PIX; i++)
          if (cls_of[i] == cls && !prev[i] && $urandom_range(0, 1) == 0) w.pix[i] = 1'b1;
      for (int i = 0; i < N_PIX; i++) prev[i] = w.pix[i];
      w.ctrl.ureset  = (t == 0);
      w.ctrl.ucmp    = (t == blank + active - 1);
      w.ctrl.cmp_val = 4'(label);
      img[n_img] = w;
      n_img++;
    end
  endtask

  // integer model of the network over all images, with z_s^hyp = zh
  int rh [NS], rhs [NS], rs [N_CLASS];
  task automatic model(int zh);
    for (int j = 0; j < n_img; j++) begin
      int cur, x, y, rz, best, bi;
      for (int n = 0; n < NS; n++) begin
        if (img[j].ctrl.ureset) begin rh[n] = 0; rhs[n] = 0; end
        cur = 0;
        for (int i = 0; i < N_PIX; i++) if (img[j].pix[i]) cur += wv[n][i];
        rz = (rh[n] < 500) ? zh : 100;
        if (n == 0) e_z0[j] = rz;
        x  = cur + 2 * (rh[n] - 4 * rhs[n] - 3000);
        y  = fdiv(3 * x, 4);
        if (y > 1023) y = 1023;
        if (y < -1024) y = -1024;
        rhs[n] = fdiv(rz * (rhs[n] - rh[n]), 1024) + rh[n];
        rh[n]  = y;
        e_spk[j][n] = (y >= 500);
      end
      e_h0[j] = rh[0];
      for (int k = 0; k < N_CLASS; k++) begin
        if (img[j].ctrl.ureset) rs[k] = 0;
        for (int n = 0; n < NS; n++) if (e_spk[j][n]) rs[k] += irb[k][n] ? 10 : -1;
        e_ir[j][k] = rs[k];
      end
      best = rs[0]; bi = 0;
      for (int k = 1; k < N_CLASS; k++) if (rs[k] > best) begin best = rs[k]; bi = k; end
      e_dig[j] = bi;
    end
  endtask

  // ---------------- monitors ----------------
  int period_idx = -1;
  longint cyc = 0, last_latch = 0;
  int n_match = 0, n_miss = 0, n_zhyp = 0, n_zdeep = 0, n_spike = 0, n_lat = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (latch_o) begin
      int p, j;
      p = period_idx + 1;
      period_idx <= p;
      n_lat++;
      if (p > 0) check("image period", int'(cyc - last_latch), PERIOD);
      last_latch <= cyc;
      j = p - 2;
      if (j >= 0 && j < n_img) begin
        checks++;
        if (src_spk !== e_spk[j]) begin
          failures++;
          if (failures < 30) $display("FAIL spikes of image %0d (zmax %0d)", j, zmax);
        end
        check("h of neuron 0", int'(mon_h), e_h0[j]);
        check("z of neuron 0", int'(mon_z), e_z0[j]);
        if (mon_z == 10'd100) n_zdeep++;
        if (mon_z == zmax) n_zhyp++;
        if (src_spk != '0) n_spike++;
      end
      j = p - 3;
      if (j >= 0 && j < n_img)
        for (int k = 0; k < N_CLASS; k++) check("IR sum", int'(ir_val[k]), e_ir[j][k]);
    end
    if (scored) begin
      if (mismatch) n_miss++; else n_match++;
    end
  end

  initial begin
    int trace_end [3];
    for (int i = 0; i < N_PIX; i++) cls_of[i] = int'((longint'(i) * 64'd2654435761 >> 8) % 10);
    for (int n = 0; n < NS; n++)
      for (int i = 0; i < N_PIX; i++)
        wv[n][i] = (cls_of[i] == n % 10) ? 15 - int'($urandom_range(0, 3)) : -2;
    for (int k = 0; k < N_CLASS; k++)
      for (int n = 0; n < NS; n++) irb[k][n] = (n % 10 == k);
    add_trace(4, 40, 1, 1);  trace_end[0] = n_img;
    add_trace(4, 40, 2, 9);  trace_end[1] = n_img;     // wrong label on purpose
    add_trace(4, 40, 8, 8);  trace_end[2] = n_img;

    repeat (4) @(posedge clk);
    sw_rst_n <= 1;
    repeat (30) @(posedge clk);
    for (int n = 0; n < NS; n++)
      for (int i = 0; i < N_PIX; i++) begin
        w_we <= 1; w_row <= 7'(n); w_col <= 10'(i); w_data <= WB'(wv[n][i]);
        @(posedge clk);
      end
    w_we <= 0;
    for (int k = 0; k < N_CLASS; k++)
      for (int n = 0; n < NS; n++) begin
        irw_we <= 1; irw_row <= 4'(k); irw_col <= 7'(n); irw_data <= irb[k][n];
        @(posedge clk);
      end
    irw_we <= 0;
    for (int a = 0; a < n_img; a++) begin
      spt_we <= 1; spt_waddr <= 14'(a); spt_wdata <= img[a];
      @(posedge clk);
    end
    spt_we <= 0;
    num_images <= 15'(n_img);

    for (int r = 0; r < NZ; r++) begin
      int e_cmp, e_err;
      zmax <= 10'(ZVAL[r]);
      model(ZVAL[r]);
      period_idx = -1;
      n_lat = 0;
      start <= 1;
      @(posedge clk);
      start <= 0;
      @(posedge clk);
      while (!done) @(posedge clk);
      check("periods per run", n_lat, n_img + 3);
      e_cmp = 0; e_err = 0;
      for (int t = 0; t < 3; t++) begin
        e_cmp++;
        if (e_dig[trace_end[t] - 1] != int'(img[trace_end[t] - 1].ctrl.cmp_val)) e_err++;
      end
      check("comparisons", int'(cmp_cnt), e_cmp);
      check("errors", int'(err_cnt), e_err);
      check("last digit", int'(digit), e_dig[trace_end[2] - 1]);
      $display("z_hyp %0d: traces scored %0d, errors %0d, digits %0d %0d %0d", ZVAL[r], cmp_cnt,
               err_cnt, e_dig[trace_end[0] - 1], e_dig[trace_end[1] - 1], e_dig[trace_end[2] - 1]);
    end

    $display("mechanisms: match=%0d mismatch=%0d zhyp=%0d zdeep=%0d spike_steps=%0d",
             n_match, n_miss, n_zhyp, n_zdeep, n_spike);
    if (n_zhyp == 0 || n_zdeep == 0) begin failures++; $display("never: z switch"); end
    if (n_spike == 0) begin failures++; $display("never: spike"); end
    if (n_match == 0) begin failures++; $display("never: correct classification"); end
    if (n_miss == 0)  begin failures++; $display("never: mismatch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
