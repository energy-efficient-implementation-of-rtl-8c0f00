// tb_snn_binder_deep -- end-to-end test of the four-SRC-level network (784-100-100-100-100-10),
// the deeper configuration used to show that levels can be stacked.
//
// Same synthetic ten-class task and trace format as tb_snn_binder. The first SRC level uses
// the same pattern weights; every later SRC level connects neuron n to neuron m of the level
// before it with +250 if n and m belong to the same class (n mod 10 = m mod 10) and -20
// otherwise. An integer model of all four SRC levels and the IR level predicts the spike
// vector of the last SRC level and the ten IR sums at every Latch, as well as the scores.
// Each image step must still take 792 clocks; a run lasts num_images + 6 steps.
module tb_snn_binder_deep;
  import snn_pkg::*;

  localparam int NS = 100;          // SRC neurons per level
  localparam int L  = 4;            // SRC levels
  localparam int PERIOD = N_PIX + 8;

  logic clk = 0, sw_rst_n = 0, start = 0;
  logic [14:0] num_images;
  logic [Z_W-1:0] zmax = 10'd900;
  logic busy, done;
  logic spt_we = 0;
  logic [13:0] spt_waddr;
  spt_word_t spt_wdata;
  logic w_we = 0;
  logic [1:0] w_layer = '0;
  logic [6:0] w_row;
  logic [9:0] w_col;
  logic [8:0] w_data;
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

  snn_binder #(.N_SRC_LAYERS(L)) dut (.*);

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
    #40_000_000_000;   // 4e6 clocks
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus data ----------------
  localparam int MAXIMG = 320;
  int        cls_of [N_PIX];
  int        wv [NS][N_PIX];
  int        wd [L][NS][NS];
  bit        irb [N_CLASS][NS];
  spt_word_t img [MAXIMG];
  int        n_img = 0;

  // expected values per image index
  bit [NS-1:0] e_spk [MAXIMG];
  int          e_h0  [MAXIMG];
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
          if (cls_of[i] == cls && !prev[i] && $urandom_range(0, 3) == 0) w.pix[i] = 1'b1;
      for (int i = 0; i < N_PIX; i++) prev[i] = w.pix[i];
      w.ctrl.ureset  = (t == 0);
      w.ctrl.ucmp    = (t == blank + active - 1);
      w.ctrl.cmp_val = 4'(label);
      img[n_img] = w;
      n_img++;
    end
  endtask

  // integer model of the network over images [first, last]
  int rh [L][NS], rhs [L][NS], rs [N_CLASS];
  task automatic model(int first, int last);
    bit [NS-1:0] prev_spk;
    for (int j = first; j <= last; j++) begin
      int cur, x, y, rz, best, bi;
      for (int l = 0; l < L; l++) begin
        bit [NS-1:0] spk;
        for (int n = 0; n < NS; n++) begin
          if (img[j].ctrl.ureset) begin rh[l][n] = 0; rhs[l][n] = 0; end
          cur = 0;
          if (l == 0) begin
            for (int i = 0; i < N_PIX; i++) if (img[j].pix[i]) cur += wv[n][i];
          end else begin
            for (int m = 0; m < NS; m++) if (prev_spk[m]) cur += wd[l][n][m];
          end
          rz = (rh[l][n] < 500) ? 900 : 100;
          x  = cur + 2 * (rh[l][n] - 4 * rhs[l][n] - 3000);
          y  = fdiv(3 * x, 4);
          if (y > 1023) y = 1023;
          if (y < -1024) y = -1024;
          rhs[l][n] = fdiv(rz * (rhs[l][n] - rh[l][n]), 1024) + rh[l][n];
          rh[l][n]  = y;
          spk[n] = (y >= 500);
        end
        prev_spk = spk;
      end
      e_spk[j] = prev_spk;
      e_h0[j]  = rh[0][0];
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
  int run_first = 0, run_n = 0, period_idx = -1;
  longint cyc = 0, last_latch = 0;
  int n_ureset = 0, n_match = 0, n_miss = 0, n_sat_hi = 0, n_sat_lo = 0, n_zhyp = 0,
      n_zdeep = 0, n_spike = 0, n_flush = 0, n_hub = 0, e_cmp = 0, e_err = 0;
  longint lat_times [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (hub_lat) n_hub++;
    if (latch_o) begin
      int p, j;
      p = period_idx + 1;
      period_idx <= p;
      lat_times.push_back(cyc);
      if (p > 0) check("image period", int'(cyc - last_latch), PERIOD);
      last_latch <= cyc;
      if (dut.u_l0.out_ctrl.ureset) n_ureset++;
      if (p >= 1 && p <= run_n && l0_pix == '0 && dut.u_l0.out_ctrl == '0) ;
      if (p > run_n) n_flush++;
      j = p - L - 1;                          // image whose last-level SRC result is buffered
      if (j >= 0 && j < run_n) begin
        checks++;
        if (src_spk !== e_spk[run_first + j]) begin
          failures++;
          if (failures < 30) $display("FAIL spikes of image %0d", run_first + j);
        end
        if (src_spk != '0) n_spike++;
      end
      j = p - 2;                              // image whose first-level SRC result is buffered
      if (j >= 0 && j < run_n) begin
        check("h of neuron 0", int'(mon_h), e_h0[run_first + j]);
        if (mon_h == 1023) n_sat_hi++;
        if (mon_h == -1024) n_sat_lo++;
        if (mon_z == 10'd100) n_zdeep++;
        if (mon_z == 10'd900) n_zhyp++;
      end
      j = p - L - 2;                              // image whose IR result is buffered
      if (j >= 0 && j < run_n)
        for (int k = 0; k < N_CLASS; k++) check("IR sum", int'(ir_val[k]), e_ir[run_first + j][k]);
    end
    if (scored) begin
      if (mismatch) n_miss++; else n_match++;
    end
  end

  // ---------------- sequence ----------------
  task automatic run(int first, int n);
    longint t0;
    run_first = first;
    run_n = n;
    period_idx = -1;
    lat_times.delete();
    // the input level reads from address 0; place this run's images there
    for (int a = 0; a < n; a++) begin
      spt_we <= 1; spt_waddr <= 14'(a); spt_wdata <= img[first + a];
      @(posedge clk);
    end
    spt_we <= 0;
    num_images <= 15'(n);
    model(first, first + n - 1);
    start <= 1;
    @(posedge clk);
    start <= 0;
    t0 = cyc;
    @(posedge clk);
    while (!done) @(posedge clk);
    check("periods per run", lat_times.size(), n + L + 2);
  endtask

  initial begin
    int trace_end [4];
    for (int i = 0; i < N_PIX; i++) cls_of[i] = int'((longint'(i) * 64'd2654435761 >> 8) % 10);
    for (int n = 0; n < NS; n++)
      for (int i = 0; i < N_PIX; i++)
        wv[n][i] = (cls_of[i] == n % 10) ? 120 + int'($urandom_range(0, 20)) - 10 : -30;
    for (int l = 1; l < L; l++)
      for (int n = 0; n < NS; n++)
        for (int m = 0; m < NS; m++) wd[l][n][m] = (n % 10 == m % 10) ? 250 : -20;
    for (int k = 0; k < N_CLASS; k++)
      for (int n = 0; n < NS; n++) irb[k][n] = (n % 10 == k);
    add_trace(20, 200, 3, 3);  trace_end[0] = n_img;
    add_trace(4, 40, 7, 7);    trace_end[1] = n_img;
    add_trace(2, 20, 5, 5);    trace_end[2] = n_img;
    add_trace(2, 20, 0, 6);    trace_end[3] = n_img;    // wrong label on purpose
    for (int l = 0; l < L; l++) for (int n = 0; n < NS; n++) begin rh[l][n] = 0; rhs[l][n] = 0; end
    for (int k = 0; k < N_CLASS; k++) rs[k] = 0;

    repeat (4) @(posedge clk);
    sw_rst_n <= 1;
    repeat (30) @(posedge clk);
    // load the weights
    for (int n = 0; n < NS; n++)
      for (int i = 0; i < N_PIX; i++) begin
        w_we <= 1; w_layer <= 2'd0; w_row <= 7'(n); w_col <= 10'(i); w_data <= 9'(wv[n][i]);
        @(posedge clk);
      end
    for (int l = 1; l < L; l++)
      for (int n = 0; n < NS; n++)
        for (int m = 0; m < NS; m++) begin
          w_we <= 1; w_layer <= 2'(l); w_row <= 7'(n); w_col <= 10'(m); w_data <= 9'(wd[l][n][m]);
          @(posedge clk);
        end
    w_we <= 0;
    for (int k = 0; k < N_CLASS; k++)
      for (int n = 0; n < NS; n++) begin
        irw_we <= 1; irw_row <= 4'(k); irw_col <= 7'(n); irw_data <= irb[k][n];
        @(posedge clk);
      end
    irw_we <= 0;

    // run 1: 220-image trace and 44-image trace
    run(0, trace_end[1]);
    check("220-image trace clocks", int'(lat_times[220] - lat_times[0]), 174240);
    for (int t = 0; t < 2; t++) begin
      e_cmp++;
      if (e_dig[trace_end[t] - 1] != int'(img[trace_end[t] - 1].ctrl.cmp_val)) e_err++;
    end
    check("comparisons run 1", int'(cmp_cnt), e_cmp);
    check("errors run 1", int'(err_cnt), e_err);
    check("digit run 1", int'(digit), e_dig[trace_end[1] - 1]);
    $display("run 1: traces scored %0d, errors %0d, last digit %0d", cmp_cnt, err_cnt, digit);

    // run 2: two 22-image traces, the second mislabelled
    e_cmp = 0; e_err = 0;
    run(trace_end[1], trace_end[3] - trace_end[1]);
    for (int t = 2; t < 4; t++) begin
      e_cmp++;
      if (e_dig[trace_end[t] - 1] != int'(img[trace_end[t] - 1].ctrl.cmp_val)) e_err++;
    end
    check("comparisons run 2", int'(cmp_cnt), e_cmp);
    check("errors run 2", int'(err_cnt), e_err);
    check("digit run 2", int'(digit), e_dig[trace_end[3] - 1]);
    $display("run 2: traces scored %0d, errors %0d, last digit %0d", cmp_cnt, err_cnt, digit);

    $display("mechanisms: ureset=%0d match=%0d mismatch=%0d sat_hi=%0d sat_lo=%0d zhyp=%0d zdeep=%0d spike_steps=%0d flush=%0d hub_rows=%0d",
             n_ureset, n_match, n_miss, n_sat_hi, n_sat_lo, n_zhyp, n_zdeep, n_spike, n_flush, n_hub);
    if (n_ureset == 0) begin failures++; $display("never: u-RESET"); end
    if (n_match == 0)  begin failures++; $display("never: correct classification"); end
    if (n_miss == 0)   begin failures++; $display("never: mismatch"); end
    if (n_sat_hi == 0) begin failures++; $display("never: positive saturation"); end
    if (n_sat_lo == 0) begin failures++; $display("never: negative saturation"); end
    if (n_zhyp == 0 || n_zdeep == 0) begin failures++; $display("never: z switch"); end
    if (n_spike == 0)  begin failures++; $display("never: spike"); end
    if (n_flush == 0)  begin failures++; $display("never: flush"); end
    if (n_hub == 0)    begin failures++; $display("never: display row"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
