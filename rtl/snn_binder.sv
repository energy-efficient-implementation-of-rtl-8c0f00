// snn_binder -- top level: the Binder that assembles the SRC spiking network.
//
// Pipeline of NetWorkLevels, each working on a different image of the spiking trace:
//   level 0  level_inline : SpT block RAM -> 784-spike image + side band
//   level 1..N_SRC_LAYERS  level_src : N_SRC SRC neurons each (784 inputs, then N_SRC)
//   next     level_ir     : 10 IR neurons with 1-bit weights
//   last     level_cmp    : argmax, comparison with CMP_VAL, error counter
// plus the reset system and the HUB75 debug display. The clock (100 MHz) comes in as a
// port. The default is the 784-100-10 network; N_SRC_LAYERS = 4 gives 784-100-100-100-100-10.
//
// Control unit & micro-machine. One image step ("period") is:
//   LATCH  every level copies the previous level's output buffer into its input interface
//   GO     every level starts (level 0 reads the next image from the block RAM)
//   WAIT   until every level is ready again (the 784-input SRC level is the slowest:
//          784 accumulation cycles, 1 update cycle, 1 output-buffer cycle, and the cycle
//          in which the Binder sees Ready)
//   SETTLE OVERHEAD-5 idle cycles (3 with the default OVERHEAD of 8)
// so one period is 784 + OVERHEAD = 792 clocks, 174,240 clocks for a 220-image trace
// (1.7424 ms at 100 MHz). A run is started with `start` and `num_images`; it lasts
// num_images + N_SRC_LAYERS + 2 periods (the extra periods drain the pipeline), then
// `done` is raised. The u-RESET and u-CMP side-band bits travel with each image, so each
// level resets its neurons, and the output level scores, exactly when that image reaches it.
//
// From the source: the level chain and its sizes, the Go/Ready/Latch synchronisation, the
// 784 + 8 cycle period, the side band, the shared clock and reset. This design's own: the
// exact split of the 8 extra cycles, the pipelining of levels on successive images, the
// load ports for traces and weights, and the run control.
module snn_binder
  import snn_pkg::*;
#(
  parameter int unsigned N_SRC        = 100,    // SRC neurons per SRC level
  parameter int unsigned N_SRC_LAYERS = 1,      // number of SRC levels
  parameter int unsigned W_BITS       = 9,      // SRC weight width (9..2)
  parameter int unsigned BETA_SHIFT   = 0,      // input-current carry (0: beta = 0)
  parameter int unsigned SPT_DEPTH    = 15840,  // images the SpT memory holds
  parameter int unsigned OVERHEAD     = 8,      // clocks per image beyond the 784 inputs
  parameter int unsigned RST_HOLD     = 16,
  parameter int unsigned HUB_CLK_DIV  = 2,
  parameter int unsigned HUB_ON       = 256,
  localparam int unsigned ADDR_W      = $clog2(SPT_DEPTH),
  localparam int unsigned LAY_W       = (N_SRC_LAYERS > 1) ? $clog2(N_SRC_LAYERS) : 1,
  localparam int unsigned S_W         = 32
) (
  input  logic                       clk,          // 100 MHz
  input  logic                       sw_rst_n,     // reset push-switch, 0 = pressed
  // run control
  input  logic                       start,
  input  logic [ADDR_W:0]            num_images,
  input  logic [Z_W-1:0]             zmax,         // z_s^hyp (880..1000; 900 reference)
  output logic                       busy,
  output logic                       done,
  // SpT memory load
  input  logic                       spt_we,
  input  logic [ADDR_W-1:0]          spt_waddr,
  input  spt_word_t                  spt_wdata,
  // SRC weight load
  input  logic                       w_we,
  input  logic [LAY_W-1:0]           w_layer,
  input  logic [$clog2(N_SRC)-1:0]   w_row,
  input  logic [$clog2(N_PIX)-1:0]   w_col,
  input  logic [W_BITS-1:0]          w_data,
  // IR weight load
  input  logic                       irw_we,
  input  logic [CLS_W-1:0]           irw_row,
  input  logic [$clog2(N_SRC)-1:0]   irw_col,
  input  logic                       irw_data,
  // results and observation
  output logic [CLS_W-1:0]           digit,        // L3L4
  output logic                       scored,
  output logic                       mismatch,
  output logic [31:0]                err_cnt,      // ErrValueCMP
  output logic [31:0]                cmp_cnt,      // INCCMP
  output logic [N_PIX-1:0]           l0_pix,       // L0L1
  output logic [N_SRC-1:0]           src_spk,      // L1L2 (last SRC level)
  output logic signed [S_W-1:0]      ir_val [N_CLASS],  // L2L3
  output logic signed [H_W-1:0]      mon_h,        // Fht  of SRC neuron 0, level 1
  output logic signed [H_W-1:0]      mon_hs,       // Fhst of SRC neuron 0, level 1
  output logic [Z_W-1:0]             mon_z,        // Fz   of SRC neuron 0, level 1
  output logic                       latch_o,
  output logic                       go_o,
  // HUB75 panel
  output logic                       hub_clk,
  output logic                       hub_lat,
  output logic                       hub_oe_n,
  output logic [3:0]                 hub_addr,
  output logic [2:0]                 hub_rgb0,
  output logic [2:0]                 hub_rgb1
);

  localparam int unsigned N_LEV = N_SRC_LAYERS + 3;   // inline, SRC..., IR, CMP

  logic rst;
  logic latch, go, run_start, clr;
  logic [N_LEV-1:0] lev_ready, lev_resetok;

  reset_system #(.HOLD(RST_HOLD), .ACTIVE_LOW(1'b1)) u_rst (
    .clk, .sw(sw_rst_n), .rst
  );

  // ---------------- level 0: input interface ----------------
  ctrl_t l0_ctrl;

  level_inline #(.DEPTH(SPT_DEPTH), .ADDR_W(ADDR_W)) u_l0 (
    .clk, .rst, .start(run_start), .num_images, .go,
    .we(spt_we), .waddr(spt_waddr), .wdata(spt_wdata),
    .out_pix(l0_pix), .out_ctrl(l0_ctrl),
    .ready(lev_ready[0]), .resetok(lev_resetok[0])
  );

  // ---------------- SRC levels ----------------
  logic [N_SRC-1:0]      spk  [N_SRC_LAYERS];
  ctrl_t                 sctl [N_SRC_LAYERS];
  logic signed [H_W-1:0] h_m  [N_SRC_LAYERS];
  logic signed [H_W-1:0] hs_m [N_SRC_LAYERS];
  logic [Z_W-1:0]        z_m  [N_SRC_LAYERS];

  for (genvar k = 0; k < N_SRC_LAYERS; k++) begin : g_src
    logic we_k;
    assign we_k = w_we && (32'(w_layer) == k);
    if (k == 0) begin : g_first
      level_src #(.N_IN(N_PIX), .N_NEUR(N_SRC), .W_BITS(W_BITS), .BETA_SHIFT(BETA_SHIFT)) u_lev (
        .clk, .rst, .latch, .go,
        .in_vec(l0_pix), .in_ctrl(l0_ctrl), .zmax,
        .w_we(we_k), .w_row, .w_col, .w_data,
        .out_spk(spk[k]), .out_ctrl(sctl[k]),
        .ready(lev_ready[k+1]), .resetok(lev_resetok[k+1]),
        .mon_h(h_m[k]), .mon_hs(hs_m[k]), .mon_z(z_m[k])
      );
    end else begin : g_next
      level_src #(.N_IN(N_SRC), .N_NEUR(N_SRC), .W_BITS(W_BITS), .BETA_SHIFT(BETA_SHIFT)) u_lev (
        .clk, .rst, .latch, .go,
        .in_vec(spk[k-1]), .in_ctrl(sctl[k-1]), .zmax,
        .w_we(we_k), .w_row, .w_col(w_col[$clog2(N_SRC)-1:0]), .w_data,
        .out_spk(spk[k]), .out_ctrl(sctl[k]),
        .ready(lev_ready[k+1]), .resetok(lev_resetok[k+1]),
        .mon_h(h_m[k]), .mon_hs(hs_m[k]), .mon_z(z_m[k])
      );
    end
  end

  assign src_spk = spk[N_SRC_LAYERS-1];
  assign mon_h   = h_m[0];
  assign mon_hs  = hs_m[0];
  assign mon_z   = z_m[0];

  // ---------------- IR level ----------------
  ctrl_t ir_ctrl;

  level_ir #(.N_IN(N_SRC), .N_NEUR(N_CLASS), .S_W(S_W)) u_ir (
    .clk, .rst, .latch, .go,
    .in_vec(src_spk), .in_ctrl(sctl[N_SRC_LAYERS-1]),
    .w_we(irw_we), .w_row(irw_row), .w_col(irw_col), .w_data(irw_data),
    .out_val(ir_val), .out_ctrl(ir_ctrl),
    .ready(lev_ready[N_SRC_LAYERS+1]), .resetok(lev_resetok[N_SRC_LAYERS+1])
  );

  // ---------------- output level ----------------
  level_cmp #(.S_W(S_W), .CNT_W(32)) u_cmp (
    .clk, .rst, .clr, .latch, .go,
    .in_val(ir_val), .in_ctrl(ir_ctrl),
    .digit, .scored, .mismatch, .err_cnt, .cmp_cnt,
    .ready(lev_ready[N_SRC_LAYERS+2]), .resetok(lev_resetok[N_SRC_LAYERS+2])
  );

  // ---------------- display ----------------
  hub75_display #(.CLK_DIV(HUB_CLK_DIV), .ON_CYCLES(HUB_ON)) u_hub (
    .clk, .rst, .img(l0_pix), .digit,
    .hub_clk, .hub_lat, .hub_oe_n, .hub_addr, .rgb0(hub_rgb0), .rgb1(hub_rgb1)
  );

  // ---------------- control unit & micro-machine ----------------
  typedef enum logic [2:0] {B_IDLE, B_LATCH, B_GO, B_WAIT, B_SETTLE} bstate_t;
  bstate_t bstate;

  localparam int unsigned SETTLE = (OVERHEAD > 5) ? OVERHEAD - 5 : 0;

  logic [ADDR_W+1:0] periods_left;
  logic [7:0]        settle_cnt;
  logic              all_ready;

  assign all_ready = &lev_ready;
  assign latch     = (bstate == B_LATCH);
  assign go        = (bstate == B_GO);
  assign latch_o   = latch;
  assign go_o      = go;
  assign busy      = (bstate != B_IDLE);
  assign run_start = (bstate == B_IDLE) && start && (&lev_resetok);
  assign clr       = run_start;

  always_ff @(posedge clk) begin
    if (rst) begin
      bstate       <= B_IDLE;
      periods_left <= '0;
      settle_cnt   <= '0;
      done         <= 1'b0;
    end else begin
      unique case (bstate)
        B_IDLE: begin
          if (run_start) begin
            done         <= 1'b0;
            periods_left <= (ADDR_W+2)'(num_images) + (ADDR_W+2)'(N_SRC_LAYERS + 2);
            bstate       <= B_LATCH;
          end
        end
        B_LATCH: bstate <= B_GO;
        B_GO:    bstate <= B_WAIT;
        B_WAIT: begin
          if (all_ready) begin
            settle_cnt <= '0;
            if (SETTLE == 0) begin
              if (periods_left == 1) begin
                done   <= 1'b1;
                bstate <= B_IDLE;
              end else begin
                bstate <= B_LATCH;
              end
              periods_left <= periods_left - 1'b1;
            end else begin
              bstate <= B_SETTLE;
            end
          end
        end
        B_SETTLE: begin
          if (settle_cnt == 8'(SETTLE - 1)) begin
            periods_left <= periods_left - 1'b1;
            if (periods_left == 1) begin
              done   <= 1'b1;
              bstate <= B_IDLE;
            end else begin
              bstate <= B_LATCH;
            end
          end else begin
            settle_cnt <= settle_cnt + 1'b1;
          end
        end
        default: bstate <= B_IDLE;
      endcase
    end
  end

endmodule
