// level_cmp -- output (comparator) level: winner-take-all over the IR outputs and scoring.
//
// On `latch` it takes the N_CLASS integrated values of the IR level and their side band.
// After `go` it finds the index of the largest value (CMP(0..9); on a tie the lowest index
// wins) and puts it in its one-entry output buffer `digit`. If the image carries u-CMP (the
// last image of a spiking trace), the index is compared with the expected class CMP_VAL:
// `cmp_cnt` counts the comparisons and `err_cnt` the mismatches, from which the accuracy is
// 1 - err_cnt/cmp_cnt. `scored` pulses for one cycle when a comparison was made.
// Timing: `ready` drops after `go` and is back two cycles later.
//
// From the source: argmax of the 10 IR values, comparison with CMP_VAL when u-CMP is set,
// an error counter. The comparison counter, the tie rule and the counter widths are this
// design's own.
module level_cmp
  import snn_pkg::*;
#(
  parameter int unsigned S_W   = 32,
  parameter int unsigned CNT_W = 32
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  clr,                 // clear the counters (new run)
  input  logic                  latch,
  input  logic                  go,
  input  logic signed [S_W-1:0] in_val [N_CLASS],
  input  ctrl_t                 in_ctrl,
  output logic [CLS_W-1:0]      digit,               // output buffer (index of the max)
  output logic                  scored,
  output logic                  mismatch,            // last comparison was wrong
  output logic [CNT_W-1:0]      err_cnt,             // ErrValueCMP
  output logic [CNT_W-1:0]      cmp_cnt,             // INCCMP
  output logic                  ready,
  output logic                  resetok
);

  logic signed [S_W-1:0] val_buf [N_CLASS];
  ctrl_t                 ctrl_buf;
  logic                  done, nrn_go, capture;
  logic [CLS_W-1:0]      best_idx;
  logic signed [S_W-1:0] best_val;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_CLASS; i++) val_buf[i] <= '0;
      ctrl_buf <= '0;
    end else if (latch) begin
      val_buf  <= in_val;
      ctrl_buf <= in_ctrl;
    end
  end

  // comparator chain CMP(0..9)
  always_comb begin
    best_idx = '0;
    best_val = val_buf[0];
    for (int i = 1; i < N_CLASS; i++) begin
      if (val_buf[i] > best_val) begin
        best_val = val_buf[i];
        best_idx = CLS_W'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) done <= 1'b1;
    else     done <= !nrn_go;
  end

  level_ctrl u_ctrl (
    .clk, .rst, .go, .nrn_ready_all(done),
    .nrn_go, .capture, .ready, .resetok
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      digit    <= '0;
      scored   <= 1'b0;
      mismatch <= 1'b0;
      err_cnt  <= '0;
      cmp_cnt  <= '0;
    end else begin
      scored <= 1'b0;
      if (clr) begin
        err_cnt  <= '0;
        cmp_cnt  <= '0;
        mismatch <= 1'b0;
      end else if (capture) begin
        digit <= best_idx;
        if (ctrl_buf.ucmp) begin
          scored   <= 1'b1;
          cmp_cnt  <= cmp_cnt + 1'b1;
          mismatch <= (best_idx != ctrl_buf.cmp_val);
          if (best_idx != ctrl_buf.cmp_val) err_cnt <= err_cnt + 1'b1;
        end
      end
    end
  end

endmodule
