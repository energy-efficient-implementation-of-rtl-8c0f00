// ir_neuron -- IntegratoR (IR) output neuron.
//
// Sums its input spikes without leak over the whole spiking trace:
//     S[t] = S[t-1] + sum_i Input_i * k_i,   k_i = +10 if the weight bit is 1, -1 if it is 0.
// The weights are stored as one bit each and expanded to -1/+10 when used. After `go`
// the neuron takes N_IN cycles, one input per cycle, and raises `ready` again on the cycle
// after the last input, i.e. N_IN clock edges after the `go` edge. `ureset` (u-RESET of the
// image) is sampled with `go` and clears S before the image is added.
//
// The equation and the 1-bit -1/+10 coding follow the source; the serial one-input-per-cycle
// schedule, the 32-bit sum and the reset value 0 are this design's choices.
module ir_neuron
  import snn_pkg::*;
#(
  parameter int unsigned N_IN = 100,   // inputs (SRC neurons of the previous level)
  parameter int unsigned S_W  = 32     // width of the integrated value
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  go,
  input  logic                  ureset,
  input  logic [N_IN-1:0]       in_vec,
  input  logic [0:0]            w_row [N_IN],   // 1 -> +10, 0 -> -1
  output logic                  ready,
  output logic signed [S_W-1:0] s_out
);

  localparam int unsigned CNT_W = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic             busy;
  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      cnt   <= '0;
      s_out <= '0;
      ready <= 1'b1;
    end else if (!busy) begin
      if (go) begin
        busy  <= 1'b1;
        ready <= 1'b0;
        cnt   <= '0;
        if (ureset) s_out <= '0;
      end
    end else begin
      if (in_vec[cnt]) s_out <= s_out + (w_row[cnt][0] ? S_W'(IR_POS) : S_W'(IR_NEG));
      if (cnt == CNT_W'(N_IN - 1)) begin
        busy  <= 1'b0;
        ready <= 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
