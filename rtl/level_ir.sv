// level_ir -- the NetWorkLevel of N_NEUR IntegratoR (IR) neurons.
//
// Same structure as the SRC level: input interface register loaded on `latch`, a 1-bit
// weight matrix (N_NEUR x N_IN, 1 = +10, 0 = -1), N_NEUR ir_neuron instances in parallel,
// the level control unit and an output buffer with the N_NEUR integrated values and the side
// band of the image. Timing: `latch` -> `go` -> N_IN accumulation cycles -> buffer loaded ->
// `ready`. The structure follows the source; the weight write port is this design's own.
module level_ir
  import snn_pkg::*;
#(
  parameter int unsigned N_IN   = 100,
  parameter int unsigned N_NEUR = 10,
  parameter int unsigned S_W    = 32
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          latch,
  input  logic                          go,
  input  logic [N_IN-1:0]               in_vec,
  input  ctrl_t                         in_ctrl,
  input  logic                          w_we,
  input  logic [$clog2(N_NEUR)-1:0]     w_row,
  input  logic [$clog2(N_IN)-1:0]       w_col,
  input  logic                          w_data,
  output logic signed [S_W-1:0]         out_val [N_NEUR],   // output buffer
  output ctrl_t                         out_ctrl,
  output logic                          ready,
  output logic                          resetok
);

  logic [N_IN-1:0]       in_buf;
  ctrl_t                 ctrl_buf;
  logic [0:0]            w [N_NEUR][N_IN];
  logic [N_NEUR-1:0]     nrn_ready;
  logic                  nrn_go, capture;
  logic signed [S_W-1:0] s_v [N_NEUR];

  always_ff @(posedge clk) begin
    if (rst) begin
      in_buf   <= '0;
      ctrl_buf <= '0;
    end else if (latch) begin
      in_buf   <= in_vec;
      ctrl_buf <= in_ctrl;
    end
  end

  weight_matrix #(.ROWS(N_NEUR), .COLS(N_IN), .W_BITS(1)) u_wm (
    .clk, .we(w_we), .wr_row(w_row), .wr_col(w_col), .wr_data(w_data), .w(w)
  );

  for (genvar i = 0; i < N_NEUR; i++) begin : g_nrn
    ir_neuron #(.N_IN(N_IN), .S_W(S_W)) u_ir (
      .clk, .rst,
      .go     (nrn_go),
      .ureset (ctrl_buf.ureset),
      .in_vec (in_buf),
      .w_row  (w[i]),
      .ready  (nrn_ready[i]),
      .s_out  (s_v[i])
    );
  end

  level_ctrl u_ctrl (
    .clk, .rst, .go, .nrn_ready_all(&nrn_ready),
    .nrn_go, .capture, .ready, .resetok
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N_NEUR; i++) out_val[i] <= '0;
      out_ctrl <= '0;
    end else if (capture) begin
      out_val  <= s_v;
      out_ctrl <= ctrl_buf;
    end
  end

endmodule
