// level_src -- a NetWorkLevel of N_NEUR fully connected SRC neurons.
//
// Structure (one instance per SRC layer): an input interface register that takes the
// previous level's output buffer and side band on `latch`; the weight matrix
// (N_NEUR x N_IN words of W_BITS bits, in registers); N_NEUR src_neuron instances produced by
// a generate loop, all working in parallel on the same latched vector; the level control
// unit; and an output buffer that holds the spike vector SpikeO[0..N_NEUR-1] together with
// the side band of the image it belongs to.
//
// Timing: `latch` (one cycle) -> `go` (one cycle) -> N_IN accumulation cycles -> one update
// cycle -> output buffer loaded -> `ready` high. The u-RESET bit of the latched side band is
// handed to the neurons with `go`.
//
// The layout follows the source's level diagram (input interface, WeightMatrix, generated
// Src neurons fed with Zmax, control unit, output buffer). The weight write port is this
// design's own (the source compiles the matrix in).
module level_src
  import snn_pkg::*;
#(
  parameter int unsigned N_IN       = 784,
  parameter int unsigned N_NEUR     = 100,
  parameter int unsigned W_BITS     = 9,
  parameter int unsigned BETA_SHIFT = 0
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          latch,
  input  logic                          go,
  input  logic [N_IN-1:0]               in_vec,
  input  ctrl_t                         in_ctrl,
  input  logic [Z_W-1:0]                zmax,
  // weight load
  input  logic                          w_we,
  input  logic [$clog2(N_NEUR)-1:0]     w_row,
  input  logic [$clog2(N_IN)-1:0]       w_col,
  input  logic [W_BITS-1:0]             w_data,
  // results
  output logic [N_NEUR-1:0]             out_spk,     // output buffer
  output ctrl_t                         out_ctrl,
  output logic                          ready,
  output logic                          resetok,
  // neuron 0 state, for observation
  output logic signed [H_W-1:0]         mon_h,
  output logic signed [H_W-1:0]         mon_hs,
  output logic [Z_W-1:0]                mon_z
);

  logic [N_IN-1:0]   in_buf;
  ctrl_t             ctrl_buf;
  logic [W_BITS-1:0] w [N_NEUR][N_IN];
  logic [N_NEUR-1:0] nrn_ready, nrn_spike;
  logic              nrn_go, capture;
  logic signed [H_W-1:0] h_v  [N_NEUR];
  logic signed [H_W-1:0] hs_v [N_NEUR];
  logic [Z_W-1:0]        z_v  [N_NEUR];

  // input interface
  always_ff @(posedge clk) begin
    if (rst) begin
      in_buf   <= '0;
      ctrl_buf <= '0;
    end else if (latch) begin
      in_buf   <= in_vec;
      ctrl_buf <= in_ctrl;
    end
  end

  weight_matrix #(.ROWS(N_NEUR), .COLS(N_IN), .W_BITS(W_BITS)) u_wm (
    .clk, .we(w_we), .wr_row(w_row), .wr_col(w_col), .wr_data(w_data), .w(w)
  );

  for (genvar i = 0; i < N_NEUR; i++) begin : g_nrn
    src_neuron #(.N_IN(N_IN), .W_BITS(W_BITS), .BETA_SHIFT(BETA_SHIFT)) u_src (
      .clk, .rst,
      .go     (nrn_go),
      .ureset (ctrl_buf.ureset),
      .in_vec (in_buf),
      .w_row  (w[i]),
      .zmax,
      .ready  (nrn_ready[i]),
      .spike  (nrn_spike[i]),
      .h      (h_v[i]),
      .hs     (hs_v[i]),
      .z      (z_v[i])
    );
  end

  level_ctrl u_ctrl (
    .clk, .rst, .go, .nrn_ready_all(&nrn_ready),
    .nrn_go, .capture, .ready, .resetok
  );

  // output buffer
  always_ff @(posedge clk) begin
    if (rst) begin
      out_spk  <= '0;
      out_ctrl <= '0;
    end else if (capture) begin
      out_spk  <= nrn_spike;
      out_ctrl <= ctrl_buf;
    end
  end

  assign mon_h  = h_v[0];
  assign mon_hs = hs_v[0];
  assign mon_z  = z_v[0];

endmodule
