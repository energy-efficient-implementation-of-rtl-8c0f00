// weight_matrix -- synaptic weight matrix held in registers (LUT/FF fabric, not BRAM).
//
// ROWS x COLS signed words of W_BITS bits. Every word is visible at the output at all times,
// so each neuron of a level reads its own row with no read latency; this is why the matrix
// is kept in registers rather than block RAM. The matrix is written one word per clock
// through (we, wr_row, wr_col, wr_data) and the write is seen on the next cycle. Reset does
// not clear it (weights survive a network reset).
//
// Storage in registers and the weight widths (9 bits down to 2 for the SRC level, 1 bit for
// the IR level) follow the source, where the trained matrix is compiled into the bitstream.
// The write port, which replaces that compile-time constant so that trained weights can be
// loaded without regenerating the RTL, is this design's own choice.
module weight_matrix #(
  parameter int unsigned ROWS   = 100,
  parameter int unsigned COLS   = 784,
  parameter int unsigned W_BITS = 9
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [$clog2(ROWS)-1:0]          wr_row,
  input  logic [$clog2(COLS)-1:0]          wr_col,
  input  logic [W_BITS-1:0]                wr_data,
  output logic [W_BITS-1:0]                w [ROWS][COLS]
);

  always_ff @(posedge clk) begin
    if (we && (32'(wr_row) < ROWS) && (32'(wr_col) < COLS))
      w[wr_row][wr_col] <= wr_data;
  end

endmodule
