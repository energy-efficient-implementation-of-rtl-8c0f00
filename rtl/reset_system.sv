// reset_system -- turns the board's reset push-switch into the design-wide reset.
//
// The switch level is brought into the clock domain through two flip-flops, then a counter
// keeps `rst` asserted until the switch has been released for HOLD consecutive cycles, so
// that contact bounce never produces a short reset pulse. `rst` is active high and
// synchronous to `clk`. The flip-flops have power-up values (reset requested, reset
// asserted, counter at zero), as an FPGA configuration loads them, so `rst` is high from the
// first clock edge, before the switch level has passed the synchroniser. Verilator warns
// (PROCASSINIT) that these registers have declaration initial values and are also assigned
// in always_ff; that is deliberate, since those values are the FPGA's power-up state.
//
// The source only names this block (switch -> reset system -> all levels, one shared reset);
// the synchroniser and the hold counter are this design's own.
module reset_system #(
  parameter int unsigned HOLD       = 16,    // release cycles before reset ends
  parameter bit          ACTIVE_LOW = 1'b1   // switch reads 0 when pressed
) (
  input  logic clk,
  input  logic sw,
  output logic rst
);

  localparam int unsigned CW = $clog2(HOLD + 1);

  logic          s1 = 1'b1, s2 = 1'b1;
  logic [CW-1:0] cnt = '0;
  logic          rst_q = 1'b1;

  assign rst = rst_q;

  always_ff @(posedge clk) begin
    s1 <= ACTIVE_LOW ? !sw : sw;   // 1 = reset requested
    s2 <= s1;
    if (s2) begin
      cnt <= '0;
      rst_q <= 1'b1;
    end else if (cnt != CW'(HOLD)) begin
      cnt <= cnt + 1'b1;
      rst_q <= 1'b1;
    end else begin
      rst_q <= 1'b0;
    end
  end

endmodule
