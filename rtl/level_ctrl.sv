// level_ctrl -- control unit of one NetWorkLevel (Go / Ready handshake with the Binder).
//
// The Binder starts a level with a one-cycle `go`; the level passes it on to all its
// neurons (`nrn_go`) and drops `ready`. When every neuron reports ready again, `capture`
// pulses for one cycle so that the level loads its output buffer, and `ready` rises on the
// following cycle. `resetok` is low during reset and goes high on the first cycle after it.
// Rule checked by an assertion: `go` may only be given while the level is ready.
//
// The Go/Ready/Latch/Resetok signal names are those of the source's level diagram; the exact
// cycle behaviour described here is this design's own.
module level_ctrl (
  input  logic clk,
  input  logic rst,
  input  logic go,
  input  logic nrn_ready_all,   // AND of the neurons' Ready[0..N-1]
  output logic nrn_go,
  output logic capture,
  output logic ready,
  output logic resetok
);

  logic busy;

  assign nrn_go  = go;
  assign capture = busy && nrn_ready_all;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy    <= 1'b0;
      ready   <= 1'b1;
      resetok <= 1'b0;
    end else begin
      resetok <= 1'b1;
      if (go) begin
        busy  <= 1'b1;
        ready <= 1'b0;
      end else if (capture) begin
        busy  <= 1'b0;
        ready <= 1'b1;
      end
    end
  end

  go_only_when_ready: assert property (@(posedge clk) disable iff (rst) go |-> ready)
    else $error("level_ctrl: go while busy");

endmodule
