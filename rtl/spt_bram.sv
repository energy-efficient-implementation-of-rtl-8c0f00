// spt_bram -- block RAM that stores the spiking traces (SpTs).
//
// One word per image: the 784 pixel spikes of a 28 x 28 binary image and the six side-band
// bits (u-RESET, u-CMP, CMP_VAL). A trace of 20 + 200 images is 220 consecutive words whose
// first word has u-RESET set and whose last word has u-CMP set. Simple dual port: one
// synchronous write port for loading and one read port with one clock of latency (the
// registered output of a block RAM).
//
// The default depth, 15,840 words (72 traces of 220 images), is what 341 Artix-7 36 Kb block
// RAMs hold at 790 bits per word; the source states that 341 BRAMs store the SpTs but not
// how many traces. The source fills the memory from the bitstream; the write port is this
// design's own.
module spt_bram
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH  = 15840,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  spt_word_t         wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output spt_word_t         rdata
);

  spt_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
