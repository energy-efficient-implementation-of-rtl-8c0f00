// level_inline -- NetWorkLevel 0, the input interface (InLine).
//
// Holds the SpT block RAM and a read pointer. On `start` the pointer returns to 0. Each `go`
// reads the image at the pointer, advances the pointer, and one cycle later (BRAM latency)
// places the 784 spikes and the side band in the output buffer; `ready` follows on the next
// cycle. Once `num_images` images have been read, further `go`s deliver an all-zero image
// with an empty side band, which flushes the downstream levels without scoring anything.
//
// The function (the SpT memory feeding one 784-bit image per step to the SRC level) is the
// source's; the pointer, the flush behaviour and the cycle timing are this design's own.
module level_inline
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH  = 15840,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  logic [ADDR_W:0]   num_images,
  input  logic              go,
  // memory load
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  spt_word_t         wdata,
  // output buffer
  output logic [N_PIX-1:0]  out_pix,
  output ctrl_t             out_ctrl,
  output logic              ready,
  output logic              resetok
);

  logic [ADDR_W:0] ptr;
  spt_word_t       rdata;
  logic            valid_q, rd_pend, nrn_go, capture;

  spt_bram #(.DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_mem (
    .clk, .we, .waddr, .wdata,
    .re(nrn_go), .raddr(ptr[ADDR_W-1:0]), .rdata
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr     <= '0;
      valid_q <= 1'b0;
      rd_pend <= 1'b0;
    end else begin
      rd_pend <= nrn_go;
      if (start) begin
        ptr <= '0;
      end else if (nrn_go) begin
        valid_q <= (ptr < num_images);
        if (ptr < num_images) ptr <= ptr + 1'b1;
      end
    end
  end

  level_ctrl u_ctrl (
    .clk, .rst, .go, .nrn_ready_all(!rd_pend && !nrn_go),
    .nrn_go, .capture, .ready, .resetok
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      out_pix  <= '0;
      out_ctrl <= '0;
    end else if (capture) begin
      out_pix  <= valid_q ? rdata.pix  : '0;
      out_ctrl <= valid_q ? rdata.ctrl : '0;
    end
  end

endmodule
