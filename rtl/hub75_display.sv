// hub75_display -- debug display on a 32 x 64 RGB LED matrix with a HUB75 connector.
//
// The right half of the panel (columns 32..63) shows the SpT image currently held by the
// input level, one lit white pixel per spike, with the 28 x 28 image placed at row 2,
// column 34 (pixel p = 28*y + x is row y, column x). The left half (columns 0..31) shows the
// digit recognised by the output level as a green seven-segment glyph. The panel is scanned
// 1/16: for each row address a = 0..15 the driver shifts 64 pixels, with RGB0 carrying row
// a and RGB1 carrying row a+16, on HUB_CLK (one pixel per CLK_DIV*2 system clocks, data
// stable around the rising edge), blanks the LEDs with OE (active low), pulses LAT for one
// system clock to load the column drivers, sets ADDR = a and lights the row for ON_CYCLES
// clocks.
//
// The source gives the panel size, the HUB75 interface, the signal names (CLK, OEN, LATCH,
// ADDR, RGB) and what each half shows, with a selector ("switch") that combines the SpT
// image and the recognised digit. The scan order, the glyph shapes, the colours, the
// placement and all timing are this design's own.
module hub75_display
  import snn_pkg::*;
#(
  parameter int unsigned CLK_DIV   = 2,     // system clocks per half HUB_CLK period
  parameter int unsigned ON_CYCLES = 256    // clocks each row stays lit
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_PIX-1:0]  img,
  input  logic [CLS_W-1:0]  digit,
  output logic              hub_clk,
  output logic              hub_lat,
  output logic              hub_oe_n,
  output logic [3:0]        hub_addr,
  output logic [2:0]        rgb0,       // {R,G,B} of row hub_addr
  output logic [2:0]        rgb1        // {R,G,B} of row hub_addr + 16
);

  localparam int unsigned COLS = 64;
  localparam int unsigned DW   = (CLK_DIV > 1) ? $clog2(CLK_DIV) : 1;
  localparam int unsigned OW   = $clog2(ON_CYCLES + 1);

  typedef enum logic [1:0] {S_SHIFT, S_LATCH, S_SHOW} state_t;
  state_t state;

  logic [DW-1:0] div;
  logic          phase;           // 0: clock low, 1: clock high
  logic [5:0]    col;
  logic [3:0]    row;             // row being shifted in
  logic [OW-1:0] on_cnt;

  // segments {a,b,c,d,e,f,g} of a seven-segment digit
  function automatic logic [6:0] seg_of(input logic [CLS_W-1:0] d);
    unique case (d)
      4'd0: seg_of = 7'b1111110;
      4'd1: seg_of = 7'b0110000;
      4'd2: seg_of = 7'b1101101;
      4'd3: seg_of = 7'b1111001;
      4'd4: seg_of = 7'b0110011;
      4'd5: seg_of = 7'b1011011;
      4'd6: seg_of = 7'b1011111;
      4'd7: seg_of = 7'b1110000;
      4'd8: seg_of = 7'b1111111;
      4'd9: seg_of = 7'b1111011;
      default: seg_of = 7'b0000001;   // dash for an out-of-range class
    endcase
  endfunction

  // colour of panel pixel (y, x), y = 0..31, x = 0..63
  function automatic logic [2:0] pixel(input int y, input int x,
                                       input logic [N_PIX-1:0] im,
                                       input logic [CLS_W-1:0] dg);
    logic [6:0] s;
    int ix, iy;
    logic on;
    if (x >= 32) begin
      ix = x - 34;
      iy = y - 2;
      if (ix >= 0 && ix < int'(IMG_COLS) && iy >= 0 && iy < int'(IMG_ROWS))
        pixel = im[iy*int'(IMG_COLS) + ix] ? 3'b111 : 3'b000;
      else
        pixel = 3'b000;
    end else begin
      s  = seg_of(dg);
      on = 1'b0;
      if (s[6] && y >= 3  && y <= 5  && x >= 8  && x <= 23) on = 1'b1;  // a
      if (s[5] && y >= 3  && y <= 17 && x >= 21 && x <= 23) on = 1'b1;  // b
      if (s[4] && y >= 15 && y <= 28 && x >= 21 && x <= 23) on = 1'b1;  // c
      if (s[3] && y >= 26 && y <= 28 && x >= 8  && x <= 23) on = 1'b1;  // d
      if (s[2] && y >= 15 && y <= 28 && x >= 8  && x <= 10) on = 1'b1;  // e
      if (s[1] && y >= 3  && y <= 17 && x >= 8  && x <= 10) on = 1'b1;  // f
      if (s[0] && y >= 15 && y <= 17 && x >= 8  && x <= 23) on = 1'b1;  // g
      pixel = on ? 3'b010 : 3'b000;
    end
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_SHIFT;
      div      <= '0;
      phase    <= 1'b0;
      col      <= '0;
      row      <= '0;
      on_cnt   <= '0;
      hub_clk  <= 1'b0;
      hub_lat  <= 1'b0;
      hub_oe_n <= 1'b1;
      hub_addr <= '0;
      rgb0     <= '0;
      rgb1     <= '0;
    end else begin
      hub_lat <= 1'b0;
      unique case (state)
        S_SHIFT: begin
          if (div == DW'(CLK_DIV - 1)) begin
            div <= '0;
            if (!phase) begin
              // present the pixel, clock low
              rgb0    <= pixel(int'(row),      int'(col), img, digit);
              rgb1    <= pixel(int'(row) + 16, int'(col), img, digit);
              hub_clk <= 1'b0;
              phase   <= 1'b1;
            end else begin
              hub_clk <= 1'b1;
              phase   <= 1'b0;
              if (col == 6'(COLS - 1)) begin
                col   <= '0;
                state <= S_LATCH;
              end else begin
                col <= col + 1'b1;
              end
            end
          end else begin
            div <= div + 1'b1;
          end
        end
        S_LATCH: begin
          hub_clk  <= 1'b0;
          hub_oe_n <= 1'b1;
          hub_lat  <= 1'b1;
          hub_addr <= row;
          on_cnt   <= '0;
          state    <= S_SHOW;
        end
        S_SHOW: begin
          hub_oe_n <= 1'b0;
          if (on_cnt == OW'(ON_CYCLES - 1)) begin
            hub_oe_n <= 1'b1;
            row      <= row + 1'b1;
            state    <= S_SHIFT;
          end else begin
            on_cnt <= on_cnt + 1'b1;
          end
        end
        default: state <= S_SHIFT;
      endcase
    end
  end

endmodule
