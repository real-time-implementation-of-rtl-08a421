// ov7670_capture: turns the OV7670 byte stream into RGB444 pixels with a
// frame-buffer write address.
//
// In RGB444 mode the camera sends two bytes per pixel while HREF is high,
// one per rising edge of PCLK: first xxxxRRRR, then GGGGBBBB.  The block
// keeps the first byte, and on the second it presents the 12-bit pixel
// {R, G, B} on dout together with its address and a one-cycle write enable
// (we).  The address counts pixels from 0 in raster order and returns to 0
// while VSYNC is high (vertical blanking).  A line always starts on a first
// byte: the byte phase is cleared while HREF is low.  Pixels past
// FRAME_PIXELS - 1 in one frame are dropped, so the address never leaves
// the frame buffer.
//
// Ports d(7:0), href, pclk, vsync, addr(18:0), dout(11:0) and we are the
// ports of the capture module in the paper; the paper takes the module from
// elsewhere and does not describe its inside, so the byte assembly, reset and
// saturation are this design's own.  All outputs are registered on pclk:
// dout, addr and we change together one PCLK after the second byte.
module ov7670_capture
  import sf_pkg::*;
#(
  parameter int unsigned FRAME_PIXELS = IMG_W * IMG_H
) (
  input  logic              pclk,
  input  logic              rst,
  input  logic              vsync,
  input  logic              href,
  input  logic [7:0]        d,
  output logic [ADDR_W-1:0] addr,
  output logic [11:0]       dout,
  output logic              we
);

  logic              second_byte;   // next byte completes a pixel
  logic [3:0]        red_nibble;    // kept from the first byte
  logic [ADDR_W-1:0] pixel_cnt;     // address of the next pixel

  always_ff @(posedge pclk) begin
    if (rst) begin
      second_byte <= 1'b0;
      red_nibble  <= '0;
      pixel_cnt   <= '0;
      addr        <= '0;
      dout        <= '0;
      we          <= 1'b0;
    end else begin
      we <= 1'b0;
      if (vsync) begin
        second_byte <= 1'b0;
        pixel_cnt   <= '0;
      end else if (!href) begin
        second_byte <= 1'b0;
      end else if (!second_byte) begin
        red_nibble  <= d[3:0];
        second_byte <= 1'b1;
      end else begin
        second_byte <= 1'b0;
        if (pixel_cnt < ADDR_W'(FRAME_PIXELS)) begin
          dout      <= {red_nibble, d};
          addr      <= pixel_cnt;
          we        <= 1'b1;
          pixel_cnt <= pixel_cnt + 1'b1;
        end
      end
    end
  end

endmodule
