// sf_pkg: constants and types shared by the skin-detection video pipeline.
//
// The frame size (640 x 480), the 7 x 7 window, the 19-bit pixel address,
// the RGB444 pixel format, the skin threshold 10 < U < 74 on the 8-bit U
// scale and the window threshold "sum greater than 37" follow the paper.
// The VGA blanking numbers are the standard 640 x 480 @ 60 Hz timing for a
// 25 MHz pixel clock, which the paper does not list.
package sf_pkg;

  // Frame geometry
  localparam int unsigned IMG_W  = 640;
  localparam int unsigned IMG_H  = 480;
  localparam int unsigned ADDR_W = 19;          // 2^19 > 640*480 = 307200

  // Spatial filter
  localparam int unsigned WIN_N        = 7;     // 7 x 7 moving window
  localparam int unsigned FIFO_DEPTH   = 1024;  // row FIFO memory depth
  localparam int unsigned FIFO_CNT_W   = 10;    // data_count(9:0)
  localparam int unsigned SUM_THRESH   = 37;    // output 1 when sum > 37
  localparam int unsigned DV_DELAY     = 48;    // data valid after 48 cycles

  // Skin threshold on U, expressed on the standard 8-bit scale
  localparam int unsigned U_LO = 10;
  localparam int unsigned U_HI = 74;

  // Standard 640 x 480 @ 60 Hz VGA timing (25 MHz pixel clock)
  localparam int unsigned H_FP = 16, H_SYNC = 96, H_BP = 48;
  localparam int unsigned V_FP = 10, V_SYNC = 2,  V_BP = 33;

  // One RGB444 pixel as it is packed on Din(11:0)
  typedef struct packed {
    logic [3:0] r;
    logic [3:0] g;
    logic [3:0] b;
  } rgb444_t;

  // YUV after the reversible component transform on 4-bit components.
  // Y = floor((R + 2G + B) / 4) lies in 0..15; U = R - G and V = B - G
  // lie in -15..15 and need 5 signed bits.
  typedef struct packed {
    logic        [3:0] y;
    logic signed [4:0] u;
    logic signed [4:0] v;
  } yuv_t;

endpackage
