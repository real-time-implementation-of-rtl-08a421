// tb_skin_detect_top: end-to-end test of skin_detect_top on a reduced frame.
//
// A 24 x 16 picture with short VGA blanking keeps the run short while every
// mechanism of the design still happens: skin and non-skin thresholding,
// the frame buffer across two clock domains, row FIFOs reaching their fill
// level (17 words for 24-pixel rows), the 48-window data-valid hold-off,
// erosion of small skin regions, the filter pausing in blanking, and three
// displayed frames (so windows also span a frame boundary).  The checks
// themselves are in top_tb_body.svh.
module tb_skin_detect_top;
  localparam int W = 24, H = 16, N = 7;
  localparam int HF = 2, HP = 3, HB = 3, VF = 1, VP = 1, VB = 1;
  localparam int CAM_HB = 4;
  localparam int DISP_FRAMES = 3;
  localparam int WATCHDOG_CYCLES = 40000;

  skin_detect_top #(
    .W(W), .H(H), .N(N),
    .H_FRONT(HF), .H_PULSE(HP), .H_BACK(HB),
    .V_FRONT(VF), .V_PULSE(VP), .V_BACK(VB)
  ) dut (
    .clk (clk), .rst (rst),
    .ov_pclk (ov_pclk), .ov_rst (ov_rst), .ov_vsync (ov_vsync), .ov_href (ov_href), .ov_d (ov_d),
    .vga_r (vga_r), .vga_g (vga_g), .vga_b (vga_b), .vga_hs (vga_hs), .vga_vs (vga_vs)
  );

`include "top_tb_body.svh"
endmodule
