// tb_skin_detect_top_full: skin_detect_top at its default size, 640 x 480
// with standard 640 x 480 @ 60 Hz VGA timing and the 7 x 7 filter with six
// 633-word row FIFOs.  One camera frame is captured, then one complete VGA
// frame (800 x 525 clocks) is displayed and every clock of it is checked
// against the reference in top_tb_body.svh.
module tb_skin_detect_top_full;
  localparam int W = 640, H = 480, N = 7;
  localparam int HF = 16, HP = 96, HB = 48, VF = 10, VP = 2, VB = 33;
  localparam int CAM_HB = 16;
  localparam int DISP_FRAMES = 1;
  localparam int WATCHDOG_CYCLES = 2000000;

  skin_detect_top dut (
    .clk (clk), .rst (rst),
    .ov_pclk (ov_pclk), .ov_rst (ov_rst), .ov_vsync (ov_vsync), .ov_href (ov_href), .ov_d (ov_d),
    .vga_r (vga_r), .vga_g (vga_g), .vga_b (vga_b), .vga_hs (vga_hs), .vga_vs (vga_vs)
  );

`include "top_tb_body.svh"
endmodule
