// skin_detect_top: real-time skin detection on OV7670 video with a 7 x 7
// binary erosion, shown on a VGA monitor.
//
// Camera side (pclk): ov7670_capture assembles RGB444 pixels from the
// camera bytes, thresholding marks each pixel skin (10 < U < 74 after the
// RGB-to-YUV transform), and the one-bit result is written to frame_buffer
// at the pixel's camera address.  Display side (clk, 25 MHz):
// vga_controller reads the frame buffer in display order, the binary pixels
// stream through spatial_filter (window generator with six row FIFOs and the
// window operator, sum > 37), and the filtered pixel is shown white or
// black.  This is the chain of the paper's thresholding and spatial
// filtering sections.  Its own choices: the write address and write enable
// are delayed one pclk to stay paired with the registered threshold output;
// the filter moves only on active display pixels (one clock after the read
// address, the RAM's read latency); and the VGA syncs are delayed to line up
// with the filtered pixel, three clocks after its read address.  The
// camera's SCCB register set-up and the 25 MHz clock generation are outside
// this module: clk and the camera's PCLK come in as ports.
//
// The filter's window ends at the displayed position, so the filtered image
// appears shifted by (N-1)/2 rows and columns against the camera image.
// Resets are synchronous, one per clock domain.
module skin_detect_top
  import sf_pkg::*;
#(
  parameter int unsigned W       = IMG_W,
  parameter int unsigned H       = IMG_H,
  parameter int unsigned N       = WIN_N,
  parameter int unsigned H_FRONT = H_FP,
  parameter int unsigned H_PULSE = H_SYNC,
  parameter int unsigned H_BACK  = H_BP,
  parameter int unsigned V_FRONT = V_FP,
  parameter int unsigned V_PULSE = V_SYNC,
  parameter int unsigned V_BACK  = V_BP
) (
  // display clock domain
  input  logic       clk,
  input  logic       rst,
  // camera clock domain
  input  logic       ov_pclk,
  input  logic       ov_rst,
  input  logic       ov_vsync,
  input  logic       ov_href,
  input  logic [7:0] ov_d,
  // VGA port
  output logic [3:0] vga_r,
  output logic [3:0] vga_g,
  output logic [3:0] vga_b,
  output logic       vga_hs,
  output logic       vga_vs
);

  // ---------------- camera side ----------------
  logic [ADDR_W-1:0] cam_addr, wr_addr;
  logic [11:0]       cam_pixel;
  logic              cam_we, wr_en;
  logic [0:0]        skin;

  ov7670_capture #(.FRAME_PIXELS(W * H)) u_capture (
    .pclk  (ov_pclk),
    .rst   (ov_rst),
    .vsync (ov_vsync),
    .href  (ov_href),
    .d     (ov_d),
    .addr  (cam_addr),
    .dout  (cam_pixel),
    .we    (cam_we)
  );

  thresholding u_threshold (
    .clk  (ov_pclk),
    .rst  (ov_rst),
    .din  (cam_pixel),
    .dout (skin)
  );

  // Pair the address with the registered threshold result.
  always_ff @(posedge ov_pclk) begin
    if (ov_rst) begin
      wr_addr <= '0;
      wr_en   <= 1'b0;
    end else begin
      wr_addr <= cam_addr;
      wr_en   <= cam_we;
    end
  end

  // ---------------- frame buffer ----------------
  logic [ADDR_W-1:0] rd_addr;
  logic [0:0]        fb_q;

  frame_buffer #(.WORDS(W * H), .AW(ADDR_W), .DW(1)) u_frame_buffer (
    .wrclock   (ov_pclk),
    .wren      (wr_en),
    .wraddress (wr_addr),
    .data      (skin),
    .rdclock   (clk),
    .rdaddress (rd_addr),
    .q         (fb_q)
  );

  // ---------------- display side ----------------
  logic pix_req, pix_valid;
  logic filt_pix, filt_valid, filt_data_valid;

  always_ff @(posedge clk) begin
    if (rst) pix_valid <= 1'b0;
    else     pix_valid <= pix_req;      // RAM read latency of one clock
  end

  spatial_filter #(.N(N), .ROW_LEN(W)) u_spatial_filter (
    .clk           (clk),
    .rst           (rst),
    .pix_in        (fb_q[0]),
    .pix_valid     (pix_valid),
    .pix_out       (filt_pix),
    .pix_out_valid (filt_valid),
    .data_valid    (filt_data_valid)
  );

  vga_controller #(
    .H_ACT(W), .H_FRONT(H_FRONT), .H_PULSE(H_PULSE), .H_BACK(H_BACK),
    .V_ACT(H), .V_FRONT(V_FRONT), .V_PULSE(V_PULSE), .V_BACK(V_BACK),
    .LATENCY(3), .AW(ADDR_W)
  ) u_vga (
    .clk         (clk),
    .rst         (rst),
    .rdaddress   (rd_addr),
    .pix_req     (pix_req),
    .pixel       (filt_pix),
    .vga_r       (vga_r),
    .vga_g       (vga_g),
    .vga_b       (vga_b),
    .vga_hs      (vga_hs),
    .vga_vs      (vga_vs)
  );

  // The filtered pixel must come back exactly when the delayed active flag
  // expects it.
  a_filter_aligned: assert property (@(posedge clk) disable iff (rst)
    filt_valid == $past(pix_req && !rst, 3))
    else $error("skin_detect_top: filter output out of step with VGA timing");

endmodule
