// top_tb_body.svh: end-to-end checker for skin_detect_top, included by the
// reduced-size and the full-size testbench.  The including module declares
// the localparams W, H, N, HF, HP, HB, VF, VP, VB, CAM_HB, DISP_FRAMES and
// WATCHDOG_CYCLES and instantiates the design as `dut` on the signals below.
//
// Flow: the camera model sends frames of the test picture; once the first
// frame is in, the frame buffer is compared with an independent skin mask
// of the picture, then the display side leaves reset and DISP_FRAMES frames
// are shown.  Every display clock the VGA outputs are compared with a
// reference: syncs from the standard counter model, colour from a direct
// evaluation of the 7 x 7 rule on the stream of frame-buffer pixels the
// display has read (window ending at the current pixel, rows of W pixels,
// zeros before the first pixel, output held at 0 for the first 48 windows,
// 1 when more than 37 window pixels are skin).  The output of address t
// appears four clocks after t.

  import tb_img_pkg::*;

  localparam int HT    = W + HF + HP + HB;
  localparam int VT    = H + VF + VP + VB;
  localparam int FRAME = W * H;

  int checks   = 0;
  int failures = 0;

  logic       clk = 1'b0;
  logic       rst = 1'b1;
  logic       ov_rst = 1'b1;
  logic       ov_pclk, ov_vsync, ov_href;
  logic [7:0] ov_d;
  int         cam_frames;
  logic [3:0] vga_r, vga_g, vga_b;
  logic       vga_hs, vga_vs;

  always #20ns clk = ~clk;

  ov7670_model #(.W(W), .H(H), .HB_CLKS(CAM_HB), .VS_CLKS(8), .VB_CLKS(8),
                 .PCLK_HALF(20ns)) u_cam (
    .pclk (ov_pclk), .vsync (ov_vsync), .href (ov_href), .d (ov_d),
    .frames_done (cam_frames)
  );

  bit fb_img [FRAME];

  function automatic bit stream_px(int j);
    if (j < 0) return 1'b0;
    return fb_img[j % FRAME];
  endfunction

  function automatic bit expected_px(int j);
    int sum;
    if (j < 48) return 1'b0;
    sum = 0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        sum += int'(stream_px(j - c - r * W));
    return sum > 37;
  endfunction

  // Mechanism counters
  int n_skin_in = 0, n_nonskin_in = 0;
  int n_kept = 0, n_eroded = 0;
  int n_dv_rise = 0, n_fifo_prime = 0, n_blank_stall = 0;
  int n_cam_frame_restart = 0, n_disp_frames = 0;

  logic dv_q = 1'b0, lastfifo_q = 1'b0;
  always @(posedge clk) if (!rst) begin
    if (dut.u_spatial_filter.data_valid && !dv_q) n_dv_rise++;
    dv_q <= dut.u_spatial_filter.data_valid;
    if (dut.u_spatial_filter.u_wingen.fifo_rd[N-1] && !lastfifo_q) n_fifo_prime++;
    if (dut.u_spatial_filter.u_wingen.fifo_rd[N-1]) lastfifo_q <= 1'b1;
    if (!dut.pix_valid) n_blank_stall++;
  end
  always @(posedge ov_pclk) if (!ov_rst && dut.cam_we && dut.cam_addr == '0) n_cam_frame_restart++;

  // Output checker
  int n_edges = 0;
  always @(negedge clk) if (!rst) begin
    int t, f, j;
    int h, v;
    bit exp_px, exp_hs, exp_vs, got_px;
    if (n_edges >= 4) begin
      t = n_edges - 4;
      h = t % HT;
      v = (t / HT) % VT;
      f = t / (HT * VT);
      exp_hs = !((h >= W + HF) && (h < W + HF + HP));
      exp_vs = !((v >= H + VF) && (v < H + VF + VP));
      if ((h < W) && (v < H)) begin
        j = f * FRAME + v * W + h;
        exp_px = expected_px(j);
        if (exp_px) n_kept++;
        else if (stream_px(j - (N / 2) - (N / 2) * W)) n_eroded++;
        if (h == 0 && v == 0) n_disp_frames++;
      end else begin
        exp_px = 1'b0;
      end
      got_px = (vga_r == 4'hF) && (vga_g == 4'hF) && (vga_b == 4'hF);
      checks++;
      if ((got_px != exp_px) || (!got_px && {vga_r, vga_g, vga_b} != '0) ||
          (vga_hs != exp_hs) || (vga_vs != exp_vs)) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH t=%0d h=%0d v=%0d: rgb=%h hs=%b vs=%b, expected px=%b hs=%b vs=%b",
                   t, h, v, {vga_r, vga_g, vga_b}, vga_hs, vga_vs, exp_px, exp_hs, exp_vs);
      end
    end
  end
  always @(posedge clk) if (!rst) n_edges <= n_edges + 1;

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-34s happened %0d times", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism %s never happened", what);
    end
  endtask

  initial begin
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        fb_img[y * W + x] = ref_skin(img_rgb(x, y, W, H));
        if (fb_img[y * W + x]) n_skin_in++; else n_nonskin_in++;
      end
    repeat (4) @(posedge ov_pclk);
    ov_rst = 1'b0;
    wait (cam_frames >= 1);
    repeat (8) @(posedge ov_pclk);
    // Frame buffer holds the thresholded picture
    for (int i = 0; i < FRAME; i++) begin
      checks++;
      if (dut.u_frame_buffer.mem[i] != fb_img[i]) begin
        failures++;
        if (failures < 10) $display("MISMATCH frame buffer word %0d = %b, expected %b",
                                    i, dut.u_frame_buffer.mem[i], fb_img[i]);
      end
    end
    @(negedge clk);
    rst = 1'b0;
    repeat (DISP_FRAMES * HT * VT + 8) @(posedge clk);
    @(negedge clk);
    need("skin pixel in (threshold pass)", n_skin_in);
    need("non-skin pixel in (threshold fail)", n_nonskin_in);
    need("output pixel kept (sum > 37)", n_kept);
    need("skin centre eroded (sum <= 37)", n_eroded);
    need("data valid released after 48", n_dv_rise);
    need("last row FIFO reached its fill", n_fifo_prime);
    need("filter held during blanking", n_blank_stall);
    need("camera address restart (VSYNC)", n_cam_frame_restart);
    need("display frames shown", n_disp_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
