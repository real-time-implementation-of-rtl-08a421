// tb_ov7670_capture: the camera model sends 12 x 5 frames of the test
// picture; every write the capture block makes is checked for its address
// (raster order from 0), its pixel value (the picture) and that exactly
// W*H writes happen per frame.  The write of each pixel must come one PCLK
// after its second byte.  A second frame checks that VSYNC restarts the
// address.  A second instance sized for W*H - 5 pixels sees the same frames
// and must never write an address at or past its size.
module tb_ov7670_capture;
  import tb_img_pkg::*;
  localparam int W = 12, H = 5;
  int checks = 0, failures = 0;
  logic        rst = 1'b1;
  logic        pclk, vsync, href;
  logic [7:0]  d;
  int          frames;
  logic [18:0] addr;
  logic [11:0] dout;
  logic        we;

  ov7670_model #(.W(W), .H(H), .HB_CLKS(3), .VS_CLKS(4), .VB_CLKS(4), .PCLK_HALF(5ns)) u_cam (
    .pclk (pclk), .vsync (vsync), .href (href), .d (d), .frames_done (frames)
  );

  ov7670_capture #(.FRAME_PIXELS(W * H)) dut (
    .pclk (pclk), .rst (rst), .vsync (vsync), .href (href), .d (d),
    .addr (addr), .dout (dout), .we (we)
  );

  logic [18:0] addr_s;
  logic [11:0] dout_s;
  logic        we_s;
  int          n_sat_writes = 0;

  ov7670_capture #(.FRAME_PIXELS(W * H - 5)) dut_small (
    .pclk (pclk), .rst (rst), .vsync (vsync), .href (href), .d (d),
    .addr (addr_s), .dout (dout_s), .we (we_s)
  );

  always @(posedge pclk) if (!rst && we_s) begin
    checks++;
    n_sat_writes++;
    if (addr_s >= 19'(W * H - 5)) begin failures++; $display("write past frame end: %0d", addr_s); end
  end

  int n_writes = 0, frame_writes = 0, byte_idx = 0;
  bit second_prev = 1'b0;
  bit vsync_prev = 1'b0;

  // Count bytes seen on HREF to know when a pixel completes.
  always @(posedge pclk) if (!rst) begin
    if (vsync && !vsync_prev) begin
      // every frame after the first complete one must have W*H writes
      if (n_writes != 0) begin
        checks++;
        if (frame_writes != W * H) begin failures++; $display("frame had %0d writes", frame_writes); end
      end
      frame_writes = 0;
    end
    vsync_prev = vsync;
    if (we) begin
      int x, y;
      x = frame_writes % W; y = frame_writes / W;
      checks++;
      if (addr != 19'(frame_writes) || dout != img_rgb(x, y, W, H) || !second_prev) begin
        failures++;
        if (failures < 10) $display("MISMATCH addr=%0d dout=%h expected addr=%0d dout=%h second=%b",
                                    addr, dout, frame_writes, img_rgb(x, y, W, H), second_prev);
      end
      frame_writes++;
      n_writes++;
    end
    second_prev = href && (byte_idx % 2 == 1);
    if (href) byte_idx++; else byte_idx = 0;
    if (vsync) byte_idx = 0;
  end

  initial begin
    repeat (2) @(posedge pclk);
    rst = 1'b0;
    wait (frames >= 3);
    @(posedge pclk);
    checks++;
    if (n_writes < 2 * W * H) begin failures++; $display("only %0d writes", n_writes); end
    checks++;
    if (n_sat_writes * W * H != n_writes * (W * H - 5)) begin
      failures++; $display("saturating instance wrote %0d for %0d", n_sat_writes, n_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
