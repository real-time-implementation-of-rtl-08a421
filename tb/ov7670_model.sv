// ov7670_model: behavioural model of the OV7670 camera's video output in
// RGB444 mode (not synthesizable logic, a test stimulus).
//
// It drives PCLK, VSYNC, HREF and D[7:0] for frames of W x H pixels showing
// tb_img_pkg::img_rgb: VSYNC high for VS_CLKS pixel clocks, VB_CLKS clocks of
// gap, then H lines of 2*W bytes with HREF high (first byte xxxxRRRR, then
// GGGGBBBB), each followed by HB_CLKS clocks with HREF low.  Data change on
// the falling edge of PCLK so they are stable at the rising edge.
// frames_done counts the frames completely sent.
module ov7670_model #(
  parameter int  W         = 640,
  parameter int  H         = 480,
  parameter int  HB_CLKS   = 16,
  parameter int  VS_CLKS   = 20,
  parameter int  VB_CLKS   = 20,
  parameter time PCLK_HALF = 20ns
) (
  output logic       pclk,
  output logic       vsync,
  output logic       href,
  output logic [7:0] d,
  output int         frames_done
);
  import tb_img_pkg::*;

  initial begin
    pclk = 1'b0;
    forever #(PCLK_HALF) pclk = ~pclk;
  end

  initial begin
    logic [11:0] px;
    vsync = 1'b0; href = 1'b0; d = '0; frames_done = 0;
    forever begin
      @(negedge pclk); vsync = 1'b1;
      repeat (VS_CLKS) @(negedge pclk);
      vsync = 1'b0;
      repeat (VB_CLKS) @(negedge pclk);
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++) begin
          px = img_rgb(x, y, W, H);
          href = 1'b1; d = {4'h0, px[11:8]};
          @(negedge pclk);
          d = px[7:0];
          @(negedge pclk);
        end
        href = 1'b0; d = '0;
        repeat (HB_CLKS) @(negedge pclk);
      end
      frames_done = frames_done + 1;
    end
  end
endmodule
