// tb_rct_yuv: exhaustive test of the RGB444 -> YUV transform.  All 4096
// inputs are applied and Y, U, V compared with the RCT equations
// Y = floor((R + 2G + B) / 4), U = R - G, V = B - G computed in integers.
module tb_rct_yuv;
  import sf_pkg::*;
  int checks = 0, failures = 0;
  rgb444_t rgb;
  yuv_t    yuv;

  rct_yuv dut (.rgb (rgb), .yuv (yuv));

  initial begin
    for (int i = 0; i < 4096; i++) begin
      int r, g, b;
      rgb = rgb444_t'(i[11:0]);
      r = i / 256; g = (i / 16) % 16; b = i % 16;
      #1;
      checks++;
      if (int'(yuv.y) != (r + 2 * g + b) / 4 || int'(yuv.u) != r - g || int'(yuv.v) != b - g) begin
        failures++;
        if (failures < 10) $display("MISMATCH rgb=%h y=%0d u=%0d v=%0d", i, yuv.y, yuv.u, yuv.v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
