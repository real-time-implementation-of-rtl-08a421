// rct_yuv: RGB444 to YUV colour conversion by the reversible component
// transform (RCT).
//
// The paper converts the camera's RGB444 pixels to a YUV colour space with
// the RCT equations of its reference [4] before thresholding, and says the
// threshold acts on U because red contributes more than green to skin.  The
// equations themselves are not printed; this block uses the usual RCT of
// that skin-detection work:  Y = floor((R + 2G + B) / 4),  U = R - G,
// V = B - G.  Purely combinational: the outputs follow the input in the same
// cycle; the caller registers them.
module rct_yuv
  import sf_pkg::*;
(
  input  rgb444_t rgb,
  output yuv_t    yuv
);

  logic [5:0] luma_sum;

  always_comb begin
    luma_sum = {2'b00, rgb.r} + {1'b0, rgb.g, 1'b0} + {2'b00, rgb.b};
    yuv.y    = luma_sum[5:2];
    yuv.u    = $signed({1'b0, rgb.r}) - $signed({1'b0, rgb.g});
    yuv.v    = $signed({1'b0, rgb.b}) - $signed({1'b0, rgb.g});
  end

endmodule
