// thresholding: skin-pixel segmentation of one RGB444 pixel per clock.
//
// Din(11:0) carries an RGB444 pixel (R in 11:8, G in 7:4, B in 3:0).  It is
// converted to YUV by the reversible component transform (rct_yuv) and the
// pixel is declared skin, output = 1, when 10 < U < 74.  The paper states
// the threshold on the standard 8-bit scale and applies it to 4-bit colour;
// here the 4-bit U = R - G is brought back to the 8-bit scale by shifting it
// left by four bits (U8 = 16 * U4) before the two comparisons, so the two
// bounds stay the paper's numbers.  With U_LO = 10 and U_HI = 74 this
// accepts U4 = 1, 2, 3 and 4.
//
// Timing: output is registered on the rising edge of clk, one cycle after
// Din.  The ports follow the paper's thresholding module (clk, Din(11:0),
// output(0:0)); the synchronous reset is this design's addition.
module thresholding
  import sf_pkg::*;
#(
  parameter int U_LO_8 = U_LO,   // lower bound, exclusive, 8-bit scale
  parameter int U_HI_8 = U_HI    // upper bound, exclusive, 8-bit scale
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [11:0] din,
  output logic [0:0]  dout
);

  localparam logic signed [9:0] LO = 10'(U_LO_8);
  localparam logic signed [9:0] HI = 10'(U_HI_8);

  yuv_t              yuv;
  logic signed [9:0] u8;          // U on the 8-bit scale, -240..240
  logic              is_skin;

  rct_yuv u_rct (
    .rgb (rgb444_t'(din)),
    .yuv (yuv)
  );

  always_comb begin
    u8      = 10'(yuv.u) <<< 4;
    is_skin = (u8 > LO) && (u8 < HI);
  end

  always_ff @(posedge clk) begin
    if (rst) dout <= '0;
    else     dout <= is_skin;
  end

endmodule
