// window_operator: the skin / non-skin decision on one N x N window per
// clock.
//
// All N*N window bits are added, and the output pixel is 1 when the sum is
// greater than SUM_THRESH (37 for the 7 x 7 window): an erosion that keeps a
// pixel only where most of its neighbourhood is skin.  A data-valid flag
// holds the output at 0 for the first DV_DELAY (48) windows after reset,
// while the window is still filling, as the paper describes; it then stays
// high.  Those windows are counted on win_valid, which is this design's
// reading of the paper's "48 clock cycles" for a pipeline that only moves on
// valid pixels.
//
// Timing: the window is sampled on the clock edge where win_valid is high;
// pix_out and pix_out_valid follow one clock later (pix_out_valid is
// win_valid delayed by one clock; pix_out holds its value otherwise).
module window_operator
  import sf_pkg::*;
#(
  parameter int unsigned N          = WIN_N,
  parameter int unsigned THRESH     = SUM_THRESH,
  parameter int unsigned DV_CYCLES  = DV_DELAY
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [N-1:0][N-1:0] win,
  input  logic                win_valid,
  output logic                pix_out,
  output logic                pix_out_valid,
  output logic                data_valid
);

  localparam int unsigned SW = $clog2(N * N + 1);
  localparam int unsigned DW = $clog2(DV_CYCLES + 1);

  logic [SW-1:0] sum;
  logic [DW-1:0] dv_cnt;

  always_comb begin
    sum = '0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        sum = sum + SW'(win[r][c]);
  end

  assign data_valid = (dv_cnt == DW'(DV_CYCLES));

  always_ff @(posedge clk) begin
    if (rst) begin
      dv_cnt        <= '0;
      pix_out       <= 1'b0;
      pix_out_valid <= 1'b0;
    end else begin
      pix_out_valid <= win_valid;
      if (win_valid) begin
        pix_out <= data_valid && (sum > SW'(THRESH));
        if (!data_valid) dv_cnt <= dv_cnt + 1'b1;
      end
    end
  end

endmodule
