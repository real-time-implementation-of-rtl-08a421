// spatial_filter: the paper's 7 x 7 spatial filter unit, a window generator
// followed by a window operator.
//
// It takes the binary frame-buffer output one pixel per enabled clock
// (pix_valid) and returns one filtered pixel per input pixel: 1 where more
// than 37 of the 49 pixels of the 7 x 7 window whose newest pixel is the
// input are skin.  The window for input x[j] covers x[j - c - r * ROW_LEN]
// for r, c in 0 .. N-1, so its centre is the pixel (N-1)/2 rows and
// (N-1)/2 columns back from the input.  Latency: pix_out_valid is pix_valid
// delayed by two clocks (one for the window registers, one for the
// operator's output register).
module spatial_filter
  import sf_pkg::*;
#(
  parameter int unsigned N         = WIN_N,
  parameter int unsigned ROW_LEN   = IMG_W,
  parameter int unsigned FIFO_FILL = ROW_LEN - N,
  parameter int unsigned DEPTH     = FIFO_DEPTH,
  parameter int unsigned CW        = FIFO_CNT_W,
  parameter int unsigned THRESH    = SUM_THRESH,
  parameter int unsigned DV_CYCLES = DV_DELAY
) (
  input  logic clk,
  input  logic rst,
  input  logic pix_in,
  input  logic pix_valid,
  output logic pix_out,
  output logic pix_out_valid,
  output logic data_valid
);

  logic [N-1:0][N-1:0] win;
  logic                win_valid;

  window_generator #(
    .N(N), .ROW_LEN(ROW_LEN), .FIFO_FILL(FIFO_FILL), .DEPTH(DEPTH), .CW(CW)
  ) u_wingen (
    .clk       (clk),
    .rst       (rst),
    .pix_in    (pix_in),
    .pix_valid (pix_valid),
    .win       (win),
    .win_valid (win_valid)
  );

  window_operator #(
    .N(N), .THRESH(THRESH), .DV_CYCLES(DV_CYCLES)
  ) u_winop (
    .clk           (clk),
    .rst           (rst),
    .win           (win),
    .win_valid     (win_valid),
    .pix_out       (pix_out),
    .pix_out_valid (pix_out_valid),
    .data_valid    (data_valid)
  );

endmodule
