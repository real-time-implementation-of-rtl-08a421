// window_generator: builds the N x N neighbourhood of the pixel stream from
// a chain of registers and N - 1 row FIFOs.
//
// The binary pixels arrive one per enabled clock (pix_valid) in raster
// order.  They pass through N registers that form row 1 of the window
// (w11 .. w1N, r1 .. r7 for N = 7), then into FIFO 1, whose output is w21
// and feeds N - 1 more registers (w22 .. w2N), then FIFO 2, and so on down
// to FIFO N-1 and row N.  For N = 7 this is the paper's 43 registers and 6
// FIFOs.  Each FIFO holds ROW_LEN - N words (633 for 640-pixel rows, as in
// the paper), so that, counting the FIFO's output register and the N - 1
// registers after it, consecutive window rows are exactly ROW_LEN pixels
// apart.  A FIFO is written on every enabled clock once the FIFO before it
// has begun to be read, and is read on every enabled clock once its
// data_count has reached FIFO_FILL: the paper's rule "read enable of this
// FIFO and write enable of the next set to 1 when data_count reaches the
// threshold".  The paper uses 631 with a vendor FIFO whose count lags by two
// cycles; the count here does not lag, so the threshold is the 633 words the
// FIFO must hold.
//
// Only pixel_valid clocks move the pipeline, so blanking intervals between
// rows do not enter the row delay: this design's choice, as the paper gives
// 640-pixel rows but does not speak of blanking.  No border handling is done:
// at the left and right image edges the window wraps onto the neighbouring
// row, and the first rows after reset see zeros, as in the paper.
//
// Output: win[r][c] is w(r+1)(c+1) of the paper.  After the pixel x[j]
// arrives, win[r][c] = x[j - c - r * ROW_LEN] (zero before the first pixel).
// win and win_valid change on the edge that accepts the pixel, so
// win_valid is pix_valid delayed by one clock.
module window_generator
  import sf_pkg::*;
#(
  parameter int unsigned N          = WIN_N,
  parameter int unsigned ROW_LEN    = IMG_W,
  parameter int unsigned FIFO_FILL  = ROW_LEN - N,
  parameter int unsigned DEPTH      = FIFO_DEPTH,
  parameter int unsigned CW         = FIFO_CNT_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    pix_in,
  input  logic                    pix_valid,
  output logic [N-1:0][N-1:0]     win,
  output logic                    win_valid
);

  // FIFO k (k = 1 .. N-1) sits between window row k-1 and row k.
  logic [N-1:1]         fifo_wr, fifo_rd, fifo_dout;
  logic [N-1:1][CW-1:0] fifo_count;

  logic [N-1:0]         row0_q;     // r1 .. rN
  logic [N-1:1][N-1:1]  row_q;      // the N-1 registers after each FIFO

  // Row 0: N registers fed by the input pixel.
  always_ff @(posedge clk) begin
    if (rst) begin
      row0_q <= '0;
    end else if (pix_valid) begin
      row0_q <= {row0_q[N-2:0], pix_in};
    end
  end

  always_comb begin
    win[0] = row0_q;
    for (int k = 1; k < N; k++) begin
      win[k][0] = fifo_dout[k];
      for (int c = 1; c < N; c++) win[k][c] = row_q[k][c];
    end
  end

  for (genvar k = 1; k < N; k++) begin : g_row
    // Write on every pixel once the previous row's FIFO is being read
    // (row 0 has no FIFO in front, so FIFO 1 writes from the first pixel).
    if (k == 1) begin : g_first
      assign fifo_wr[k] = pix_valid;
    end else begin : g_next
      assign fifo_wr[k] = fifo_rd[k-1];
    end
    assign fifo_rd[k] = pix_valid && (fifo_count[k] >= CW'(FIFO_FILL));

    row_fifo #(.DEPTH(DEPTH), .CW(CW), .DW(1)) u_fifo (
      .clk        (clk),
      .rst        (rst),
      .din        (win[k-1][N-1]),
      .wr_en      (fifo_wr[k]),
      .rd_en      (fifo_rd[k]),
      .dout       (fifo_dout[k]),
      .data_count (fifo_count[k]),
      .empty      (),
      .full       ()
    );

    // The FIFO's output register is w(k+1)1; N-1 registers follow it.
    always_ff @(posedge clk) begin
      if (rst) begin
        row_q[k] <= '0;
      end else if (pix_valid) begin
        row_q[k][1] <= fifo_dout[k];
        for (int c = 2; c < N; c++) row_q[k][c] <= row_q[k][c-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) win_valid <= 1'b0;
    else     win_valid <= pix_valid;
  end

endmodule
