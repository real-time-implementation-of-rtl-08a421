// tb_window_generator: the 7 x 7 window generator at its full 640-pixel row
// length.  Ten rows of random pixels are streamed with random idle clocks
// (pix_valid low) between them.  After every accepted pixel x[j] the whole
// window is compared with a delay-line model: win[r][c] = x[j - c - 640*r],
// zero before the first pixel.  This checks the 633-word FIFO fill level,
// the row spacing and that idle clocks do not move the window.  win_valid
// must be pix_valid delayed by one clock.
module tb_window_generator;
  localparam int N = 7, ROW = 640, PIXELS = 10 * ROW;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  logic pix_in = 1'b0, pix_valid = 1'b0;
  logic [N-1:0][N-1:0] win;
  logic win_valid;
  bit   x [PIXELS];

  always #5 clk = ~clk;

  window_generator dut (
    .clk (clk), .rst (rst), .pix_in (pix_in), .pix_valid (pix_valid),
    .win (win), .win_valid (win_valid)
  );

  function automatic bit xs(int j);
    return (j < 0) ? 1'b0 : x[j];
  endfunction

  initial begin
    int j;
    bit pv_prev;
    foreach (x[i]) x[i] = 1'($urandom);
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    j = 0;
    pv_prev = 1'b0;
    while (j < PIXELS) begin
      @(negedge clk);
      // check the window left by the previous clock
      checks++;
      if (win_valid != pv_prev) begin failures++; $display("win_valid wrong at pixel %0d", j); end
      if (j > 0) begin
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            checks++;
            if (win[r][c] != xs(j - 1 - c - ROW * r)) begin
              failures++;
              if (failures < 10) $display("MISMATCH after pixel %0d: w%0d%0d=%b expected %b",
                                          j - 1, r + 1, c + 1, win[r][c], xs(j - 1 - c - ROW * r));
            end
          end
      end
      pix_valid = ($urandom % 8) != 0;
      pix_in    = x[j];
      pv_prev   = pix_valid;
      if (pix_valid) j++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * PIXELS) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
