// tb_spatial_filter: the complete 7 x 7 filter at its full 640-pixel row
// length.  Twelve rows of a binary picture (large skin blocks with random
// noise) are streamed with random idle clocks.  Each output pixel, taken
// when pix_out_valid is high, is compared with the rule applied to the
// input stream: 0 for the first 48 pixels, otherwise 1 when more than 37 of
// x[j - c - 640*r] (r, c in 0..6) are 1.  pix_out_valid must be pix_valid
// delayed by two clocks.
module tb_spatial_filter;
  localparam int N = 7, ROW = 640, PIXELS = 12 * ROW;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  logic pix_in = 1'b0, pix_valid = 1'b0;
  logic pix_out, pix_out_valid, data_valid;
  bit   x [PIXELS];
  logic [1:0] pv_hist = '0;
  int   n_out = 0, n_ones = 0;

  always #5 clk = ~clk;

  spatial_filter dut (
    .clk (clk), .rst (rst), .pix_in (pix_in), .pix_valid (pix_valid),
    .pix_out (pix_out), .pix_out_valid (pix_out_valid), .data_valid (data_valid)
  );

  function automatic bit xs(int j);
    return (j < 0) ? 1'b0 : x[j];
  endfunction

  function automatic bit expected(int j);
    int sum = 0;
    if (j < 48) return 1'b0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) sum += int'(xs(j - c - ROW * r));
    return sum > 37;
  endfunction

  always @(negedge clk) if (!rst) begin
    checks++;
    if (pix_out_valid != pv_hist[1]) begin failures++; $display("pix_out_valid misaligned"); end
    if (pix_out_valid) begin
      checks++;
      if (pix_out != expected(n_out)) begin
        failures++;
        if (failures < 10) $display("MISMATCH output %0d = %b expected %b", n_out, pix_out, expected(n_out));
      end
      if (pix_out) n_ones++;
      n_out++;
    end
  end
  always @(posedge clk) pv_hist <= {pv_hist[0], pix_valid};

  initial begin
    int j = 0;
    foreach (x[i]) begin
      bit blk;
      blk = ((i % ROW) / 40) % 2 == 0;
      x[i] = (($urandom % 10) == 0) ? !blk : blk;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    while (j < PIXELS) begin
      @(negedge clk);
      #1;
      pix_valid = ($urandom % 6) != 0;
      pix_in    = x[j];
      if (pix_valid) j++;
    end
    @(negedge clk) pix_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != PIXELS || n_ones == 0) begin failures++; $display("outputs %0d ones %0d", n_out, n_ones); end
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
