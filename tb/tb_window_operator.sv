// tb_window_operator: random 7 x 7 windows, with densities chosen so the
// sum often lands near the threshold, are applied with random win_valid.
// Each output is checked one clock later: 0 for the first 48 valid windows,
// then 1 exactly when the window holds more than 37 ones.  pix_out_valid
// must follow win_valid by one clock, and data_valid must rise after the
// 48th valid window.
module tb_window_operator;
  localparam int N = 7;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst = 1'b1;
  logic [N-1:0][N-1:0] win = '0;
  logic win_valid = 1'b0;
  logic pix_out, pix_out_valid, data_valid;
  int   n_ones = 0, n_zeros = 0, n_at_37 = 0, n_at_38 = 0;

  always #5 clk = ~clk;

  window_operator dut (
    .clk (clk), .rst (rst), .win (win), .win_valid (win_valid),
    .pix_out (pix_out), .pix_out_valid (pix_out_valid), .data_valid (data_valid)
  );

  initial begin
    int nvalid = 0;
    bit exp = 1'b0, prev_valid = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 5000; t++) begin
      int sum, dens;
      @(negedge clk);
      checks++;
      if (pix_out_valid != prev_valid || pix_out != exp || data_valid != (nvalid >= 48)) begin
        failures++;
        if (failures < 10) $display("MISMATCH t=%0d out=%b/%b ov=%b/%b dv=%b n=%0d",
                                    t, pix_out, exp, pix_out_valid, prev_valid, data_valid, nvalid);
      end
      dens = 60 + ($urandom % 40);
      sum = 0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          win[r][c] = ($urandom % 100) < dens;
          sum += int'(win[r][c]);
        end
      win_valid = ($urandom % 4) != 0;
      prev_valid = win_valid;
      if (win_valid) begin
        exp = (nvalid >= 48) && (sum > 37);
        if (nvalid >= 48) begin
          if (exp) n_ones++; else n_zeros++;
          if (sum == 37) n_at_37++;
          if (sum == 38) n_at_38++;
        end
        nvalid++;
      end
    end
    checks++;
    if (n_ones == 0 || n_zeros == 0 || n_at_37 == 0 || n_at_38 == 0) begin
      failures++; $display("coverage: ones %0d zeros %0d sum37 %0d sum38 %0d", n_ones, n_zeros, n_at_37, n_at_38);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
