// tb_thresholding: all 4096 RGB444 values are fed one per clock.  After each
// clock edge the output must be the skin decision for the value just
// sampled, 10 < 16*(R - G) < 74 (U = R - G in 1..4 on the 4-bit scale); just
// before the edge it must still be the previous decision (one-cycle latency).
module tb_thresholding;
  import tb_img_pkg::*;
  int checks = 0, failures = 0, n_skin = 0;
  logic        clk = 1'b0, rst = 1'b1;
  logic [11:0] din = '0;
  logic [0:0]  dout;

  always #5 clk = ~clk;

  thresholding dut (.clk (clk), .rst (rst), .din (din), .dout (dout));

  bit prev_exp = 1'b0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int i = 0; i < 4096; i++) begin
      bit exp;
      din = i[11:0];
      #1;
      // the registered output must not follow din before the clock edge
      checks++;
      if (i > 0 && dout[0] != prev_exp) begin
        failures++;
        if (failures < 10) $display("output changed before the clock edge at din=%h", din);
      end
      @(posedge clk); #1;
      exp = ref_skin(din);
      exp = exp && ((int'(din[11:8]) - int'(din[7:4])) inside {[1:4]});
      prev_exp = exp;
      checks++;
      if (exp) n_skin++;
      if (dout[0] != exp) begin
        failures++;
        if (failures < 10) $display("MISMATCH din=%h dout=%b expected %b", din, dout, exp);
      end
    end
    // 16 values of B for each (R, G) with R - G in 1..4: 16 * (15+14+13+12)
    checks++;
    if (n_skin != 16 * 54) begin failures++; $display("skin count %0d", n_skin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
