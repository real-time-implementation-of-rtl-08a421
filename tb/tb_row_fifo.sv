// tb_row_fifo: the 1024-deep, 1-bit FIFO against a queue model.  Random
// reads and writes (never reading empty or writing full) run for 20000
// clocks, with phases biased to fill it up to full (1023 words) and to
// drain it to empty.  Each clock checks data_count, empty and full; each
// read checks dout one clock after rd_en, and that dout holds otherwise.
module tb_row_fifo;
  int checks = 0, failures = 0;
  logic       clk = 1'b0, rst = 1'b1;
  logic [0:0] din = '0, dout;
  logic       wr_en = 1'b0, rd_en = 1'b0, empty, full;
  logic [9:0] data_count;
  bit         q[$];
  bit         exp_dout = 1'b0;
  int         n_full = 0, n_empty = 0;

  always #5 clk = ~clk;

  row_fifo dut (
    .clk (clk), .rst (rst), .din (din), .wr_en (wr_en), .rd_en (rd_en),
    .dout (dout), .data_count (data_count), .empty (empty), .full (full)
  );

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 20000; t++) begin
      int bias;
      bias = ((t / 2500) % 2 == 0) ? 80 : 20;    // percent chance to write
      @(negedge clk);
      checks++;
      if (int'(data_count) != q.size() || empty != (q.size() == 0) || full != (q.size() == 1023)
          || dout[0] != exp_dout) begin
        failures++;
        if (failures < 10) $display("MISMATCH t=%0d count=%0d/%0d empty=%b full=%b dout=%b/%b",
                                    t, data_count, q.size(), empty, full, dout, exp_dout);
      end
      if (full) n_full++;
      if (empty) n_empty++;
      wr_en = (($urandom % 100) < bias) && (q.size() < 1023);
      rd_en = (($urandom % 100) < 100 - bias) && (q.size() > 0);
      din   = 1'($urandom);
      @(posedge clk);
      if (rd_en) exp_dout = q.pop_front();
      if (wr_en) q.push_back(din[0]);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full %0d empty %0d", n_full, n_empty); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
