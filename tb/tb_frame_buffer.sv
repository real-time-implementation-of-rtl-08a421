// tb_frame_buffer: the 307200 x 1 RAM at its full size.  A write clock of
// 40 MHz writes a pseudo-random bit to every address; then a 25 MHz read
// clock reads every address in order and each q is checked one read clock
// after its address (the read latency) against the model array.  A second
// pass overwrites a random subset and rereads the whole memory.
module tb_frame_buffer;
  localparam int WORDS = 640 * 480;
  int checks = 0, failures = 0;
  logic        wclk = 1'b0, rclk = 1'b0;
  logic        wren = 1'b0;
  logic [18:0] wa = '0, ra = '0;
  logic [0:0]  data = '0, q;
  bit          model [WORDS];

  always #12.5ns wclk = ~wclk;
  always #20ns   rclk = ~rclk;

  frame_buffer dut (
    .wrclock (wclk), .wren (wren), .wraddress (wa), .data (data),
    .rdclock (rclk), .rdaddress (ra), .q (q)
  );

  task automatic write_pass(int every);
    for (int i = 0; i < WORDS; i++) begin
      if (($urandom % every) == 0) begin
        @(negedge wclk);
        wren = 1'b1; wa = 19'(i); data = 1'($urandom);
        model[i] = data[0];
      end
    end
    @(negedge wclk) wren = 1'b0;
  endtask

  task automatic read_pass();
    for (int i = 0; i <= WORDS; i++) begin
      @(negedge rclk);
      if (i > 0) begin
        checks++;
        if (q[0] != model[i - 1]) begin
          failures++;
          if (failures < 10) $display("MISMATCH addr %0d q=%b expected %b", i - 1, q, model[i - 1]);
        end
      end
      if (i < WORDS) ra = 19'(i);
    end
  endtask

  initial begin
    write_pass(1);
    read_pass();
    write_pass(7);
    read_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
