// tb_vga_controller: the VGA controller at its default 640 x 480 @ 60 Hz
// timing, for two full frames (2 x 800 x 525 clocks).  An independent
// counter model gives, for each clock, the expected read address and
// pix_req.  The test feeds back as `pixel` a hash of the address it saw
// LATENCY = 3 clocks earlier, and checks that the colour outputs show that
// pixel one clock after that (white or black, black in blanking), with
// hsync low for 96 clocks starting 16 clocks after the 640 active ones and
// vsync low for lines 490 and 491.
module tb_vga_controller;
  localparam int HT = 800, VT = 525;
  int checks = 0, failures = 0;
  logic        clk = 1'b0, rst = 1'b1;
  logic [18:0] rdaddress;
  logic        pix_req, pixel;
  logic [3:0]  r, g, b;
  logic        hs, vs;
  logic [18:0] addr_hist [4];
  logic        req_hist [4];
  int          n_hs = 0, n_vs = 0;

  always #20ns clk = ~clk;

  vga_controller dut (
    .clk (clk), .rst (rst), .rdaddress (rdaddress), .pix_req (pix_req), .pixel (pixel),
    .vga_r (r), .vga_g (g), .vga_b (b), .vga_hs (hs), .vga_vs (vs)
  );

  function automatic bit pix_of(logic [18:0] a);
    return ^(a * 19'd2654435);
  endfunction

  // pixel returns LATENCY = 3 clocks after its address: during clock t,
  // addr_hist[3] holds the address of clock t - 3
  always_comb pixel = req_hist[3] && pix_of(addr_hist[3]);

  initial begin
    foreach (addr_hist[i]) begin addr_hist[i] = '0; req_hist[i] = 1'b0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 2 * HT * VT + 4; t++) begin
      int h, v, exp_addr;
      bit exp_req;
      // before the edge of clock t: check address and request of clock t
      h = t % HT; v = (t / HT) % VT;
      exp_req  = (h < 640) && (v < 480);
      exp_addr = v * 640 + h;
      checks++;
      if (pix_req != exp_req || (exp_req && int'(rdaddress) != exp_addr)) begin
        failures++;
        if (failures < 10) $display("MISMATCH t=%0d h=%0d v=%0d addr=%0d/%0d req=%b/%b",
                                    t, h, v, rdaddress, exp_addr, pix_req, exp_req);
      end
      // outputs now show clock t - 4
      if (t >= 4) begin
        int h4, v4;
        bit exp_hs, exp_vs, exp_px;
        h4 = (t - 4) % HT; v4 = ((t - 4) / HT) % VT;
        exp_hs = !((h4 >= 656) && (h4 < 752));
        exp_vs = !((v4 >= 490) && (v4 < 492));
        exp_px = (h4 < 640) && (v4 < 480) && pix_of(19'(v4 * 640 + h4));
        checks++;
        if (hs != exp_hs || vs != exp_vs || {r, g, b} != {12{exp_px}}) begin
          failures++;
          if (failures < 10) $display("MISMATCH out t=%0d h=%0d v=%0d hs=%b/%b vs=%b/%b rgb=%h px=%b",
                                      t - 4, h4, v4, hs, exp_hs, vs, exp_vs, {r, g, b}, exp_px);
        end
        if (!hs) n_hs++;
        if (!vs) n_vs++;
      end
      // record clock t's address mid-cycle, away from the clock edge
      for (int i = 3; i > 0; i--) begin addr_hist[i] = addr_hist[i-1]; req_hist[i] = req_hist[i-1]; end
      addr_hist[0] = rdaddress; req_hist[0] = pix_req;
      @(negedge clk);
    end
    checks++;
    if (n_hs != 2 * VT * 96 || n_vs != 2 * 2 * HT) begin
      failures++; $display("sync low counts hs=%0d vs=%0d", n_hs, n_vs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * HT * VT) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
