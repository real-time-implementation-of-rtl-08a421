// vga_controller: VGA display timing, frame-buffer read address and the
// 12-bit colour output.
//
// Horizontal and vertical counters run through H_ACT + H_FP + H_SYNC + H_BP
// clocks per line and V_ACT + V_FP + V_SYNC + V_BP lines per frame (800 x 525
// for 640 x 480 at 60 Hz with the 25 MHz pixel clock).  During the active
// area pix_req is high and rdaddress counts 0, 1, ... in raster order, so
// the frame buffer is read in display order; rdaddress restarts at 0 every
// frame.  The paper names this "VGA address" and drives a 12-bit VGA port
// (4 bits each for red, green and blue); the timing numbers and the colour
// mapping are this design's own: a filtered pixel of 1 is shown white
// (all 12 bits high), 0 black, and blanking is black.  hsync and vsync are
// active low.
//
// Timing: rdaddress and pix_req are combinational from the counters.  The
// pixel for a read address must arrive on `pixel` LATENCY clocks after that
// address was presented; hsync, vsync and the active flag are delayed by the
// same amount, and all VGA outputs are then registered, so they appear
// LATENCY + 1 clocks after the matching address.
module vga_controller
  import sf_pkg::*;
#(
  parameter int unsigned H_ACT   = IMG_W,
  parameter int unsigned H_FRONT = H_FP,
  parameter int unsigned H_PULSE = H_SYNC,
  parameter int unsigned H_BACK  = H_BP,
  parameter int unsigned V_ACT   = IMG_H,
  parameter int unsigned V_FRONT = V_FP,
  parameter int unsigned V_PULSE = V_SYNC,
  parameter int unsigned V_BACK  = V_BP,
  parameter int unsigned LATENCY = 3,
  parameter int unsigned AW      = ADDR_W
) (
  input  logic          clk,
  input  logic          rst,
  output logic [AW-1:0] rdaddress,
  output logic          pix_req,
  input  logic          pixel,
  output logic [3:0]    vga_r,
  output logic [3:0]    vga_g,
  output logic [3:0]    vga_b,
  output logic          vga_hs,
  output logic          vga_vs
);

  localparam int unsigned H_TOTAL = H_ACT + H_FRONT + H_PULSE + H_BACK;
  localparam int unsigned V_TOTAL = V_ACT + V_FRONT + V_PULSE + V_BACK;
  localparam int unsigned HW      = $clog2(H_TOTAL);
  localparam int unsigned VW      = $clog2(V_TOTAL);

  logic [HW-1:0] h_cnt;
  logic [VW-1:0] v_cnt;
  logic [AW-1:0] addr_cnt;
  logic          hs_now, vs_now;
  logic [LATENCY-1:0] act_d, hs_d, vs_d;

  assign pix_req     = (h_cnt < HW'(H_ACT)) && (v_cnt < VW'(V_ACT));
  assign rdaddress   = addr_cnt;
  assign hs_now = !((h_cnt >= HW'(H_ACT + H_FRONT)) && (h_cnt < HW'(H_ACT + H_FRONT + H_PULSE)));
  assign vs_now = !((v_cnt >= VW'(V_ACT + V_FRONT)) && (v_cnt < VW'(V_ACT + V_FRONT + V_PULSE)));

  always_ff @(posedge clk) begin
    if (rst) begin
      h_cnt    <= '0;
      v_cnt    <= '0;
      addr_cnt <= '0;
    end else begin
      if (h_cnt == HW'(H_TOTAL - 1)) begin
        h_cnt <= '0;
        v_cnt <= (v_cnt == VW'(V_TOTAL - 1)) ? '0 : v_cnt + 1'b1;
      end else begin
        h_cnt <= h_cnt + 1'b1;
      end
      if ((h_cnt == HW'(H_TOTAL - 1)) && (v_cnt == VW'(V_TOTAL - 1))) addr_cnt <= '0;
      else if (pix_req)                                              addr_cnt <= addr_cnt + 1'b1;
    end
  end

  // Delay the timing signals to meet the pixel coming back from the filter.
  always_ff @(posedge clk) begin
    if (rst) begin
      act_d <= '0;
      hs_d  <= '1;
      vs_d  <= '1;
    end else begin
      act_d <= LATENCY'({act_d, pix_req});
      hs_d  <= LATENCY'({hs_d, hs_now});
      vs_d  <= LATENCY'({vs_d, vs_now});
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      vga_r  <= '0;
      vga_g  <= '0;
      vga_b  <= '0;
      vga_hs <= 1'b1;
      vga_vs <= 1'b1;
    end else begin
      vga_r  <= {4{act_d[LATENCY-1] && pixel}};
      vga_g  <= {4{act_d[LATENCY-1] && pixel}};
      vga_b  <= {4{act_d[LATENCY-1] && pixel}};
      vga_hs <= hs_d[LATENCY-1];
      vga_vs <= vs_d[LATENCY-1];
    end
  end

endmodule
