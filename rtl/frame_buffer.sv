// frame_buffer: simple dual-port RAM holding one binary (skin / non-skin)
// frame, one bit per pixel.
//
// The write port (wrclock, wren, wraddress, data) is fed by the camera side
// with the thresholded pixel at its camera address; the read port (rdclock,
// rdaddress, q) is read by the spatial filter in VGA display order.  The two
// ports have separate clocks, as in the paper's block-RAM core, so the
// camera and display sides need not share a clock.  640 x 480 = 307200
// words addressed by 19 bits, per the paper.
//
// Timing: a write takes effect on the rising edge of wrclock when wren is
// high.  The read is synchronous: q shows the word at rdaddress one rdclock
// cycle later, as a block RAM with a registered output does.  Reading a word
// in the cycle it is written returns the old or new value (no ordering
// between the clocks is promised).  The memory has no reset.
module frame_buffer
  import sf_pkg::*;
#(
  parameter int unsigned WORDS = IMG_W * IMG_H,
  parameter int unsigned AW    = ADDR_W,
  parameter int unsigned DW    = 1
) (
  input  logic          wrclock,
  input  logic          wren,
  input  logic [AW-1:0] wraddress,
  input  logic [DW-1:0] data,
  input  logic          rdclock,
  input  logic [AW-1:0] rdaddress,
  output logic [DW-1:0] q
);

  localparam int unsigned IW = $clog2(WORDS);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge wrclock) begin
    if (wren && (wraddress < AW'(WORDS))) mem[IW'(wraddress)] <= data;
  end

  always_ff @(posedge rdclock) begin
    if (rdaddress < AW'(WORDS)) q <= mem[IW'(rdaddress)];
    else                        q <= '0;
  end

endmodule
