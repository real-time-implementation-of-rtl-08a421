// row_fifo: common-clock FIFO used as one row buffer of the window
// generator.
//
// Ports follow the paper's FIFO core (din, clk, rd_en, rst, wr_en, dout,
// data_count(9:0), empty, full) with a 1-bit word and a memory depth of
// 1024.  It is a standard (not first-word-fall-through) FIFO: when rd_en is
// high and the FIFO is not empty, the oldest word appears on dout after the
// next rising edge of clk, and dout holds its value otherwise.  data_count
// is the number of words held, updated on the same edge as the write or
// read that changes it, with no further latency.  Since data_count has 10
// bits, at most DEPTH - 1 = 1023 words are held; full is high then.
// A write when full and a read when empty are ignored (and flagged by
// assertions).  rst is synchronous and clears the pointers, the count and
// dout.
module row_fifo
  import sf_pkg::*;
#(
  parameter int unsigned DEPTH = FIFO_DEPTH,
  parameter int unsigned CW    = FIFO_CNT_W,
  parameter int unsigned DW    = 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] din,
  input  logic          wr_en,
  input  logic          rd_en,
  output logic [DW-1:0] dout,
  output logic [CW-1:0] data_count,
  output logic          empty,
  output logic          full
);

  localparam int unsigned PW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic          do_wr, do_rd;

  assign empty = (data_count == '0);
  assign full  = (data_count == CW'(DEPTH - 1));
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr     <= '0;
      rd_ptr     <= '0;
      data_count <= '0;
      dout       <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) begin
        rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
        dout   <= mem[rd_ptr];
      end
      case ({do_wr, do_rd})
        2'b10:   data_count <= data_count + 1'b1;
        2'b01:   data_count <= data_count - 1'b1;
        default: data_count <= data_count;
      endcase
    end
  end

  // Handshake rules: never write a full FIFO, never read an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) !(wr_en && full))
    else $error("row_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) !(rd_en && empty))
    else $error("row_fifo: read while empty");

endmodule
