// align_blk: holding register for the most recently reconstructed 8x2 block.
//
// The prediction / reconstruction unit delivers a block (16 YCoCg pixels,
// upper row then lower row) at the end of its 4-cycle slot; cap loads it.
// The block stays here during the next slot: in that slot's cycle 0 its upper
// row is written to line 0 and its lower row to line 1 (up_row / lo_row), and
// for the whole slot it is forwarded to prediction as C25-C32 / C58-C65 of
// the next block (block forwarding), so those 16 pixels need no copy in the
// reconstruction buffer. vld says the register holds a block that has not
// been superseded by a clr (start of frame). Splitting the block into two
// line rows and forwarding it follow the published Type 2 structure; the
// single register and the cap/clr controls are this design's choice.
module align_blk
  import dbe_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clr,
  input  logic    cap,
  input  lbword_t blk_up,
  input  lbword_t blk_lo,
  output lbword_t up_row,
  output lbword_t lo_row,
  output logic    vld
);

  lbword_t up_q, lo_q;
  logic    vld_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_q  <= '0;
      lo_q  <= '0;
      vld_q <= 1'b0;
    end else if (cap) begin
      up_q  <= blk_up;
      lo_q  <= blk_lo;
      vld_q <= 1'b1;
    end else if (clr) begin
      vld_q <= 1'b0;
    end
  end

  assign up_row = up_q;
  assign lo_row = lo_q;
  assign vld    = vld_q;

endmodule
