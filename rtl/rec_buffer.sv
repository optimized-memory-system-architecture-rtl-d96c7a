// rec_buffer: reconstruction buffer of one slice column, Type 2 (25 pixels).
//
// Holds the part of the prediction range that cannot be fetched from the line
// buffer in time:
//   ab[0:7]   = A0-A7   (previous line, block j-1)
//   ab[8:15]  = B0-B7   (previous line, block j)
//   ab[16:23] = B8-B15  (previous line, block j+1)
// in RGB, 24 x 30 bits, and C33 (lower row, 33 pixels left of block j) in
// YCoCg, 32 bits: 752 bits = 94 bytes per slice, 376 bytes for four slices.
//
// Operations, all on the rising clock edge:
//   shift  : A <= B0-B7, B0-B7 <= B8-B15, B8-B15 <= new_word. Done once per
//            block when B16-B23 of the current block (= B8-B15 of the next)
//            arrives from the line buffer, after the current window was used.
//   ld_b0 / ld_b8 : load B0-B7 / B8-B15 directly; used to prime the window at
//            the start of a slice's blockline.
//   c33_en : C33 <= c33_in (last pixel of the C34-C41 word of this block,
//            which is C33 of the next block).
// Contents, size and colour spaces follow the published Type 2 buffer; the
// shift/load mechanics are this design's choice. The registers are reset to 0.
module rec_buffer
  import dbe_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  shift,
  input  logic                  ld_b0,
  input  logic                  ld_b8,
  input  rgbword_t              new_word,
  input  logic                  c33_en,
  input  lbpix_t                c33_in,
  output rgb_t   [AB_PIX-1:0]   ab,
  output lbpix_t                c33
);

  rgb_t [AB_PIX-1:0] ab_q;
  lbpix_t            c33_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ab_q  <= '0;
      c33_q <= '0;
    end else begin
      if (shift) begin
        ab_q[7:0]   <= ab_q[15:8];
        ab_q[15:8]  <= ab_q[23:16];
        ab_q[23:16] <= new_word;
      end else begin
        if (ld_b0) ab_q[15:8]  <= new_word;
        if (ld_b8) ab_q[23:16] <= new_word;
      end
      if (c33_en) c33_q <= c33_in;
    end
  end

  assign ab  = ab_q;
  assign c33 = c33_q;

  one_op: assert property (@(posedge clk) disable iff (!rst_n)
                           $onehot0({shift, ld_b0, ld_b8}))
    else $error("rec_buffer: more than one window update in a cycle");

endmodule
