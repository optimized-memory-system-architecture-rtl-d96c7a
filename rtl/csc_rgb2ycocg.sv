// csc_rgb2ycocg: colour-space conversion from RGB to YCoCg, NPIX pixels in
// parallel, purely combinational.
//
// Sits between the reconstruction buffer, which keeps search ranges A0-A7 and
// B0-B15 in RGB, and the prediction unit, which works on YCoCg. Forward
// YCoCg-R transform:
//   Co = R - B;  t = B + (Co >>> 1);  Cg = G - t;  Y = t + (Cg >>> 1)
// Co and Cg are BPC+1-bit two's-complement values. With rgb_en low the block
// is bypassed: R, G, B go to comp0, comp1, comp2 zero-extended. The position
// of this converter follows the Type 2 back-end structure; the equations are
// the reversible transform of the VDC-M family.
module csc_rgb2ycocg
  import dbe_pkg::*;
#(
  parameter int NPIX = 24
) (
  input  logic              rgb_en,
  input  rgb_t   [NPIX-1:0] din,
  output lbpix_t [NPIX-1:0] dout
);

  always_comb begin
    for (int i = 0; i < NPIX; i++) begin
      logic signed [BPC+2:0] r, g, b, co, t, cg;
      logic signed [BPC-1:0] y;   // Y of valid RGB input is in [0, 2^BPC-1]
      r  = $signed({3'b000, din[i].r});
      g  = $signed({3'b000, din[i].g});
      b  = $signed({3'b000, din[i].b});
      co = r - b;
      t  = b + (co >>> 1);
      cg = g - t;
      y  = BPC'(t + (cg >>> 1));
      if (rgb_en) begin
        dout[i].y  = y;
        dout[i].co = co[BPC:0];
        dout[i].cg = cg[BPC:0];
      end else begin
        dout[i].y  = din[i].r;
        dout[i].co = {1'b0, din[i].g};
        dout[i].cg = {1'b0, din[i].b};
      end
    end
  end

endmodule
