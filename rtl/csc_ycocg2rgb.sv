// csc_ycocg2rgb: colour-space conversion from the line buffer's YCoCg to RGB,
// NPIX pixels in parallel, purely combinational.
//
// Used on the display output path (8 pixels in front of the output register)
// and on the line-buffer-to-reconstruction-buffer path, because the
// reconstruction buffer keeps search ranges A and B in RGB. The transform is
// the lossless YCoCg-R inverse:
//   t = Y - (Cg >>> 1);  G = Cg + t;  B = t - (Co >>> 1);  R = B + Co
// with the result clamped to [0, 2^BPC-1]. When rgb_en is low (output that
// is not RGB, e.g. 4:2:2 YCbCr content) the block is bypassed and the three
// components pass through unchanged (low BPC bits of comp1/comp2).
// That the converter can be bypassed follows the decoder structure; the exact
// YCoCg-R equations are the reversible transform of the VDC-M family, not
// spelled out in the source description.
module csc_ycocg2rgb
  import dbe_pkg::*;
#(
  parameter int NPIX = 8
) (
  input  logic              rgb_en,
  input  lbpix_t [NPIX-1:0] din,
  output rgb_t   [NPIX-1:0] dout
);

  localparam logic signed [BPC+2:0] MAXV = (BPC+3)'((1 << BPC) - 1);

  function automatic logic [BPC-1:0] clamp(input logic signed [BPC+2:0] v);
    if (v < 0)         return '0;
    else if (v > MAXV) return MAXV[BPC-1:0];
    else               return v[BPC-1:0];
  endfunction

  always_comb begin
    for (int i = 0; i < NPIX; i++) begin
      logic signed [BPC+2:0] y, co, cg, t, g, b, r;
      y  = $signed({3'b000, din[i].y});
      co = $signed({{2{din[i].co[BPC]}}, din[i].co});
      cg = $signed({{2{din[i].cg[BPC]}}, din[i].cg});
      t  = y - (cg >>> 1);
      g  = cg + t;
      b  = t - (co >>> 1);
      r  = b + co;
      if (rgb_en) begin
        dout[i].r = clamp(r);
        dout[i].g = clamp(g);
        dout[i].b = clamp(b);
      end else begin
        dout[i].r = din[i].y;
        dout[i].g = din[i].co[BPC-1:0];
        dout[i].b = din[i].cg[BPC-1:0];
      end
    end
  end

endmodule
