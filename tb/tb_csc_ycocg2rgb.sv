// tb_csc_ycocg2rgb: the YCoCg -> RGB converter must return the original RGB
// pixel for YCoCg produced by an independent forward model (lossless round
// trip), clamp out-of-range values, and pass data through in bypass mode.
module tb_csc_ycocg2rgb;
  import dbe_pkg::*;
  localparam int NP = 8;
  logic            rgb_en;
  lbpix_t [NP-1:0] din;
  rgb_t   [NP-1:0] dout;
  int checks = 0, failures = 0;

  csc_ycocg2rgb dut (.*);

  function automatic int fhalf(input int v);
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  function automatic lbpix_t fwd(input rgb_t p);
    int r, g, b, co, t, cg, y;
    lbpix_t q;
    r = int'(p.r); g = int'(p.g); b = int'(p.b);
    co = r - b; t = b + fhalf(co); cg = g - t; y = t + fhalf(cg);
    q.y = y[9:0]; q.co = co[10:0]; q.cg = cg[10:0];
    return q;
  endfunction

  rgb_t [NP-1:0] ref_rgb;

  initial begin
    for (int it = 0; it < 300; it++) begin
      rgb_en = (it % 5) != 4;
      for (int i = 0; i < NP; i++) begin
        ref_rgb[i] = rgb_t'($urandom);
        if (it == 0) ref_rgb[i] = (i[0]) ? rgb_t'('1) : rgb_t'('0);
        din[i] = rgb_en ? fwd(ref_rgb[i]) : lbpix_t'($urandom);
      end
      #1;
      for (int i = 0; i < NP; i++) begin
        rgb_t e;
        e = rgb_en ? ref_rgb[i] : '{r: din[i].y, g: din[i].co[9:0], b: din[i].cg[9:0]};
        checks++;
        if (dout[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL %h -> %h exp %h", din[i], dout[i], e);
        end
      end
    end
    // clamping: Y = 1023 with negative Cg would overflow G-side terms
    rgb_en = 1'b1;
    din = '0;
    din[0] = '{y: 10'h3ff, co: 11'h000, cg: 11'h3ff};    // G = 1023 + 511 -> clamp 1023
    din[1] = '{y: 10'h000, co: 11'h000, cg: 11'h400};    // Cg = -1024 -> G < 0 -> 0
    #1;
    checks++;
    if (dout[0].g !== 10'h3ff) begin failures++; $display("FAIL clamp high %h", dout[0]); end
    checks++;
    if (dout[1].g !== 10'h000) begin failures++; $display("FAIL clamp low %h", dout[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
