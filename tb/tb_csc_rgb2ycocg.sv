// tb_csc_rgb2ycocg: checks the RGB -> YCoCg converter against an integer
// reference (floor halving written with division), on corner values and
// random pixels, in both colour modes.
module tb_csc_rgb2ycocg;
  import dbe_pkg::*;
  localparam int NP = 24;
  logic            rgb_en;
  rgb_t   [NP-1:0] din;
  lbpix_t [NP-1:0] dout;
  int checks = 0, failures = 0;

  csc_rgb2ycocg dut (.*);

  function automatic int fhalf(input int v);   // floor(v / 2)
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  task automatic check_all();
    #1;
    for (int i = 0; i < NP; i++) begin
      int r, g, b, co, t, cg, y;
      lbpix_t e;
      r = int'(din[i].r); g = int'(din[i].g); b = int'(din[i].b);
      if (rgb_en) begin
        co = r - b; t = b + fhalf(co); cg = g - t; y = t + fhalf(cg);
        e.y = y[9:0]; e.co = co[10:0]; e.cg = cg[10:0];
      end else begin
        e.y = din[i].r; e.co = {1'b0, din[i].g}; e.cg = {1'b0, din[i].b};
      end
      checks++;
      if (dout[i] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL rgb %h -> %h exp %h (rgb_en %0d)", din[i], dout[i], e, rgb_en);
      end
    end
  endtask

  initial begin
    rgb_en = 1'b1;
    // corners: black, white, pure primaries, extreme chroma
    din = '0;
    din[1] = '{r: 10'h3ff, g: 10'h3ff, b: 10'h3ff};
    din[2] = '{r: 10'h3ff, g: 10'h000, b: 10'h000};
    din[3] = '{r: 10'h000, g: 10'h3ff, b: 10'h000};
    din[4] = '{r: 10'h000, g: 10'h000, b: 10'h3ff};
    din[5] = '{r: 10'h3ff, g: 10'h000, b: 10'h3ff};
    check_all();
    for (int it = 0; it < 200; it++) begin
      for (int i = 0; i < NP; i++) din[i] = rgb_t'($urandom);
      rgb_en = (it % 4) != 3;
      check_all();
    end
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
