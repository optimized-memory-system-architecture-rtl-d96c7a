// dbe_env: end-to-end test environment for dbe_top.
//
// Plays the part of the prediction / reconstruction unit and of the display.
// The picture is a pseudo-random RGB image, gold(x, y). For every block slot
// the environment
//   * checks every prediction pixel the back end hands over (A0-A7, B0-B15,
//     C33 from the reconstruction buffer, B16-B23, B24 and the C words from
//     the line buffer, the forwarded block) against the image, and checks
//     that each segment that lies inside the slice arrived in the slot;
//   * supplies the block's reconstruction (image converted to YCoCg, or raw
//     when colour conversion is bypassed) in cycle 3;
// and it checks the display output pixel by pixel in raster order, that it
// is gap-free at 4 pixels per cycle, and the frame's cycle count.
// MODE 0 runs several small frames covering 1, 2 and 4 slice columns and both
// colour modes; MODE 1 runs one 3840x2160 frame with four slice columns.
// Each mechanism (half-line-delay output start, even- and odd-bank writes,
// block forwarding, reconstruction-buffer priming on a slice change, C33
// update, colour-conversion bypass, reserved output reads on both lines) is
// counted and must occur. dbe_top runs with its default parameters.
module dbe_env
  import dbe_pkg::*;
#(
  parameter int MODE = 0
) ();

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 1'b0;
  logic [1:0]        cfg_slice_log2 = '0;
  logic [9:0]        cfg_blk_per_slice = 10'd8;
  logic [11:0]       cfg_blocklines = 12'd2;
  logic [11:0]       cfg_slice_bl = 12'd1;
  logic              cfg_rgb = 1'b1;
  logic              busy, frame_done, dec_valid, prev_line_valid, pr_fwd_valid, out_valid;
  logic [1:0]        cyc_dec, slice_idx;
  logic [9:0]        idx_dec;
  logic [11:0]       x_dec, y_dec;
  lbpix_t [AB_PIX-1:0] pr_ab;
  lbpix_t            pr_c33;
  lb_beat_t [1:0][1:0] pr_beat;
  lbword_t           pr_fwd_up, pr_fwd_lo, rec_blk_up, rec_blk_lo;
  rgb_t [3:0]        out_pix;

  dbe_top u_dut (.*);

  int checks = 0, failures = 0;

  // -------------------------------------------------------------- image model
  function automatic rgb_t gold(input int x, input int y);
    int unsigned h;
    rgb_t p;
    // pseudo-random, independent of the design
    h = (x * 32'h9E3779B1) ^ (y * 32'h85EBCA77) ^ 32'h1234567;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    p.r = h[9:0];
    p.g = h[19:10];
    p.b = h[29:20];
    return p;
  endfunction

  // what the line buffer must hold for (x, y): YCoCg-R of gold, or raw
  function automatic lbpix_t gold_lb(input int x, input int y, input bit rgb);
    rgb_t p;
    int r, g, b, co, t, cg, yy;
    lbpix_t q;
    p = gold(x, y);
    r = int'(p.r); g = int'(p.g); b = int'(p.b);
    if (!rgb) begin
      q.y = p.r; q.co = {1'b0, p.g}; q.cg = {1'b0, p.b};
      return q;
    end
    co = r - b;
    t  = b + (co >>> 1);
    cg = g - t;
    yy = t + (cg >>> 1);
    q.y = yy[9:0]; q.co = co[10:0]; q.cg = cg[10:0];
    return q;
  endfunction

  // ---------------------------------------------------------- frame settings
  int L, N, H, SH, Ws, W;
  bit rgbm;

  // mechanism counters
  int n_halfline = 0, n_wr_even = 0, n_wr_odd = 0, n_fwd = 0, n_prime = 0;
  int n_c33 = 0, n_bypass_frames = 0, n_out_l0 = 0, n_out_l1 = 0, n_slice_sw = 0;
  int n_blocks = 0;

  // ----------------------------------------------- prediction-unit model
  bit got_cj2[2], got_cj3[2], got_cj4[2], got_c0, got_b16, got_b24;
  logic [1:0] last_slice = '0;

  task automatic chk_pix(input lbpix_t got, input lbpix_t exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: got %h exp %h (slice %0d blk %0d y %0d)", what, got, exp,
                 slice_idx, idx_dec, y_dec);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    rec_blk_up <= '0;
    rec_blk_lo <= '0;
    if (dec_valid) begin : slot
      int s, j, xl, y, X0;
      s = int'(slice_idx); j = int'(idx_dec); xl = j * 8; y = int'(y_dec); X0 = s * Ws;
      if (cyc_dec == 2'd0) begin
        got_cj2 = '{0, 0}; got_cj3 = '{0, 0}; got_cj4 = '{0, 0};
        got_c0 = 0; got_b16 = 0; got_b24 = 0;
        if (slice_idx != last_slice) n_slice_sw++;
        last_slice = slice_idx;
      end
      // reconstruction-buffer window and C33, valid in cycles 0-1
      if (cyc_dec == 2'd0 && prev_line_valid) begin
        for (int k = 0; k < 24; k++) begin
          int pos;
          pos = xl - 8 + k;
          if (pos >= 0 && pos < Ws) chk_pix(pr_ab[k], gold_lb(X0 + pos, y - 1, rgbm), "A/B");
        end
      end
      if (cyc_dec == 2'd1 && xl - 33 >= 0) begin
        chk_pix(pr_c33, gold_lb(X0 + xl - 33, y + 1, rgbm), "C33");
        n_c33++;
      end
      if (cyc_dec == 2'd2 && j >= 1) begin
        checks++;
        if (!pr_fwd_valid) begin failures++; $display("FAIL fwd_valid low"); end
        for (int k = 0; k < 8; k++) begin
          chk_pix(pr_fwd_up[k], gold_lb(X0 + xl - 8 + k, y, rgbm), "fwd up");
          chk_pix(pr_fwd_lo[k], gold_lb(X0 + xl - 8 + k, y + 1, rgbm), "fwd lo");
        end
        n_fwd++;
      end
      // line-buffer prediction words
      for (int l = 0; l < 2; l++) begin
        for (int b = 0; b < 2; b++) begin
          if (pr_beat[l][b].valid) begin
            case (pr_beat[l][b].seg)
              SEG_CJ2, SEG_CJ3, SEG_CJ4: begin
                int off;
                off = (pr_beat[l][b].seg == SEG_CJ2) ? 2 : (pr_beat[l][b].seg == SEG_CJ3) ? 3 : 4;
                for (int k = 0; k < 8; k++)
                  chk_pix(pr_beat[l][b].data[k], gold_lb(X0 + xl - 8 * off + k, y + l, rgbm), "C word");
                checks++;
                if (b != ((j - off) & 1)) begin failures++; $display("FAIL C word from wrong bank"); end
                if (off == 2) got_cj2[l] = 1; else if (off == 3) got_cj3[l] = 1; else got_cj4[l] = 1;
              end
              SEG_C0: begin
                chk_pix(pr_beat[l][b].data[7], gold_lb(X0 + xl - 33, y, rgbm), "C0");
                got_c0 = 1;
              end
              SEG_B16: begin
                if (prev_line_valid)
                  for (int k = 0; k < 8; k++)
                    chk_pix(pr_beat[l][b].data[k], gold_lb(X0 + xl + 16 + k, y - 1, rgbm), "B16-B23");
                got_b16 = 1;
              end
              SEG_B24: begin
                if (prev_line_valid)
                  chk_pix(pr_beat[l][b].data[0], gold_lb(X0 + xl + 24, y - 1, rgbm), "B24");
                got_b24 = 1;
              end
              SEG_PRIME_B0, SEG_PRIME_B8: n_prime++;
              default: ;
            endcase
          end
        end
      end
      if (cyc_dec == 2'd3) begin
        // every segment inside the slice must have arrived in this slot
        checks++;
        if ((j >= 2 && !(got_cj2[0] && got_cj2[1])) || (j >= 3 && !(got_cj3[0] && got_cj3[1])) ||
            (j >= 4 && !(got_cj4[0] && got_cj4[1])) || (j >= 5 && !got_c0) ||
            (j + 2 < L && !got_b16) || (j + 3 < L && !got_b24)) begin
          failures++;
          $display("FAIL missing prediction segment, slice %0d blk %0d y %0d", s, j, y);
        end
        for (int k = 0; k < 8; k++) begin
          rec_blk_up[k] <= gold_lb(X0 + xl + k, y, rgbm);
          rec_blk_lo[k] <= gold_lb(X0 + xl + k, y + 1, rgbm);
        end
        n_blocks++;
      end
    end
  end

  // bank-split writes and reserved output reads, seen on the line-buffer port
  always @(negedge clk) if (rst_n) begin
    if (u_dut.lb_cmd[0][0].en && u_dut.lb_cmd[0][0].we) n_wr_even++;
    if (u_dut.lb_cmd[0][1].en && u_dut.lb_cmd[0][1].we) n_wr_odd++;
    for (int b = 0; b < 2; b++) begin
      if (u_dut.lb_cmd[0][b].en && u_dut.lb_cmd[0][b].seg == SEG_OUT) n_out_l0++;
      if (u_dut.lb_cmd[1][b].en && u_dut.lb_cmd[1][b].seg == SEG_OUT) n_out_l1++;
    end
  end

  // ------------------------------------------------------------ display model
  int ox, oy, n_out_cycles, first_out, last_out, cyc_cnt;
  bit seen_out;
  always @(negedge clk) if (rst_n) begin
    cyc_cnt++;
    if (out_valid) begin
      if (!seen_out) begin
        first_out = cyc_cnt;
        // half-line delay: output starts while the first blockline decodes
        if (dec_valid && y_dec == 12'd0) n_halfline++;
      end
      seen_out = 1;
      last_out = cyc_cnt;
      n_out_cycles++;
      for (int k = 0; k < 4; k++) begin
        rgb_t e;
        e = gold(ox + k, oy);
        checks++;
        if (out_pix[k] !== e) begin
          failures++;
          if (failures < 20) $display("FAIL out (%0d,%0d) got %h exp %h", ox + k, oy, out_pix[k], e);
        end
      end
      ox += 4;
      if (ox == W) begin ox = 0; oy++; end
    end
  end

  task automatic run_frame(input int log2n, input int l, input int h, input int sh, input bit rgb);
    int t0, t1, exp_cycles;
    N = 1 << log2n; L = l; H = h; SH = sh; Ws = 8 * L; W = Ws * N; rgbm = rgb;
    if (!rgb) n_bypass_frames++;
    cfg_slice_log2 = 2'(log2n);
    cfg_blk_per_slice = 10'(l);
    cfg_blocklines = 12'(h);
    cfg_slice_bl = 12'(sh);
    cfg_rgb = rgb;
    ox = 0; oy = 0; n_out_cycles = 0; seen_out = 0; cyc_cnt = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc_cnt;
    while (!frame_done) @(negedge clk);
    t1 = cyc_cnt;
    repeat (4) @(negedge clk);
    // the decode part runs at exactly 4 pixels per cycle; half a blockline
    // of flush slots drains the last lower row
    exp_cycles = 4 * H * (L * N) + 4 * (L * N / 2) + 2;
    checks++;
    // busy cycles = from the start edge to the cycle before frame_done
    if (t1 - t0 != exp_cycles) begin
      failures++;
      $display("FAIL frame cycles %0d expected %0d", t1 - t0, exp_cycles);
    end
    checks++;
    if (oy != 2 * H || ox != 0) begin
      failures++;
      $display("FAIL output stopped at (%0d,%0d), expected %0d rows", ox, oy, 2 * H);
    end
    checks++;
    if (n_out_cycles != last_out - first_out + 1 || n_out_cycles * 4 != 2 * H * W) begin
      failures++;
      $display("FAIL output not continuous: %0d cycles over a span of %0d", n_out_cycles,
               last_out - first_out + 1);
    end
    $display("frame %0dx%0d, %0d slice(s), rgb=%0d: %0d cycles", W, 2 * H, N, rgb, exp_cycles);
  endtask

  task automatic need(input int cnt, input string what);
    checks++;
    $display("mechanism %-28s %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    if (MODE == 0) begin
      run_frame(2, 8, 4, 2, 1'b1);    // 4 slices, 256 x 8
      run_frame(1, 6, 3, 3, 1'b0);    // 2 slices, 96 x 6, bypass
      run_frame(0, 12, 3, 2, 1'b1);   // 1 slice, 96 x 6
      run_frame(0, 480, 2, 1, 1'b1);  // 1 slice, full 3840 width
      run_frame(1, 240, 2, 2, 1'b0);  // 2 slices, full 3840 width, bypass
    end else begin
      run_frame(2, 120, 1080, 108, 1'b1);  // 3840 x 2160, 4 slice columns
    end
    need(n_halfline, "half-line delay start");
    need(n_wr_even, "write even bank");
    need(n_wr_odd, "write odd bank");
    need(n_out_l0, "output read line 0");
    need(n_out_l1, "output read line 1");
    need(n_fwd, "block forwarding");
    need(n_prime, "rec. buffer prime");
    need(n_c33, "C33 from rec. buffer");
    need(n_slice_sw, "slice column switch");
    if (MODE == 0) need(n_bypass_frames, "CSC bypass frame");
    $display("blocks decoded %0d", n_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (MODE == 0 ? 200000 : 9000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
