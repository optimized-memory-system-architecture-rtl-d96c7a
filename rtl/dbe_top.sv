// dbe_top: Type 2 memory system of a VESA VDC-M decoder back end (DBE) with
// up to four slice columns, 4 pixels per cycle.
//
// Blocks and data flow:
//   prediction unit --rec_blk--> align_blk --upper/lower row--> line_buffer
//   line_buffer (2 lines x even/odd banks) --prediction words--> pr_beat
//   line_buffer --B16-B23 / prime words--> 2 x csc_ycocg2rgb --> rec_buffer[s]
//   rec_buffer[current slice] --A0-B15--> csc_rgb2ycocg --> pr_ab, C33 --> pr_c33
//   align_blk --> pr_fwd (block forwarding, C25-C32 / C58-C65)
//   line_buffer --output words--> csc_ycocg2rgb --> output_register --> out_pix
//   dbe_controller sequences it all in 4-cycle block slots.
//
// The prediction, inverse quantisation and reconstruction unit and the whole
// decoder front end are outside this module; their connection is the pr_* /
// rec_blk_* ports. Protocol for the prediction unit, slot of block j (dec
// high, idx = j, slice = s): pr_ab (A0-A7, B0-B15 of block j) and pr_c33 are
// valid in cycles 0 and 1; pr_fwd holds block j-1 for the whole slot
// (pr_fwd_valid); the line-buffer words of block j arrive on pr_beat during
// cycles 0-3, each tagged with its segment (see dbe_pkg::seg_e); block j's
// reconstruction (YCoCg) must be on rec_blk_up/rec_blk_lo in cycle 3. Pixels
// left of the slice edge, right of it, or (when prev_line_valid is low) in
// the line above the slice are not delivered or are meaningless.
// Display output: out_valid / out_pix give 4 RGB pixels per cycle in raster
// order, starting half a blockline after decoding starts.
// cfg_rgb selects RGB output (colour conversion active) or bypass.
// The block structure follows the published Type 2 architecture; port-level
// protocol and cycle positions within it are this design's choices.
module dbe_top
  import dbe_pkg::*;
#(
  parameter int DEPTH   = LB_DEPTH,
  parameter int NSLICES = MAX_SLICES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [1:0]              cfg_slice_log2,
  input  logic [9:0]              cfg_blk_per_slice,
  input  logic [11:0]             cfg_blocklines,
  input  logic [11:0]             cfg_slice_bl,
  input  logic                    cfg_rgb,
  output logic                    busy,
  output logic                    frame_done,
  // prediction unit side
  output logic                    dec_valid,
  output logic [1:0]              cyc_dec,
  output logic [9:0]              idx_dec,
  output logic [1:0]              slice_idx,
  output logic [11:0]             x_dec,
  output logic [11:0]             y_dec,
  output logic                    prev_line_valid,
  output lbpix_t [AB_PIX-1:0]     pr_ab,
  output lbpix_t                  pr_c33,
  output lb_beat_t [1:0][1:0]     pr_beat,
  output lbword_t                 pr_fwd_up,
  output lbword_t                 pr_fwd_lo,
  output logic                    pr_fwd_valid,
  input  lbword_t                 rec_blk_up,
  input  lbword_t                 rec_blk_lo,
  // display side
  output logic                    out_valid,
  output rgb_t [3:0]              out_pix
);

  lb_cmd_t  [1:0][1:0] lb_cmd;
  lb_beat_t [1:0][1:0] beat;
  lbword_t  [1:0]      lb_wdata;
  logic                align_cap, align_clr, align_vld;
  logic [1:0]          rb_sel, rb_prime_sel;
  logic                rb_shift, rb_c33, rb_prime_b0, rb_prime_b8;

  dbe_controller #(.DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start,
    .cfg_slice_log2, .cfg_blk_per_slice, .cfg_blocklines, .cfg_slice_bl,
    .busy, .frame_done,
    .dec (dec_valid), .cyc (cyc_dec), .idx (idx_dec), .slice (slice_idx),
    .x_dec, .y_dec, .prev_line_valid,
    .lb_cmd,
    .align_cap, .align_clr,
    .rb_sel, .rb_shift, .rb_c33, .rb_prime_sel, .rb_prime_b0, .rb_prime_b8
  );

  align_blk u_align (
    .clk, .rst_n,
    .clr    (align_clr),
    .cap    (align_cap),
    .blk_up (rec_blk_up),
    .blk_lo (rec_blk_lo),
    .up_row (lb_wdata[0]),
    .lo_row (lb_wdata[1]),
    .vld    (align_vld)
  );

  line_buffer #(.DEPTH(DEPTH)) u_lb (
    .clk, .rst_n,
    .cmd   (lb_cmd),
    .wdata (lb_wdata),
    .beat  (beat)
  );

  // ---------------- line buffer -> reconstruction buffers (two CSCs, one per
  // line-1 bank) -------------------------------------------------------------
  rgbword_t [1:0] l1_rgb;
  for (genvar b = 0; b < 2; b++) begin : g_l1csc
    csc_ycocg2rgb #(.NPIX(PIX_PER_WORD)) u_csc (
      .rgb_en (cfg_rgb),
      .din    (beat[1][b].data),
      .dout   (l1_rgb[b])
    );
  end

  // word for the rec. buffer: the line-1 bank whose beat carries B16-B23 or
  // a prime word (at most one at a time)
  rgbword_t rb_word;
  logic     rb_from1;
  assign rb_from1 = (beat[1][1].seg == SEG_B16) || (beat[1][1].seg == SEG_PRIME_B0) ||
                    (beat[1][1].seg == SEG_PRIME_B8);
  assign rb_word  = rb_from1 ? l1_rgb[1] : l1_rgb[0];

  // C33 of the next block: last pixel of this block's C34-C41 word
  lbpix_t c33_new;
  logic   c33_hit;
  always_comb begin
    c33_new = beat[1][0].data[PIX_PER_WORD-1];
    c33_hit = 1'b0;
    for (int b = 0; b < 2; b++)
      if (beat[1][b].valid && beat[1][b].seg == SEG_CJ4) begin
        c33_new = beat[1][b].data[PIX_PER_WORD-1];
        c33_hit = 1'b1;
      end
  end

  rgb_t   [NSLICES-1:0][AB_PIX-1:0] rb_ab;
  lbpix_t [NSLICES-1:0]             rb_c33v;
  for (genvar k = 0; k < NSLICES; k++) begin : g_rb
    rec_buffer u_rb (
      .clk, .rst_n,
      .shift    (rb_shift && (int'(rb_sel) == k)),
      .ld_b0    (rb_prime_b0 && (int'(rb_prime_sel) == k)),
      .ld_b8    (rb_prime_b8 && (int'(rb_prime_sel) == k)),
      .new_word (rb_word),
      .c33_en   (rb_c33 && c33_hit && (int'(rb_sel) == k)),
      .c33_in   (c33_new),
      .ab       (rb_ab[k]),
      .c33      (rb_c33v[k])
    );
  end

  csc_rgb2ycocg #(.NPIX(AB_PIX)) u_ab_csc (
    .rgb_en (cfg_rgb),
    .din    (rb_ab[rb_sel]),
    .dout   (pr_ab)
  );
  assign pr_c33       = rb_c33v[rb_sel];
  assign pr_beat      = beat;
  assign pr_fwd_up    = lb_wdata[0];
  assign pr_fwd_lo    = lb_wdata[1];
  assign pr_fwd_valid = dec_valid && (idx_dec != 10'd0) && align_vld;

  // ---------------- display output ------------------------------------------
  lbword_t  out_word;
  logic     out_load;
  rgbword_t out_rgb;
  always_comb begin
    out_word = beat[0][0].data;
    out_load = 1'b0;
    for (int l = 0; l < 2; l++)
      for (int b = 0; b < 2; b++)
        if (beat[l][b].valid && beat[l][b].seg == SEG_OUT) begin
          out_word = beat[l][b].data;
          out_load = 1'b1;
        end
  end

  csc_ycocg2rgb #(.NPIX(PIX_PER_WORD)) u_out_csc (
    .rgb_en (cfg_rgb),
    .din    (out_word),
    .dout   (out_rgb)
  );

  output_register u_oreg (
    .clk, .rst_n,
    .load      (out_load),
    .din       (out_rgb),
    .out_valid (out_valid),
    .out_pix   (out_pix)
  );

endmodule
