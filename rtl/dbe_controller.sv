// dbe_controller: block-slot sequencer and line-buffer scheduler of the Type 2
// decoder back end.
//
// Decoding runs in slots of four cycles (cyc 0..3), one 8x2 block (16 pixels)
// per slot, i.e. 4 pixels per cycle. Within a blockline (two picture rows)
// the slice columns are decoded one after the other, each from its left to
// its right edge, so the frame position x advances steadily across the frame
// width. Per slot, for the block with index j inside its slice, the
// controller issues these line-buffer accesses (L = blocks per slice row):
//
//   cyc 0 : write block j-1 (both lines, bank (j-1)%2)
//           line 1 bank j%2     : read B16-B23 (block j+2 of the previous line)
//           slot j = L-1        : line 1 bank 1 reads block 1 of the next slice
//   cyc 1 : bank 1 (both lines) : reserved for the display output
//           bank 0 (both lines) : C17-C24/C50-C57 (j even) or C9-C16/C42-C49
//   cyc 2 : line 0 bank j%2 C1-C8, bank !j%2 C0; line 1 bank j%2 C34-C41,
//           bank !j%2 B24; slot L-1: line 1 bank 0 reads block 0 of next slice
//   cyc 3 : bank 0 (both lines) : reserved for the display output
//           bank 1 (both lines) : first C words of block j+1
//
// Bank b of a line holds the blocks whose index in the slice has parity b.
// Read data comes back one cycle later, so every prediction word of block j
// arrives inside slot j. Slice s owns words [s*D/N, (s+1)*D/N) of every bank
// (D = bank depth, N = slice columns): the dynamic allocation that gives one
// slice the whole buffer, two slices a half each, four a quarter each.
//
// Display output uses a half-line delay: while the decoder is in the right
// half of the frame of blockline n, the upper row of blockline n is read from
// line 0; during the left half of blockline n+1 the lower row of blockline n
// is read from line 1. Two words (16 pixels) are read per slot, in the
// reserved cycles 3 (bank 0) and 1 (bank 1). After the last blockline half a
// blockline of flush slots drains the last lower row.
//
// Interface: start begins a frame with the cfg_* values (hold them stable);
// busy stays high until the last output word is read, then frame_done
// pulses. The slot position (dec, cyc, idx, slice, x_dec, y_dec,
// prev_line_valid) is published for the prediction unit, which must present
// block j's reconstruction at cycle 3 of slot j (align_cap).
// The slot length, the bank-split schedule, the half-line delay and the
// per-slice allocation follow the published Type 2 design. Decoding the slice
// columns one after the other within a blockline, priming the next slice's
// reconstruction buffer in the free line-1 cycles of the last slot of a slice
// row, and the flush period are this design's own choices.
// Requirements (asserted at start): L even, L >= 4, L*N/2 words fit a bank.
module dbe_controller
  import dbe_pkg::*;
#(
  parameter int DEPTH = LB_DEPTH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [1:0]         cfg_slice_log2,     // 0, 1, 2 -> 1, 2, 4 slices
  input  logic [9:0]         cfg_blk_per_slice,  // L: blocks per slice row
  input  logic [11:0]        cfg_blocklines,     // H: frame height / 2
  input  logic [11:0]        cfg_slice_bl,       // slice height / 2
  output logic               busy,
  output logic               frame_done,
  // slot position
  output logic               dec,
  output logic [1:0]         cyc,
  output logic [9:0]         idx,
  output logic [1:0]         slice,
  output logic [11:0]        x_dec,
  output logic [11:0]        y_dec,
  output logic               prev_line_valid,
  // line buffer
  output lb_cmd_t [1:0][1:0] lb_cmd,
  // align register
  output logic               align_cap,
  output logic               align_clr,
  // reconstruction buffers
  output logic [1:0]         rb_sel,
  output logic               rb_shift,
  output logic               rb_c33,
  output logic [1:0]         rb_prime_sel,
  output logic               rb_prime_b0,
  output logic               rb_prime_b8
);

  localparam int AW = LB_AW;

  // ---------------------------------------------------------------- config
  logic [9:0]    L;
  logic [10:0]   G, Gh;          // blocks per blockline, and half of it
  logic [2:0]    N;
  logic [AW-1:0] SW;             // words per slice per bank
  assign L  = cfg_blk_per_slice;
  assign G  = 11'({1'b0, L} << cfg_slice_log2);
  assign Gh = {1'b0, G[10:1]};
  assign N  = 3'(1 << cfg_slice_log2);
  assign SW = AW'(DEPTH >> cfg_slice_log2);

  function automatic logic [AW-1:0] word_addr(input logic [1:0] s, input logic [9:0] blk);
    return AW'(s * SW + AW'(blk >> 1));
  endfunction

  // ----------------------------------------------------------------- state
  logic [11:0] n, ybs;
  logic [10:0] g;
  logic [9:0]  j;
  logic [1:0]  s;
  logic [1:0]  c;
  logic        run;
  logic        wr_pend;
  logic [1:0]  wr_s;
  logic [9:0]  wr_j;
  logic [1:0]  os;               // output read pointer: slice, block
  logic [9:0]  oj;
  logic        pend2;            // second output word of a pair due at cyc 1
  logic        pend_line;
  logic [AW-1:0] pend_addr;
  logic        done_q;

  logic decoding, last_j, last_g, flush, has_next, out_act, out_line;
  logic [1:0] s_nx;
  assign decoding = run && (n < cfg_blocklines);
  assign flush    = run && (n == cfg_blocklines);
  assign last_j   = (j == L - 10'd1);
  assign last_g   = (g == G - 11'd1);
  assign s_nx     = (3'(s) == N - 3'd1) ? 2'd0 : s + 2'd1;
  assign has_next = !((n == cfg_blocklines - 12'd1) && (3'(s) == N - 3'd1));
  assign out_act  = run && (((n < cfg_blocklines) && (g >= Gh)) ||
                            ((n != 12'd0) && (g < Gh)));
  assign out_line = (g >= Gh) ? 1'b0 : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; n <= '0; ybs <= '0; g <= '0; j <= '0; s <= '0; c <= '0;
      wr_pend <= 1'b0; wr_s <= '0; wr_j <= '0;
      os <= '0; oj <= '0; pend2 <= 1'b0; pend_line <= 1'b0; pend_addr <= '0;
      done_q <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; n <= '0; ybs <= '0; g <= '0; j <= '0; s <= '0; c <= '0;
        wr_pend <= 1'b0; os <= '0; oj <= '0; pend2 <= 1'b0;
      end else if (run) begin
        c <= c + 2'd1;
        // pending write of the last reconstructed block is done in cyc 0
        if (c == 2'd0) wr_pend <= 1'b0;
        if (c == 2'd1) pend2   <= 1'b0;
        if (c == 2'd3) begin
          if (decoding) begin
            wr_pend <= 1'b1; wr_s <= s; wr_j <= j;
          end
          if (out_act) begin
            pend2 <= 1'b1; pend_line <= out_line; pend_addr <= word_addr(os, oj);
          end
          if ((g == Gh - 11'd1) || last_g) begin
            os <= '0; oj <= '0;
          end else if (oj + 10'd2 == L) begin
            oj <= '0; os <= os + 2'd1;
          end else begin
            oj <= oj + 10'd2;
          end
          if (flush) begin
            g <= g + 11'd1;
          end else begin
            j <= last_j ? '0 : j + 10'd1;
            s <= last_j ? s_nx : s;
            g <= last_g ? '0 : g + 11'd1;
            if (last_g) begin
              n   <= n + 12'd1;
              ybs <= (ybs == cfg_slice_bl - 12'd1) ? '0 : ybs + 12'd1;
            end
          end
        end
        if (flush && (g == Gh) && (c == 2'd1)) begin
          run    <= 1'b0;
          done_q <= 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------ access schedule
  function automatic lb_cmd_t rd(input logic [AW-1:0] a, input seg_e sg);
    lb_cmd_t r;
    r.en = 1'b1; r.we = 1'b0; r.addr = a; r.seg = sg;
    return r;
  endfunction

  always_comb begin
    lb_cmd = '0;
    unique case (c)
      2'd0: begin
        if (wr_pend) begin
          for (int l = 0; l < 2; l++) begin
            lb_cmd[l][wr_j[0]].en   = 1'b1;
            lb_cmd[l][wr_j[0]].we   = 1'b1;
            lb_cmd[l][wr_j[0]].addr = word_addr(wr_s, wr_j);
          end
        end
        if (decoding && (j + 10'd2 < L))
          lb_cmd[1][j[0]] = rd(word_addr(s, j + 10'd2), SEG_B16);
        if (decoding && last_j && has_next)
          lb_cmd[1][1] = rd(word_addr(s_nx, 10'd1), SEG_PRIME_B8);
      end
      2'd1: begin
        if (pend2) lb_cmd[pend_line][1] = rd(pend_addr, SEG_OUT);
        if (decoding && !j[0] && (j >= 10'd2))
          for (int l = 0; l < 2; l++) lb_cmd[l][0] = rd(word_addr(s, j - 10'd2), SEG_CJ2);
        if (decoding && j[0] && (j >= 10'd3))
          for (int l = 0; l < 2; l++) lb_cmd[l][0] = rd(word_addr(s, j - 10'd3), SEG_CJ3);
      end
      2'd2: begin
        if (decoding && (j >= 10'd4)) begin
          lb_cmd[0][j[0]] = rd(word_addr(s, j - 10'd4), SEG_CJ4);
          lb_cmd[1][j[0]] = rd(word_addr(s, j - 10'd4), SEG_CJ4);
        end
        if (decoding && (j >= 10'd5))
          lb_cmd[0][!j[0]] = rd(word_addr(s, j - 10'd5), SEG_C0);
        if (decoding && (j + 10'd3 < L))
          lb_cmd[1][!j[0]] = rd(word_addr(s, j + 10'd3), SEG_B24);
        if (decoding && last_j && has_next)
          lb_cmd[1][0] = rd(word_addr(s_nx, 10'd0), SEG_PRIME_B0);
      end
      default: begin  // cyc 3
        if (out_act) lb_cmd[out_line][0] = rd(word_addr(os, oj), SEG_OUT);
        if (decoding && !last_j) begin
          // first C words of block j+1, always in bank 1
          if (j[0] && (j >= 10'd3))          // j+1 even: block j-2 = C9-C16
            for (int l = 0; l < 2; l++) lb_cmd[l][1] = rd(word_addr(s, j - 10'd2), SEG_CJ3);
          if (!j[0] && (j >= 10'd2))         // j+1 odd: block j-1 = C17-C24
            for (int l = 0; l < 2; l++) lb_cmd[l][1] = rd(word_addr(s, j - 10'd1), SEG_CJ2);
        end
      end
    endcase
  end

  // --------------------------------------------------------------- outputs
  assign busy            = run;
  assign frame_done      = done_q;
  assign dec             = decoding;
  assign cyc             = c;
  assign idx             = j;
  assign slice           = s;
  assign x_dec           = 12'({g, 3'b000});
  assign y_dec           = {n[10:0], 1'b0};
  assign prev_line_valid = (ybs != 12'd0);
  assign align_cap       = decoding && (c == 2'd3);
  assign align_clr       = start && !run;
  assign rb_sel          = s;
  assign rb_shift        = decoding && (c == 2'd1) && !last_j;
  assign rb_c33          = decoding && (c == 2'd3) && (j >= 10'd4);
  assign rb_prime_sel    = s_nx;
  assign rb_prime_b8     = decoding && (c == 2'd1) && last_j && has_next;
  assign rb_prime_b0     = decoding && (c == 2'd3) && last_j && has_next;

  // ------------------------------------------------------------ assertions
  cfg_ok: assert property (@(posedge clk) disable iff (!rst_n)
      (start && !run) |-> (!L[0] && (L >= 10'd4) && (cfg_slice_log2 <= 2'd2) &&
                           (int'(L) * int'(N) <= 2 * DEPTH) && (cfg_blocklines != 0)
                           && (cfg_slice_bl != 0)))
    else $error("dbe_controller: unsupported configuration");

  for (genvar l = 0; l < 2; l++) begin : g_chk
    // a write and a read never meet on one single-port bank: the schedule
    // keeps the written bank free of reads in cycle 0
    no_rd_on_wr_bank: assert property (@(posedge clk) disable iff (!rst_n)
        (c == 2'd0 && wr_pend) |-> !(lb_cmd[l][wr_j[0]].seg != SEG_NONE))
      else $error("dbe_controller: read scheduled on the bank being written");
  end

endmodule
