// dbe_pkg: types and constants shared by the VDC-M decoder back end (DBE)
// memory system.
//
// A line-buffer pixel is stored in YCoCg as comp0 = Y (10 b), comp1 = Co (11 b)
// and comp2 = Cg (11 b), 32 bits per pixel, eight pixels per 256-bit SRAM word
// (the "pixel-wise" word layout). Co and Cg are two's-complement values.
// RGB pixels (output and the A/B part of the reconstruction buffer) carry three
// 10-bit components. The widths follow the 10 bits-per-component configuration;
// the segment tag enumeration and the command/beat structs are this design's
// own way of labelling line-buffer traffic.
package dbe_pkg;

  parameter int BPC          = 10;   // bits per component
  parameter int PIX_PER_WORD = 8;    // pixels per line-buffer word
  parameter int LB_DEPTH     = 240;  // words per line-buffer bank
  parameter int LB_AW        = $clog2(LB_DEPTH);
  parameter int MAX_SLICES   = 4;    // slice columns supported
  parameter int AB_PIX       = 24;   // A0-A7, B0-B15 held in the rec. buffer

  typedef struct packed {
    logic [BPC-1:0] y;    // comp0
    logic [BPC:0]   co;   // comp1, signed
    logic [BPC:0]   cg;   // comp2, signed
  } lbpix_t;              // 32 bits

  typedef struct packed {
    logic [BPC-1:0] r;
    logic [BPC-1:0] g;
    logic [BPC-1:0] b;
  } rgb_t;

  typedef lbpix_t [PIX_PER_WORD-1:0] lbword_t;   // 256 bits
  typedef rgb_t   [PIX_PER_WORD-1:0] rgbword_t;

  // What a line-buffer read fetches. Prediction segments are named relative
  // to the block whose 4-cycle slot the read data appears in (block j):
  //   SEG_CJ2 : block j-2 (C17-C24 on line 0, C50-C57 on line 1)
  //   SEG_CJ3 : block j-3 (C9-C16  / C42-C49)
  //   SEG_CJ4 : block j-4 (C1-C8   / C34-C41)
  //   SEG_C0  : block j-5, only its last pixel is C0 (line 0)
  //   SEG_B16 : previous line, block j+2 = B16-B23 (line 1)
  //   SEG_B24 : previous line, first pixel of block j+3 = B24 (line 1)
  //   SEG_PRIME_B0 / SEG_PRIME_B8 : blocks 0 / 1 of the next slice's previous
  //             line, loaded into that slice's reconstruction buffer
  //   SEG_OUT : 8 pixels for the display output
  typedef enum logic [3:0] {
    SEG_NONE     = 4'd0,
    SEG_OUT      = 4'd1,
    SEG_B16      = 4'd2,
    SEG_B24      = 4'd3,
    SEG_C0       = 4'd4,
    SEG_CJ4      = 4'd5,
    SEG_CJ3      = 4'd6,
    SEG_CJ2      = 4'd7,
    SEG_PRIME_B0 = 4'd8,
    SEG_PRIME_B8 = 4'd9
  } seg_e;

  // One access to one line-buffer bank.
  typedef struct packed {
    logic             en;
    logic             we;
    logic [LB_AW-1:0] addr;
    seg_e             seg;   // reads only: what is being fetched
  } lb_cmd_t;

  // Read data of one bank, one cycle after the access, with its tag.
  typedef struct packed {
    logic    valid;
    seg_e    seg;
    lbword_t data;
  } lb_beat_t;

endpackage
