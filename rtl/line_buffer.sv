// line_buffer: the Type 2 line buffer, two lines x two banks of single-port
// SRAM.
//
// Line 0 holds the upper row and line 1 the lower row of 8x2 blocks. Each
// line is split into bank 0, which holds blocks with an even index within
// their slice, and bank 1, which holds blocks with an odd index; this split
// is what gives the controller enough access slots to fetch prediction pixels
// straight from the line buffer. Each bank word is eight 32-bit YCoCg pixels
// (Y 10 b, Co 11 b, Cg 11 b), so one access moves one row of one block.
//
// Interface: one command per bank per cycle (cmd[line][bank]: en, we, addr,
// seg), one write-data row per line (both banks of a line take the same
// row, only the addressed bank writes). Timing: read data returns one cycle
// after the command on beat[line][bank] together with the command's seg tag
// and a valid bit, so consumers can tell what each word is. The bank split
// and word layout follow the published design; the tag pipeline is this
// design's own addition.
module line_buffer
  import dbe_pkg::*;
#(
  parameter int DEPTH = LB_DEPTH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  lb_cmd_t  [1:0][1:0] cmd,     // [line][bank]
  input  lbword_t  [1:0]      wdata,   // [line]
  output lb_beat_t [1:0][1:0] beat     // [line][bank]
);

  for (genvar l = 0; l < 2; l++) begin : g_line
    for (genvar b = 0; b < 2; b++) begin : g_bank
      logic [255:0] rdata;
      logic         rd_q;
      seg_e         seg_q;

      sp_sram #(.DEPTH(DEPTH), .WIDTH(256), .AW(LB_AW)) u_bank (
        .clk   (clk),
        .en    (cmd[l][b].en),
        .we    (cmd[l][b].we),
        .addr  (cmd[l][b].addr),
        .wdata (wdata[l]),
        .rdata (rdata)
      );

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          rd_q  <= 1'b0;
          seg_q <= SEG_NONE;
        end else begin
          rd_q  <= cmd[l][b].en && !cmd[l][b].we;
          seg_q <= (cmd[l][b].en && !cmd[l][b].we) ? cmd[l][b].seg : SEG_NONE;
        end
      end

      assign beat[l][b].valid = rd_q;
      assign beat[l][b].seg   = seg_q;
      assign beat[l][b].data  = rdata;
    end
  end

endmodule
