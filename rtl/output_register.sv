// output_register: 8-pixel register in front of the display interface that
// sends 4 pixels per cycle.
//
// load captures 8 RGB pixels (one line-buffer word after colour conversion).
// In the next cycle pixels 0-3 are sent, in the cycle after that pixels 4-7,
// each with out_valid high. The line buffer delivers an output word every
// second cycle, so the output runs at a steady 4 pixels per cycle, the
// published decoder throughput. A load while the second half is still due
// is not allowed (asserted). Registers reset to empty.
module output_register
  import dbe_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  rgbword_t    din,
  output logic        out_valid,
  output rgb_t [3:0]  out_pix
);

  rgbword_t   q;
  logic [1:0] left;   // halves still to send: 2, 1 or 0

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q    <= '0;
      left <= 2'd0;
    end else if (load) begin
      q    <= din;
      left <= 2'd2;
    end else if (left != 2'd0) begin
      left <= left - 2'd1;
    end
  end

  assign out_valid = (left != 2'd0);
  assign out_pix   = (left == 2'd2) ? q[3:0] : q[7:4];

  no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                               load |-> (left != 2'd2))
    else $error("output_register: new word before the previous one was sent");

endmodule
