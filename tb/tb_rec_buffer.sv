// tb_rec_buffer: feeds the reconstruction buffer the previous-line words of a
// row of blocks as the controller does (prime B0-B7 and B8-B15, then one
// shift per block) and checks that the window always equals A = block j-1,
// B0-B7 = block j, B8-B15 = block j+1 of the row; checks C33 loading and
// that reset clears the buffer.
module tb_rec_buffer;
  import dbe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic   shift, ld_b0, ld_b8, c33_en;
  rgbword_t new_word;
  lbpix_t c33_in, c33;
  rgb_t [AB_PIX-1:0] ab;
  int checks = 0, failures = 0;

  rec_buffer dut (.*);

  localparam int NB = 40;
  rgbword_t row [NB + 3];
  lbpix_t   cval;

  initial begin
    shift = 0; ld_b0 = 0; ld_b8 = 0; c33_en = 0; new_word = '0; c33_in = '0;
    for (int k = 0; k < NB + 3; k++)
      for (int i = 0; i < 8; i++) row[k][i] = rgb_t'($urandom);
    repeat (2) @(negedge clk);
    checks++;
    if (ab !== '0 || c33 !== '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1;
    // prime: B8-B15 = block 1, then B0-B7 = block 0
    @(negedge clk); ld_b8 = 1; new_word = row[1];
    @(negedge clk); ld_b8 = 0; ld_b0 = 1; new_word = row[0];
    @(negedge clk); ld_b0 = 0;
    for (int j = 0; j < NB; j++) begin
      // window of block j
      checks++;
      if (ab[15:8] !== row[j] || ab[23:16] !== row[j+1] || (j > 0 && ab[7:0] !== row[j-1])) begin
        failures++;
        if (failures < 10) $display("FAIL window at block %0d", j);
      end
      // shift in block j+2 (B16-B23 of block j); C33 update in another cycle
      @(negedge clk); shift = 1; new_word = row[j+2];
      @(negedge clk); shift = 0;
      cval = lbpix_t'($urandom);
      c33_en = 1; c33_in = cval;
      @(negedge clk); c33_en = 0; c33_in = lbpix_t'($urandom);
      @(negedge clk);
      checks++;
      if (c33 !== cval) begin failures++; $display("FAIL c33 at %0d", j); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
