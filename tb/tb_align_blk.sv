// tb_align_blk: the align register must capture a block only on cap, hold it
// (upper row on up_row, lower row on lo_row) until the next cap, and drop
// vld on clr.
module tb_align_blk;
  import dbe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic    clr, cap, vld;
  lbword_t blk_up, blk_lo, up_row, lo_row;
  lbword_t e_up, e_lo;
  logic    e_vld;
  int checks = 0, failures = 0;

  align_blk dut (.*);

  function automatic lbword_t rnd();
    lbword_t v;
    for (int i = 0; i < 8; i++) v[i] = lbpix_t'($urandom);
    return v;
  endfunction

  initial begin
    clr = 0; cap = 0; blk_up = '0; blk_lo = '0;
    e_up = '0; e_lo = '0; e_vld = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      cap = ($urandom % 4) == 0;
      clr = ($urandom % 16) == 0;
      blk_up = rnd(); blk_lo = rnd();
      @(posedge clk);
      if (cap) begin e_up = blk_up; e_lo = blk_lo; e_vld = 1; end
      else if (clr) e_vld = 0;
      #1;
      checks++;
      if (up_row !== e_up || lo_row !== e_lo || vld !== e_vld) begin
        failures++;
        if (failures < 10) $display("FAIL at %0d", it);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
