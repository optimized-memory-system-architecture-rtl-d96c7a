// tb_output_register: loads an 8-pixel word every second cycle and checks a
// gap-free stream of 4 pixels per cycle in order (pixels 0-3 then 4-7), then
// single loads with idle gaps in between.
module tb_output_register;
  import dbe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       load, out_valid;
  rgbword_t   din;
  rgb_t [3:0] out_pix;
  int checks = 0, failures = 0;

  output_register dut (.*);

  rgb_t q[$];
  int   nvalid = 0;

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      nvalid++;
      for (int k = 0; k < 4; k++) begin
        rgb_t e;
        e = (q.size() > 0) ? q.pop_front() : rgb_t'('0);
        checks++;
        if (out_pix[k] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL pixel got %h exp %h", out_pix[k], e);
        end
      end
    end
  end

  initial begin
    load = 0; din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // continuous: 50 words, one every other cycle -> 100 valid cycles
    for (int w = 0; w < 50; w++) begin
      @(posedge clk); #1;
      load = 1;
      for (int i = 0; i < 8; i++) begin din[i] = rgb_t'($urandom); q.push_back(din[i]); end
      @(posedge clk); #1;
      load = 0;
    end
    repeat (4) @(posedge clk);
    checks++;
    if (nvalid != 100) begin failures++; $display("FAIL rate: %0d valid cycles", nvalid); end
    // isolated words
    for (int w = 0; w < 10; w++) begin
      @(posedge clk); #1;
      load = 1;
      for (int i = 0; i < 8; i++) begin din[i] = rgb_t'($urandom); q.push_back(din[i]); end
      @(posedge clk); #1;
      load = 0;
      repeat (3) @(posedge clk);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (nvalid != 120 || q.size() != 0) begin
      failures++; $display("FAIL %0d valid cycles, %0d pixels left", nvalid, q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
