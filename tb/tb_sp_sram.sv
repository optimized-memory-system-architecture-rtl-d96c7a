// tb_sp_sram: random single-port traffic on a 240 x 256 bank against an
// array model: read data one cycle after the read, held until the next read,
// writes never disturb rdata.
module tb_sp_sram;
  localparam int DEPTH = 240, WIDTH = 256, AW = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic             en, we;
  logic [AW-1:0]    addr;
  logic [WIDTH-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  sp_sram dut (.*);

  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] exp_q;
  bit               have_q = 0;   // rdata is defined once a read happened

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = AW'(a); wdata = rnd(); model[a] = wdata;
    end
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      en = ($urandom % 4) != 0;
      we = ($urandom % 3) == 0;
      addr = AW'($urandom % DEPTH);
      wdata = rnd();
      @(posedge clk);
      if (en && !we) begin exp_q = model[addr]; have_q = 1; end
      if (en && we) model[addr] = wdata;
      #1;
      if (!have_q) continue;
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL rdata at it %0d", it);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
