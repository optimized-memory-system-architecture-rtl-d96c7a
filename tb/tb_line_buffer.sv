// tb_line_buffer: drives random commands on all four banks (two lines x two
// banks) of the line buffer and checks, against a model of the four banks,
// that each read returns the addressed word of its own line and bank one
// cycle later with the command's tag and a valid bit, and that the two banks
// of a line are independent.
module tb_line_buffer;
  import dbe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  lb_cmd_t  [1:0][1:0] cmd;
  lbword_t  [1:0]      wdata;
  lb_beat_t [1:0][1:0] beat;
  int checks = 0, failures = 0;

  line_buffer dut (.*);

  lbword_t model [2][2][LB_DEPTH];
  lb_beat_t [1:0][1:0] exp_b;

  function automatic lbword_t rnd();
    lbword_t v;
    for (int i = 0; i < 8; i++) v[i] = lbpix_t'($urandom);
    return v;
  endfunction

  initial begin
    cmd = '0; wdata = '0; exp_b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill: same address, all four banks get different data
    for (int a = 0; a < LB_DEPTH; a++) begin
      for (int b = 0; b < 2; b++) begin
        @(negedge clk);
        cmd = '0;
        wdata[0] = rnd(); wdata[1] = rnd();
        for (int l = 0; l < 2; l++) begin
          cmd[l][b] = '{en: 1'b1, we: 1'b1, addr: LB_AW'(a), seg: SEG_NONE};
          model[l][b][a] = wdata[l];
        end
      end
    end
    @(negedge clk);
    cmd = '0;
    @(negedge clk);
    for (int it = 0; it < 3000; it++) begin
      cmd = '0;
      wdata[0] = rnd(); wdata[1] = rnd();
      for (int l = 0; l < 2; l++)
        for (int b = 0; b < 2; b++)
          if ($urandom % 3 != 0)
            cmd[l][b] = '{en: 1'b1, we: ($urandom % 4 == 0), addr: LB_AW'($urandom % LB_DEPTH),
                          seg: seg_e'(1 + $urandom % 9)};
      @(posedge clk);
      for (int l = 0; l < 2; l++)
        for (int b = 0; b < 2; b++) begin
          exp_b[l][b].valid = cmd[l][b].en && !cmd[l][b].we;
          if (cmd[l][b].en && !cmd[l][b].we) begin
            exp_b[l][b].seg  = cmd[l][b].seg;
            exp_b[l][b].data = model[l][b][cmd[l][b].addr];
          end else begin
            exp_b[l][b].seg = SEG_NONE;
          end
          if (cmd[l][b].en && cmd[l][b].we) model[l][b][cmd[l][b].addr] = wdata[l];
        end
      @(negedge clk);
      for (int l = 0; l < 2; l++)
        for (int b = 0; b < 2; b++) begin
          checks++;
          if (beat[l][b].valid !== exp_b[l][b].valid || beat[l][b].seg !== exp_b[l][b].seg ||
              (exp_b[l][b].valid && beat[l][b].data !== exp_b[l][b].data)) begin
            failures++;
            if (failures < 10) $display("FAIL line %0d bank %0d at it %0d", l, b, it);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
