// tb_dbe_controller: checks the line-buffer schedule of the controller on its
// own. The testbench keeps a map of which block (blockline, slice, index)
// each line-buffer word holds, built from the controller's writes, and checks
//   * every write: cycle 0, the block of the previous slot, bank = index
//     parity, address = slice base + index / 2, both lines;
//   * every tagged read: that the word holds the block the tag names (current
//     blockline for C words, previous blockline for B16/B24 and primes),
//     i.e. nothing is read before it is written or after it is overwritten;
//   * output reads: only in cycle 1 (bank 1) and cycle 3 (bank 0), in raster
//     order, upper row from line 0 then lower row from line 1;
//   * the frame length (4 cycles per block plus half a blockline of flush).
module tb_dbe_controller;
  import dbe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        start = 0;
  logic [1:0]  cfg_slice_log2;
  logic [9:0]  cfg_blk_per_slice;
  logic [11:0] cfg_blocklines, cfg_slice_bl;
  logic        busy, frame_done, dec, prev_line_valid, align_cap, align_clr;
  logic [1:0]  cyc, slice, rb_sel, rb_prime_sel;
  logic [9:0]  idx;
  logic [11:0] x_dec, y_dec;
  lb_cmd_t [1:0][1:0] lb_cmd;
  logic rb_shift, rb_c33, rb_prime_b0, rb_prime_b8;
  int checks = 0, failures = 0;

  dbe_controller dut (.*);

  int content [2][2][LB_DEPTH];
  int L, N, H, G, SW;
  int prev_id, prev_s, prev_j, o_cnt, n_reads;

  function automatic int id(input int n, input int s, input int j);
    return n * 4096 + s * 1024 + j;
  endfunction

  task automatic fail(input string m);
    failures++;
    if (failures < 20) $display("FAIL %s (n %0d slice %0d idx %0d cyc %0d)", m, y_dec / 2, slice, idx, cyc);
  endtask

  always @(negedge clk) if (rst_n && busy) begin : mon
    int n, s, j;
    n = int'(y_dec) / 2; s = int'(slice); j = int'(idx);
    for (int l = 0; l < 2; l++)
      for (int b = 0; b < 2; b++) begin
        lb_cmd_t c;
        c = lb_cmd[l][b];
        if (c.en && c.we) begin
          checks++;
          if (cyc != 2'd0 || prev_id < 0 || b != (prev_j & 1) ||
              int'(c.addr) != prev_s * SW + prev_j / 2 || !lb_cmd[1-l][b].we)
            fail("write");
          content[l][b][c.addr] = prev_id;
        end
      end
    for (int l = 0; l < 2; l++)
      for (int b = 0; b < 2; b++) begin
        lb_cmd_t c;
        int e, sn, pn;
        c = lb_cmd[l][b];
        if (c.en && !c.we) begin
          n_reads++;
          e = -2;
          // tags of cycle-3 reads name block j+1
          case (c.seg)
            SEG_CJ2: e = id(n, s, (cyc == 2'd3 ? j + 1 : j) - 2);
            SEG_CJ3: e = id(n, s, (cyc == 2'd3 ? j + 1 : j) - 3);
            SEG_CJ4: e = id(n, s, j - 4);
            SEG_C0:  e = id(n, s, j - 5);
            SEG_B16: e = (n > 0) ? id(n - 1, s, j + 2) : -3;
            SEG_B24: e = (n > 0) ? id(n - 1, s, j + 3) : -3;
            SEG_PRIME_B0, SEG_PRIME_B8: begin
              sn = (s == N - 1) ? 0 : s + 1;
              pn = (sn == 0) ? n : n - 1;
              e = (pn >= 0) ? id(pn, sn, c.seg == SEG_PRIME_B8 ? 1 : 0) : -3;
            end
            SEG_OUT: begin
              int m, p, row;
              m = o_cnt / (2 * G); p = o_cnt % (2 * G); row = p / G; p = p % G;
              e = id(m, p / L, p % L);
              checks++;
              if (l != row || !((cyc == 2'd1 && b == 1) || (cyc == 2'd3 && b == 0))) fail("output slot");
              o_cnt++;
            end
            default: fail("untagged read");
          endcase
          if (e != -3) begin
            checks++;
            if (content[l][b][c.addr] != e) begin
              failures++;
              if (failures < 20) $display("FAIL read %s line %0d bank %0d: holds %0d expected %0d (cyc %0d idx %0d)",
                                          c.seg.name(), l, b, content[l][b][c.addr], e, cyc, j);
            end
          end
        end
      end
    if (dec && cyc == 2'd3) begin prev_id = id(n, s, j); prev_s = s; prev_j = j; end
  end

  task automatic run(input int lg, input int l, input int h);
    int t0;
    N = 1 << lg; L = l; H = h; G = L * N; SW = LB_DEPTH / N;
    cfg_slice_log2 = 2'(lg); cfg_blk_per_slice = 10'(l); cfg_blocklines = 12'(h); cfg_slice_bl = 12'(h);
    foreach (content[a, b, c]) content[a][b][c] = -1;
    prev_id = -1; o_cnt = 0; n_reads = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t0 = 0;
    while (!frame_done) begin @(negedge clk); t0++; end
    checks++;
    if (t0 != 4 * H * G + 4 * (G / 2) + 2) fail($sformatf("frame length %0d", t0));
    checks++;
    if (o_cnt != 2 * H * G) fail($sformatf("output words %0d", o_cnt));
    $display("N=%0d L=%0d H=%0d: %0d cycles, %0d reads", N, L, H, t0, n_reads);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(2, 8, 4);
    run(1, 10, 3);
    run(0, 16, 3);
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
