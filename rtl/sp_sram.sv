// sp_sram: single-port synchronous SRAM, one line-buffer bank.
//
// DEPTH words of WIDTH bits; one access per cycle: a write when en && we, a
// read when en && !we. Read data appears on rdata in the cycle after the read
// and is held until the next read. The default 240 x 256 is one bank of the
// Type 2 line buffer (two lines x two banks = 30.72 KB). In silicon this is a
// compiled single-port SRAM macro; here it is written as an array so that it
// simulates and synthesises as a memory. Contents are not reset.
module sp_sram #(
  parameter int DEPTH = 240,
  parameter int WIDTH = 256,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

  addr_in_range: assert property (@(posedge clk) en |-> (int'(addr) < DEPTH))
    else $error("sp_sram: address %0d out of range", addr);

endmodule
