// gram_row_mem: storage for one row of the normalised Gram matrix G~, placed
// next to the MAC lane that uses it.
//
// DEPTH words of W = 28 bits (a complex entry, 14-bit real and 14-bit
// imaginary part), one write port and one asynchronous read port. The paper
// builds this from standard-cell latches with a clock gate per word; this RTL
// uses enabled flip-flops, which behave the same from cycle to cycle: a word
// written at a clock edge is readable from the next cycle on.
module gram_row_mem #(
  parameter int DEPTH = 32,
  parameter int W     = 28,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
