// row_mem: one row memory of the row processor (Memory_alpha, _beta or _gama).
//
// The last PU of the row processor writes its partial result (H1, L1 or H2)
// for the current row; the first PU reads the value the same row left one
// strip earlier, as its left neighbour term. One word per image row, plus one
// for the symmetric extension row. Written as a plain array: one synchronous
// write port, one asynchronous read port. Read and write of the same address
// in one clock return the old word (the previous strip's value), which is
// what the strip schedule needs.
//
// Follows the original design in holding one word per row. The extra word
// for the extension row and the port arrangement are own choices.
module row_mem
  import dwt3d_pkg::*;
#(
  parameter int unsigned DEPTH = 2161,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  word_t         wdata,
  input  logic [AW-1:0] raddr,
  output word_t         rdata
);

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
