// transpose_reg: transpose register between one row-processor PU and one
// column-processor PU.
//
// The RP PU emits, per clock, H of row r and L of row r-1 (its L output lags
// its H output by one clock). Two registers keep the previous H and the
// previous L; two multiplexers then present a vertical pair of the same
// column to the column processor:
//   sel_h = 1 (H of an even row r arrives):  pair (H(r-1), H(r))
//   sel_h = 0 (next clock, L(r) arrives):    pair (L(r-1), L(r))
// So the column processor receives an H-column pair and an L-column pair on
// alternate clocks, two new column samples per clock. Output a is the upper
// (odd) row of the pair, b the lower (even) row. The multiplexers are
// combinational; the registers load on every enabled clock.
//
// Follows the original design: two registers and two multiplexers per PU.
// The row pairing and the mux select timing are own choices; they rely on
// the one-clock L-after-H lag of the PU.
module transpose_reg
  import dwt3d_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  logic  sel_h,
  input  word_t h,
  input  word_t l,
  output word_t a,
  output word_t b
);

  word_t h_q, l_q;

  always_ff @(posedge clk) begin
    if (en) begin
      h_q <= h;
      l_q <= l;
    end
  end

  always_comb begin
    a = sel_h ? h_q : l_q;
    b = sel_h ? h   : l;
  end

endmodule
