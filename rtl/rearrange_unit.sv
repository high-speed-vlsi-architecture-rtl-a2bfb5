// rearrange_unit: re-arrange unit at the output of the column processor
// (two-PU configuration).
//
// The column processor PUs deliver their sub-bands interleaved in time:
// (HL,HH) on one clock, (LL,LH) on the next. With one register on each
// output of PU 1 and four 2:1 multiplexers the unit delivers all four
// sub-bands every clock, one coefficient each:
//   sel = 1 (PUs deliver LL/LH now): LL = PU0.lo, LH = PU0.hi,
//                                    HL = reg(PU1.lo), HH = reg(PU1.hi)
//   sel = 0 (PUs deliver HL/HH now): LL = reg(PU1.lo), LH = reg(PU1.hi),
//                                    HL = PU0.lo, HH = PU0.hi
// Multiplexer input numbering follows the drawing. The multiplexers are
// combinational; the two registers load on every enabled clock. Each
// sub-band stream thus carries PU0's then PU1's coefficient of a row pair.
//
// Follows the original design for P = 2: two registers, four multiplexers,
// their input numbering. Valid bits and reset are own choices; other values
// of P are not supported because their arrangement is not given.
module rearrange_unit
  import dwt3d_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  sel,
  input  coef_t lo0,
  input  coef_t hi0,
  input  coef_t lo1,
  input  coef_t hi1,
  output coef_t ll,
  output coef_t lh,
  output coef_t hl,
  output coef_t hh
);

  coef_t lo1_q, hi1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo1_q <= '0;
      hi1_q <= '0;
    end else if (en) begin
      lo1_q <= lo1;
      hi1_q <= hi1;
    end
  end

  always_comb begin
    ll = sel ? lo0   : lo1_q;
    lh = sel ? hi0   : hi1_q;
    hl = sel ? lo1_q : lo0;
    hh = sel ? hi1_q : hi0;
  end

endmodule
