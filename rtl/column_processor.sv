// column_processor: column processor (CP) of the spatial processor.
//
// P processing units, one behind each transpose register. Each clock PU k
// receives a vertical pair (rows 2m+1, 2m+2) of one column: an H column of
// the row transform on one clock and the L column on the next. The third
// sample of the lifting triple, row 2m, is the lower sample of the pair of
// the same column two clocks earlier, taken from a length-two input shift
// register. Likewise the neighbour partial results H1, L1 and H2 of a PU are
// its own results for the same column two clocks earlier, so length-two
// shift registers sit between the pipeline stages (none between stages 1
// and 2). PUs do not talk to each other.
//
// The PU's H output is delayed one clock here so that H and L of the same
// pair leave together: hi[k]/lo[k] give (HH,HL) for an H-column pair and
// (LH,LL) for an L-column pair, 9 enabled clocks after the pair entered.
// The boundary controls mir_h1, mir_h2 and last apply to all PUs at once
// (they depend on the row pair only).
//
// Follows the original design: P PUs with length-two shift registers between
// their stages, fed by the transpose registers. Own choices: the extra input
// shift register for the third sample, the one-clock H delay, and the
// boundary controls.
module column_processor
  import dwt3d_pkg::*;
#(
  parameter int unsigned P = 2
)(
  input  logic  clk,
  input  logic  en,
  input  word_t a [P],     // upper sample, row 2m+1
  input  word_t b [P],     // lower sample, row 2m+2
  input  logic  mir_h1,
  input  logic  mir_h2,
  input  logic  last,
  output word_t hi [P],    // high-pass column output
  output word_t lo [P]     // low-pass column output
);

  for (genvar k = 0; k < P; k++) begin : g_pu
    word_t b_sr [2];
    word_t h1_sr [2], l1_sr [2], h2_sr [2];
    word_t h1, l1, h2, h, h_q;

    always_ff @(posedge clk) begin
      if (en) begin
        b_sr  <= '{b[k],  b_sr[0]};
        h1_sr <= '{h1,    h1_sr[0]};
        l1_sr <= '{l1,    l1_sr[0]};
        h2_sr <= '{h2,    h2_sr[0]};
        h_q   <= h;
      end
    end

    dwt_pu u_pu (
      .clk, .en,
      .x0(b_sr[1]), .x1(a[k]), .x2(b[k]),
      .mir_h1, .mir_h2, .last,
      .h1_n(h1_sr[1]), .l1_n(l1_sr[1]), .h2_n(h2_sr[1]),
      .h1_o(h1), .l1_o(l1), .h2_o(h2),
      .h_o(h), .l_o(lo[k]));

    assign hi[k] = h_q;
  end

endmodule
