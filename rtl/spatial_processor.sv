// spatial_processor: one level of 2-D CDF 9/7 DWT of one frame (SP).
//
// Row processor -> transpose unit (one transpose register per PU) ->
// column processor -> re-arrange unit. Pixels arrive as rows of a vertical
// strip, 2P+1 = 5 pixels per enabled clock, together with the slot control
// word of the scan controller. The unit outputs one coefficient of each of
// the four sub-bands LL, LH, HL, HH per clock, each with a valid bit.
//
// Sub-band order. Within a strip the column processor works on row pairs
// m = 0 .. ROWS/2 (pair m = rows 2m+1, 2m+2; the lifting triple adds row
// 2m). The pair that arrives with rows 0/1 of a strip only primes the shift
// registers. Pair m gives coefficient row m-1; PU k of strip s gives
// coefficient column 2s+k-1. For each sub-band, the real coefficients come
// out strip by strip, row by row, PU 0 before PU 1.
//
// Boundary handling: left and top edges use symmetric extension inside the
// PUs (mirror controls); the right and bottom edges rely on the extension
// column and row the data source adds (pixel N = pixel N-2), plus one flush
// strip per frame and one flush row pair per strip, which the scan
// controller schedules.
//
// Latency: a row of a strip reaches the transpose unit 8 enabled clocks after
// it entered; a column pair leaves the column processor 9 clocks after it
// entered it. The re-arrange unit adds no clock.
//
// Follows the original design: the RP -> transpose -> CP -> re-arrange chain
// and the row memories. Own choices: row pairing, the valid bits, the way
// boundaries are handled and the control pipeline that travels with the
// data. Only P = 2 is supported (checked at elaboration).
module spatial_processor
  import dwt3d_pkg::*;
#(
  parameter int unsigned P    = 2,
  parameter int unsigned ROWS = 2160
)(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,
  input  word_t     x [2*P+1],
  input  slot_ctl_t ctl,
  output coef_t     ll,
  output coef_t     lh,
  output coef_t     hl,
  output coef_t     hh
);

  if (P != 2) begin : g_p_check
    $error("spatial_processor: the re-arrange unit is built for P = 2");
  end

  // ---------------- row processor ----------------
  word_t     rp_h [P], rp_l [P];
  slot_ctl_t rp_ctl;

  row_processor #(.P(P), .ROWS(ROWS)) u_rp (
    .clk, .rst_n, .en, .x, .ctl, .h(rp_h), .l(rp_l), .ctl_o(rp_ctl));

  // ---------------- transpose unit ----------------
  logic  sel_h;
  word_t tr_a [P], tr_b [P];

  assign sel_h = ~rp_ctl.row[0];

  for (genvar k = 0; k < P; k++) begin : g_tr
    transpose_reg u_tr (
      .clk, .en, .sel_h, .h(rp_h[k]), .l(rp_l[k]), .a(tr_a[k]), .b(tr_b[k]));
  end

  // ---------------- column processor control ----------------
  // pair index m = row/2 - 1 (row = RP row tag of this clock)
  logic signed [17:0] m;
  logic               cp_mir_h1, cp_mir_h2, cp_last;
  logic [P-1:0]       cp_vld;

  always_comb begin
    m         = $signed({2'b00, rp_ctl.row[15:1]}) - 18'sd1;
    cp_mir_h1 = (m == 18'sd0);
    cp_mir_h2 = (m == 18'sd1);
    cp_last   = (m == 18'(ROWS / 2));
    for (int k = 0; k < P; k++) begin
      cp_vld[k] = rp_ctl.real_slot && (m >= 18'sd1) && (m <= 18'(ROWS / 2))
                  && !(rp_ctl.first_strip && k == 0)
                  && !(rp_ctl.last_strip && k != 0);
    end
  end

  // ---------------- column processor ----------------
  word_t cp_hi [P], cp_lo [P];

  column_processor #(.P(P)) u_cp (
    .clk, .en, .a(tr_a), .b(tr_b),
    .mir_h1(cp_mir_h1), .mir_h2(cp_mir_h2), .last(cp_last),
    .hi(cp_hi), .lo(cp_lo));

  // valid bits and L-column phase, delayed to the CP output
  logic [P:0] side_q [1:9];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= 9; i++) side_q[i] <= '0;
    end else if (en) begin
      side_q[1] <= {~sel_h, cp_vld};
      for (int i = 2; i <= 9; i++) side_q[i] <= side_q[i-1];
    end
  end

  // ---------------- re-arrange unit ----------------
  rearrange_unit u_ra (
    .clk, .rst_n, .en, .sel(side_q[9][P]),
    .lo0('{vld: side_q[9][0], val: cp_lo[0]}),
    .hi0('{vld: side_q[9][0], val: cp_hi[0]}),
    .lo1('{vld: side_q[9][1], val: cp_lo[1]}),
    .hi1('{vld: side_q[9][1], val: cp_hi[1]}),
    .ll, .lh, .hl, .hh);

endmodule
