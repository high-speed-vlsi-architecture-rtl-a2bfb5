// row_processor: row processor (RP) of the spatial processor.
//
// Each enabled clock it takes one row of a vertical strip, 2P+1 pixels
// wide, and runs the horizontal 9/7 lifting on it with P processing units.
// PU k gets pixels 2k, 2k+1, 2k+2 of the strip; neighbouring strips overlap
// by one column. The partial results H1, L1, H2 of PU k feed PU k+1 as its
// left-neighbour terms; those of the last PU are kept per row in three row
// memories (Memory_alpha, _beta, _gama) and read back by PU 0 when the same
// row of the next strip comes by. The row index of the strip is the memory
// address.
//
// Schedule (set by the scan controller): strips go left to right, each strip
// top to bottom. After the COLS/(2P) strips of a frame one extra "flush"
// strip runs without pixel data, so that PU 0 can finish the last column
// pair. PU k in strip s outputs the coefficients of column pair 2s+k-1
// (H at column 2(2s+k)-1, L at 2(2s+k)-2), so PU 0 of the first strip and
// PU 1.. of the flush strip give no real output.
//
// Timing: PU outputs h[k] 8 enabled clocks and l[k] 9 clocks after the row
// entered; ctl_o is the row's control word delayed to line up with h.
//
// Follows the original design: chained PUs, overlapping strips, three row
// memories between the last and the first PU. The flush strip and writing
// only on real slots are own choices.
module row_processor
  import dwt3d_pkg::*;
#(
  parameter int unsigned P    = 2,
  parameter int unsigned ROWS = 2160,
  parameter int unsigned AW   = $clog2(ROWS + 1)
)(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,
  input  word_t     x [2*P+1],
  input  slot_ctl_t ctl,
  output word_t     h [P],
  output word_t     l [P],
  output slot_ctl_t ctl_o
);

  slot_ctl_t ctl_q [1:8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= 8; i++) ctl_q[i] <= '0;
    end else if (en) begin
      ctl_q[1] <= ctl;
      for (int i = 2; i <= 8; i++) ctl_q[i] <= ctl_q[i-1];
    end
  end

  assign ctl_o = ctl_q[8];

  word_t h1 [P], l1 [P], h2 [P];
  word_t h1_n [P], l1_n [P], h2_n [P];
  word_t mem_h1, mem_l1, mem_h2;

  // memory address for a control word: rows past the extension row are idle
  function automatic logic [AW-1:0] addr_of(logic [15:0] row);
    return (row <= 16'(ROWS)) ? AW'(row) : '0;
  endfunction

  function automatic logic wr_ok(logic real_slot, logic [15:0] row);
    return real_slot && (row <= 16'(ROWS));
  endfunction

  row_mem #(.DEPTH(ROWS + 1), .AW(AW)) u_mem_alpha (
    .clk, .we(en && wr_ok(ctl_q[3].real_slot, ctl_q[3].row)), .waddr(addr_of(ctl_q[3].row)), .wdata(h1[P-1]),
    .raddr(addr_of(ctl_q[3].row)), .rdata(mem_h1));
  row_mem #(.DEPTH(ROWS + 1), .AW(AW)) u_mem_beta (
    .clk, .we(en && wr_ok(ctl_q[5].real_slot, ctl_q[5].row)), .waddr(addr_of(ctl_q[5].row)), .wdata(l1[P-1]),
    .raddr(addr_of(ctl_q[5].row)), .rdata(mem_l1));
  row_mem #(.DEPTH(ROWS + 1), .AW(AW)) u_mem_gama (
    .clk, .we(en && wr_ok(ctl_q[7].real_slot, ctl_q[7].row)), .waddr(addr_of(ctl_q[7].row)), .wdata(h2[P-1]),
    .raddr(addr_of(ctl_q[7].row)), .rdata(mem_h2));

  for (genvar k = 0; k < P; k++) begin : g_pu
    if (k == 0) begin : g_first
      assign h1_n[k] = mem_h1;
      assign l1_n[k] = mem_l1;
      assign h2_n[k] = mem_h2;
    end else begin : g_chain
      assign h1_n[k] = h1[k-1];
      assign l1_n[k] = l1[k-1];
      assign h2_n[k] = h2[k-1];
    end

    dwt_pu u_pu (
      .clk, .en,
      .x0(x[2*k]), .x1(x[2*k+1]), .x2(x[2*k+2]),
      .mir_h1(ctl.first_strip && k == 0),
      .mir_h2(ctl.first_strip && k == 1),
      .last  (ctl.last_strip  && k == 0),
      .h1_n(h1_n[k]), .l1_n(l1_n[k]), .h2_n(h2_n[k]),
      .h1_o(h1[k]), .l1_o(l1[k]), .h2_o(h2[k]),
      .h_o(h[k]), .l_o(l[k]));
  end

endmodule
