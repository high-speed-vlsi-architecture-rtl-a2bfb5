// dwt3d_top: one-level 3-D DWT core for a pair of adjacent video frames.
//
// Two spatial processors (2-D CDF 9/7 DWT) work in lock-step, SP0 on frame
// n and SP1 on frame n+1, each fed one row of a 5-pixel-wide vertical strip
// per clock. Their four sub-bands go straight into four temporal processors
// (lifting Haar across the two frames): TP0 gets LL of both frames, TP1 LH,
// TP2 HL, TP3 HH. Every clock the core can deliver eight 3-D coefficients:
// the L-frame (temporal low-pass) l_frame[b] and the H-frame h_frame[b] for
// b = LL, LH, HL, HH (outputs LLL,LHL,HLL,HHL and LLH,LHH,HLH,HHH).
// No frame or temporal buffer is needed.
//
// Interface: the source offers strip rows of both frames with in_valid and
// they are taken when in_ready is high. The source scans strip s (columns
// 4s .. 4s+4, column COLS being the symmetric extension = column COLS-2)
// row by row, rows 0 .. ROWS (row ROWS being the extension = row ROWS-2),
// strips left to right. A missing row stalls the whole core (stall = 1).
// Output coefficients carry a valid bit that is high for one clock per
// coefficient; each sub-band stream delivers its coefficients strip by
// strip, then row by row, two columns per row.
//
// Timing: the first coefficients of a frame pair leave 26 enabled clocks
// after its first strip row, 22 after the last row they depend on (RP 8,
// transpose wait, CP 9 plus H/L alignment, TP 3). The original design
// quotes 21; the difference comes from the row pairing and the neighbour
// arrangement chosen for the processing unit (see dwt_pu).
//
// Follows the original design: two spatial and four temporal processors,
// Haar across frame pairs, eight outputs per clock, 14-bit words. Own
// choices: the valid/ready input handshake, the stall/drain control, the
// valid bits, and the extra flush strip and idle row slots of the schedule.
module dwt3d_top
  import dwt3d_pkg::*;
#(
  parameter int unsigned P    = 2,
  parameter int unsigned COLS = 3840,
  parameter int unsigned ROWS = 2160
)(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t pix0 [2*P+1],      // strip row of frame n
  input  word_t pix1 [2*P+1],      // strip row of frame n+1
  output coef_t l_frame [4],       // LLL, LHL, HLL, HHL
  output coef_t h_frame [4],       // LLH, LHH, HLH, HHH
  output logic  stall,
  output logic  frame_done
);

  logic      en, en_q;
  slot_ctl_t ctl;

  scan_ctrl #(.P(P), .COLS(COLS), .ROWS(ROWS)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .en, .ctl, .stall, .frame_done);

  coef_t sb0 [4], sb1 [4];

  spatial_processor #(.P(P), .ROWS(ROWS)) u_sp0 (
    .clk, .rst_n, .en, .x(pix0), .ctl,
    .ll(sb0[0]), .lh(sb0[1]), .hl(sb0[2]), .hh(sb0[3]));

  spatial_processor #(.P(P), .ROWS(ROWS)) u_sp1 (
    .clk, .rst_n, .en, .x(pix1), .ctl,
    .ll(sb1[0]), .lh(sb1[1]), .hl(sb1[2]), .hh(sb1[3]));

  coef_t tl [4], th [4];

  for (genvar b = 0; b < 4; b++) begin : g_tp
    haar_tp u_tp (.clk, .rst_n, .en, .x0(sb0[b]), .x1(sb1[b]), .xl(tl[b]), .xh(th[b]));
    // a TP result is new in the clock after an enabled edge
    assign l_frame[b] = '{vld: tl[b].vld && en_q, val: tl[b].val};
    assign h_frame[b] = '{vld: th[b].vld && en_q, val: th[b].val};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) en_q <= 1'b0;
    else        en_q <= en;
  end

endmodule
