// scan_ctrl: strip-scan controller of the 3-D DWT core.
//
// Walks the slot schedule of one frame pair: strips s = 0 .. COLS/(2P)
// (the last one is the flush strip, no pixel data), and in every strip row
// slots r = 0 .. ROWS+3 (rows 0..ROWS-1 of the image, the extension row
// ROWS, then three idle slots that flush the column pipeline). A slot with
// s < COLS/(2P) and r <= ROWS is a data slot: it needs one strip row of
// pixels from the source (in_valid/in_ready handshake). All other slots run
// without data.
//
// Pipeline enable en:
//   data slot, pixels offered   -> en = 1, slot advances (accept)
//   data slot, no pixels, frame
//   already started            -> en = 0, the whole datapath stalls
//   idle slot                   -> en = 1, slot advances
//   frame not started, no data  -> en = 1, slot stays (drain: the
//                                  pipeline runs empty, ctl.real_slot = 0)
// ctl describes the slot the datapath sees in this clock. frame_done pulses
// with the last slot of a frame.
//
// The original design mentions a control unit but does not describe it;
// everything here (handshake, stall, drain, flush strip, idle slots) is this
// design's own choice. Parameter checks: COLS a multiple of 2P, ROWS even.
module scan_ctrl
  import dwt3d_pkg::*;
#(
  parameter int unsigned P    = 2,
  parameter int unsigned COLS = 3840,
  parameter int unsigned ROWS = 2160
)(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  output logic      en,
  output slot_ctl_t ctl,
  output logic      stall,
  output logic      frame_done
);

  localparam int unsigned STRIPS = COLS / (2 * P);   // data strips
  localparam int unsigned SLOTS  = ROWS + 4;          // row slots per strip

  logic [15:0] strip_q, row_q;
  logic        data_slot, at_start, advance;

  always_comb begin
    data_slot  = (strip_q < 16'(STRIPS)) && (row_q <= 16'(ROWS));
    at_start   = (strip_q == 16'd0) && (row_q == 16'd0);
    in_ready   = data_slot;
    advance    = data_slot ? in_valid : 1'b1;
    stall      = data_slot && !in_valid && !at_start;
    en         = !stall;
    frame_done = advance && (strip_q == 16'(STRIPS)) && (row_q == 16'(SLOTS - 1));
    ctl.real_slot   = advance;
    ctl.first_strip = (strip_q == 16'd0);
    ctl.last_strip  = (strip_q == 16'(STRIPS));
    ctl.row         = row_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      strip_q <= '0;
      row_q   <= '0;
    end else if (advance) begin
      if (row_q == 16'(SLOTS - 1)) begin
        row_q   <= '0;
        strip_q <= (strip_q == 16'(STRIPS)) ? 16'd0 : strip_q + 16'd1;
      end else begin
        row_q <= row_q + 16'd1;
      end
    end
  end

  // handshake rules: a row offered in a data slot is taken and the datapath
  // moves; a stall only happens while no row is offered, and the slot holds
  // still during it. run_q (out of reset for at least one clock) only
  // qualifies these checks.
  logic run_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) run_q <= 1'b0;
    else        run_q <= 1'b1;
  end

  a_accept_moves : assert property (@(posedge clk)
    run_q && in_valid && in_ready |-> en && advance);
  a_stall_empty  : assert property (@(posedge clk)
    run_q && stall |-> !en && !in_valid && in_ready);
  a_stall_holds  : assert property (@(posedge clk)
    run_q && stall |=> $stable(row_q) && $stable(strip_q));

  // the schedule needs whole strips of 2P columns and row pairs
  if (COLS % (2 * P) != 0 || ROWS % 2 != 0 || P < 2) begin : g_check
    $error("scan_ctrl: COLS must be a multiple of 2P, ROWS even, P >= 2");
  end

endmodule
