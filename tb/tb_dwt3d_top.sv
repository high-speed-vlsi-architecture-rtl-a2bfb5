// tb_dwt3d_top: end-to-end test of the 3-D DWT core on small frame pairs.
//
// A source model scans random frame pairs in the strip order the core asks
// for (5-pixel strip rows, extension column and row included) and drops
// in_valid at random inside frames, so the core stalls; between frames it
// pauses, so the core drains. All eight 3-D sub-band streams are compared,
// in emission order, with the reference model (2-D 9/7 of each frame, then
// the Haar step across the pair). Also checked: the pipeline depth on the
// stall-free first frame pair (first LLL coefficient 26 clocks after the
// first strip row: 23 for the 2-D part, 3 for the temporal part), the
// number of coefficients and that every mechanism (stall, drain, left-edge
// mirror strip, flush strip, frame end) occurred.
//
// Expected values come from the fixed-point model in dwt_ref_pkg, not from
// the ideal transform; the sizes, the random stimulus and the timing checks
// are this test's own choices, with the clock counts taken from the design's
// pipeline.
module tb_dwt3d_top;
  import dwt3d_pkg::*;
  import dwt_ref_pkg::*;

  localparam int ROWS = 6;
  localparam int COLS = 8;
  localparam int PAIRS = 4;
  localparam int PIX_BITS = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  logic  rst_n, in_valid, in_ready, stall, frame_done;
  word_t pix0 [5], pix1 [5];
  coef_t l_frame [4], h_frame [4];

  dwt3d_top #(.P(2), .COLS(COLS), .ROWS(ROWS)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .pix0, .pix1, .l_frame, .h_frame, .stall, .frame_done);

  int checks = 0, failures = 0;
  int cyc = 0, first_in = -1, first_out = -1;
  int n_stall = 0, n_drain = 0, n_first = 0, n_flush = 0, n_done = 0;
  int exp_l [4][$], exp_h [4][$];
  int got [4];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (dut.en && !dut.ctl.real_slot) n_drain++;
    if (dut.en && dut.ctl.real_slot && dut.ctl.first_strip && dut.ctl.row == 0) n_first++;
    if (dut.en && dut.ctl.real_slot && dut.ctl.last_strip && dut.ctl.row == 0) n_flush++;
    if (frame_done) n_done++;
  end

  // output checker
  always @(negedge clk) if (rst_n) begin
    for (int b = 0; b < 4; b++) begin
      if (l_frame[b].vld !== h_frame[b].vld) begin
        checks++; failures++;
        $display("band %0d: L/H valid differ", b);
      end
      if (l_frame[b].vld) begin
        int el, eh;
        if (b == 0 && first_out < 0) first_out = cyc;
        checks++;
        if (exp_l[b].size() == 0) begin
          failures++;
          $display("band %0d: unexpected coefficient", b);
        end else begin
          el = exp_l[b].pop_front();
          eh = exp_h[b].pop_front();
          if (int'(l_frame[b].val) != el || int'(h_frame[b].val) != eh) begin
            failures++;
            if (failures < 20) $display("band %0d item %0d: got L=%0d H=%0d want %0d %0d", b, got[b],
                                        l_frame[b].val, h_frame[b].val, el, eh);
          end
        end
        got[b]++;
      end
    end
  end

  initial begin
    arr_t ord;
    rst_n = 0; in_valid = 0;
    foreach (pix0[i]) begin pix0[i] = '0; pix1[i] = '0; end
    got = '{0, 0, 0, 0};
    ord = emit_order(ROWS, COLS);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    for (int p = 0; p < PAIRS; p++) begin
      arr_t i0, i1, a [4], b [4];
      i0 = make_image(ROWS, COLS, PIX_BITS);
      i1 = make_image(ROWS, COLS, PIX_BITS);
      dwt2d(i0, ROWS, COLS, a[0], a[1], a[2], a[3]);
      dwt2d(i1, ROWS, COLS, b[0], b[1], b[2], b[3]);
      for (int bnd = 0; bnd < 4; bnd++)
        foreach (ord[i]) begin
          exp_l[bnd].push_back(haar_l(a[bnd][ord[i]], b[bnd][ord[i]]));
          exp_h[bnd].push_back(haar_h(a[bnd][ord[i]], b[bnd][ord[i]]));
        end
      // source: strips of the extended image, rows 0..ROWS
      for (int s = 0; s < COLS/4; s++)
        for (int r = 0; r <= ROWS; r++) begin
          // random gaps except in the first pair
          while (p > 0 && $urandom_range(3) == 0) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          for (int i = 0; i < 5; i++) begin
            pix0[i] = word_t'(i0[r*(COLS+1) + 4*s + i]);
            pix1[i] = word_t'(i1[r*(COLS+1) + 4*s + i]);
          end
          do begin
            @(posedge clk);
            if (in_ready && first_in < 0) first_in = cyc;
          end while (!in_ready);
          @(negedge clk);
        end
      in_valid = 0;
      repeat ($urandom_range(6)) @(negedge clk);   // pause between frame pairs
    end
    // the flush strip of the last frame runs without source data
    while (n_done < PAIRS) @(negedge clk);
    repeat (40) @(negedge clk);
    for (int bnd = 0; bnd < 4; bnd++) begin
      checks++;
      if (got[bnd] != PAIRS*(ROWS/2)*(COLS/2)) begin
        failures++;
        $display("band %0d: %0d coefficient pairs, want %0d", bnd, got[bnd], PAIRS*(ROWS/2)*(COLS/2));
      end
    end
    checks++;
    if (first_out - first_in != 26) begin
      failures++;
      $display("first LLL after %0d clocks, want 26", first_out - first_in);
    end
    checks++;
    if (n_stall == 0 || n_drain == 0 || n_first != PAIRS || n_flush != PAIRS || n_done != PAIRS) begin
      failures++;
      $display("mechanism missing");
    end
    $display("first LLL %0d clocks after the first strip row", first_out - first_in);
    $display("stall clocks %0d, drain clocks %0d, mirror strips %0d, flush strips %0d, frames %0d",
             n_stall, n_drain, n_first, n_flush, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
