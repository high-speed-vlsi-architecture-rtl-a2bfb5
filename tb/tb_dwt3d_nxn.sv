// tb_dwt3d_nxn: throughput test on square frames, N x N with N = 64,
// several frame pairs streamed back to back with no gaps in the input.
//
// The computing time of the architecture is about N^2/(2P) clocks per frame
// pair with eight 3-D coefficients per clock. This core's schedule adds a
// flush strip and four extra row slots per strip, so a frame pair must take
// exactly (N/4 + 1) * (N + 4) clocks, measured between frame_done pulses,
// and the core must deliver eight coefficients (all four bands of the
// L-frame and the H-frame) in the same clock. It does so everywhere except
// near the left and right frame edges, where the two column-processor PUs
// do not both have real results; the test asks for all eight together in
// at least the clocks of the N/2 - 4 inner coefficient columns. All coefficients are checked
// bit-exactly against the reference model, as in the other end-to-end tests;
// the source model and the checker are those of tb_dwt3d_full.
//
// Expected values come from the fixed-point model in dwt_ref_pkg, not from
// the ideal transform; the sizes, the random stimulus and the timing checks
// are this test's own choices, with the clock counts taken from the design's
// pipeline.
module tb_dwt3d_nxn;
  import dwt3d_pkg::*;
  import dwt_ref_pkg::*;

  localparam int ROWS = 64;
  localparam int COLS = 64;
  localparam int PAIRS = 3;
  localparam int PIX_BITS = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  logic  rst_n, in_valid, in_ready, stall, frame_done;
  word_t pix0 [5], pix1 [5];
  coef_t l_frame [4], h_frame [4];

  dwt3d_top #(.COLS(COLS), .ROWS(ROWS)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .pix0, .pix1, .l_frame, .h_frame, .stall, .frame_done);

  int checks = 0, failures = 0;
  int cyc = 0, first_in = -1, first_out = -1;
  int n_stall = 0, n_drain = 0, n_first = 0, n_flush = 0, n_done = 0;
  int exp_l [4][$], exp_h [4][$];
  int periods [$];
  int last_done = 0, n_full = 0, max_per_clk = 0;
  int got [4];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #20000000;
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
    if (frame_done) begin
      if (n_done > 0) periods.push_back(cyc - last_done);
      last_done = cyc;
      n_done++;
    end
  end

  // clocks in which all eight outputs carry a coefficient
  always @(negedge clk) if (rst_n) begin
    int nv;
    nv = 0;
    for (int b = 0; b < 4; b++) nv += int'(l_frame[b].vld) + int'(h_frame[b].vld);
    if (nv == 8) n_full++;
    if (nv > max_per_clk) max_per_clk = nv;
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
          // no gaps: the core runs at its full rate
          while (1'b0) begin
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
    foreach (periods[i]) begin
      checks++;
      if (periods[i] != (COLS/4 + 1) * (ROWS + 4)) begin
        failures++;
        $display("frame pair took %0d clocks, want %0d", periods[i], (COLS/4 + 1) * (ROWS + 4));
      end
    end
    checks++;
    if (periods.size() != PAIRS - 1) begin
      failures++;
      $display("%0d frame periods measured, want %0d", periods.size(), PAIRS - 1);
    end
    checks++;
    if (max_per_clk != 8 || n_full < PAIRS * (ROWS/2) * (COLS/2 - 4)) begin
      failures++;
      $display("eight-per-clock output: max %0d, full clocks %0d", max_per_clk, n_full);
    end
    $display("frame pair period %0d clocks (N^2/2P = %0d), clocks with 8 outputs %0d",
             (periods.size() > 0) ? periods[0] : 0, ROWS*COLS/4, n_full);
    checks++;
    if (n_stall != 0 || n_first != PAIRS || n_flush != PAIRS || n_done != PAIRS) begin
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
