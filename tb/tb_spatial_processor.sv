// tb_spatial_processor: 2-D DWT of small random frames.
//
// The testbench plays the scan schedule itself: drain bubbles first, then
// frames back to back, each as COLS/4 data strips plus the flush strip, each
// strip as ROWS+4 row slots (image rows, extension row, three idle slots).
// Every real coefficient of the four sub-bands is compared, in emission
// order, with the reference 2-D transform, and the clock of the first LL
// coefficient is checked (23 clocks after the first strip row: the LL(0,0)
// coefficient needs rows 0..4, so 19 clocks after row 4).
//
// Expected values come from the fixed-point model in dwt_ref_pkg, not from
// the ideal transform; the sizes, the random stimulus and the timing checks
// are this test's own choices, with the clock counts taken from the design's
// pipeline.
module tb_spatial_processor;
  import dwt3d_pkg::*;
  import dwt_ref_pkg::*;

  localparam int ROWS = 8;
  localparam int COLS = 12;
  localparam int FRAMES = 3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic      rst_n, en;
  word_t     x [5];
  slot_ctl_t ctl;
  coef_t     ll, lh, hl, hh;
  int checks = 0, failures = 0;
  int cyc = 0, first_cyc = -1, first_ll = -1;

  spatial_processor #(.P(2), .ROWS(ROWS)) dut (.clk, .rst_n, .en, .x, .ctl, .ll, .lh, .hl, .hh);

  arr_t exp_sb [4][$];   // expected values per band, in emission order
  int   got_n [4];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n) begin
    coef_t o [4];
    o = '{ll, lh, hl, hh};
    for (int b = 0; b < 4; b++) if (o[b].vld) begin
      int f, i, n;
      if (b == 0 && first_ll < 0) first_ll = cyc;
      n = (ROWS/2)*(COLS/2);
      f = got_n[b] / n;
      i = got_n[b] % n;
      checks++;
      if (f >= FRAMES || int'(o[b].val) != exp_sb[b][f][i]) begin
        failures++;
        if (failures < 20) $display("band %0d frame %0d item %0d: got %0d want %0d", b, f, i, o[b].val,
                                    (f < FRAMES) ? exp_sb[b][f][i] : -99999);
      end
      got_n[b]++;
    end
  end

  initial begin
    arr_t img [FRAMES];
    arr_t s0, s1, s2, s3, ord;
    rst_n = 0; en = 1; ctl = '0;
    foreach (x[i]) x[i] = '0;
    got_n = '{0, 0, 0, 0};
    ord = emit_order(ROWS, COLS);
    for (int f = 0; f < FRAMES; f++) begin
      arr_t e0, e1, e2, e3;
      img[f] = make_image(ROWS, COLS, 6);
      dwt2d(img[f], ROWS, COLS, s0, s1, s2, s3);
      e0 = new[ord.size()]; e1 = new[ord.size()]; e2 = new[ord.size()]; e3 = new[ord.size()];
      foreach (ord[i]) begin
        e0[i] = s0[ord[i]]; e1[i] = s1[ord[i]]; e2[i] = s2[ord[i]]; e3[i] = s3[ord[i]];
      end
      exp_sb[0].push_back(e0); exp_sb[1].push_back(e1); exp_sb[2].push_back(e2); exp_sb[3].push_back(e3);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);         // drain bubbles (real_slot = 0)
    for (int f = 0; f < FRAMES; f++)
      for (int s = 0; s <= COLS/4; s++)
        for (int r = 0; r <= ROWS + 3; r++) begin
          ctl.real_slot   = 1;
          ctl.first_strip = (s == 0);
          ctl.last_strip  = (s == COLS/4);
          ctl.row         = 16'(r);
          for (int i = 0; i < 5; i++)
            x[i] = (s < COLS/4 && r <= ROWS) ? word_t'(img[f][r*(COLS+1) + 4*s + i]) : '0;
          if (f == 0 && s == 0 && r == 0) first_cyc = cyc;
          @(negedge clk);
        end
    ctl = '0;
    repeat (30) @(negedge clk);
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (got_n[b] != FRAMES*(ROWS/2)*(COLS/2)) begin
        failures++;
        $display("band %0d: %0d coefficients, want %0d", b, got_n[b], FRAMES*(ROWS/2)*(COLS/2));
      end
    end
    checks++;
    if (first_ll - first_cyc != 23) begin
      failures++;
      $display("first LL after %0d clocks, want 23", first_ll - first_cyc);
    end
    $display("first LL coefficient %0d clocks after the first strip row", first_ll - first_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
