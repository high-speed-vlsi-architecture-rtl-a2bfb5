// tb_row_processor: horizontal 9/7 pass over small random frames.
//
// Strips (plus the flush strip) are fed row slot by row slot with the
// control word the scan controller would give; enable drops at random to
// freeze the pipeline. For every real output, PU k in strip s at row r must
// deliver H and L of column pair 2s+k-1 of that row, H 8 and L 9 enabled
// clocks after the row entered. Two frames run back to back, so the first
// strip of frame 2 reads row memories left over from frame 1's flush strip.
//
// Expected values come from the fixed-point model in dwt_ref_pkg, not from
// the ideal transform; the sizes, the random stimulus and the timing checks
// are this test's own choices, with the clock counts taken from the design's
// pipeline.
module tb_row_processor;
  import dwt3d_pkg::*;
  import dwt_ref_pkg::*;

  localparam int ROWS = 6;
  localparam int COLS = 12;
  localparam int FRAMES = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic      rst_n, en;
  word_t     x [5], h [2], l [2];
  slot_ctl_t ctl, ctl_o;
  int checks = 0, failures = 0;

  row_processor #(.P(2), .ROWS(ROWS)) dut (.clk, .rst_n, .en, .x, .ctl, .h, .l, .ctl_o);

  // per enabled clock: frame, strip, row of the slot that entered
  int ent_f [$], ent_s [$], ent_r [$];
  arr_t rl [FRAMES][], rh [FRAMES][];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out();
    int n;
    n = ent_f.size();
    // H of the slot that entered 8 enabled clocks ago, L of 9 ago
    for (int k = 0; k < 2; k++) begin
      if (n >= 8 && ent_r[n-8] <= ROWS) begin
        int f, s, r, j;
        f = ent_f[n-8]; s = ent_s[n-8]; r = ent_r[n-8]; j = 2*s + k - 1;
        if (f >= 0 && j >= 0 && j < COLS/2) begin
          checks++;
          if (int'(h[k]) != rh[f][r][j]) begin
            failures++; $display("f%0d s%0d r%0d k%0d H got %0d want %0d", f, s, r, k, h[k], rh[f][r][j]);
          end
        end
      end
      if (n >= 9 && ent_r[n-9] <= ROWS) begin
        int f, s, r, j;
        f = ent_f[n-9]; s = ent_s[n-9]; r = ent_r[n-9]; j = 2*s + k - 1;
        if (f >= 0 && j >= 0 && j < COLS/2) begin
          checks++;
          if (int'(l[k]) != rl[f][r][j]) begin
            failures++; $display("f%0d s%0d r%0d k%0d L got %0d want %0d", f, s, r, k, l[k], rl[f][r][j]);
          end
        end
      end
    end
  endtask

  initial begin
    arr_t img [FRAMES];
    rst_n = 0; en = 0; ctl = '0;
    foreach (x[i]) x[i] = '0;
    for (int f = 0; f < FRAMES; f++) begin
      arr_t row, lo, hi;
      img[f] = make_image(ROWS, COLS, 7);
      rl[f] = new[ROWS + 1];
      rh[f] = new[ROWS + 1];
      row = new[COLS + 1];
      for (int r = 0; r <= ROWS; r++) begin
        for (int c = 0; c <= COLS; c++) row[c] = img[f][r*(COLS+1) + c];
        lift1d(row, lo, hi);
        rl[f][r] = lo;
        rh[f][r] = hi;
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int s = 0; s <= COLS/4; s++)
        for (int r = 0; r <= ROWS + 3; r++) begin
          ctl.real_slot   = 1;
          ctl.first_strip = (s == 0);
          ctl.last_strip  = (s == COLS/4);
          ctl.row         = 16'(r);
          for (int i = 0; i < 5; i++)
            x[i] = (s < COLS/4 && r <= ROWS) ? word_t'(img[f][r*(COLS+1) + 4*s + i]) : '0;
          do begin
            en = ($urandom_range(4) != 0);
            @(posedge clk);
            if (en) begin
              ent_f.push_back(f); ent_s.push_back(s); ent_r.push_back(r);
            end
            #1;
            if (en) check_out();
            @(negedge clk);
          end while (!en);
        end
    // flush the pipeline with idle slots
    ctl = '0;
    ctl.row = 16'(ROWS + 1);
    en = 1;
    repeat (10) begin
      @(posedge clk);
      ent_f.push_back(-1); ent_s.push_back(0); ent_r.push_back(ROWS + 1);
      #1 check_out();
      @(negedge clk);
    end
    checks++;
    if (checks < FRAMES * (ROWS + 1) * COLS) begin
      failures++;
      $display("only %0d checks", checks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
