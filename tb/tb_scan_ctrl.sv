// tb_scan_ctrl: the slot schedule of the scan controller under a random
// source. A model walks strips 0..COLS/4 and row slots 0..ROWS+3 and
// predicts in_ready, en, stall, the control word and frame_done every
// clock; it also checks that a frame takes exactly
// (COLS/4 + 1) * (ROWS + 4) slots when the source never pauses.
//
// Expected values are worked out in the test itself from the block's
// intended behaviour; the sizes, the random stimulus and the timing checks
// are this test's own choices.
module tb_scan_ctrl;
  import dwt3d_pkg::*;

  localparam int COLS = 8;
  localparam int ROWS = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic      rst_n, in_valid, in_ready, en, stall, frame_done;
  slot_ctl_t ctl;
  int checks = 0, failures = 0;

  scan_ctrl #(.P(2), .COLS(COLS), .ROWS(ROWS)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .en, .ctl, .stall, .frame_done);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, r, frames, n_stall, t_start, adv_clocks;
    logic data, start, adv, e_stall, e_done;
    rst_n = 0; in_valid = 0;
    s = 0; r = 0; frames = 0; n_stall = 0; adv_clocks = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      // frames 0 and 1 without pauses, later ones random
      in_valid = (frames < 2) ? (t > 3) : ($urandom_range(2) != 0);
      #1;
      data    = (s < COLS/4) && (r <= ROWS);
      start   = (s == 0) && (r == 0);
      adv     = data ? in_valid : 1'b1;
      e_stall = data && !in_valid && !start;
      e_done  = adv && (s == COLS/4) && (r == ROWS + 3);
      checks++;
      if (in_ready !== data || en !== !e_stall || stall !== e_stall || frame_done !== e_done ||
          ctl.real_slot !== adv || ctl.first_strip !== (s == 0) || ctl.last_strip !== (s == COLS/4) ||
          int'(ctl.row) != r) begin
        failures++;
        $display("t=%0d s=%0d r=%0d: ready %0b en %0b stall %0b done %0b ctl %p", t, s, r,
                 in_ready, en, stall, frame_done, ctl);
      end
      if (e_stall) n_stall++;
      if (adv) begin
        adv_clocks++;
        if (r == ROWS + 3) begin
          r = 0;
          if (s == COLS/4) begin
            s = 0;
            frames++;
            if (frames <= 2) begin
              checks++;
              if (adv_clocks != (COLS/4 + 1) * (ROWS + 4)) begin
                failures++;
                $display("frame took %0d slots", adv_clocks);
              end
            end
            adv_clocks = 0;
          end else s++;
        end else r++;
      end
    end
    checks++;
    if (n_stall == 0 || frames < 3) begin
      failures++;
      $display("stalls %0d frames %0d", n_stall, frames);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
