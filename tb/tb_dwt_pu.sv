// tb_dwt_pu: one processing unit used as a serial 1-D 9/7 DWT.
//
// Triple m = (x[2m], x[2m+1], x[2m+2]) enters on clock m, m = 0 .. N/2 (the
// last one is the flush step). The neighbour inputs are the unit's own
// partial results one clock later, so H(m-1) must appear on h_o exactly 8
// clocks and L(m-1) on l_o 9 clocks after triple m entered. Several random
// signals are checked against the reference lifting model.
//
// Expected values come from the fixed-point model in dwt_ref_pkg, not from
// the ideal transform; the sizes, the random stimulus and the timing checks
// are this test's own choices, with the clock counts taken from the design's
// pipeline.
module tb_dwt_pu;
  import dwt3d_pkg::*;
  import dwt_ref_pkg::*;

  localparam int N = 32;
  localparam int RUNS = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  word_t x0, x1, x2, h1_n, l1_n, h2_n, h1_o, l1_o, h2_o, h_o, l_o;
  logic  mir_h1, mir_h2, last;
  int checks = 0, failures = 0;

  dwt_pu dut (.clk, .en(1'b1), .x0, .x1, .x2, .mir_h1, .mir_h2, .last,
              .h1_n, .l1_n, .h2_n, .h1_o, .l1_o, .h2_o, .h_o, .l_o);

  // own results one clock later are the next triple's neighbour terms
  always_ff @(posedge clk) begin
    h1_n <= h1_o;
    l1_n <= l1_o;
    h2_n <= h2_o;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    arr_t x, lo, hi;
    x = new[N + 1];
    for (int run = 0; run < RUNS; run++) begin
      int bits = (run < 3) ? 7 : 12;   // small values, then values that wrap
      for (int i = 0; i < N; i++) x[i] = int'($urandom_range((1 << bits) - 1)) - (run[0] ? (1 << (bits-1)) : 0);
      x[N] = x[N-2];
      lift1d(x, lo, hi);
      for (int t = 0; t <= N/2 + 10; t++) begin
        @(negedge clk);
        if (t <= N/2) begin
          x0 = word_t'(t < N/2 ? x[2*t]   : 0);
          x1 = word_t'(t < N/2 ? x[2*t+1] : 0);
          x2 = word_t'(t < N/2 ? x[2*t+2] : 0);
        end else begin
          x0 = '0; x1 = '0; x2 = '0;
        end
        mir_h1 = (t == 0);
        mir_h2 = (t == 1);
        last   = (t == N/2);
        // triple m entered at clock m: H(m-1) now if t == m+8, L(m-1) if t == m+9
        if (t - 8 >= 1 && t - 8 <= N/2) begin
          checks++;
          if (int'(h_o) != hi[t-9]) begin
            failures++;
            $display("run %0d H[%0d]: got %0d want %0d", run, t-9, h_o, hi[t-9]);
          end
        end
        if (t - 9 >= 1 && t - 9 <= N/2) begin
          checks++;
          if (int'(l_o) != lo[t-10]) begin
            failures++;
            $display("run %0d L[%0d]: got %0d want %0d", run, t-10, l_o, lo[t-10]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
