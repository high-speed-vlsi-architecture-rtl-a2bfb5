// tb_transpose_reg: feeds H(r) and L(r-1) per clock, as the row PU does,
// and checks that even-row clocks give the H pair (H(r-1),H(r)) and the
// following clocks the L pair (L(r-1),L(r)), with stalled clocks holding.
//
// Expected values are worked out in the test itself from the block's
// intended behaviour; the sizes, the random stimulus and the timing checks
// are this test's own choices.
module tb_transpose_reg;
  import dwt3d_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic  en, sel_h;
  word_t h, l, a, b;
  int    hv [64], lv [64];
  int checks = 0, failures = 0;

  transpose_reg dut (.clk, .en, .sel_h, .h, .l, .a, .b);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r;
    for (int i = 0; i < 64; i++) begin hv[i] = int'($urandom_range(8000)); lv[i] = -int'($urandom_range(8000)); end
    r = 0;
    en = 0;
    while (r < 64) begin
      @(negedge clk);
      en    = ($urandom_range(3) != 0);
      h     = word_t'(hv[r]);
      l     = word_t'(r > 0 ? lv[r-1] : 0);
      sel_h = (r % 2 == 0);
      #1;
      if (r >= 2) begin
        checks++;
        if (sel_h && (int'(a) != hv[r-1] || int'(b) != hv[r])) begin
          failures++; $display("row %0d H pair %0d %0d", r, a, b);
        end
        if (!sel_h && (int'(a) != lv[r-2] || int'(b) != lv[r-1])) begin
          failures++; $display("row %0d L pair %0d %0d", r, a, b);
        end
      end
      if (en) r++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
