// tb_haar_tp: random coefficient pairs through the temporal processor,
// results checked against L = (x0+x1)*0.703125 and H = (x1-x0)*0.703125 in
// the shift-add form, 3 enabled clocks later, and the valid bit.
//
// Expected values come from the fixed-point model in dwt_ref_pkg, not from
// the ideal transform; the sizes, the random stimulus and the timing checks
// are this test's own choices, with the clock counts taken from the design's
// pipeline.
module tb_haar_tp;
  import dwt3d_pkg::*;
  import dwt_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic  rst_n, en;
  coef_t x0, x1, xl, xh;
  int    q0 [$], q1 [$];
  logic  qv [$];
  int checks = 0, failures = 0;

  haar_tp dut (.clk, .rst_n, .en, .x0, .x1, .xl, .xh);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sent;
    rst_n = 0; en = 0; x0 = '0; x1 = '0;
    #12 rst_n = 1;
    sent = 0;
    while (sent < 500) begin
      @(negedge clk);
      en = ($urandom_range(3) != 0);
      x0 = '{logic'($urandom_range(5) != 0), word_t'(int'($urandom_range(4000)) - 2000)};
      x1 = '{logic'($urandom_range(5) != 0), word_t'(int'($urandom_range(4000)) - 2000)};
      if (en) begin
        q0.push_back(int'(x0.val)); q1.push_back(int'(x1.val)); qv.push_back(x0.vld & x1.vld);
        sent++;
      end
      @(posedge clk); #1;
      if (en && q0.size() >= 3) begin
        int a, b; logic v;
        a = q0.pop_front(); b = q1.pop_front(); v = qv.pop_front();
        checks++;
        if (xl.vld !== v || (v && (int'(xl.val) != haar_l(a, b) || int'(xh.val) != haar_h(a, b)))) begin
          failures++;
          $display("x0=%0d x1=%0d got L=%0d H=%0d v=%0b want %0d %0d %0b", a, b, xl.val, xh.val, xl.vld,
                   haar_l(a, b), haar_h(a, b), v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
