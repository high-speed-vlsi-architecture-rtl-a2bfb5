// haar_tp: temporal processor, lifting Haar wavelet across two frames.
//
// x0 and x1 are the same sub-band coefficient, at the same position, of two
// adjacent frames (spatial processors 1 and 2). The unit computes
//   L = (x0 + x1) / sqrt(2),   H = (x1 - x0) / sqrt(2)
// with 1/sqrt(2) approximated by 2^-1 + 2^-3 + 2^-4 + 2^-6 = 0.703125:
//   stage 1: sum and difference
//   stage 2: (v>>>1)+(v>>>3) and (v>>>4)+(v>>>6) for each of them
//   stage 3: the two partial sums are added
// Each stage ends in registers, so the result leaves 3 enabled clocks after
// its inputs; a real result needs both inputs real. No frame buffer is
// needed because both frames arrive at the same time.
//
// Follows the original design: three stages and the shift terms >>1, >>3,
// >>4, >>6. The three register stages hold 2 + 4 + 2 = 8 words; the original
// design states six pipeline registers, without saying which. Valid bits,
// reset of the valid pipeline and truncating shifts are own choices.
module haar_tp
  import dwt3d_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  coef_t x0,
  input  coef_t x1,
  output coef_t xl,
  output coef_t xh
);

  word_t s1_sum, s1_dif;
  word_t s2_l1, s2_l2, s2_h1, s2_h2;
  logic  [3:1] vld_q;
  word_t s3_l, s3_h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  vld_q <= '0;
    else if (en) vld_q <= {vld_q[2:1], x0.vld & x1.vld};
  end

  always_ff @(posedge clk) begin
    if (en) begin
      s1_sum <= x0.val + x1.val;
      s1_dif <= x1.val - x0.val;
      s2_l1  <= (s1_sum >>> 1) + (s1_sum >>> 3);
      s2_l2  <= (s1_sum >>> 4) + (s1_sum >>> 6);
      s2_h1  <= (s1_dif >>> 1) + (s1_dif >>> 3);
      s2_h2  <= (s1_dif >>> 4) + (s1_dif >>> 6);
      s3_l   <= s2_l1 + s2_l2;
      s3_h   <= s2_h1 + s2_h2;
    end
  end

  assign xl = '{vld: vld_q[3], val: s3_l};
  assign xh = '{vld: vld_q[3], val: s3_h};

endmodule
