// dwt_pu: processing unit (PU) of the 9/7 lifting DWT, nine pipeline stages.
//
// The PU evaluates the flipped lifting form of the CDF 9/7 wavelet with every
// multiplication replaced by shifts and adds:
//   a' = -(2^-1 + 2^-3 + 2^-7) = -0.6328   (shift_PE / PE_alpha)
//   b' =  2^2 + 2^3            =  12       (PE_alpha)
//   c' = -(2^4 + 2^2 + 1 + 2^-2 + 2^-3) = -21.375 (PE_beta / PE_gama)
//   d' =  2^1 + 2^-1 + 2^-4    =  2.5625   (PE_gama)
//   H  =  H2 >>> 4,  L = L2 >>> 5           (scaling)
// Stage 1 is shift_PE, stages 2-3 PE_alpha, 4-5 PE_beta, 6-7 PE_gama and
// 8-9 PE_delta; every stage holds at most one adder, so the critical path is
// one adder. Stage and operator placement follow the nine-stage PU drawing.
//
// Data positions. The unit receives three consecutive samples x0,x1,x2 at
// positions c0, c0+1, c0+2 (c0 even). It computes
//   H1(c0+1) = (x0 + x2) + a'*x1                      (stages 1-3)
//   L1(c0)   = b'*x0 + H1(c0+1) + H1(c0-1)             (stages 3-5)
//   H2(c0-1) = c'*H1(c0-1) + L1(c0) + L1(c0-2)         (stages 4-7)
//   L2(c0-2) = d'*L1(c0-2) + H2(c0-1) + H2(c0-3)       (stages 6-9)
// The values at c0-1, c0-2, c0-3 are the neighbour inputs h1_n, l1_n, h2_n:
// the same partial results of the unit that handles the two samples below
// (previous PU, row memory, or the same PU two clocks earlier). So the unit
// outputs H at c0-1 and L at c0-2, one position pair behind its inputs.
// This differs from the printed equation indices, which take every
// neighbour term from the same side and cannot give the 9/7 transform; the
// c'- and d'-products are therefore fed from the neighbour values here.
//
// Boundary controls (given with the inputs, pipelined inside):
//   mir_h1  : H1(c0-1) := H1(c0+1) (left/top symmetric edge, c0 = 0)
//   mir_h2  : H2(c0-3) := H2(c0-1) (left/top edge, c0 = 2)
//   last    : L1(c0)   := L1(c0-2) (right/bottom flush step, c0 = N)
//
// Timing: inputs are taken when en is high. H appears in h_o 8 enabled
// clocks after its inputs, L in l_o 9 clocks after, so L lags H by one
// clock, as in the drawing. Neighbour inputs are read combinationally at
// stages 4 (h1_n), 6 (l1_n) and 8 (h2_n); the unit's own partial results for
// its neighbours leave from the stage-3, -5 and -7 registers.
//
// Follows the original design: the nine-stage split, the shift-add constants
// and the >>4 / >>5 scaling shifts (the exact scale factors would be about
// 0.0645 and 0.0378). Own choices: which neighbour feeds each product (see
// above), arithmetic right shifts with truncation, 14-bit wrap-around on
// every node, and the boundary controls.
module dwt_pu
  import dwt3d_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  word_t x0,       // sample c0   (port X(2n-2) of the original)
  input  word_t x1,       // sample c0+1 (port X(2n-1) of the original)
  input  word_t x2,       // sample c0+2 (port X(2n) of the original)
  input  logic  mir_h1,
  input  logic  mir_h2,
  input  logic  last,
  input  word_t h1_n,     // H1(c0-1), needed at stage 4
  input  word_t l1_n,     // L1(c0-2), needed at stage 6
  input  word_t h2_n,     // H2(c0-3), needed at stage 8
  output word_t h1_o,     // H1(c0+1), stage-3 register
  output word_t l1_o,     // L1(c0),   stage-5 register
  output word_t h2_o,     // H2(c0-1), stage-7 register
  output word_t h_o,      // H  = H2(c0-1) >>> 4, stage-8 register
  output word_t l_o       // L  = L2(c0-2) >>> 5, stage-9 register
);

  // boundary flags, one bit per stage
  logic [3:1] mir_h1_q;
  logic [5:1] last_q;
  logic [7:1] mir_h2_q;

  // stage 1 (shift_PE)
  word_t s1_xp, s1_xpp, s1_x0, s1_x2;
  // stages 2-3 (PE_alpha)
  word_t s2_a, s2_s, s2_x0;
  word_t s3_h1, s3_bx;
  // stages 4-5 (PE_beta)
  word_t s4_hs, s4_bx, s4_h1n, s4_c16, s4_cfr;
  word_t s5_hp, s5_hpp, s5_l1;
  // stages 6-7 (PE_gama)
  word_t s6_ls, s6_hc, s6_d2, s6_dfr;
  word_t s7_h2, s7_lp;
  // stages 8-9 (PE_delta)
  word_t s8_hs, s8_h, s8_lp;
  word_t s9_l;

  word_t h1_eff, l1_own, h2_eff;

  always_comb begin
    h1_eff = mir_h1_q[3] ? s3_h1 : h1_n;
    l1_own = last_q[5]   ? l1_n  : s5_l1;
    h2_eff = mir_h2_q[7] ? s7_h2 : h2_n;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      mir_h1_q <= {mir_h1_q[2:1], mir_h1};
      mir_h2_q <= {mir_h2_q[6:1], mir_h2};
      last_q   <= {last_q[4:1], last};
      // stage 1: a' split into x>>>7 and (x>>>1)+(x>>>3)
      s1_xp  <= x1 >>> 7;
      s1_xpp <= (x1 >>> 1) + (x1 >>> 3);
      s1_x0  <= x0;
      s1_x2  <= x2;
      // stage 2
      s2_a   <= s1_xp + s1_xpp;
      s2_s   <= s1_x0 + s1_x2;
      s2_x0  <= s1_x0;
      // stage 3: H1 and b'*x0 = (x0<<2)+(x0<<3)
      s3_h1  <= s2_s - s2_a;
      s3_bx  <= (s2_x0 <<< 2) + (s2_x0 <<< 3);
      // stage 4: H1 pair sum; c' taps on the neighbour H1
      s4_hs  <= s3_h1 + h1_eff;
      s4_bx  <= s3_bx;
      s4_h1n <= h1_eff;
      s4_c16 <= (h1_eff <<< 4) + (h1_eff <<< 2);
      s4_cfr <= (h1_eff >>> 2) + (h1_eff >>> 3);
      // stage 5: H'1, H''1 and L1
      s5_hp  <= s4_h1n + s4_c16;
      s5_hpp <= s4_cfr;
      s5_l1  <= s4_bx + s4_hs;
      // stage 6: L1 pair sum, -c'*H1 sum, d' taps on the neighbour L1
      s6_ls  <= l1_own + l1_n;
      s6_hc  <= s5_hp + s5_hpp;
      s6_d2  <= l1_n <<< 1;
      s6_dfr <= (l1_n >>> 1) + (l1_n >>> 4);
      // stage 7: H2 and L'1 = d'*L1
      s7_h2  <= s6_ls - s6_hc;
      s7_lp  <= s6_d2 + s6_dfr;
      // stage 8: H2 pair sum, H scaling
      s8_hs  <= s7_h2 + h2_eff;
      s8_h   <= s7_h2 >>> 4;
      s8_lp  <= s7_lp;
      // stage 9: L2 and L scaling
      s9_l   <= (s8_hs + s8_lp) >>> 5;
    end
  end

  assign h1_o = s3_h1;
  assign l1_o = s5_l1;
  assign h2_o = s7_h2;
  assign h_o  = s8_h;
  assign l_o  = s9_l;

endmodule
