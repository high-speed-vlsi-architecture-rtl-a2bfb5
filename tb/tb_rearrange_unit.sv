// tb_rearrange_unit: two column PUs deliver (HL,HH) and (LL,LH) on
// alternate clocks; every clock each of the four outputs must carry the
// next coefficient of its sub-band: PU0's, then PU1's, of each row pair.
//
// Expected values are worked out in the test itself from the block's
// intended behaviour; the sizes, the random stimulus and the timing checks
// are this test's own choices.
module tb_rearrange_unit;
  import dwt3d_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic  rst_n, en, sel;
  coef_t lo0, hi0, lo1, hi1, ll, lh, hl, hh;
  int checks = 0, failures = 0;

  rearrange_unit dut (.clk, .rst_n, .en, .sel, .lo0, .hi0, .lo1, .hi1, .ll, .lh, .hl, .hh);

  // value code: band*10000 + pair*10 + pu
  function automatic word_t code(int band, int pair, int pu);
    return word_t'(band * 2000 + pair * 4 + pu);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, nxt [4];
    rst_n = 0; en = 1; sel = 0;
    lo0 = '0; hi0 = '0; lo1 = '0; hi1 = '0;
    #12 rst_n = 1;
    t = 0;
    nxt = '{0, 0, 0, 0};   // next expected flat index (pair*2+pu) per band
    while (t < 80) begin
      @(negedge clk);
      en = ($urandom_range(4) != 0);
      // clock t: pair t/2; even t -> H column (HL=band2 on lo, HH=band3 on hi)
      sel = t[0];
      if (!t[0]) begin
        lo0 = '{1'b1, code(2, t/2, 0)}; hi0 = '{1'b1, code(3, t/2, 0)};
        lo1 = '{1'b1, code(2, t/2, 1)}; hi1 = '{1'b1, code(3, t/2, 1)};
      end else begin
        lo0 = '{1'b1, code(0, t/2, 0)}; hi0 = '{1'b1, code(1, t/2, 0)};
        lo1 = '{1'b1, code(0, t/2, 1)}; hi1 = '{1'b1, code(1, t/2, 1)};
      end
      #1;
      if (en) begin
        coef_t o [4];
        o = '{ll, lh, hl, hh};
        for (int bnd = 0; bnd < 4; bnd++) begin
          // LL/LH start at t=1 (pair 0 PU0), HL/HH at t=0
          if ((bnd < 2 && t >= 1) || bnd >= 2) begin
            checks++;
            if (o[bnd].val !== code(bnd, nxt[bnd] / 2, nxt[bnd] % 2)) begin
              failures++;
              $display("t=%0d band %0d got %0d want %0d", t, bnd, o[bnd].val, code(bnd, nxt[bnd]/2, nxt[bnd]%2));
            end
            nxt[bnd]++;
          end
        end
        t++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
