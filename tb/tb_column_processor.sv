// tb_column_processor: vertical 9/7 pass on interleaved column pairs.
//
// Each PU gets two columns (as from the H and L outputs of one row PU),
// pair by pair, H column on even clocks and L column on odd ones; pair m
// holds samples 2m+1 and 2m+2 (pair -1 only primes, pair ROWS/2 is the
// flush step). Enable drops at random. 9 enabled clocks after pair m
// entered, hi/lo must give coefficient m-1 of that column.
//
// Expected values come from the fixed-point model in dwt_ref_pkg, not from
// the ideal transform; the sizes, the random stimulus and the timing checks
// are this test's own choices, with the clock counts taken from the design's
// pipeline.
module tb_column_processor;
  import dwt3d_pkg::*;
  import dwt_ref_pkg::*;

  localparam int R = 10;          // samples per column, plus the extension

  logic clk = 0;
  always #5 clk = ~clk;

  logic  en, mir_h1, mir_h2, last;
  word_t a [2], b [2], hi [2], lo [2];
  int checks = 0, failures = 0;

  column_processor #(.P(2)) dut (.clk, .en, .a, .b, .mir_h1, .mir_h2, .last, .hi, .lo);

  arr_t col [2][2], elo [3][2][2], ehi [3][2][2];
  int ent_m [$], ent_c [$], ent_r [$];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t smp(int k, int c, int i);
    return (i >= 0 && i <= R) ? word_t'(col[k][c][i]) : word_t'($urandom);
  endfunction

  initial begin
    en = 0; mir_h1 = 0; mir_h2 = 0; last = 0;
    for (int run = 0; run < 3; run++) begin
      for (int k = 0; k < 2; k++)
        for (int c = 0; c < 2; c++) begin
          col[k][c] = new[R + 1];
          for (int i = 0; i < R; i++) col[k][c][i] = int'($urandom_range(1500)) - 700;
          col[k][c][R] = col[k][c][R-2];
          lift1d(col[k][c], elo[run][k][c], ehi[run][k][c]);
        end
      for (int m = -1; m <= R/2; m++)
        for (int c = 0; c < 2; c++) begin
          for (int k = 0; k < 2; k++) begin
            a[k] = smp(k, c, 2*m + 1);
            b[k] = smp(k, c, 2*m + 2);
          end
          mir_h1 = (m == 0); mir_h2 = (m == 1); last = (m == R/2);
          do begin
            en = ($urandom_range(4) != 0);
            @(posedge clk);
            if (en) begin
              int n;
              ent_m.push_back(m); ent_c.push_back(c); ent_r.push_back(run);
              n = ent_m.size();
              #1;
              if (n >= 9 && ent_m[n-9] >= 1 && ent_c[n-9] >= 0) begin
                int mm, cc, rr;
                mm = ent_m[n-9]; cc = ent_c[n-9]; rr = ent_r[n-9];
                for (int k = 0; k < 2; k++) begin
                  checks++;
                  if (int'(lo[k]) != elo[rr][k][cc][mm-1] || int'(hi[k]) != ehi[rr][k][cc][mm-1]) begin
                    failures++;
                    $display("run %0d pu %0d col %0d coef %0d: got %0d/%0d want %0d/%0d", run, k, cc, mm-1,
                             lo[k], hi[k], elo[rr][k][cc][mm-1], ehi[rr][k][cc][mm-1]);
                  end
                end
              end
            end
            @(negedge clk);
          end while (!en);
        end
    end
    en = 1;
    repeat (10) begin
      @(posedge clk);
      begin
        int n;
        ent_m.push_back(-1); ent_c.push_back(-1); ent_r.push_back(0);
        n = ent_m.size();
        #1;
        if (n >= 9 && ent_m[n-9] >= 1 && ent_c[n-9] >= 0) begin
          int mm, cc, rr;
          mm = ent_m[n-9]; cc = ent_c[n-9]; rr = ent_r[n-9];
          for (int k = 0; k < 2; k++) begin
            checks++;
            if (int'(lo[k]) != elo[rr][k][cc][mm-1] || int'(hi[k]) != ehi[rr][k][cc][mm-1]) begin
              failures++;
              $display("tail pu %0d col %0d coef %0d: got %0d/%0d want %0d/%0d", k, cc, mm-1,
                       lo[k], hi[k], elo[rr][k][cc][mm-1], ehi[rr][k][cc][mm-1]);
            end
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
