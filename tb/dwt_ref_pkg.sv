// dwt_ref_pkg: reference model for the testbenches.
//
// Straight, whole-array evaluation of the same fixed-point lifting
// equations the hardware uses (14-bit two's complement, every node wrapped
// to 14 bits, the same shift-add constants and the same symmetric boundary
// rules), written without any pipeline or strip schedule, so it checks the
// scheduling, the neighbour wiring and the boundary controls of the RTL.
//
// The equations and constants follow the original architecture; the
// neighbour arrangement and boundary rules are this design's own (see
// dwt_pu), and the model follows them.
package dwt_ref_pkg;

  localparam int W = dwt3d_pkg::WORD_W;

  typedef int arr_t [];

  function automatic int wr(int v);
    logic signed [W-1:0] t;
    t = v[W-1:0];
    return int'(t);
  endfunction

  function automatic int sra(int v, int n);
    return v >>> n;
  endfunction

  // a'-product node pair: H1 = (x0 + x2) - ((x1>>>7) + ((x1>>>1)+(x1>>>3)))
  function automatic int h1_of(int x0, int x1, int x2);
    int xpp, a;
    xpp = wr(sra(x1, 1) + sra(x1, 3));
    a   = wr(sra(x1, 7) + xpp);
    return wr(wr(x0 + x2) - a);
  endfunction

  function automatic int bx_of(int x);
    return wr(wr(x <<< 2) + wr(x <<< 3));
  endfunction

  // -c' * h1 = h1 + (h1<<4 + h1<<2) + (h1>>>2 + h1>>>3)
  function automatic int ch_of(int h1);
    int hp, hpp;
    hp  = wr(h1 + wr(wr(h1 <<< 4) + wr(h1 <<< 2)));
    hpp = wr(sra(h1, 2) + sra(h1, 3));
    return wr(hp + hpp);
  endfunction

  function automatic int dl_of(int l1);
    return wr(wr(l1 <<< 1) + wr(sra(l1, 1) + sra(l1, 4)));
  endfunction

  // 1-D transform of x[0..N] (x[N] is the extension sample x[N-2]).
  // lo[i] = L at 2i, hi[i] = H at 2i+1, i = 0 .. N/2-1.
  function automatic void lift1d(input arr_t x, output arr_t lo, output arr_t hi);
    int n, half;
    int h1 [], l1 [], h2 [];
    n    = x.size() - 1;
    half = n / 2;
    h1 = new[half];
    l1 = new[half + 1];
    h2 = new[half];
    lo = new[half];
    hi = new[half];
    for (int j = 0; j < half; j++) h1[j] = h1_of(x[2*j], x[2*j+1], x[2*j+2]);
    for (int i = 0; i < half; i++)
      l1[i] = wr(bx_of(x[2*i]) + wr(h1[i] + ((i == 0) ? h1[0] : h1[i-1])));
    l1[half] = l1[half-1];                      // L1(N) = L1(N-2)
    for (int j = 0; j < half; j++)
      h2[j] = wr(wr(l1[j] + l1[j+1]) - ch_of(h1[j]));
    for (int i = 0; i < half; i++) begin
      int hs;
      hs    = wr(h2[i] + ((i == 0) ? h2[0] : h2[i-1]));
      lo[i] = sra(wr(hs + dl_of(l1[i])), 5);
      hi[i] = sra(h2[i], 4);
    end
  endfunction

  // Haar scaling by 2^-1 + 2^-3 + 2^-4 + 2^-6
  function automatic int haar_scale(int s);
    return wr(wr(sra(s, 1) + sra(s, 3)) + wr(sra(s, 4) + sra(s, 6)));
  endfunction

  function automatic int haar_l(int x0, int x1);
    return haar_scale(wr(x0 + x1));
  endfunction

  function automatic int haar_h(int x0, int x1);
    return haar_scale(wr(x1 - x0));
  endfunction

  // 2-D transform of an extended image img[(rows+1)*(cols+1)], row major.
  // Sub-band b (0 LL, 1 LH, 2 HL, 3 HH) at (jr, jc): sb[b][jr*(cols/2)+jc].
  function automatic void dwt2d(input arr_t img, input int rows, input int cols,
                                output arr_t sb0, output arr_t sb1,
                                output arr_t sb2, output arr_t sb3);
    int hc, hr;
    arr_t rl [], rh [];
    arr_t x, lo, hi, cl, ch;
    hc = cols / 2;
    hr = rows / 2;
    rl = new[rows + 1];
    rh = new[rows + 1];
    x  = new[cols + 1];
    for (int r = 0; r <= rows; r++) begin
      for (int c = 0; c <= cols; c++) x[c] = img[r*(cols+1) + c];
      lift1d(x, lo, hi);
      rl[r] = lo;
      rh[r] = hi;
    end
    sb0 = new[hr*hc]; sb1 = new[hr*hc]; sb2 = new[hr*hc]; sb3 = new[hr*hc];
    cl = new[rows + 1];
    ch = new[rows + 1];
    for (int c = 0; c < hc; c++) begin
      for (int r = 0; r <= rows; r++) begin
        cl[r] = rl[r][c];
        ch[r] = rh[r][c];
      end
      lift1d(cl, lo, hi);
      for (int r = 0; r < hr; r++) begin
        sb0[r*hc + c] = lo[r];
        sb1[r*hc + c] = hi[r];
      end
      lift1d(ch, lo, hi);
      for (int r = 0; r < hr; r++) begin
        sb2[r*hc + c] = lo[r];
        sb3[r*hc + c] = hi[r];
      end
    end
  endfunction

  // Extended image: random pixels 0 .. 2^bits-1, plus the symmetric
  // extension column cols (= cols-2) and row rows (= rows-2).
  function automatic arr_t make_image(int rows, int cols, int bits);
    arr_t img;
    img = new[(rows+1)*(cols+1)];
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++)
        img[r*(cols+1) + c] = int'($urandom_range((1 << bits) - 1));
    for (int r = 0; r < rows; r++) img[r*(cols+1) + cols] = img[r*(cols+1) + cols - 2];
    for (int c = 0; c <= cols; c++) img[rows*(cols+1) + c] = img[(rows-2)*(cols+1) + c];
    return img;
  endfunction

  // Order in which a spatial processor emits the coefficients of one
  // sub-band: strip by strip (incl. the flush strip), row by row, PU 0 then
  // PU 1. Returns flat indices jr*(cols/2)+jc.
  function automatic arr_t emit_order(int rows, int cols);
    arr_t q;
    int n;
    q = new[(rows/2)*(cols/2)];
    n = 0;
    for (int s = 0; s <= cols/4; s++)
      for (int jr = 0; jr < rows/2; jr++)
        for (int k = 0; k < 2; k++) begin
          int jc;
          jc = 2*s + k - 1;
          if (jc >= 0 && jc < cols/2) begin
            q[n] = jr*(cols/2) + jc;
            n++;
          end
        end
    return q;
  endfunction

endpackage
