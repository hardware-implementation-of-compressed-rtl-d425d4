// enc_ref_pkg - golden model of the encoder for the testbenches.
//
// Written from the lifting equations, not from the RTL: it works on whole
// rows and columns with 64-bit integers and a floor division for every
// "x / 2^k", then wraps results to the 15-bit coefficient width where the
// hardware stores a coefficient. Index conventions: a sub-band is stored as
// [k][j] with k the row pair and j the column (strip s, PU p gives j = 2s+p).
package enc_ref_pkg;

  typedef longint vec_t [];

  function automatic longint fl(longint v, int k);    // floor(v / 2^k)
    longint d = longint'(1) << k;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic longint wrap(longint v, int w);  // two's complement wrap to w bits
    longint m = longint'(1) << w;
    longint r = v % m;
    if (r < 0) r += m;
    if (r >= m / 2) r -= m;
    return r;
  endfunction

  // One-dimensional flipped lifting over n positions. xa = X[2n-2],
  // xb = X[2n-1], xc = X[2n] of every position; the "n-1" partials of
  // position 0 are zero.
  function automatic void lift(input vec_t xa, input vec_t xb, input vec_t xc,
                               output vec_t hh, output vec_t ll);
    int n = xa.size();
    longint h1p = 0, l1p = 0, h2p = 0;
    hh = new[n];
    ll = new[n];
    for (int i = 0; i < n; i++) begin
      longint h1, l1, h2, l2;
      // a' = -(1/2 + 1/8 + 1/128)
      h1 = xa[i] + xc[i] - (fl(xb[i], 1) + fl(xb[i], 3) + fl(xb[i], 7));
      // b' = 12
      l1 = 12 * xc[i] + h1 + h1p;
      // c' = -(21 + 1/4 + 1/8)
      h2 = l1 + l1p - (21 * h1 + fl(h1, 2) + fl(h1, 3));
      // d' = 2 + 1/2 + 1/16
      l2 = 2 * l1 + fl(l1, 1) + fl(l1, 4) + h2 + h2p;
      hh[i] = wrap(fl(h2, 4), 15);
      ll[i] = wrap(fl(l2, 5), 15);
      h1p = h1; l1p = l1; h2p = h2;
    end
  endfunction

  // img[r][c], N rows, N+1 columns (column N is the symmetric extension).
  // Results indexed by subband order LL, LH, HL, HH: sb[s][k][j].
  typedef longint img_t [][];

  function automatic void dwt2d(input img_t img, output img_t sb [4]);
    int n = img.size();
    img_t rl, rh;
    rl = new[n];
    rh = new[n];
    for (int r = 0; r < n; r++) begin
      vec_t a, b, c;
      a = new[n/2]; b = new[n/2]; c = new[n/2];
      for (int j = 0; j < n/2; j++) begin
        a[j] = img[r][2*j]; b[j] = img[r][2*j+1]; c[j] = img[r][2*j+2];
      end
      lift(a, b, c, rh[r], rl[r]);
    end
    for (int s = 0; s < 4; s++) begin
      sb[s] = new[n/2];
      foreach (sb[s][k]) sb[s][k] = new[n/2];
    end
    for (int j = 0; j < n/2; j++)
      for (int hsel = 0; hsel < 2; hsel++) begin
        vec_t a, b, c, oh, ol;
        a = new[n/2]; b = new[n/2]; c = new[n/2];
        for (int k = 0; k < n/2; k++) begin
          longint col_m1, col_e, col_o;
          col_e  = hsel ? rh[2*k][j]   : rl[2*k][j];
          col_o  = hsel ? rh[2*k+1][j] : rl[2*k+1][j];
          col_m1 = (k == 0) ? col_o : (hsel ? rh[2*k-1][j] : rl[2*k-1][j]);
          a[k] = col_m1; b[k] = col_e; c[k] = col_o;
        end
        lift(a, b, c, oh, ol);
        for (int k = 0; k < n/2; k++) begin
          if (hsel) begin sb[2][k][j] = ol[k]; sb[3][k][j] = oh[k]; end   // HL, HH
          else      begin sb[0][k][j] = ol[k]; sb[1][k][j] = oh[k]; end   // LL, LH
        end
      end
  endfunction

  // Temporal Haar with 1/sqrt(2) ~ 1/2 + 1/8 + 1/16 + 1/64.
  function automatic longint haar_l(longint x0, longint x1);
    longint s = x0 + x1;
    return wrap(fl(s, 1) + fl(s, 3) + fl(s, 4) + fl(s, 6), 15);
  endfunction
  function automatic longint haar_h(longint x0, longint x1);
    longint d = x1 - x0;
    return wrap(fl(d, 1) + fl(d, 3) + fl(d, 4) + fl(d, 6), 15);
  endfunction

  // Bernoulli matrix bit (row i, column k) of an M-row matrix: low bit of a
  // Galois LFSR (mask 0x80200003) after k*M+i+1 steps from seed.
  function automatic void bern(input int n, input int m, input logic [31:0] seed,
                               output bit phi [][]);
    logic [31:0] s = seed;
    phi = new[n];
    for (int k = 0; k < n; k++) begin
      phi[k] = new[m];
      for (int i = 0; i < m; i++) begin
        s = {1'b0, s[31:1]} ^ (s[0] ? 32'h80200003 : 32'h0);
        phi[k][i] = s[0];
      end
    end
  endfunction

  // Pixel image with one symmetric-extension column: X(r, N) = X(r, N-2).
  function automatic img_t rand_img(int n, int kind);
    img_t img = new[n];
    for (int r = 0; r < n; r++) begin
      img[r] = new[n+1];
      for (int c = 0; c < n; c++)
        case (kind)
          0:       img[r][c] = $urandom_range(0, 255);
          1:       img[r][c] = (r * 7 + c * 3) % 256;          // smooth ramp
          default: img[r][c] = ((r / 4 + c / 4) % 2) ? 255 : 0; // checkerboard
        endcase
      img[r][n] = img[r][n-2];
    end
    return img;
  endfunction

endpackage
