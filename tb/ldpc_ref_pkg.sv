// ldpc_ref_pkg -- bit-level reference model of the code for the testbenches.
//
// Written separately from the RTL: the base matrix is rebuilt from its
// definition (shift a^i * b^j mod z for information blocks, dual-diagonal
// parity part with d = 1 in the top and bottom rows and 0 in row m/2 of the
// first parity column), codewords are bit arrays, the circulant product is
// done bit by bit, parity is obtained by solving the dual-diagonal system
// row by row, and the syndrome is counted check by check.
package ldpc_ref_pkg;

  localparam int Z = 81;
  localparam int N = 24;

  typedef bit cw_t [N*Z];

  function automatic int m_of(int r);
    return (r == 0) ? 12 : (r == 1) ? 8 : (r == 2) ? 6 : 4;
  endfunction

  // -1 for an all-zero block, else the shift.
  function automatic int shift_of(int m, int i, int j);
    int jp, v;
    if (i >= m) return -1;
    if (j < N - m) begin
      v = 1;
      repeat (i) v = (v * 2) % Z;
      repeat (j) v = (v * 5) % Z;
      return v;
    end
    jp = j - (N - m);
    if (jp == 0) begin
      if (i == 0 || i == m - 1) return 1;
      if (i == m / 2) return 0;
      return -1;
    end
    if (i == jp - 1 || i == jp) return 0;
    return -1;
  endfunction

  // Number of unsatisfied checks of word c.
  function automatic int syndrome_weight(int m, const ref cw_t c);
    int w;
    bit s;
    w = 0;
    for (int i = 0; i < m; i++)
      for (int r = 0; r < Z; r++) begin
        s = 0;
        for (int j = 0; j < N; j++) begin
          int h;
          h = shift_of(m, i, j);
          if (h >= 0) s ^= c[j*Z + (r + h) % Z];
        end
        if (s) w++;
      end
    return w;
  endfunction

  // Fill the parity part of c from its information part.
  function automatic void encode(int m, ref cw_t c);
    bit lam [12][Z];
    bit p [12][Z];
    int x;
    x = m / 2;
    for (int i = 0; i < m; i++)
      for (int r = 0; r < Z; r++) begin
        lam[i][r] = 0;
        for (int j = 0; j < N - m; j++)
          lam[i][r] ^= c[j*Z + (r + shift_of(m, i, j)) % Z];
      end
    // Adding all block rows leaves p_0 alone.
    for (int r = 0; r < Z; r++) begin
      p[0][r] = 0;
      for (int i = 0; i < m; i++) p[0][r] ^= lam[i][r];
    end
    // Row 0: lam_0 + P^1 p_0 + p_1 = 0
    for (int r = 0; r < Z; r++) p[1][r] = lam[0][r] ^ p[0][(r + 1) % Z];
    // Rows 1 .. m-2
    for (int i = 1; i < m - 1; i++)
      for (int r = 0; r < Z; r++)
        p[i+1][r] = lam[i][r] ^ p[i][r] ^ ((i == x) ? p[0][r] : 1'b0);
    for (int i = 0; i < m; i++)
      for (int r = 0; r < Z; r++) c[(N - m + i)*Z + r] = p[i][r];
  endfunction

endpackage
